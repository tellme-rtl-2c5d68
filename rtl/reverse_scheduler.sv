// reverse_scheduler: step generator of the reverse-reordered causal prefill
// attention.
//
// Tokens are numbered 0..N-1. Queries are taken in batches of P, starting
// from the last token: batch b holds queries top-1 .. top-P (top = N - b*P).
// Within a batch the key/value vectors are streamed from j = top-1 down to 0,
// one per step. The query of token j is loaded in the same step as k_j/v_j,
// into slot top-1-j, while j is still inside the batch; from then on the
// slot stays active for all smaller j. So a query never meets a key to its
// right (the causal mask is never computed), and each batch costs exactly
// 'top' steps. Total steps: sum over batches of top = N^2/(2P) + N/2 when P
// divides N (Table 2 of the design; Fig. 7 with P = 4).
// Each step is offered on a valid/ready interface with: the kv token j,
// whether a query is loaded (and into which slot), whether this is the first
// step of a batch (the fused unit clears its running max/denominator) and
// whether it is the last (the fused unit then emits the batch's outputs).
// 'steps' counts issued steps since start.
// Follows the paper: order, batching, staggered query loads, eviction of P
// kv tokens per batch. Own choices: 0-based numbering and the handshake.
module reverse_scheduler #(
  parameter int unsigned P = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] cfg_n,
  output logic        busy,
  output logic        done,
  output logic        step_valid,
  input  logic        step_ready,
  output logic [15:0] step_j,
  output logic        step_load_q,
  output logic [$clog2(P)-1:0] step_slot,
  output logic        step_first,
  output logic        step_last,
  output logic [15:0] batch_top,     // top of the current batch (queries top-1 .. top-nq)
  output logic [$clog2(P+1)-1:0] batch_nq,
  output logic [31:0] steps
);
  logic [15:0] top, j;

  assign busy        = step_valid;
  assign step_j      = j;
  assign batch_top   = top;
  assign batch_nq    = (top >= 16'(P)) ? ($bits(batch_nq))'(P) : ($bits(batch_nq))'(top);
  assign step_load_q = step_valid && (32'(top) - 32'(j) <= 32'(batch_nq));
  assign step_slot   = ($bits(step_slot))'(top - 16'd1 - j);
  assign step_first  = step_valid && (j == top - 16'd1);
  assign step_last   = step_valid && (j == 16'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step_valid <= 1'b0;
      top <= '0; j <= '0; steps <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !step_valid && cfg_n != 0) begin
        step_valid <= 1'b1;
        top   <= cfg_n;
        j     <= cfg_n - 16'd1;
        steps <= '0;
      end else if (step_valid && step_ready) begin
        steps <= steps + 1'b1;
        if (j != 0) begin
          j <= j - 16'd1;
        end else if (top > 16'(P)) begin
          top <= top - 16'(P);
          j   <= top - 16'(P) - 16'd1;
        end else begin
          step_valid <= 1'b0;
          done       <= 1'b1;
        end
      end
    end
  end
endmodule
