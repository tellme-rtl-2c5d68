// reverse_attn_engine: prefill attention engine (reverse scheduler, QKV
// loader and fused QKV unit).
//
// For a prompt of cfg_n tokens it walks the reverse schedule of
// reverse_scheduler: for each step it requests (from DRAM, over the rd_req
// port) the query of token j when the schedule loads one, then the key and
// value of token j, and forwards the returned beats to the fused unit. After
// the last step of a batch it flushes the batch's attention outputs, tagged
// with their token index. Requests are answered in order on the rd_* beat
// stream: a Q request by HIDDEN/LANES beats (token j, all heads), a KV
// request by H*(2*DH/LANES) beats (per head: the key beats, then the value
// beats).
// Counters: 'steps' (fused iterations, N^2/(2P) + N/2 for P | N),
// 'q_loads' and 'kv_loads' (data blocks loaded, as counted in Table 2).
// Follows the paper: reverse scheduling, one q/k/v token load per iteration,
// only p query tokens, one k and one v on chip. Own choices: the request
// interface and that steps are not overlapped (each request waits for the
// previous one's data).
module reverse_attn_engine #(
  parameter int unsigned P         = 4,
  parameter int unsigned H         = 16,
  parameter int unsigned DH        = 96,
  parameter int unsigned LANES     = 32,
  parameter int unsigned OUT_LANES = 8,
  localparam int unsigned SW = (P > 1) ? $clog2(P) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [15:0]        cfg_n,
  input  logic [31:0]        cfg_s_scale,
  input  logic [31:0]        cfg_v_scale,
  output logic               busy,
  output logic               done,
  // DRAM read requests and data
  output logic               rd_req_valid,
  input  logic               rd_req_ready,
  output logic               rd_req_kv,      // 0: query, 1: key+value
  output logic [15:0]        rd_req_token,
  input  logic               rd_valid,
  output logic               rd_ready,
  input  logic signed [7:0]  rd_data [LANES],
  // attention output
  output logic               out_valid,
  input  logic               out_ready,
  output logic signed [31:0] out_data [OUT_LANES],
  output logic [15:0]        out_token,
  output logic               out_last,
  // statistics
  output logic [31:0]        steps,
  output logic [31:0]        q_loads,
  output logic [31:0]        kv_loads
);
  typedef enum logic [2:0] {E_IDLE, E_STEP, E_QREQ, E_Q, E_KVREQ, E_KV, E_FLUSH, E_OUT} estate_e;
  estate_e state;

  logic        s_valid, s_ready, s_load_q, s_first, s_last;
  logic [15:0] s_j, s_top;
  logic [SW-1:0] s_slot;
  logic [SW:0] s_nq;

  logic [15:0]   j_r, top_r;
  logic [SW-1:0] slot_r;
  logic [SW:0]   nq_r;
  logic          last_r;

  logic f_q_ready, f_kv_ready, f_step_done, f_out_last, f_out_valid;
  logic [SW-1:0] f_out_slot;
  logic [P-1:0]  f_loaded;
  logic          clear, flush;

  reverse_scheduler #(.P(P)) u_sched (
    .clk, .rst_n, .start(start && state == E_IDLE), .cfg_n, .busy(), .done(),
    .step_valid(s_valid), .step_ready(s_ready), .step_j(s_j), .step_load_q(s_load_q),
    .step_slot(s_slot), .step_first(s_first), .step_last(s_last),
    .batch_top(s_top), .batch_nq(s_nq), .steps(steps));

  fused_attn_unit #(.P(P), .H(H), .DH(DH), .LANES(LANES), .OUT_LANES(OUT_LANES)) u_fused (
    .clk, .rst_n, .cfg_s_scale, .cfg_v_scale, .batch_clear(clear),
    .q_valid(state == E_Q && rd_valid), .q_ready(f_q_ready), .q_data(rd_data), .q_slot(slot_r),
    .kv_valid(state == E_KV && rd_valid), .kv_ready(f_kv_ready), .kv_data(rd_data),
    .step_done(f_step_done),
    .flush_start(flush), .flush_nq(nq_r),
    .out_valid(f_out_valid), .out_ready, .out_data, .out_slot(f_out_slot), .out_last(f_out_last),
    .loaded(f_loaded));

  assign s_ready      = (state == E_STEP) && s_valid;
  assign clear        = s_ready && s_first;
  assign rd_req_valid = (state == E_QREQ) || (state == E_KVREQ);
  assign rd_req_kv    = (state == E_KVREQ);
  assign rd_req_token = j_r;
  assign rd_ready     = (state == E_Q) ? f_q_ready : (state == E_KV) ? f_kv_ready : 1'b0;
  assign flush        = (state == E_FLUSH);
  assign out_valid    = (state == E_OUT) && f_out_valid;
  assign out_last     = (state == E_OUT) && f_out_last && !s_valid;
  assign out_token    = top_r - 16'd1 - 16'(f_out_slot);
  assign busy         = (state != E_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= E_IDLE; done <= 1'b0;
      j_r <= '0; top_r <= '0; slot_r <= '0; nq_r <= '0; last_r <= 1'b0;
      q_loads <= '0; kv_loads <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        E_IDLE: if (start) begin
          q_loads <= '0; kv_loads <= '0;
          state <= E_STEP;
        end
        E_STEP: if (s_valid) begin
          j_r <= s_j; top_r <= s_top; slot_r <= s_slot; nq_r <= s_nq;
          last_r <= s_last;
          state <= s_load_q ? E_QREQ : E_KVREQ;
        end
        E_QREQ: if (rd_req_ready) begin
          q_loads <= q_loads + 1'b1;
          state <= E_Q;
        end
        E_Q: if (f_loaded[slot_r] && !clear) state <= E_KVREQ;
        E_KVREQ: if (rd_req_ready) begin
          kv_loads <= kv_loads + 1'b1;
          state <= E_KV;
        end
        E_KV: if (f_step_done) state <= last_r ? E_FLUSH : E_STEP;
        E_FLUSH: state <= E_OUT;
        E_OUT: if (f_out_valid && out_ready && f_out_last) begin
          if (s_valid) state <= E_STEP;
          else begin state <= E_IDLE; done <= 1'b1; end
        end
        default: state <= E_IDLE;
      endcase
    end
  end
endmodule
