// isqrt_seq: sequential integer square root, one result bit per cycle.
// root = floor(sqrt(rad)). start loads the radicand; done pulses W/2 cycles
// later with the root held on 'root' until the next start. Restoring
// (digit-by-digit) algorithm; helper of the RMSNorm unit.
module isqrt_seq #(
  parameter int unsigned W = 48
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   rad,
  output logic [W/2-1:0] root,
  output logic           done
);
  logic [W-1:0]   r_q;      // remaining radicand bits
  logic [W/2+1:0] rem;      // remainder < 2*root+1
  logic [$clog2(W/2+1)-1:0] cnt;
  logic           run;
  logic [W/2+3:0] rem_sh, trial;

  assign rem_sh = {rem, r_q[W-1 -: 2]};
  assign trial  = {2'b00, root, 2'b01};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_q <= '0; rem <= '0; root <= '0; cnt <= '0; run <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        r_q <= rad; rem <= '0; root <= '0; cnt <= '0; run <= 1'b1;
      end else if (run) begin
        r_q <= r_q << 2;
        if (rem_sh >= trial) begin
          rem  <= ($bits(rem))'(rem_sh - trial);
          root <= {root[W/2-2:0], 1'b1};
        end else begin
          rem  <= ($bits(rem))'(rem_sh);
          root <= {root[W/2-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (cnt == ($bits(cnt))'(W/2 - 1)) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
