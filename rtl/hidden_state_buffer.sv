// hidden_state_buffer: on-chip BRAM for the hidden state of the token being
// decoded (DEPTH beats of LANES Q16.16 values; 1536 values by default).
// Keeping the decoding hidden state on chip saves a DRAM round trip for the
// residual adds and the normalisation between layers.
// Write side: wr_restart sets the write pointer to 0; each wr_valid beat is
// stored and the pointer advances (always ready).
// Read side: rd_start with rd_beats replays beats 0..rd_beats-1 on a
// valid/ready stream; rd_last marks the final beat.
// The paper names the buffer only; ports and sizing are this design's own.
module hidden_state_buffer #(
  parameter int unsigned LANES = 8,
  parameter int unsigned DEPTH = 192,
  localparam int unsigned AW = $clog2(DEPTH + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wr_restart,
  input  logic               wr_valid,
  input  logic signed [31:0] wr_data [LANES],
  input  logic               rd_start,
  input  logic [AW-1:0]      rd_beats,
  output logic               rd_valid,
  input  logic               rd_ready,
  output logic signed [31:0] rd_data [LANES],
  output logic               rd_last
);
  logic signed [31:0] mem [DEPTH][LANES];
  logic [AW-1:0] wptr, rptr, rlen;

  assign rd_data = mem[rptr];
  assign rd_last = rd_valid && (rptr == rlen - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0; rptr <= '0; rlen <= '0; rd_valid <= 1'b0;
    end else begin
      if (wr_restart) wptr <= '0;
      else if (wr_valid) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (rd_start) begin
        rptr <= '0; rlen <= rd_beats; rd_valid <= (rd_beats != 0);
      end else if (rd_valid && rd_ready) begin
        rptr <= rptr + 1'b1;
        if (rd_last) rd_valid <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!wr_restart && wr_valid) mem[wptr] <= wr_data;
  end
endmodule
