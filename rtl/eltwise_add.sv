// eltwise_add: element-wise add of two Q16.16 vectors.
//
// Computes the saturating sum a+b (residual connections of the attention and FFN blocks).
// Operands arrive as paired beats of LANES values (one handshake for both);
// one register stage, valid/ready with in_ready = !out_valid || out_ready,
// one beat per cycle. The paper names the unit in its special function unit
// and places it on the 256-bit AXI beat (8 lanes of 32 bits); saturation
// and the Q16.16 format are this design's own choices.
module eltwise_add #(
  parameter int unsigned LANES = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic signed [31:0] a_data [LANES],
  input  logic signed [31:0] b_data [LANES],
  input  logic               in_last,
  output logic               out_valid,
  input  logic               out_ready,
  output logic signed [31:0] out_data [LANES],
  output logic               out_last
);
  import tellme_pkg::*;

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      for (int l = 0; l < LANES; l++) out_data[l] <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      out_last  <= in_last;
      if (in_valid)
        for (int l = 0; l < LANES; l++) out_data[l] <= sat_fx(64'(a_data[l]) + 64'(b_data[l]));
    end
  end
endmodule
