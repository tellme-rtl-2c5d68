// dequant_silu: dequantization stage fused onto the output of the TL matmul,
// with the optional SiLU activation of the FFN gate projection.
//
// Each int32 accumulator is scaled by act_scale * w_scale (both unsigned
// Q16.16: the absmax scale of the quantized input row and the per-tensor
// ternary weight scale) into a saturated Q16.16 value. With silu_en the
// value x is replaced by x * sigmoid(x), sigmoid computed from
// e^-|x| (exp_unit) and one division per lane.
// One register stage, LANES lanes per beat, valid/ready with
// in_ready = !out_valid || out_ready (no bubbles at full throughput).
// Follows the paper: dequant and SiLU fused into the Linear output pipeline.
// Own choices: the number formats, a per-tensor weight scale, the
// exponential approximation of exp_unit.
module dequant_silu #(
  parameter int unsigned LANES = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [31:0]        act_scale,
  input  logic [31:0]        w_scale,
  input  logic               silu_en,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic signed [31:0] in_data [LANES],
  input  logic               in_last,
  output logic               out_valid,
  input  logic               out_ready,
  output logic signed [31:0] out_data [LANES],
  output logic               out_last
);
  import tellme_pkg::*;

  logic [63:0] comb_scale_w;
  logic [31:0] comb_scale;
  fx_t  deq [LANES];
  fx_t  res [LANES];
  logic signed [31:0] neg_abs [LANES];
  logic [31:0] e_abs [LANES];

  assign comb_scale_w = (64'(act_scale) * 64'(w_scale)) >> 16;
  assign comb_scale   = (comb_scale_w > 64'h0000_0000_ffff_ffff) ? 32'hffff_ffff : comb_scale_w[31:0];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    assign deq[l] = sat_fx(64'(in_data[l]) * $signed({32'd0, comb_scale}));  // int x Q16.16 = Q16.16
    assign neg_abs[l] = (deq[l] < 0) ? deq[l] : -deq[l];
    exp_unit u_exp (.x(neg_abs[l]), .y(e_abs[l]));
    always_comb begin
      logic [47:0] num, den, sig;
      den = 48'h1_0000 + 48'(e_abs[l]);
      num = (deq[l] >= 0) ? 48'h1_0000 : 48'(e_abs[l]);
      sig = (num << 16) / den;                                  // Q16.16
      res[l] = silu_en ? sat_fx((64'(deq[l]) * $signed({16'd0, sig})) >>> 16) : deq[l];
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      for (int l = 0; l < LANES; l++) out_data[l] <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      out_last  <= in_last;
      if (in_valid) out_data <= res;
    end
  end
endmodule
