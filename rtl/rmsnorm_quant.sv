// rmsnorm_quant: RMSNorm fused with absmax int8 quantization in two passes.
//
// RMSNorm computes y_i = gamma_i * x_i / rms(x) and the quantizer then
// forms q_i = round(127 * y_i / max|y|). Because rms(x) is common to every
// element it cancels in q_i: q_i = round(127 * gamma_i x_i / max|gamma x|).
// So the four logical passes (sum of squares, normalise, absmax, scale)
// collapse into two hardware passes:
//   pass 1: stream x and gamma, store gamma*x in the quantizer buffer, track
//           max|gamma*x| and accumulate sum(x^2);
//   pass 2: emit the int8 values (quant_unit), while isqrt_seq computes
//           rms = sqrt(sum(x^2)/n + eps) in parallel.
// The dequantization scale of the output is max|gamma x| / (127 * rms),
// delivered on 'scale' when 'done' pulses.
// Interface: start with cfg_rows = n / OUT_LANES; x and gamma arrive as
// paired beats (one handshake) of IN_LANES Q16.16 values; out is an int8
// stream of OUT_LANES per beat.
// Follows the paper: RMSNorm and absmax quantization fused into two passes
// (Sec. III-D). Own choices: the cancellation argument above as the way the
// passes are fused, eps = 2^-16, number formats.
module rmsnorm_quant #(
  parameter int unsigned MAX_LEN   = 4096,
  parameter int unsigned IN_LANES  = 8,
  parameter int unsigned OUT_LANES = 32,
  localparam int unsigned RW = $clog2(MAX_LEN / OUT_LANES + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [RW-1:0]      cfg_rows,
  output logic               busy,
  output logic               done,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic signed [31:0] x_data [IN_LANES],
  input  logic signed [31:0] g_data [IN_LANES],
  output logic               out_valid,
  input  logic               out_ready,
  output logic signed [7:0]  out_data [OUT_LANES],
  output logic               out_last,
  output logic [31:0]        scale
);
  import tellme_pkg::*;

  fx_t          gx [IN_LANES];
  logic [63:0]  sumsq, beat_sq;
  logic [RW-1:0] rows;
  logic [31:0]  q_scale_unused, amax;
  logic         q_done, q_busy, sq_start, sq_done, q_fin, sq_fin;
  logic [23:0]  rms;
  logic [47:0]  mean;
  logic         p1_end;
  logic [$clog2(MAX_LEN/IN_LANES+1)-1:0] nbeat;

  always_comb begin
    beat_sq = sumsq;
    for (int l = 0; l < IN_LANES; l++) begin
      gx[l]   = sat_fx((64'(x_data[l]) * 64'(g_data[l])) >>> FX_FRAC);
      beat_sq = beat_sq + 64'((64'(x_data[l]) * 64'(x_data[l]) + 64'(1 << (FX_FRAC - 1))) >>> FX_FRAC);  // rounded: no bias for small x
    end
  end

  quant_unit #(.MAX_LEN(MAX_LEN), .IN_LANES(IN_LANES), .OUT_LANES(OUT_LANES)) u_q (
    .clk, .rst_n, .start, .cfg_rows, .busy(q_busy), .done(q_done),
    .in_valid, .in_ready, .in_data(gx),
    .out_valid, .out_ready, .out_data, .out_last,
    .scale(q_scale_unused), .absmax(amax));

  // mean of squares in Q16.16, + eps, shifted to Q32.32 so the root is Q16.16
  assign mean     = 48'(sumsq / (64'(rows) * OUT_LANES)) + 48'd1;
  assign p1_end   = in_valid && in_ready && (nbeat == ($bits(nbeat))'(32'(rows) * OUT_LANES / IN_LANES - 1));

  isqrt_seq #(.W(48)) u_sqrt (.clk, .rst_n, .start(sq_start), .rad(mean << 16), .root(rms), .done(sq_done));

  assign busy = q_busy || !q_fin || !sq_fin;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sumsq <= '0; rows <= '0; nbeat <= '0; sq_start <= 1'b0;
      q_fin <= 1'b1; sq_fin <= 1'b1; scale <= '0; done <= 1'b0;
    end else begin
      sq_start <= 1'b0;
      done     <= 1'b0;
      if (start && !q_busy) begin
        sumsq <= '0; rows <= cfg_rows; nbeat <= '0;
        q_fin <= 1'b0; sq_fin <= 1'b0;
      end else begin
        if (in_valid && in_ready) begin
          sumsq <= beat_sq;
          nbeat <= nbeat + 1'b1;
        end
        sq_start <= p1_end;
        if (q_done) q_fin <= 1'b1;
        if (sq_done) begin
          sq_fin <= 1'b1;
          // scale = amax / (127 * rms), Q16.16
          scale  <= (rms == 0) ? 32'd0 : 32'((64'(amax) << 16) / (64'd127 * 64'(rms)));
        end
        if (!(q_fin && sq_fin) && (q_fin || q_done) && (sq_fin || sq_done)) done <= 1'b1;
      end
    end
  end
endmodule
