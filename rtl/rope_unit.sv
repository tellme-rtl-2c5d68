// rope_unit: rotary position embedding for streamed Q or K vectors.
//
// Every token vector holds HEADS heads of HEAD_DIM elements; each adjacent
// pair (x[2i], x[2i+1]) of a head is rotated by the angle pos * f_i with
// f_i = BASE^(-2i/HEAD_DIM). The position starts at cfg_pos0 and increments
// after each token (HEADS*HEAD_DIM elements), so the same unit serves the
// prefill (many tokens) and decoding (one token) phases.
// The angle is kept in turns: phase = (pos * F_i) mod 2^32 where F_i is
// f_i/(2*pi) in Q0.40, computed at elaboration. The rotation is a 16-stage
// unrolled CORDIC after reducing the phase to [-1/8, 1/8) turn plus a
// quarter-turn multiple; the CORDIC gain is removed with one multiply.
// LANES Q16.16 values (LANES/2 pairs) per beat, one register stage,
// valid/ready with in_ready = !out_valid || out_ready.
// The paper only names the RoPE unit (prefill/decode); the pairing
// convention (adjacent elements), BASE = 10000 and the CORDIC are this
// design's own choices.
module rope_unit #(
  parameter int unsigned LANES    = 8,
  parameter int unsigned HEAD_DIM = 96,
  parameter int unsigned HEADS    = 16,
  parameter real         BASE     = 10000.0,
  localparam int unsigned NPAIR   = HEAD_DIM / 2,
  localparam int unsigned TOK_BEATS = HEADS * HEAD_DIM / LANES
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [15:0]        cfg_pos0,
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

  typedef logic [39:0] freq_t;
  typedef freq_t freq_tab_t [NPAIR];

  function automatic freq_tab_t make_freqs();
    freq_tab_t f;
    for (int i = 0; i < NPAIR; i++) begin
      real turns;
      turns = (BASE ** (-2.0 * i / HEAD_DIM)) / (2.0 * 3.14159265358979);
      f[i] = freq_t'(turns * (2.0 ** 40));
    end
    return f;
  endfunction
  localparam freq_tab_t FREQS = make_freqs();

  localparam logic [31:0] ATAN [16] = '{
    32'd536870912, 32'd316933406, 32'd167458907, 32'd85004756, 32'd42667331,
    32'd21354465,  32'd10679838,  32'd5340245,   32'd2670163,  32'd1335087,
    32'd667544,    32'd333772,    32'd166886,    32'd83443,    32'd41722, 32'd20861};
  localparam logic signed [47:0] CORDIC_K = 48'sd39797;   // 0.607253 in Q16

  logic [15:0] pos;
  logic [$clog2(TOK_BEATS+1)-1:0] tbeat;
  fx_t res [LANES];

  for (genvar pr = 0; pr < LANES / 2; pr++) begin : g_pair
    always_comb begin
      int unsigned pidx;
      logic [55:0] ph_full;
      logic [31:0] ph, phr;
      logic [1:0]  quad;
      logic signed [31:0] z;
      logic signed [47:0] x, y, xn, yn, x0, y0;
      pidx    = ((32'(tbeat) * LANES) % HEAD_DIM + pr * 2) / 2;
      ph_full = 56'(pos) * 56'(FREQS[pidx]);
      ph      = ph_full[39:8];                     // turns, Q0.32
      phr     = ph + 32'h2000_0000;                // + 1/8 turn
      quad    = phr[31:30];
      z       = $signed(ph - {quad, 30'd0});       // residual in [-1/8, 1/8)
      x0 = 48'(in_data[2*pr]);
      y0 = 48'(in_data[2*pr+1]);
      case (quad)                                   // exact quarter turns
        2'd0:    begin x = x0;  y = y0;  end
        2'd1:    begin x = -y0; y = x0;  end
        2'd2:    begin x = -x0; y = -y0; end
        default: begin x = y0;  y = -x0; end
      endcase
      for (int k = 0; k < 16; k++) begin
        if (z >= 0) begin
          xn = x - (y >>> k); yn = y + (x >>> k); z = z - $signed(ATAN[k]);
        end else begin
          xn = x + (y >>> k); yn = y - (x >>> k); z = z + $signed(ATAN[k]);
        end
        x = xn; y = yn;
      end
      res[2*pr]   = sat_fx(64'((x * CORDIC_K) >>> 16));
      res[2*pr+1] = sat_fx(64'((y * CORDIC_K) >>> 16));
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_last <= 1'b0;
      pos <= '0; tbeat <= '0;
      for (int l = 0; l < LANES; l++) out_data[l] <= '0;
    end else if (start) begin
      pos <= cfg_pos0; tbeat <= '0; out_valid <= 1'b0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      out_last  <= in_last;
      if (in_valid) begin
        out_data <= res;
        if (tbeat == ($bits(tbeat))'(TOK_BEATS - 1)) begin
          tbeat <= '0;
          pos   <= pos + 1'b1;
        end else tbeat <= tbeat + 1'b1;
      end
    end
  end
endmodule
