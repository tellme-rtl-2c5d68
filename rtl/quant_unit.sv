// quant_unit: two-pass absmax quantizer, Q16.16 vector -> int8 vector.
//
// Pass 1 streams the vector in (IN_LANES Q16.16 values per beat), stores it
// in an on-chip buffer and tracks max|x|. One cycle then forms
// inv = 127 / max|x| and the dequantization scale max|x| / 127. Pass 2 reads
// the buffer OUT_LANES values at a time and emits round(x * inv), saturated
// to [-127, 127], as one beat per cycle.
// Interface: start with cfg_rows = vector length / OUT_LANES (the length must
// be a multiple of OUT_LANES); in_* and out_* are valid/ready streams;
// scale/absmax are valid from the first output beat until the next start;
// done pulses after the last output beat.
// Latency: rows*OUT_LANES/IN_LANES input beats + 1 + rows output beats.
// Follows the paper: absmax quantization in two passes (Sec. III-D). Own
// choices: buffer organisation, rounding, the symmetric [-127,127] range and
// the single combinational divider.
module quant_unit #(
  parameter int unsigned MAX_LEN   = 4096,
  parameter int unsigned IN_LANES  = 8,
  parameter int unsigned OUT_LANES = 32,
  localparam int unsigned ROWS  = MAX_LEN / OUT_LANES,
  localparam int unsigned RW    = $clog2(ROWS + 1),
  localparam int unsigned BPR   = OUT_LANES / IN_LANES,   // input beats per row
  localparam int unsigned BW    = $clog2(ROWS * BPR + 1),
  localparam int unsigned RIW   = $clog2(ROWS)            // buffer row index
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [RW-1:0]      cfg_rows,
  output logic               busy,
  output logic               done,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic signed [31:0] in_data [IN_LANES],
  output logic               out_valid,
  input  logic               out_ready,
  output logic signed [7:0]  out_data [OUT_LANES],
  output logic               out_last,
  output logic [31:0]        scale,
  output logic [31:0]        absmax
);
  import tellme_pkg::*;

  typedef enum logic [1:0] {Q_IDLE, Q_P1, Q_CALC, Q_P2} qstate_e;
  qstate_e state;

  fx_t          buf_q [ROWS][OUT_LANES];
  logic [RW-1:0] rows, orow;
  logic [BW-1:0] ibeat;
  logic [31:0]   amax, inv;
  logic [31:0]   beat_amax;

  always_comb begin
    beat_amax = amax;
    for (int l = 0; l < IN_LANES; l++) begin
      logic [31:0] a;
      a = in_data[l][31] ? 32'(-in_data[l]) : 32'(in_data[l]);
      if (a > beat_amax) beat_amax = a;
    end
  end

  assign in_ready  = (state == Q_P1);
  assign out_valid = (state == Q_P2);
  assign out_last  = out_valid && (orow == rows - 1'b1);
  assign busy      = (state != Q_IDLE);
  assign absmax    = amax;

  for (genvar l = 0; l < OUT_LANES; l++) begin : g_q
    assign out_data[l] = sat_i8_round((48'(buf_q[orow[RIW-1:0]][l]) * $signed({16'd0, inv})) >>> 16);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= Q_IDLE;
      rows <= '0; orow <= '0; ibeat <= '0;
      amax <= '0; inv <= '0; scale <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        Q_IDLE: if (start) begin
          rows  <= cfg_rows;
          ibeat <= '0;
          amax  <= '0;
          state <= Q_P1;
        end
        Q_P1: if (in_valid) begin
          amax  <= beat_amax;
          ibeat <= ibeat + 1'b1;
          if (ibeat == BW'(rows * BPR - 1)) state <= Q_CALC;
        end
        Q_CALC: begin
          inv   <= (amax == 0) ? 32'd0 : 32'((64'd127 << 32) / 64'(amax));
          scale <= (amax + 32'd63) / 32'd127;
          orow  <= '0;
          state <= Q_P2;
        end
        Q_P2: if (out_ready) begin
          orow <= orow + 1'b1;
          if (out_last) begin
            done  <= 1'b1;
            state <= Q_IDLE;
          end
        end
        default: state <= Q_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == Q_P1 && in_valid)
      for (int l = 0; l < IN_LANES; l++)
        buf_q[RIW'(32'(ibeat) / BPR)][(32'(ibeat) % BPR) * IN_LANES + l] <= in_data[l];
  end
endmodule
