// decode_attn_engine: decoding-phase attention, reused as the LM head.
//
// Attention mode (cfg_lm_head = 0), one new token against a cache of cfg_m
// tokens, head by head, in three decoupled sub-steps:
//   1. scores:  s_j = q_h . k_j,h * s_scale for j < cfg_m, written to the
//               on-chip score buffer while the running max is kept;
//   2. softmax: e_j = exp(s_j - max) in place, sum of e_j, one per cycle,
//               then one reciprocal 1/sum;
//   3. values:  o_h = sum_j e_j v_j,h, then o_h * v_scale / sum streamed out.
// LM-head mode (cfg_lm_head = 1): the same query buffer holds the whole
// hidden vector and the same dot-product datapath streams cfg_rows weight
// rows of HIDDEN int8 values, producing one logit (dot * s_scale) per row,
// OUT_LANES logits per output beat; no softmax.
// DRAM requests (rd_req_*) are answered in order on the rd_* beat stream:
//   RQ_Q  head h query (DH/LANES beats) or hidden vector (HIDDEN/LANES),
//   RQ_K  K cache of head h (cfg_m rows of DH/LANES beats),
//   RQ_V  V cache of head h (cfg_m rows of DH/LANES beats),
//   RQ_W  LM head weights (cfg_rows rows of HIDDEN/LANES beats).
// Throughput: one LANES-wide beat per cycle in steps 1 and 3 and in LM-head
// mode, one score per cycle in step 2.
// Follows the paper: low-parallelism matrix-vector datapath, decoupled
// score / softmax / value steps with the 1 x M score vector held on chip,
// and reuse of the same hardware for the LM head. Own choices: the request
// interface, number formats, S_MAX = 2048 (holds the 1536-token totals of
// the evaluated [512, 1024] configuration), LANES = 32 MACs.
module decode_attn_engine #(
  parameter int unsigned H         = 16,
  parameter int unsigned DH        = 96,
  parameter int unsigned LANES     = 32,
  parameter int unsigned OUT_LANES = 8,
  parameter int unsigned S_MAX     = 2048,
  localparam int unsigned HIDDEN = H * DH,
  localparam int unsigned KB     = DH / LANES,
  localparam int unsigned HB     = HIDDEN / LANES,
  localparam int unsigned SAW    = $clog2(S_MAX + 1),
  localparam int unsigned SIW    = $clog2(S_MAX)         // score buffer index
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               cfg_lm_head,
  input  logic [SAW-1:0]     cfg_m,
  input  logic [31:0]        cfg_rows,
  input  logic [31:0]        cfg_s_scale,   // Q8.24
  input  logic [31:0]        cfg_v_scale,   // Q16.16
  output logic               busy,
  output logic               done,
  output logic               rd_req_valid,
  input  logic               rd_req_ready,
  output logic [1:0]         rd_req_kind,   // 0 Q, 1 K, 2 V, 3 W
  output logic [7:0]         rd_req_head,
  input  logic               rd_valid,
  output logic               rd_ready,
  input  logic signed [7:0]  rd_data [LANES],
  output logic               out_valid,
  input  logic               out_ready,
  output logic signed [31:0] out_data [OUT_LANES],
  output logic               out_last
);
  import tellme_pkg::*;

  localparam logic [1:0] RQ_Q = 2'd0, RQ_K = 2'd1, RQ_V = 2'd2, RQ_W = 2'd3;

  typedef enum logic [3:0] {D_IDLE, D_QREQ, D_Q, D_KREQ, D_K, D_SMX, D_RCP,
                            D_VREQ, D_V, D_OUT, D_WREQ, D_W} dstate_e;
  dstate_e state;

  logic signed [7:0]  qbuf [HIDDEN];
  fx_t                sbuf [S_MAX];
  fx_t                obuf [DH];
  logic               lm;
  logic [SAW-1:0]     m_len;
  logic [31:0]        rows, row;
  logic [7:0]         h;
  logic [$clog2(HB+1)-1:0] beat;
  logic signed [31:0] dot;
  fx_t                smax;
  logic [47:0]        ssum;
  logic [47:0]        recip;
  logic [$clog2(DH/OUT_LANES+1)-1:0] ob;
  fx_t                lbuf [OUT_LANES];
  logic [$clog2(OUT_LANES+1)-1:0] lcnt;
  logic               lfull;

  logic [$clog2(HB+1)-1:0] row_beats;
  assign row_beats = lm ? ($bits(row_beats))'(HB) : ($bits(row_beats))'(KB);

  // dot product of the current beat against the query buffer
  logic signed [31:0] dot_n;
  always_comb begin
    dot_n = dot;
    for (int l = 0; l < LANES; l++)
      dot_n = dot_n + 32'(qbuf[32'(beat) * LANES + l]) * 32'(rd_data[l]);
  end
  fx_t s_new;
  assign s_new = sat_fx((64'(dot_n) * $signed({32'd0, cfg_s_scale})) >>> 8);

  // softmax exponent
  fx_t         e_in;
  logic [31:0] e_out;
  assign e_in = sat_fx(64'(sbuf[row[SIW-1:0]]) - 64'(smax));
  exp_unit u_exp (.x(e_in), .y(e_out));

  logic row_end;
  assign row_end = rd_valid && rd_ready && (beat == row_beats - 1'b1);

  assign rd_req_valid = (state == D_QREQ) || (state == D_KREQ) || (state == D_VREQ) || (state == D_WREQ);
  assign rd_req_kind  = (state == D_KREQ) ? RQ_K : (state == D_VREQ) ? RQ_V :
                        (state == D_WREQ) ? RQ_W : RQ_Q;
  assign rd_req_head  = h;
  assign rd_ready     = (state == D_Q) || (state == D_K) || (state == D_V) || (state == D_W && !lfull);
  assign busy         = (state != D_IDLE);

  // output beat
  for (genvar l = 0; l < OUT_LANES; l++) begin : g_o
    assign out_data[l] = lm ? lbuf[l] :
        sat_fx((64'(obuf[32'(ob) * OUT_LANES + l]) * $signed({16'd0, recip})) >>> 16);
  end
  assign out_valid = (state == D_OUT) || (state == D_W && lfull);
  assign out_last  = lm ? (lfull && row == rows) :
                          ((state == D_OUT) && ob == ($bits(ob))'(DH / OUT_LANES - 1) && h == 8'(H - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= D_IDLE; done <= 1'b0; lm <= 1'b0; m_len <= '0; rows <= '0; row <= '0;
      h <= '0; beat <= '0; dot <= '0; smax <= '0; ssum <= '0; recip <= '0; ob <= '0;
      lcnt <= '0; lfull <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        D_IDLE: if (start) begin
          lm <= cfg_lm_head; m_len <= cfg_m; rows <= cfg_rows;
          h <= '0; beat <= '0; lcnt <= '0; lfull <= 1'b0;
          state <= D_QREQ;
        end
        D_QREQ: if (rd_req_ready) begin beat <= '0; state <= D_Q; end
        D_Q: if (rd_valid) begin
          beat <= beat + 1'b1;
          if (beat == row_beats - 1'b1) begin
            beat <= '0; dot <= '0; row <= '0;
            state <= lm ? D_WREQ : D_KREQ;
          end
        end
        // ---- step 1: scores ----
        D_KREQ: if (rd_req_ready) state <= D_K;
        D_K: if (rd_valid) begin
          dot  <= dot_n;
          beat <= beat + 1'b1;
          if (row_end) begin
            beat <= '0; dot <= '0;
            if (row == 0 || s_new > smax) smax <= s_new;
            row <= row + 1'b1;
            if (row == 32'(m_len) - 1) begin row <= '0; ssum <= '0; state <= D_SMX; end
          end
        end
        // ---- step 2: softmax ----
        D_SMX: begin
          ssum <= ssum + 48'(e_out);
          row  <= row + 1'b1;
          if (row == 32'(m_len) - 1) state <= D_RCP;
        end
        D_RCP: begin
          recip <= (ssum == 0) ? 48'd0 : (48'(cfg_v_scale) << 16) / ssum;
          row   <= '0;
          state <= D_VREQ;
        end
        // ---- step 3: values ----
        D_VREQ: if (rd_req_ready) state <= D_V;
        D_V: if (rd_valid) begin
          beat <= beat + 1'b1;
          if (row_end) begin
            beat <= '0;
            row  <= row + 1'b1;
            if (row == 32'(m_len) - 1) begin ob <= '0; state <= D_OUT; end
          end
        end
        D_OUT: if (out_ready) begin
          ob <= ob + 1'b1;
          if (ob == ($bits(ob))'(DH / OUT_LANES - 1)) begin
            if (h == 8'(H - 1)) begin state <= D_IDLE; done <= 1'b1; end
            else begin h <= h + 1'b1; state <= D_QREQ; end
          end
        end
        // ---- LM head ----
        D_WREQ: if (rd_req_ready) state <= D_W;
        D_W: begin
          if (lfull && out_ready) begin
            lfull <= 1'b0;
            if (row == rows) begin state <= D_IDLE; done <= 1'b1; end
          end else if (rd_valid && !lfull) begin
            dot  <= dot_n;
            beat <= beat + 1'b1;
            if (row_end) begin
              beat <= '0; dot <= '0;
              row  <= row + 1'b1;
              lcnt <= lcnt + 1'b1;
              if (lcnt == ($bits(lcnt))'(OUT_LANES - 1) || row == rows - 1) begin
                lcnt <= '0; lfull <= 1'b1;
              end
            end
          end
        end
        default: state <= D_IDLE;
      endcase
    end
  end

  // buffers
  always_ff @(posedge clk) begin
    if (state == D_Q && rd_valid)
      for (int l = 0; l < LANES; l++) qbuf[32'(beat) * LANES + l] <= rd_data[l];
    if (state == D_K && row_end) sbuf[row[SIW-1:0]] <= s_new;
    if (state == D_SMX) sbuf[row[SIW-1:0]] <= fx_t'(e_out);
    if (state == D_W && rd_valid && !lfull && row_end) lbuf[lcnt[$clog2(OUT_LANES)-1:0]] <= s_new;
    if (state == D_Q) for (int d = 0; d < DH; d++) obuf[d] <= '0;
    if (state == D_V && rd_valid)
      for (int l = 0; l < LANES; l++) begin
        int unsigned d;
        d = 32'(beat) * LANES + l;
        obuf[d] <= sat_fx(64'(obuf[d]) + 64'(sbuf[row[SIW-1:0]]) * 64'(rd_data[l]));
      end
  end
endmodule
