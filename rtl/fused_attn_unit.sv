// fused_attn_unit: fused Q.K / online softmax / S.V datapath of the prefill
// attention ("Fused QKV unit").
//
// Holds P query tokens (all H heads) on chip and, for every streamed key/value
// token j, updates per (slot, head) the running max m, denominator l and
// numerator vector o exactly as a Flash-Attention-2 pass with block size 1:
//   s   = q.k_j * s_scale
//   m'  = max(m, s);  a = e^(m-m');  b = e^(s-m')
//   l   = a*l + b;    o = a*o + b*v_j;   m = m'
// and finally emits o/l (times the value scale) per token. Only slots whose
// query has been loaded are updated, which is how the reverse schedule skips
// the masked upper triangle.
// Streams:
//   q_*  : one query vector, HIDDEN/LANES beats of LANES int8, into q_slot;
//   kv_* : one step, for each head: DH/LANES key beats then DH/LANES value
//          beats (int8). One bubble cycle per head between the key and value
//          beats for the softmax update (kv_ready low).
//   out_*: on flush_start, slots 0..flush_nq-1 in order, HIDDEN/OUT_LANES
//          beats of OUT_LANES Q16.16 values each; out_last on the final beat.
// batch_clear empties all slots before a new batch.
// Per head and step: 2*DH/LANES + 1 cycles, so one kv token costs
// H*(2*DH/LANES + 1) cycles; P*LANES int8 MACs per key beat.
// Buffers (as listed in the design): P query tokens, one k and one v beat,
// h x p partial dot products s, h x p maxima m, h x p denominators l; plus
// the P x HIDDEN numerators o.
// Own choices: number formats (s_scale Q8.24 folding the q/k scales and
// 1/sqrt(DH); v_scale Q16.16), the per-head k-then-v beat order, the exp
// approximation (exp_unit), and that the output division uses one reciprocal
// per (slot, head).
module fused_attn_unit #(
  parameter int unsigned P         = 4,
  parameter int unsigned H         = 16,
  parameter int unsigned DH        = 96,
  parameter int unsigned LANES     = 32,
  parameter int unsigned OUT_LANES = 8,
  localparam int unsigned HIDDEN = H * DH,
  localparam int unsigned KB     = DH / LANES,          // beats per head vector
  localparam int unsigned QB     = HIDDEN / LANES,      // beats per query
  localparam int unsigned OB     = HIDDEN / OUT_LANES,  // output beats per slot
  localparam int unsigned SW     = (P > 1) ? $clog2(P) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [31:0]        cfg_s_scale,
  input  logic [31:0]        cfg_v_scale,
  input  logic               batch_clear,
  // query load
  input  logic               q_valid,
  output logic               q_ready,
  input  logic signed [7:0]  q_data [LANES],
  input  logic [SW-1:0]      q_slot,
  // key/value step
  input  logic               kv_valid,
  output logic               kv_ready,
  input  logic signed [7:0]  kv_data [LANES],
  output logic               step_done,
  // flush
  input  logic               flush_start,
  input  logic [SW:0]        flush_nq,
  output logic               out_valid,
  input  logic               out_ready,
  output logic signed [31:0] out_data [OUT_LANES],
  output logic [SW-1:0]      out_slot,
  output logic               out_last,
  output logic [P-1:0]       loaded
);
  import tellme_pkg::*;

  typedef enum logic [1:0] {A_K, A_SM, A_V, A_OUT} astate_e;
  astate_e state;

  logic signed [7:0]  qbuf [P][HIDDEN];
  fx_t                obuf [P][HIDDEN];
  fx_t                m_r  [P][H];
  logic [31:0]        l_r  [P][H];
  logic [P-1:0]       seen [H];
  logic signed [31:0] dot  [P];
  logic [31:0]        alpha [P], beta [P];
  logic [P-1:0]       act;

  logic [$clog2(H+1)-1:0]  h;
  logic [$clog2(H)-1:0]    hi;     // h as an array index (h < H whenever used)
  assign hi = h[$clog2(H)-1:0];
  logic [$clog2(KB+1)-1:0] kb;
  logic [$clog2(QB+1)-1:0] qb;
  logic [SW:0]             oslot, nq;
  logic [$clog2(OB+1)-1:0] ob;

  // ---------------- softmax update (combinational, one cycle) -------------
  fx_t        s_c [P], mn_c [P];
  logic [31:0] a_c [P], b_c [P];
  fx_t        da [P], db [P];
  for (genvar p = 0; p < P; p++) begin : g_sm
    always_comb begin
      s_c[p]  = sat_fx((64'(dot[p]) * $signed({32'd0, cfg_s_scale})) >>> 8);
      mn_c[p] = (!seen[hi][p] || s_c[p] > m_r[p][hi]) ? s_c[p] : m_r[p][hi];
      da[p]   = fx_t'(sat_fx(64'(m_r[p][hi]) - 64'(mn_c[p])));
      db[p]   = fx_t'(sat_fx(64'(s_c[p]) - 64'(mn_c[p])));
    end
    exp_unit u_ea (.x(da[p]), .y(a_c[p]));
    exp_unit u_eb (.x(db[p]), .y(b_c[p]));
  end

  // ---------------- dot products of the current key beat ------------------
  logic signed [31:0] dot_n [P];
  always_comb begin
    for (int p = 0; p < P; p++) begin
      logic signed [31:0] acc;
      acc = dot[p];
      for (int l = 0; l < LANES; l++)
        acc = acc + 32'(qbuf[p][32'(h) * DH + 32'(kb) * LANES + l]) * 32'(kv_data[l]);
      dot_n[p] = acc;
    end
  end

  // ---------------- output normalisation ----------------------------------
  logic [SW-1:0] os;
  logic [31:0]   oh;
  logic [47:0]   recip;
  assign os       = oslot[SW-1:0];
  assign oh       = (32'(ob) * OUT_LANES) / DH;
  assign recip    = (l_r[os][oh] == 0) ? 48'd0 : (48'(cfg_v_scale) << 16) / 48'(l_r[os][oh]);
  for (genvar l = 0; l < OUT_LANES; l++) begin : g_out
    assign out_data[l] = sat_fx((64'(obuf[os][32'(ob) * OUT_LANES + l]) * $signed({16'd0, recip})) >>> 16);
  end
  assign out_slot  = os;
  assign out_valid = (state == A_OUT);
  assign out_last  = out_valid && (32'(oslot) == 32'(nq) - 1) && (32'(ob) == OB - 1);

  assign q_ready  = (state == A_K) && (kb == 0) && (h == 0);
  assign kv_ready = (state == A_K) || (state == A_V);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= A_K; h <= '0; kb <= '0; qb <= '0; loaded <= '0;
      oslot <= '0; nq <= '0; ob <= '0; step_done <= 1'b0;
      for (int p = 0; p < P; p++) begin dot[p] <= '0; alpha[p] <= '0; beta[p] <= '0; end
      for (int i = 0; i < H; i++) seen[i] <= '0;
      act <= '0;
    end else begin
      step_done <= 1'b0;
      if (batch_clear) begin
        loaded <= '0;
        for (int i = 0; i < H; i++) seen[i] <= '0;
      end
      case (state)
        A_K: begin
          if (flush_start) begin
            nq <= flush_nq; oslot <= '0; ob <= '0; state <= A_OUT;
          end else if (q_valid && q_ready && !kv_valid) begin
            qb <= qb + 1'b1;
            if (qb == ($bits(qb))'(QB - 1)) begin
              qb <= '0;
              loaded[q_slot] <= 1'b1;
            end
          end else if (kv_valid) begin
            for (int p = 0; p < P; p++) dot[p] <= dot_n[p];
            kb <= kb + 1'b1;
            if (kb == ($bits(kb))'(KB - 1)) begin kb <= '0; state <= A_SM; end
          end
        end
        A_SM: begin
          act <= loaded;
          for (int p = 0; p < P; p++) begin
            alpha[p] <= seen[hi][p] ? a_c[p] : 32'd0;   // first key: o starts at 0
            beta[p]  <= b_c[p];
            dot[p]   <= '0;
            if (loaded[p]) begin
              m_r[p][hi]  <= mn_c[p];
              l_r[p][hi]  <= seen[hi][p] ? 32'((64'(l_r[p][hi]) * 64'(a_c[p])) >> 16) + b_c[p] : b_c[p];
              seen[hi][p] <= 1'b1;
            end
          end
          state <= A_V;
        end
        A_V: if (kv_valid) begin
          kb <= kb + 1'b1;
          if (kb == ($bits(kb))'(KB - 1)) begin
            kb <= '0;
            state <= A_K;
            if (h == ($bits(h))'(H - 1)) begin h <= '0; step_done <= 1'b1; end
            else h <= h + 1'b1;
          end
        end
        A_OUT: if (out_ready) begin
          ob <= ob + 1'b1;
          if (ob == ($bits(ob))'(OB - 1)) begin
            ob <= '0;
            oslot <= oslot + 1'b1;
            if (out_last) state <= A_K;
          end
        end
        default: state <= A_K;
      endcase
    end
  end

  // query buffer and numerator buffer (block RAM style, no reset)
  always_ff @(posedge clk) begin
    if (state == A_K && !flush_start && q_valid && q_ready && !kv_valid)
      for (int l = 0; l < LANES; l++) qbuf[q_slot][32'(qb) * LANES + l] <= q_data[l];
    if (state == A_V && kv_valid)
      for (int p = 0; p < P; p++)
        if (act[p])
          for (int l = 0; l < LANES; l++) begin
            int unsigned d;
            d = 32'(h) * DH + 32'(kb) * LANES + l;
            obuf[p][d] <= sat_fx(((64'(obuf[p][d]) * $signed({32'd0, alpha[p]})) >>> 16) +
                                 $signed({32'd0, beta[p]}) * 64'(kv_data[l]));
          end
  end
endmodule
