// tellme_top: ternary LLM accelerator for prefill and decoding.
//
// Engines behind one top-level controller (top_ctrl):
//   * Ternary matmul engine: weight_index_buffer (ping-pong) + tl_matmul +
//     dequant_silu (dequantization and SiLU fused on the matmul output);
//   * Reverse attention engine (prefill): reverse_attn_engine;
//   * Decoding attention engine, also used as LM head: decode_attn_engine;
//   * Special function unit: rmsnorm_quant, quant_unit, rope_unit,
//     eltwise_add, eltwise_mul;
//   * hidden_state_buffer, the on-chip decoding hidden state.
// External interfaces (plain valid/ready streams standing in for the AXI
// master ports to DDR):
//   cmd_*  one command at a time (tellme_pkg::cmd_t); cmd_done per compute
//          command, wld_done per weight load;
//   rd_*   compute read channel: requests (rd_req_t) answered in order by
//          256-bit beats;
//   wrd_*  weight read channel feeding the weight-index buffer;
//   wr_*   result beats (256-bit) with a tag (token index for prefill
//          attention, else 0) and last.
// Beat views: 32 int8 lanes or 8 Q16.16 lanes per 256-bit beat, lane 0 in
// the least significant bits. Ops with two vector operands (add, mul,
// RMSNorm x/gamma) take them as alternating beats (first operand first)
// from DRAM, or the first operand from the hidden-state buffer and the
// second from DRAM when cmd.src is LOC_HIDDEN. Results of Q16.16 ops go to
// the hidden-state buffer when cmd.dst is LOC_HIDDEN; int8 results always go
// to DRAM.
// Default parameters are the paper's: G = 3, T = 32, Q = 16, p = 4, and the
// 0.7B BitNet model's 16 heads of 96 (hidden 1536).
module tellme_top #(
  parameter int unsigned G        = 3,
  parameter int unsigned T        = 32,
  parameter int unsigned Q        = 16,
  parameter int unsigned K_MAX    = 4096,
  parameter int unsigned WDEPTH   = 2048,
  parameter int unsigned P        = 4,
  parameter int unsigned H        = 16,
  parameter int unsigned DH       = 96,
  parameter int unsigned S_MAX    = 2048,
  parameter int unsigned NORM_MAX = 4096,
  localparam int unsigned HIDDEN = H * DH,
  localparam int unsigned IDX_W  = $clog2(3**G),
  localparam int unsigned WAW    = $clog2(WDEPTH),
  // widths of the engines' configuration ports (mirror their localparams)
  localparam int unsigned KGW    = $clog2(K_MAX / Q + 1),
  localparam int unsigned HAW    = $clog2(HIDDEN / 8 + 1),
  localparam int unsigned NRW    = $clog2(NORM_MAX / 32 + 1),
  localparam int unsigned SAW    = $clog2(S_MAX + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  tellme_pkg::cmd_t      cmd,
  output logic                  cmd_done,
  output logic                  wld_done,
  // compute read channel
  output logic                  rd_req_valid,
  input  logic                  rd_req_ready,
  output tellme_pkg::rd_req_t   rd_req,
  input  logic                  rd_valid,
  output logic                  rd_ready,
  input  logic [255:0]          rd_data,
  // weight read channel
  output logic                  wrd_req_valid,
  input  logic                  wrd_req_ready,
  output logic [31:0]           wrd_req_beats,
  input  logic                  wrd_valid,
  output logic                  wrd_ready,
  input  logic [255:0]          wrd_data,
  // result channel
  output logic                  wr_valid,
  input  logic                  wr_ready,
  output logic [255:0]          wr_data,
  output logic [15:0]           wr_tag,
  output logic                  wr_last,
  // status
  output logic [31:0]           last_scale,
  output logic [31:0]           op_count [10],
  output logic [31:0]           overlap_cycles,
  output logic [31:0]           swap_wait_cycles,
  output logic [31:0]           attn_steps,
  output logic [31:0]           attn_q_loads,
  output logic [31:0]           attn_kv_loads
);
  import tellme_pkg::*;

  // ---------------- controller ----------------
  cmd_t        cur;
  logic        active, eng_start, wib_swap, opr_req_valid, hid_rd_start, hid_wr_restart;
  logic [31:0] opr_req_beats;
  logic [15:0] hid_rd_beats;
  logic        sink_fire, engines_busy, wld_active, wld_restart, wld_beat_fire;

  top_ctrl #(.LBEATS(T * G / 32), .Q(Q), .HIDDEN(HIDDEN)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .cmd_done,
    .cur, .active, .eng_start, .wib_swap,
    .opr_req_valid, .opr_req_ready(rd_req_ready), .opr_req_beats,
    .hid_rd_start, .hid_rd_beats, .hid_wr_restart,
    .sink_fire, .engines_busy,
    .wld_active, .wld_done, .wld_restart, .wld_req_valid(wrd_req_valid), .wld_req_ready(wrd_req_ready),
    .wld_req_beats(wrd_req_beats), .wld_beat_fire,
    .op_count, .overlap_cycles, .swap_wait_cycles);

  op_e op;
  assign op = cur.op;

  // ---------------- beat views ----------------
  logic signed [7:0]  rd_i8 [32];
  fx_t                rd_fx [8];
  for (genvar l = 0; l < 32; l++) begin : g_i8
    assign rd_i8[l] = rd_data[l*8 +: 8];
  end
  for (genvar l = 0; l < 8; l++) begin : g_fx
    assign rd_fx[l] = rd_data[l*32 +: 32];
  end

  // ---------------- ternary matmul engine ----------------
  logic                 mm_rd_en, mm_busy, mm_done, mm_act_ready, mm_out_valid, mm_out_last;
  logic [WAW-1:0]       mm_rd_addr;
  logic [Q*T*IDX_W-1:0] mm_rd_data;
  logic signed [31:0]   mm_out [8];
  logic                 wib_bank;
  logic [WAW:0]         wib_count;
  logic                 dq_in_ready, dq_out_valid, dq_out_last;
  fx_t                  dq_out [8];

  assign wrd_ready     = wld_active;
  assign wld_beat_fire = wrd_valid && wrd_ready;

  weight_index_buffer #(.Q(Q), .T(T), .IDX_W(IDX_W), .DEPTH(WDEPTH), .BEAT_W(256)) u_wib (
    .clk, .rst_n, .swap(wib_swap), .compute_bank(wib_bank),
    .wr_restart(wld_restart), .wr_valid(wld_beat_fire), .wr_beat(wrd_data), .wr_count(wib_count),
    .rd_en(mm_rd_en), .rd_addr(mm_rd_addr), .rd_data(mm_rd_data));

  tl_matmul #(.G(G), .T(T), .Q(Q), .ACT_LANES(32), .OUT_LANES(8), .K_MAX(K_MAX), .WDEPTH(WDEPTH)) u_mm (
    .clk, .rst_n, .start(eng_start && op == OP_MATMUL),
    .cfg_n_blk(cur.a), .cfg_k_grp(KGW'(cur.b)), .cfg_n_tok(cur.c),
    .busy(mm_busy), .done(mm_done),
    .act_valid(op == OP_MATMUL && rd_valid), .act_ready(mm_act_ready), .act_data(rd_i8),
    .w_rd_en(mm_rd_en), .w_rd_addr(mm_rd_addr), .w_rd_data(mm_rd_data),
    .out_valid(mm_out_valid), .out_ready(dq_in_ready), .out_data(mm_out), .out_last(mm_out_last));

  // ---------------- hidden-state buffer ----------------
  logic hid_rd_valid, hid_rd_ready, hid_rd_last, hid_wr_valid;
  fx_t  hid_rd_data [8];
  fx_t  sink_fx [8];

  hidden_state_buffer #(.LANES(8), .DEPTH(HIDDEN / 8)) u_hid (
    .clk, .rst_n, .wr_restart(hid_wr_restart), .wr_valid(hid_wr_valid), .wr_data(sink_fx),
    .rd_start(hid_rd_start), .rd_beats(HAW'(hid_rd_beats)),
    .rd_valid(hid_rd_valid), .rd_ready(hid_rd_ready), .rd_data(hid_rd_data), .rd_last(hid_rd_last));

  // ---------------- operand pairing ----------------
  // from DRAM: beat 0 -> a (held), beat 1 -> b; from hidden: a = hidden, b = DRAM
  logic from_hid, paired_op, have_a, pair_valid, pair_ready;
  fx_t  a_hold [8], pa [8], pb [8];
  assign from_hid  = (cur.src == LOC_HIDDEN);
  assign paired_op = (op == OP_ADD) || (op == OP_MUL) || (op == OP_RMSNORM_Q);
  assign pa        = from_hid ? hid_rd_data : a_hold;
  assign pb        = rd_fx;
  assign pair_valid = active && paired_op && (from_hid ? (hid_rd_valid && rd_valid) : (have_a && rd_valid));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_a <= 1'b0;
      for (int l = 0; l < 8; l++) a_hold[l] <= '0;
    end else if (eng_start) begin
      have_a <= 1'b0;
    end else if (active && paired_op && !from_hid) begin
      if (!have_a && rd_valid) begin a_hold <= rd_fx; have_a <= 1'b1; end
      else if (pair_valid && pair_ready) have_a <= 1'b0;
    end
  end

  // single-operand fx source (quant, rope)
  logic sgl_valid, sgl_ready;
  fx_t  sgl [8];
  assign sgl       = from_hid ? hid_rd_data : rd_fx;
  assign sgl_valid = from_hid ? hid_rd_valid : rd_valid;

  // ---------------- special function unit ----------------
  logic rms_busy, rms_done, rms_in_ready, rms_out_valid, rms_out_last, sink_ready;
  logic signed [7:0] rms_out [32];
  logic [31:0] rms_scale;
  rmsnorm_quant #(.MAX_LEN(NORM_MAX), .IN_LANES(8), .OUT_LANES(32)) u_rms (
    .clk, .rst_n, .start(eng_start && op == OP_RMSNORM_Q), .cfg_rows(NRW'(cur.a)),
    .busy(rms_busy), .done(rms_done),
    .in_valid(op == OP_RMSNORM_Q && pair_valid), .in_ready(rms_in_ready), .x_data(pa), .g_data(pb),
    .out_valid(rms_out_valid), .out_ready(op == OP_RMSNORM_Q && sink_ready), .out_data(rms_out),
    .out_last(rms_out_last), .scale(rms_scale));

  logic qu_busy, qu_done, qu_in_ready, qu_out_valid, qu_out_last;
  logic signed [7:0] qu_out [32];
  logic [31:0] qu_scale, qu_absmax;
  quant_unit #(.MAX_LEN(NORM_MAX), .IN_LANES(8), .OUT_LANES(32)) u_quant (
    .clk, .rst_n, .start(eng_start && op == OP_QUANT), .cfg_rows(NRW'(cur.a)),
    .busy(qu_busy), .done(qu_done),
    .in_valid(op == OP_QUANT && sgl_valid), .in_ready(qu_in_ready), .in_data(sgl),
    .out_valid(qu_out_valid), .out_ready(op == OP_QUANT && sink_ready), .out_data(qu_out),
    .out_last(qu_out_last), .scale(qu_scale), .absmax(qu_absmax));

  logic ro_in_ready, ro_out_valid, ro_out_last;
  fx_t  ro_out [8];
  rope_unit #(.LANES(8), .HEAD_DIM(DH), .HEADS(H)) u_rope (
    .clk, .rst_n, .start(eng_start && op == OP_ROPE), .cfg_pos0(cur.b),
    .in_valid(op == OP_ROPE && sgl_valid), .in_ready(ro_in_ready), .in_data(sgl), .in_last(1'b0),
    .out_valid(ro_out_valid), .out_ready(op == OP_ROPE && sink_ready), .out_data(ro_out), .out_last(ro_out_last));

  logic ad_in_ready, ad_out_valid, ad_out_last, mu_in_ready, mu_out_valid, mu_out_last;
  fx_t  ad_out [8], mu_out [8];
  eltwise_add #(.LANES(8)) u_add (
    .clk, .rst_n, .in_valid(op == OP_ADD && pair_valid), .in_ready(ad_in_ready), .a_data(pa), .b_data(pb),
    .in_last(1'b0), .out_valid(ad_out_valid), .out_ready(op == OP_ADD && sink_ready), .out_data(ad_out),
    .out_last(ad_out_last));
  eltwise_mul #(.LANES(8)) u_mul (
    .clk, .rst_n, .in_valid(op == OP_MUL && pair_valid), .in_ready(mu_in_ready), .a_data(pa), .b_data(pb),
    .in_last(1'b0), .out_valid(mu_out_valid), .out_ready(op == OP_MUL && sink_ready), .out_data(mu_out),
    .out_last(mu_out_last));

  dequant_silu #(.LANES(8)) u_dq (
    .clk, .rst_n, .act_scale(cur.scale_a), .w_scale(cur.scale_b), .silu_en(cur.silu),
    .in_valid(mm_out_valid), .in_ready(dq_in_ready), .in_data(mm_out), .in_last(mm_out_last),
    .out_valid(dq_out_valid), .out_ready(op == OP_MATMUL && sink_ready), .out_data(dq_out),
    .out_last(dq_out_last));

  // ---------------- attention engines ----------------
  logic ra_busy, ra_done, ra_req_valid, ra_req_kv, ra_rd_ready, ra_out_valid, ra_out_last;
  logic [15:0] ra_req_token, ra_out_token;
  fx_t  ra_out [8];
  reverse_attn_engine #(.P(P), .H(H), .DH(DH), .LANES(32), .OUT_LANES(8)) u_rev (
    .clk, .rst_n, .start(eng_start && op == OP_PREFILL_AT), .cfg_n(cur.a),
    .cfg_s_scale(cur.scale_a), .cfg_v_scale(cur.scale_b), .busy(ra_busy), .done(ra_done),
    .rd_req_valid(ra_req_valid), .rd_req_ready(op == OP_PREFILL_AT && rd_req_ready),
    .rd_req_kv(ra_req_kv), .rd_req_token(ra_req_token),
    .rd_valid(op == OP_PREFILL_AT && rd_valid), .rd_ready(ra_rd_ready), .rd_data(rd_i8),
    .out_valid(ra_out_valid), .out_ready(op == OP_PREFILL_AT && sink_ready), .out_data(ra_out),
    .out_token(ra_out_token), .out_last(ra_out_last),
    .steps(attn_steps), .q_loads(attn_q_loads), .kv_loads(attn_kv_loads));

  logic da_busy, da_done, da_req_valid, da_rd_ready, da_out_valid, da_out_last;
  logic [1:0] da_req_kind;
  logic [7:0] da_req_head;
  fx_t  da_out [8];
  logic is_dec;
  assign is_dec = (op == OP_DECODE_AT) || (op == OP_LM_HEAD);
  decode_attn_engine #(.H(H), .DH(DH), .LANES(32), .OUT_LANES(8), .S_MAX(S_MAX)) u_dec (
    .clk, .rst_n, .start(eng_start && is_dec), .cfg_lm_head(op == OP_LM_HEAD),
    .cfg_m(SAW'(cur.a)), .cfg_rows(cur.d),
    .cfg_s_scale(cur.scale_a), .cfg_v_scale(cur.scale_b), .busy(da_busy), .done(da_done),
    .rd_req_valid(da_req_valid), .rd_req_ready(is_dec && rd_req_ready),
    .rd_req_kind(da_req_kind), .rd_req_head(da_req_head),
    .rd_valid(is_dec && rd_valid), .rd_ready(da_rd_ready), .rd_data(rd_i8),
    .out_valid(da_out_valid), .out_ready(is_dec && sink_ready), .out_data(da_out), .out_last(da_out_last));

  assign engines_busy = mm_busy || rms_busy || qu_busy || ra_busy || da_busy || dq_out_valid;

  // ---------------- read request mux ----------------
  always_comb begin
    rd_req = '0;
    rd_req_valid = 1'b0;
    if (op == OP_PREFILL_AT && active) begin
      rd_req_valid = ra_req_valid;
      rd_req.kind  = ra_req_kv ? RQ_ATT_KV : RQ_ATT_Q;
      rd_req.index = ra_req_token;
      rd_req.beats = ra_req_kv ? 32'(H * 2 * DH / 32) : 32'(HIDDEN / 32);
    end else if (is_dec && active) begin
      rd_req_valid = da_req_valid;
      rd_req.index = 16'(da_req_head);
      case (da_req_kind)
        2'd0: begin rd_req.kind = RQ_DEC_Q; rd_req.beats = (op == OP_LM_HEAD) ? 32'(HIDDEN / 32) : 32'(DH / 32); end
        2'd1: begin rd_req.kind = RQ_DEC_K; rd_req.beats = 32'(cur.a) * (DH / 32); end
        2'd2: begin rd_req.kind = RQ_DEC_V; rd_req.beats = 32'(cur.a) * (DH / 32); end
        default: begin rd_req.kind = RQ_LM_W; rd_req.beats = cur.d * (HIDDEN / 32); end
      endcase
    end else begin
      rd_req_valid = opr_req_valid;
      rd_req.kind  = RQ_OPERAND;
      rd_req.beats = opr_req_beats;
    end
  end

  // ---------------- operand ready mux ----------------
  always_comb begin
    rd_ready     = 1'b0;
    hid_rd_ready = 1'b0;
    pair_ready   = 1'b0;
    sgl_ready    = 1'b0;
    case (op)
      OP_MATMUL:               rd_ready = mm_act_ready;
      OP_PREFILL_AT:           rd_ready = ra_rd_ready;
      OP_DECODE_AT, OP_LM_HEAD: rd_ready = da_rd_ready;
      OP_RMSNORM_Q, OP_ADD, OP_MUL: begin
        pair_ready = (op == OP_RMSNORM_Q) ? rms_in_ready : (op == OP_ADD) ? ad_in_ready : mu_in_ready;
        if (from_hid) begin
          rd_ready     = pair_ready && hid_rd_valid;
          hid_rd_ready = pair_ready && rd_valid;
        end else begin
          rd_ready = !have_a || pair_ready;
        end
      end
      OP_QUANT, OP_ROPE: begin
        sgl_ready = (op == OP_QUANT) ? qu_in_ready : ro_in_ready;
        if (from_hid) hid_rd_ready = sgl_ready;
        else          rd_ready     = sgl_ready;
      end
      default: ;
    endcase
    if (!active) begin rd_ready = 1'b0; hid_rd_ready = 1'b0; end
  end

  // ---------------- result sink ----------------
  logic               sink_valid, sink_is_i8, sink_last;
  logic signed [7:0]  sink_i8 [32];
  logic [15:0]        sink_tag;
  always_comb begin
    sink_valid = 1'b0; sink_is_i8 = 1'b0; sink_last = 1'b0; sink_tag = '0;
    sink_fx = dq_out; sink_i8 = rms_out;
    case (op)
      OP_MATMUL:     begin sink_valid = dq_out_valid; sink_fx = dq_out; sink_last = dq_out_last; end
      OP_PREFILL_AT: begin sink_valid = ra_out_valid; sink_fx = ra_out; sink_last = ra_out_last; sink_tag = ra_out_token; end
      OP_DECODE_AT, OP_LM_HEAD: begin sink_valid = da_out_valid; sink_fx = da_out; sink_last = da_out_last; end
      OP_RMSNORM_Q:  begin sink_valid = rms_out_valid; sink_is_i8 = 1'b1; sink_i8 = rms_out; sink_last = rms_out_last; end
      OP_QUANT:      begin sink_valid = qu_out_valid; sink_is_i8 = 1'b1; sink_i8 = qu_out; sink_last = qu_out_last; end
      OP_ROPE:       begin sink_valid = ro_out_valid; sink_fx = ro_out; sink_last = ro_out_last; end
      OP_ADD:        begin sink_valid = ad_out_valid; sink_fx = ad_out; sink_last = ad_out_last; end
      OP_MUL:        begin sink_valid = mu_out_valid; sink_fx = mu_out; sink_last = mu_out_last; end
      default: ;
    endcase
    if (!active) sink_valid = 1'b0;
  end

  logic to_hid;
  assign to_hid       = (cur.dst == LOC_HIDDEN) && !sink_is_i8;
  assign sink_ready   = to_hid ? 1'b1 : wr_ready;
  assign sink_fire    = sink_valid && sink_ready;
  assign hid_wr_valid = sink_valid && to_hid;
  assign wr_valid     = sink_valid && !to_hid;
  assign wr_tag       = sink_tag;
  assign wr_last      = sink_last;
  always_comb begin
    wr_data = '0;
    if (sink_is_i8) for (int l = 0; l < 32; l++) wr_data[l*8 +: 8] = sink_i8[l];
    else            for (int l = 0; l < 8; l++)  wr_data[l*32 +: 32] = sink_fx[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_scale <= '0;
    else if (rms_done) last_scale <= rms_scale;
    else if (qu_done)  last_scale <= qu_scale;
  end
endmodule
