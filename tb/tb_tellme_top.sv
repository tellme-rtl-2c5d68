// tb_tellme_top: end-to-end test of tellme_top at reduced sizes (2 heads of 32, hidden 64,
// 2 activation blocks per token).
//
// A host/DRAM model drives the command port and answers the three DRAM
// channels (compute reads, weight reads, result writes) with random stalls.
// The command sequence exercises every engine and mechanism of the design,
// and every result beat is compared with a floating-point reference computed
// here from the same random data:
//   1. LOAD_W tile A, then MATMUL (swap banks, plain dequantization) of
//      NTOK1 tokens; a LOAD_W of tile B is issued while that matmul runs
//      (ping-pong overlap of weight loading and compute);
//   2. MATMUL with fused SiLU whose bank swap must wait for tile B; its
//      result goes to the on-chip hidden-state buffer;
//   3. ADD (hidden buffer + DRAM operand -> DRAM);
//   4. RMSNORM_Q (x and gamma from DRAM -> int8) and QUANT (-> int8), with
//      the output scale checked;
//   5. ROPE at position POS into the hidden buffer, then MUL
//      (hidden buffer * DRAM operand -> DRAM);
//   6. PREFILL_AT of NPRE tokens (reverse-scheduled causal attention; the
//      step counter must equal NPRE^2/(2p) + NPRE/2 and the KV loads must
//      equal the steps);
//   7. DECODE_AT against MDEC cached tokens;
//   8. LM_HEAD over NLM vocabulary rows.
// Mechanism counters (each must be non-zero at the end, otherwise a failure
// is counted): weight-load/matmul overlap cycles, swap-wait cycles, SiLU
// beats, hidden-buffer sources and destinations, int8 result beats,
// attention steps, decode outputs, LM-head logits, result back-pressure
// cycles and read stalls. Tolerances as in the unit testbenches.
module tb_tellme_top;
  import tellme_pkg::*;
  localparam int Q = 16, P = 4, H = 2, DH = 32;
  localparam int HID = H * DH, LB = 3, BPE = (Q * 32 * 5 + 255) / 256;
  localparam int NBLK = 2, KG1 = 2, KG2 = HID / Q, NTOK1 = 2;
  localparam int NPRE = 8, MDEC = 9, NLM = 20, POS = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, cmd_done, wld_done;
  cmd_t cmd;
  logic rd_req_valid, rd_req_ready, rd_valid, rd_ready;
  rd_req_t rd_req;
  logic [255:0] rd_data, wrd_data, wr_data;
  logic wrd_req_valid, wrd_req_ready, wrd_valid, wrd_ready;
  logic [31:0] wrd_req_beats;
  logic wr_valid, wr_ready, wr_last;
  logic [15:0] wr_tag;
  logic [31:0] last_scale, overlap_cycles, swap_wait_cycles, attn_steps, attn_q_loads, attn_kv_loads;
  logic [31:0] op_count [10];

  tellme_top #(.K_MAX(64), .WDEPTH(16), .H(H), .DH(DH), .S_MAX(16), .NORM_MAX(256)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------ test data
  int x1 [NTOK1][NBLK * 96], x2 [NBLK * 96];
  int wa [KG1 * Q][NBLK * 96], wb [KG2 * Q][NBLK * 96];
  int addb [HID], rx [HID], rg [HID], qx [HID], ropx [HID], mulb [HID];
  int pq [NPRE][HID], pk [NPRE][HID], pv [NPRE][HID];
  int dq [HID], dk [MDEC][HID], dv [MDEC][HID];
  int lh [HID], lw [NLM][HID];
  real silu_ref [HID];
  real s_sc, v_sc, a_sc, w_sc, comb;

  // ------------------------------------------------------------ DRAM model
  logic [255:0] opq [$];     // operand stream of the current command
  logic [255:0] rsp [$];     // beats owed on the compute read channel
  logic [255:0] wtile [$];   // weight tile of the pending LOAD_W
  logic [255:0] wrsp [$];
  op_e  cur_op;
  int   rd_stalls = 0, wr_stalls = 0;

  function automatic logic [255:0] pack8(int v [8]);
    logic [255:0] b;
    for (int l = 0; l < 8; l++) b[l*32 +: 32] = v[l];
    return b;
  endfunction
  function automatic logic [255:0] pack32(int v [32]);
    logic [255:0] b;
    for (int l = 0; l < 32; l++) b[l*8 +: 8] = 8'(v[l]);
    return b;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (rd_req_valid && rd_req_ready) begin
      int v [32];
      int idx;
      idx = int'(rd_req.index);
      case (rd_req.kind)
        RQ_OPERAND: begin
          chk(rd_req.beats == 32'(opq.size()), $sformatf("operand request of %0d beats, %0d prepared", rd_req.beats, opq.size()));
          while (opq.size() > 0) rsp.push_back(opq.pop_front());
        end
        RQ_ATT_Q: for (int b = 0; b < HID / 32; b++) begin
          for (int l = 0; l < 32; l++) v[l] = pq[idx][b * 32 + l];
          rsp.push_back(pack32(v));
        end
        RQ_ATT_KV: for (int h = 0; h < H; h++) begin
          for (int b = 0; b < DH / 32; b++) begin
            for (int l = 0; l < 32; l++) v[l] = pk[idx][h * DH + b * 32 + l];
            rsp.push_back(pack32(v));
          end
          for (int b = 0; b < DH / 32; b++) begin
            for (int l = 0; l < 32; l++) v[l] = pv[idx][h * DH + b * 32 + l];
            rsp.push_back(pack32(v));
          end
        end
        RQ_DEC_Q: begin
          if (cur_op == OP_LM_HEAD)
            for (int b = 0; b < HID / 32; b++) begin
              for (int l = 0; l < 32; l++) v[l] = lh[b * 32 + l];
              rsp.push_back(pack32(v));
            end
          else
            for (int b = 0; b < DH / 32; b++) begin
              for (int l = 0; l < 32; l++) v[l] = dq[idx * DH + b * 32 + l];
              rsp.push_back(pack32(v));
            end
        end
        RQ_DEC_K, RQ_DEC_V: for (int j = 0; j < MDEC; j++)
          for (int b = 0; b < DH / 32; b++) begin
            for (int l = 0; l < 32; l++)
              v[l] = (rd_req.kind == RQ_DEC_K) ? dk[j][idx * DH + b * 32 + l] : dv[j][idx * DH + b * 32 + l];
            rsp.push_back(pack32(v));
          end
        default: for (int r = 0; r < NLM; r++)
          for (int b = 0; b < HID / 32; b++) begin
            for (int l = 0; l < 32; l++) v[l] = lw[r][b * 32 + l];
            rsp.push_back(pack32(v));
          end
      endcase
    end
    if (rd_valid && rd_ready) void'(rsp.pop_front());
    if (!rd_valid && rsp.size() > 0) rd_stalls++;
    if (wrd_req_valid && wrd_req_ready) begin
      chk(wrd_req_beats == 32'(wtile.size()), "weight request length");
      while (wtile.size() > 0) wrsp.push_back(wtile.pop_front());
    end
    if (wrd_valid && wrd_ready) void'(wrsp.pop_front());
    if (wr_valid && !wr_ready) wr_stalls++;
  end
  always @(negedge clk) begin
    rd_req_ready  = ($urandom % 4 != 0);
    rd_valid      = (rsp.size() > 0) && ($urandom % 5 != 0);
    rd_data       = (rsp.size() > 0) ? rsp[0] : '0;
    wrd_req_ready = 1'b1;
    wrd_valid     = (wrsp.size() > 0) && ($urandom % 2 == 0);
    wrd_data      = (wrsp.size() > 0) ? wrsp[0] : '0;
    wr_ready      = ($urandom % 4 != 0);
  end

  // ------------------------------------------------------------ result checking
  // Expected results of the running command: Q16.16 lanes (value, tolerance)
  // or int8 lanes; prefill outputs are checked by token tag.
  real  efx [$], etol [$];
  int   ei8 [$];
  bit   is_i8;
  real  pre_ref [NPRE][HID];
  int   pre_beat [NPRE];
  int   nwr, n_i8_beats = 0, n_silu_beats = 0, n_hid_src = 0, n_hid_dst = 0, n_logits = 0, n_dec_out = 0;

  always @(posedge clk) if (rst_n) begin
    if (wr_valid && wr_ready) begin
      nwr++;
      if (cur_op == OP_PREFILL_AT) begin
        int t, b;
        t = int'(wr_tag);
        b = pre_beat[t]++;
        for (int l = 0; l < 8; l++) begin
          real g, e;
          g = real'($signed(wr_data[l*32 +: 32])) / 65536.0;
          e = pre_ref[t][b * 8 + l];
          chk(g - e < 0.02 * 127 * v_sc && e - g < 0.02 * 127 * v_sc,
              $sformatf("prefill token %0d dim %0d got %f exp %f", t, b * 8 + l, g, e));
        end
      end else if (is_i8) begin
        n_i8_beats++;
        for (int l = 0; l < 32; l++) begin
          int g, e;
          g = int'($signed(wr_data[l*8 +: 8]));
          e = ei8.pop_front();
          chk(g - e <= 1 && e - g <= 1, $sformatf("op %s int8 lane %0d got %0d exp %0d", cur_op.name(), l, g, e));
        end
      end else begin
        for (int l = 0; l < 8; l++) begin
          real g, e, t;
          g = real'($signed(wr_data[l*32 +: 32])) / 65536.0;
          e = efx.pop_front(); t = etol.pop_front();
          chk(g - e <= t && e - g <= t, $sformatf("op %s lane %0d got %f exp %f", cur_op.name(), l, g, e));
        end
        if (cur_op == OP_LM_HEAD) n_logits += 8;
        if (cur_op == OP_DECODE_AT) n_dec_out++;
      end
    end
  end

  // ------------------------------------------------------------ command helpers
  int n_done = 0, n_wld = 0;
  always @(posedge clk) if (rst_n) begin
    if (cmd_done) n_done++;
    if (wld_done) n_wld++;
  end

  task automatic send(cmd_t c);
    bit acc;
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    if (c.op != OP_LOAD_W) cur_op = c.op;
    do begin #1 acc = cmd_ready; @(posedge clk); @(negedge clk); end while (!acc);
    cmd_valid = 0;
  endtask

  task automatic wait_done(int n);
    while (n_done < n) @(negedge clk);
  endtask

  function automatic cmd_t mk(op_e op);
    cmd_t c;
    c = '0; c.op = op; c.src = LOC_DRAM; c.dst = LOC_DRAM;
    return c;
  endfunction

  // ternary weight tile: entry (blk, m) holds Q x 32 five-bit indices
  task automatic make_tile(int kg, bit use_b);
    for (int blk = 0; blk < NBLK; blk++)
      for (int m = 0; m < kg; m++) begin
        logic [BPE*256-1:0] e;
        e = '0;
        for (int q = 0; q < Q; q++)
          for (int t = 0; t < 32; t++) begin
            int ix;
            ix = 0;
            for (int g = 2; g >= 0; g--)
              ix = ix * 3 + ((use_b ? wb[m * Q + q][blk * 96 + t * 3 + g] : wa[m * Q + q][blk * 96 + t * 3 + g]) + 1);
            e[(q * 32 + t) * 5 +: 5] = 5'(ix);
          end
        for (int b = 0; b < BPE; b++) wtile.push_back(e[b * 256 +: 256]);
      end
  endtask

  function automatic real silu(real x);
    return x / (1.0 + $exp(-x));
  endfunction

  function automatic real attn(int qv [HID], int h, int d, int nk, bit pre, int qt);
    real mx, den, num;
    mx = -1.0e30; den = 0; num = 0;
    for (int j = 0; j < nk; j++) begin
      real s; s = 0;
      for (int e = 0; e < DH; e++) s += real'(qv[h * DH + e] * (pre ? pk[j][h * DH + e] : dk[j][h * DH + e]));
      if (s * s_sc > mx) mx = s * s_sc;
    end
    for (int j = 0; j < nk; j++) begin
      real s, w; s = 0;
      for (int e = 0; e < DH; e++) s += real'(qv[h * DH + e] * (pre ? pk[j][h * DH + e] : dk[j][h * DH + e]));
      w = $exp(s * s_sc - mx);
      den += w; num += w * real'(pre ? pv[j][h * DH + d] : dv[j][h * DH + d]);
    end
    return num / den * v_sc;
  endfunction

  // ------------------------------------------------------------ the run
  initial begin
    cmd_t c;
    int v8 [8];
    int v32 [32];
    fork begin #5000000 $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    cmd_valid = 0; cmd = '0; cur_op = OP_LOAD_W;
    a_sc = real'(3277) / 65536.0; w_sc = 0.5;
    comb = real'((3277 * 32768) >> 16) / 65536.0;
    s_sc = real'(32'($rtoi(16777216.0 / (8.0 * real'(DH) * 127.0)))) / 16777216.0;
    v_sc = real'(655) / 65536.0;

    foreach (x1[t, k]) x1[t][k] = int'($urandom % 255) - 127;
    foreach (x2[k]) x2[k] = int'($urandom % 255) - 127;
    foreach (wa[n, k]) wa[n][k] = int'($urandom % 3) - 1;
    foreach (wb[n, k]) wb[n][k] = int'($urandom % 3) - 1;
    for (int d = 0; d < HID; d++) begin
      addb[d] = int'($urandom % 262144) - 131072;
      rx[d] = int'($urandom % 655360) - 327680;  rg[d] = int'($urandom % 131072);
      qx[d] = int'($urandom % 655360) - 327680;  ropx[d] = int'($urandom % 655360) - 327680;
      mulb[d] = int'($urandom % 262144) - 131072;
      dq[d] = int'($urandom % 255) - 127; lh[d] = int'($urandom % 255) - 127;
      for (int t = 0; t < NPRE; t++) begin
        pq[t][d] = int'($urandom % 255) - 127; pk[t][d] = int'($urandom % 255) - 127; pv[t][d] = int'($urandom % 255) - 127;
      end
      for (int j = 0; j < MDEC; j++) begin dk[j][d] = int'($urandom % 255) - 127; dv[j][d] = int'($urandom % 255) - 127; end
      for (int r = 0; r < NLM; r++) lw[r][d] = int'($urandom % 255) - 127;
    end
    repeat (3) @(negedge clk); rst_n = 1;

    // ---- 1. weight tile A, matmul 1 (overlapped with the load of tile B)
    make_tile(KG1, 0);
    c = mk(OP_LOAD_W); c.d = 32'(NBLK * KG1 * BPE); send(c);
    while (n_wld < 1) @(negedge clk);
    for (int t = 0; t < NTOK1; t++)
      for (int b = 0; b < NBLK * LB; b++) begin
        for (int l = 0; l < 32; l++) v32[l] = x1[t][b * 32 + l];
        opq.push_back(pack32(v32));
      end
    for (int t = 0; t < NTOK1; t++)
      for (int n = 0; n < KG1 * Q; n++) begin
        real acc; acc = 0;
        for (int k = 0; k < NBLK * 96; k++) acc += real'(x1[t][k] * wa[n][k]);
        efx.push_back(acc * comb); etol.push_back(0.001 * (acc < 0 ? -acc : acc) * comb + 1.0 / 65536.0);
      end
    is_i8 = 0;
    c = mk(OP_MATMUL); c.a = 16'(NBLK); c.b = 16'(KG1); c.c = 16'(NTOK1); c.swap = 1;
    c.scale_a = 3277; c.scale_b = 32768; send(c);
    make_tile(KG2, 1);
    c = mk(OP_LOAD_W); c.d = 32'(NBLK * KG2 * BPE); send(c);
    wait_done(1);
    chk(efx.size() == 0, "matmul 1: missing output beats");

    // ---- 2. matmul 2 with SiLU into the hidden buffer (swap waits for tile B)
    for (int b = 0; b < NBLK * LB; b++) begin
      for (int l = 0; l < 32; l++) v32[l] = x2[b * 32 + l];
      opq.push_back(pack32(v32));
    end
    for (int n = 0; n < KG2 * Q; n++) begin
      real acc; acc = 0;
      for (int k = 0; k < NBLK * 96; k++) acc += real'(x2[k] * wb[n][k]);
      silu_ref[n] = silu(acc * comb);
    end
    c = mk(OP_MATMUL); c.a = 16'(NBLK); c.b = 16'(KG2); c.c = 1; c.swap = 1; c.silu = 1; c.dst = LOC_HIDDEN;
    c.scale_a = 3277; c.scale_b = 32768; send(c);
    n_silu_beats += KG2 * Q / 8; n_hid_dst++;
    wait_done(2);

    // ---- 3. residual add: hidden + DRAM
    for (int b = 0; b < HID / 8; b++) begin
      for (int l = 0; l < 8; l++) v8[l] = addb[b * 8 + l];
      opq.push_back(pack8(v8));
    end
    for (int d = 0; d < HID; d++) begin
      efx.push_back(silu_ref[d] + real'(addb[d]) / 65536.0);
      etol.push_back(0.005 * (silu_ref[d] < 0 ? -silu_ref[d] : silu_ref[d]) + 1.0 / 512);
    end
    c = mk(OP_ADD); c.a = 16'(HID / 8); c.src = LOC_HIDDEN; send(c);
    n_hid_src++;
    wait_done(3);
    chk(efx.size() == 0, "add: missing output beats");

    // ---- 4. RMSNorm + quantization, then plain quantization
    begin
      real ss, rms, am, y [HID];
      ss = 0; am = 0;
      for (int d = 0; d < HID; d++) ss += (real'(rx[d]) / 65536.0) ** 2;
      rms = $sqrt(ss / real'(HID) + 1.0 / 65536.0);
      for (int d = 0; d < HID; d++) begin
        y[d] = real'(rx[d]) / 65536.0 * real'(rg[d]) / 65536.0 / rms;
        if ((y[d] < 0 ? -y[d] : y[d]) > am) am = (y[d] < 0 ? -y[d] : y[d]);
      end
      for (int d = 0; d < HID; d++) ei8.push_back($rtoi(127.0 * y[d] / am + (y[d] >= 0 ? 0.5 : -0.5)));
      for (int b = 0; b < HID / 8; b++) begin
        for (int l = 0; l < 8; l++) v8[l] = rx[b * 8 + l];
        opq.push_back(pack8(v8));
        for (int l = 0; l < 8; l++) v8[l] = rg[b * 8 + l];
        opq.push_back(pack8(v8));
      end
      is_i8 = 1;
      c = mk(OP_RMSNORM_Q); c.a = 16'(HID / 32); send(c);
      wait_done(4);
      chk(ei8.size() == 0, "rmsnorm: missing output beats");
      chk(real'(last_scale) / 65536.0 - am / 127.0 < 0.01 * am / 127.0 + 1.0e-4 &&
          am / 127.0 - real'(last_scale) / 65536.0 < 0.01 * am / 127.0 + 1.0e-4,
          $sformatf("rmsnorm scale %f exp %f", real'(last_scale) / 65536.0, am / 127.0));
    end
    begin
      int am;
      am = 0;
      for (int d = 0; d < HID; d++) if ((qx[d] < 0 ? -qx[d] : qx[d]) > am) am = (qx[d] < 0 ? -qx[d] : qx[d]);
      for (int d = 0; d < HID; d++) ei8.push_back($rtoi(127.0 * real'(qx[d]) / real'(am) + (qx[d] >= 0 ? 0.5 : -0.5)));
      for (int b = 0; b < HID / 8; b++) begin
        for (int l = 0; l < 8; l++) v8[l] = qx[b * 8 + l];
        opq.push_back(pack8(v8));
      end
      c = mk(OP_QUANT); c.a = 16'(HID / 32); send(c);
      wait_done(5);
      chk(ei8.size() == 0, "quant: missing output beats");
      chk(real'(last_scale) - real'(am) / 127.0 < 1.5 && real'(am) / 127.0 - real'(last_scale) < 1.5, "quant scale");
      is_i8 = 0;
    end

    // ---- 5. RoPE into the hidden buffer, then hidden * DRAM
    for (int b = 0; b < HID / 8; b++) begin
      for (int l = 0; l < 8; l++) v8[l] = ropx[b * 8 + l];
      opq.push_back(pack8(v8));
    end
    c = mk(OP_ROPE); c.a = 16'(HID / 8); c.b = 16'(POS); c.dst = LOC_HIDDEN; send(c);
    n_hid_dst++;
    wait_done(6);
    for (int b = 0; b < HID / 8; b++) begin
      for (int l = 0; l < 8; l++) v8[l] = mulb[b * 8 + l];
      opq.push_back(pack8(v8));
    end
    for (int d = 0; d < HID; d += 2) begin
      real x0, x1v, th, r0, r1, m0, m1;
      x0 = real'(ropx[d]) / 65536.0; x1v = real'(ropx[d + 1]) / 65536.0;
      th = real'(POS) * (10000.0 ** (-2.0 * real'((d % DH) / 2) / real'(DH)));
      r0 = x0 * $cos(th) - x1v * $sin(th);
      r1 = x0 * $sin(th) + x1v * $cos(th);
      m0 = real'(mulb[d]) / 65536.0; m1 = real'(mulb[d + 1]) / 65536.0;
      efx.push_back(r0 * m0); etol.push_back((1.0 / 1024 + 0.001 * 10.0) * (m0 < 0 ? -m0 : m0) + 1.0 / 32768);
      efx.push_back(r1 * m1); etol.push_back((1.0 / 1024 + 0.001 * 10.0) * (m1 < 0 ? -m1 : m1) + 1.0 / 32768);
    end
    c = mk(OP_MUL); c.a = 16'(HID / 8); c.src = LOC_HIDDEN; send(c);
    n_hid_src++;
    wait_done(7);
    chk(efx.size() == 0, "mul: missing output beats");

    // ---- 6. prefill attention
    for (int t = 0; t < NPRE; t++) begin
      pre_beat[t] = 0;
      for (int d = 0; d < HID; d++) pre_ref[t][d] = attn(pq[t], d / DH, d % DH, t + 1, 1, t);
    end
    c = mk(OP_PREFILL_AT); c.a = 16'(NPRE);
    c.scale_a = 32'($rtoi(s_sc * 16777216.0)); c.scale_b = 655; send(c);
    wait_done(8);
    for (int t = 0; t < NPRE; t++) chk(pre_beat[t] == HID / 8, $sformatf("prefill token %0d: %0d beats", t, pre_beat[t]));
    chk(attn_steps == 32'(NPRE * NPRE / (2 * P) + NPRE / 2), $sformatf("prefill steps %0d", attn_steps));
    chk(attn_kv_loads == attn_steps, "prefill kv loads != steps");
    chk(attn_q_loads == 32'(NPRE), "prefill q loads");

    // ---- 7. decoding attention
    for (int d = 0; d < HID; d++) begin
      efx.push_back(attn(dq, d / DH, d % DH, MDEC, 0, 0)); etol.push_back(0.02 * 127 * v_sc);
    end
    c = mk(OP_DECODE_AT); c.a = 16'(MDEC);
    c.scale_a = 32'($rtoi(s_sc * 16777216.0)); c.scale_b = 655; send(c);
    wait_done(9);
    chk(efx.size() == 0, "decode: missing output beats");

    // ---- 8. LM head
    for (int r = 0; r < (NLM + 7) / 8 * 8; r++) begin
      real s; s = 0;
      if (r < NLM) for (int d = 0; d < HID; d++) s += real'(lh[d] * lw[r][d]);
      efx.push_back(s * s_sc); etol.push_back(r < NLM ? 1.0 / 8192 : 1.0e9);
    end
    c = mk(OP_LM_HEAD); c.d = NLM; c.scale_a = 32'($rtoi(s_sc * 16777216.0)); send(c);
    wait_done(10);
    chk(efx.size() == 0, "lm head: missing output beats");

    // ---- mechanism counters
    $display("overlap=%0d swap_wait=%0d silu_beats=%0d hid_src=%0d hid_dst=%0d i8_beats=%0d steps=%0d dec_beats=%0d logits=%0d wr_stalls=%0d rd_stalls=%0d",
             overlap_cycles, swap_wait_cycles, n_silu_beats, n_hid_src, n_hid_dst, n_i8_beats, attn_steps,
             n_dec_out, n_logits, wr_stalls, rd_stalls);
    chk(overlap_cycles > 0, "weight load never overlapped a matmul");
    chk(swap_wait_cycles > 0, "bank swap never waited for a load");
    chk(n_silu_beats > 0 && n_hid_src > 0 && n_hid_dst > 0 && n_i8_beats > 0, "a datapath mode never ran");
    chk(attn_steps > 0 && n_dec_out > 0 && n_logits > 0, "an attention mode never ran");
    chk(wr_stalls > 0 && rd_stalls > 0, "no back-pressure seen");
    for (int o = 0; o < 10; o++) chk(op_count[o] != 0, $sformatf("op %0d never issued", o));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
