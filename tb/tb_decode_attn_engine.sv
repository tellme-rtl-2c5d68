// tb_decode_attn_engine: decoding attention and LM-head mode against
// floating-point references (reduced sizes: H=2 heads of DH=16, 8 lanes,
// S_MAX=16).
// Attention: one query against a random K/V cache of M tokens (M = 10 and 16,
// the buffer limit); every output is compared with
// sum_j softmax_j(q.k_j * s_scale) v_j * v_scale (2 % of 127*v_scale).
// The requests must follow the decoupled order per head: Q, K (all M rows),
// then V. LM head: R = 13 weight rows (not a multiple of the 8 logits per
// beat); each logit must equal (h . w_r) * s_scale within 2^-14, the last
// beat is padded. With the DRAM model never stalling, LM-head throughput
// must be one weight beat per cycle: total cycles <= R*HIDDEN/LANES + 12.
module tb_decode_attn_engine;
  localparam int H = 2, DH = 16, L = 8, OL = 8, HID = H * DH, SM = 16, R = 13;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, cfg_lm_head, busy, done, rd_req_valid, rd_req_ready, rd_valid, rd_ready;
  logic out_valid, out_ready, out_last;
  logic [$clog2(SM + 1)-1:0] cfg_m;
  logic [31:0] cfg_rows, cfg_s_scale, cfg_v_scale;
  logic [1:0] rd_req_kind;
  logic [7:0] rd_req_head;
  logic signed [7:0] rd_data [L];
  logic signed [31:0] out_data [OL];
  int checks = 0, failures = 0;
  int qv [HID], km [SM][HID], vm [SM][HID], wm [R][HID];
  int beat_q [$][L];
  int nbeat, m, phase, lasthead;
  bit stall;
  real s_sc, v_sc;
  longint t0, t1;

  decode_attn_engine #(.H(H), .DH(DH), .LANES(L), .OUT_LANES(OL), .S_MAX(SM)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("%s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (rd_req_valid && rd_req_ready) begin
      int hh, b[L];
      hh = int'(rd_req_head);
      case (rd_req_kind)
        2'd0: begin
          if (!cfg_lm_head) chk(phase == 0 || phase == 3, "Q request out of order");
          phase = 1;
          if (cfg_lm_head)
            for (int i = 0; i < HID / L; i++) begin for (int l = 0; l < L; l++) b[l] = qv[i * L + l]; beat_q.push_back(b); end
          else
            for (int i = 0; i < DH / L; i++) begin for (int l = 0; l < L; l++) b[l] = qv[hh * DH + i * L + l]; beat_q.push_back(b); end
        end
        2'd1: begin
          chk(phase == 1, "K request out of order"); phase = 2;
          for (int j = 0; j < m; j++) for (int i = 0; i < DH / L; i++) begin
            for (int l = 0; l < L; l++) b[l] = km[j][hh * DH + i * L + l]; beat_q.push_back(b); end
        end
        2'd2: begin
          chk(phase == 2, "V request out of order"); phase = 3;
          for (int j = 0; j < m; j++) for (int i = 0; i < DH / L; i++) begin
            for (int l = 0; l < L; l++) b[l] = vm[j][hh * DH + i * L + l]; beat_q.push_back(b); end
        end
        default: begin
          for (int r = 0; r < R; r++) for (int i = 0; i < HID / L; i++) begin
            for (int l = 0; l < L; l++) b[l] = wm[r][i * L + l]; beat_q.push_back(b); end
        end
      endcase
    end
    if (rd_valid && rd_ready) void'(beat_q.pop_front());
  end
  always @(negedge clk) begin
    rd_req_ready = !stall || ($urandom % 4 != 0);
    out_ready = !stall || ($urandom % 4 != 0);
    rd_valid = (beat_q.size() > 0) && (!stall || $urandom % 5 != 0);
    for (int l = 0; l < L; l++) rd_data[l] = (beat_q.size() > 0) ? 8'(beat_q[0][l]) : 8'd0;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      t1 = $time / 10;
      for (int l = 0; l < OL; l++) begin
        real e, g;
        g = real'(out_data[l]) / 65536.0;
        if (cfg_lm_head) begin
          int r; r = nbeat * OL + l;
          if (r < R) begin
            real s; s = 0;
            for (int d = 0; d < HID; d++) s += real'(qv[d] * wm[r][d]);
            e = s * s_sc;
            chk(g - e < 1.0 / 16384 && e - g < 1.0 / 16384, $sformatf("logit %0d got %f exp %f", r, g, e));
          end
        end else begin
          int h, d0;
          real mx, den, num;
          h = (nbeat * OL) / DH; d0 = (nbeat * OL) % DH;
          mx = -1.0e30; den = 0; num = 0;
          for (int j = 0; j < m; j++) begin
            real s; s = 0;
            for (int d = 0; d < DH; d++) s += real'(qv[h * DH + d] * km[j][h * DH + d]);
            if (s * s_sc > mx) mx = s * s_sc;
          end
          for (int j = 0; j < m; j++) begin
            real s, w; s = 0;
            for (int d = 0; d < DH; d++) s += real'(qv[h * DH + d] * km[j][h * DH + d]);
            w = $exp(s * s_sc - mx); den += w; num += w * real'(vm[j][h * DH + d0 + l]);
          end
          e = num / den * v_sc;
          chk(g - e < 0.02 * 127 * v_sc && e - g < 0.02 * 127 * v_sc,
              $sformatf("M=%0d head %0d dim %0d got %f exp %f", m, h, d0 + l, g, e));
        end
      end
      nbeat++;
    end
  end

  initial begin
    fork begin #20000000 $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    start = 0; cfg_lm_head = 0; cfg_m = 0; cfg_rows = 0; stall = 1;
    s_sc = 1.0 / 8000.0; v_sc = 0.01;
    cfg_s_scale = 32'($rtoi(s_sc * 16777216.0)); s_sc = real'(cfg_s_scale) / 16777216.0;
    cfg_v_scale = 32'($rtoi(v_sc * 65536.0));    v_sc = real'(cfg_v_scale) / 65536.0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      for (int d = 0; d < HID; d++) begin
        qv[d] = int'($urandom % 255) - 127;
        for (int j = 0; j < SM; j++) begin km[j][d] = int'($urandom % 255) - 127; vm[j][d] = int'($urandom % 255) - 127; end
        for (int r = 0; r < R; r++) wm[r][d] = int'($urandom % 255) - 127;
      end
      m = (run == 0) ? 10 : SM;
      nbeat = 0; phase = 0;
      stall = (run != 2);
      @(negedge clk);
      cfg_lm_head = (run == 2); cfg_m = ($bits(cfg_m))'(m); cfg_rows = R; start = 1;
      @(negedge clk); start = 0; t0 = $time / 10;
      while (busy) @(negedge clk);
      repeat (2) @(negedge clk);
      if (run < 2) chk(nbeat == HID / OL, $sformatf("attention: %0d output beats", nbeat));
      else begin
        chk(nbeat == (R + OL - 1) / OL, $sformatf("LM head: %0d output beats", nbeat));
        chk(t1 - t0 <= R * HID / L + 12, $sformatf("LM head took %0d cycles for %0d beats", t1 - t0, R * HID / L));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
