// tb_reverse_attn_engine: prefill attention (reverse scheduler + fused QKV
// unit) against a floating-point causal softmax attention.
// Reduced sizes: P=2 query slots, H=2 heads of DH=16, 8-lane beats. A DRAM
// model answers Q and KV requests in order with random stalls. For N = 8
// (P | N) and N = 7 every output token is compared with
//   out_q,h = sum_{j<=q} softmax_j(q.k_j * s_scale) * v_j * v_scale
// (tolerance 2 % of max|v|*v_scale, covering the exp approximation and
// Q16.16 rounding). Also checked: each token emitted exactly once, the
// steps counter = N^2/(2P) + N/2 for P | N (the reverse schedule), kv_loads
// = steps (one k/v token per iteration), q_loads = N (each query once), and
// that no request ever asks for a key after the query it is paired with
// (the reverse order needs no mask).
module tb_reverse_attn_engine;
  localparam int P = 2, H = 2, DH = 16, L = 8, OL = 8, HID = H * DH, NMAX = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, rd_req_valid, rd_req_ready, rd_req_kv, rd_valid, rd_ready;
  logic out_valid, out_ready, out_last;
  logic [15:0] cfg_n, rd_req_token, out_token;
  logic [31:0] cfg_s_scale, cfg_v_scale, steps, q_loads, kv_loads;
  logic signed [7:0] rd_data [L];
  logic signed [31:0] out_data [OL];
  int checks = 0, failures = 0;
  int qm [NMAX][HID], km [NMAX][HID], vm [NMAX][HID];
  int beat_q [$][L];
  int seen [NMAX];
  int obeat;
  real s_sc, v_sc;

  reverse_attn_engine #(.P(P), .H(H), .DH(DH), .LANES(L), .OUT_LANES(OL)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("%s", what); end
  endtask

  // DRAM model: queue the beats of each accepted request
  always @(posedge clk) if (rst_n) begin
    if (rd_req_valid && rd_req_ready) begin
      int t, b[L];
      t = int'(rd_req_token);
      if (!rd_req_kv) begin
        for (int i = 0; i < HID / L; i++) begin
          for (int l = 0; l < L; l++) b[l] = qm[t][i * L + l];
          beat_q.push_back(b);
        end
      end else begin
        for (int h = 0; h < H; h++) begin
          for (int i = 0; i < DH / L; i++) begin
            for (int l = 0; l < L; l++) b[l] = km[t][h * DH + i * L + l];
            beat_q.push_back(b);
          end
          for (int i = 0; i < DH / L; i++) begin
            for (int l = 0; l < L; l++) b[l] = vm[t][h * DH + i * L + l];
            beat_q.push_back(b);
          end
        end
      end
    end
    if (rd_valid && rd_ready) void'(beat_q.pop_front());
  end
  always @(negedge clk) begin
    rd_req_ready = ($urandom % 4 != 0);
    out_ready = ($urandom % 4 != 0);
    rd_valid = (beat_q.size() > 0) && ($urandom % 5 != 0);
    for (int l = 0; l < L; l++) rd_data[l] = (beat_q.size() > 0) ? 8'(beat_q[0][l]) : 8'd0;
  end

  // output checker
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      int t, h, d0;
      t = int'(out_token);
      h = (obeat * OL) / DH;
      d0 = (obeat * OL) % DH;
      for (int l = 0; l < OL; l++) begin
        real mx, den, num, e, g, vmax;
        mx = -1.0e30; den = 0; num = 0; vmax = 0;
        for (int j = 0; j <= t; j++) begin
          real s; s = 0;
          for (int d = 0; d < DH; d++) s += real'(qm[t][h * DH + d] * km[j][h * DH + d]);
          s *= s_sc;
          if (s > mx) mx = s;
        end
        for (int j = 0; j <= t; j++) begin
          real s, w; s = 0;
          for (int d = 0; d < DH; d++) s += real'(qm[t][h * DH + d] * km[j][h * DH + d]);
          w = $exp(s * s_sc - mx);
          den += w; num += w * real'(vm[j][h * DH + d0 + l]);
          if ((vm[j][h * DH + d0 + l] < 0 ? -vm[j][h * DH + d0 + l] : vm[j][h * DH + d0 + l]) > vmax)
            vmax = (vm[j][h * DH + d0 + l] < 0 ? -vm[j][h * DH + d0 + l] : vm[j][h * DH + d0 + l]);
        end
        e = num / den * v_sc;
        g = real'(out_data[l]) / 65536.0;
        chk((g - e < 0.02 * 127 * v_sc) && (e - g < 0.02 * 127 * v_sc),
            $sformatf("token %0d head %0d dim %0d got %f exp %f", t, h, d0 + l, g, e));
      end
      obeat++;
      if (obeat == HID / OL) begin obeat = 0; seen[t]++; end
    end
  end

  int last_q;
  always @(posedge clk) if (rst_n && rd_req_valid && rd_req_ready) begin
    if (!rd_req_kv) last_q = int'(rd_req_token);
  end

  initial begin
    fork begin #20000000 $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    start = 0; cfg_n = 0;
    s_sc = 1.0 / 8000.0; v_sc = 0.01;
    cfg_s_scale = 32'($rtoi(s_sc * 16777216.0)); s_sc = real'(cfg_s_scale) / 16777216.0;
    cfg_v_scale = 32'($rtoi(v_sc * 65536.0));    v_sc = real'(cfg_v_scale) / 65536.0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      int n;
      n = (run == 0) ? 8 : 7;
      for (int t = 0; t < NMAX; t++) begin
        seen[t] = 0;
        for (int d = 0; d < HID; d++) begin
          qm[t][d] = int'($urandom % 255) - 127;
          km[t][d] = int'($urandom % 255) - 127;
          vm[t][d] = int'($urandom % 255) - 127;
        end
      end
      obeat = 0;
      @(negedge clk); cfg_n = 16'(n); start = 1;
      @(negedge clk); start = 0;
      while (busy) @(negedge clk);
      repeat (2) @(negedge clk);
      for (int t = 0; t < n; t++) chk(seen[t] == 1, $sformatf("N=%0d token %0d emitted %0d times", n, t, seen[t]));
      if (n % P == 0) chk(steps == 32'(n * n / (2 * P) + n / 2), $sformatf("steps %0d", steps));
      chk(kv_loads == steps, $sformatf("kv_loads %0d steps %0d", kv_loads, steps));
      chk(q_loads == 32'(n), $sformatf("q_loads %0d", q_loads));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
