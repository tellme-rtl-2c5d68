// tb_rope_unit: rotary embedding against real cos/sin.
// Reduced sizes (2 heads of 16, 8 lanes). Random Q16.16 vectors for several
// tokens starting at random positions (up to 2047) are streamed; each output
// pair is compared with (x0 cos t - x1 sin t, x0 sin t + x1 cos t),
// t = pos * 10000^(-2i/16), pos counting up per token. Tolerance 2^-10
// absolute + 0.1 % of |x|. The first run has no back-pressure and must move
// one beat per cycle (beats + 1 pipeline cycle); later runs use random
// back-pressure and the beat count is checked.
module tb_rope_unit;
  localparam int L = 8, HD = 16, NH = 2, TB = HD * NH / L;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  logic [15:0] cfg_pos0;
  logic signed [31:0] in_data [L], out_data [L];
  int checks = 0, failures = 0, nout = 0;
  real xq [$];
  int pq [$], iq [$];
  bit bp;
  longint t0, t1;

  rope_unit #(.LANES(L), .HEAD_DIM(HD), .HEADS(NH)) dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      t1 = $time / 10;
      for (int k = 0; k < L / 2; k++) begin
        real x0, x1, th, e0, e1, g0, g1, tol;
        int pos, i;
        x0 = xq.pop_front(); x1 = xq.pop_front(); pos = pq.pop_front(); i = iq.pop_front();
        th = real'(pos) * (10000.0 ** (-2.0 * real'(i) / real'(HD)));
        e0 = x0 * $cos(th) - x1 * $sin(th);
        e1 = x0 * $sin(th) + x1 * $cos(th);
        g0 = real'(out_data[2 * k]) / 65536.0;
        g1 = real'(out_data[2 * k + 1]) / 65536.0;
        tol = 1.0 / 1024 + 0.001 * ((x0 < 0 ? -x0 : x0) + (x1 < 0 ? -x1 : x1));
        checks += 2;
        if (g0 - e0 > tol || e0 - g0 > tol) begin failures++; if (failures < 8) $display("pos %0d i %0d x' got %f exp %f", pos, i, g0, e0); end
        if (g1 - e1 > tol || e1 - g1 > tol) begin failures++; if (failures < 8) $display("pos %0d i %0d y' got %f exp %f", pos, i, g1, e1); end
      end
      nout++;
    end
  end
  always @(negedge clk) out_ready = bp ? ($urandom % 3 != 0) : 1'b1;

  initial begin
    fork begin #2000000 $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    start = 0; in_valid = 0; in_last = 0; cfg_pos0 = 0; bp = 0;
    for (int l = 0; l < L; l++) in_data[l] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 6; run++) begin
      int ntok, p0, nb;
      ntok = 1 + $urandom % 4;
      p0 = (run == 1) ? 2047 - ntok : $urandom % 2000;
      bp = (run != 0);
      nout = 0;
      @(negedge clk); cfg_pos0 = 16'(p0); start = 1;
      @(negedge clk); start = 0;
      t0 = $time / 10;
      for (int t = 0; t < ntok; t++)
        for (int b = 0; b < TB; b++) begin
          bit acc;
          in_valid = 1;
          for (int l = 0; l < L; l++) begin
            int v;
            v = int'($urandom % 1310721) - 655360;       // +-10
            in_data[l] = v;
            xq.push_back(real'(v) / 65536.0);
          end
          for (int k = 0; k < L / 2; k++) begin
            pq.push_back(p0 + t);
            iq.push_back(((b * L) % HD) / 2 + k);
          end
          do begin #1 acc = in_ready; @(posedge clk); @(negedge clk); end while (!acc);  // #1: after out_ready settles
        end
      in_valid = 0;
      repeat (10) @(negedge clk);
      nb = ntok * TB;
      checks++;
      if (nout != nb) begin failures++; $display("run %0d: %0d beats out, expected %0d", run, nout, nb); end
      if (run == 0) begin
        checks++;
        if (t1 - t0 != nb) begin failures++; $display("throughput: last output after %0d cycles, expected %0d", t1 - t0, nb); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
