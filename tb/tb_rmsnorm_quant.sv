// tb_rmsnorm_quant: fused RMSNorm + absmax quantizer against real arithmetic.
// Random x and gamma vectors (1..8 rows of 32) are streamed in as paired
// beats. Each int8 output is compared with the unfused reference
// round(127 * y / max|y|), y = gamma * x / rms(x) (+-1 LSB), and the
// output scale with max|y| / 127 (1 % tolerance). Exactly one done pulse
// per vector, and row counts, are checked; later vectors use output
// back-pressure. The two-pass structure means the output must start only
// after all input beats: checked by counting input beats at the first output.
module tb_rmsnorm_quant;
  localparam int IL = 8, OL = 32, ML = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, in_valid, in_ready, out_valid, out_ready, out_last;
  logic [3:0] cfg_rows;
  logic signed [31:0] x_data [IL], g_data [IL];
  logic signed [7:0]  out_data [OL];
  logic [31:0] scale;
  int nin, ndone;
  real ys [ML];
  int checks = 0, failures = 0, orows;
  longint t_start, t_done;   // in clock periods ($time / 10), race-free
  int xs [ML], gs [ML];
  real am;
  bit bp;

  rmsnorm_quant #(.MAX_LEN(ML), .IN_LANES(IL), .OUT_LANES(OL)) dut (.*);

  always @(posedge clk) if (rst_n && done) begin t_done = $time / 10; ndone++; end
  always @(posedge clk) if (rst_n && in_valid && in_ready) nin++;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      if (orows == 0) begin
        checks++;
        if (nin != int'(cfg_rows) * OL / IL) begin failures++; $display("output before pass 1 ended"); end
      end
      for (int l = 0; l < OL; l++) begin
        real e; int ei;
        e = 127.0 * ys[orows * OL + l] / am;
        ei = $rtoi(e + (e >= 0 ? 0.5 : -0.5));
        checks++;
        if (int'(out_data[l]) - ei > 1 || ei - int'(out_data[l]) > 1) begin
          failures++;
          if (failures < 8) $display("row %0d lane %0d got %0d exp %0d", orows, l, out_data[l], ei);
        end
      end
      checks++;
      if (out_last != (orows == int'(cfg_rows) - 1)) begin failures++; $display("out_last wrong"); end
      orows++;
    end
  end
  always @(negedge clk) out_ready = bp ? ($urandom % 3 != 0) : 1'b1;

  initial begin
    fork begin #2000000 $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    start = 0; in_valid = 0; cfg_rows = 0; bp = 0;
    for (int l = 0; l < IL; l++) begin x_data[l] = 0; g_data[l] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int v = 0; v < 12; v++) begin
      int r, mag;
      r = (v == 0) ? 3 : 1 + $urandom % 8;
      bp = (v != 0);
      mag = (v % 3 == 0) ? 20 * 65536 : (v % 3 == 1) ? 65536 : 3000;
      begin
        real ss, rms;
        ss = 0; am = 0;
        for (int i = 0; i < r * OL; i++) begin
          xs[i] = int'($urandom % (2 * mag + 1)) - mag;
          gs[i] = int'($urandom % 131072);            // gamma in [0, 2)
          ss += (real'(xs[i]) / 65536.0) ** 2;
        end
        rms = $sqrt(ss / real'(r * OL) + 1.0 / 65536.0);
        for (int i = 0; i < r * OL; i++) begin
          ys[i] = real'(xs[i]) / 65536.0 * real'(gs[i]) / 65536.0 / rms;
          if ((ys[i] < 0 ? -ys[i] : ys[i]) > am) am = (ys[i] < 0 ? -ys[i] : ys[i]);
        end
      end
      nin = 0; ndone = 0;
      orows = 0;
      @(negedge clk); cfg_rows = 4'(r); start = 1;
      @(posedge clk); t_start = $time / 10; t_done = -1;
      @(negedge clk); start = 0;
      for (int b = 0; b < r * OL / IL; b++) begin
        bit acc;
        in_valid = 1;
        for (int l = 0; l < IL; l++) begin x_data[l] = xs[b * IL + l]; g_data[l] = gs[b * IL + l]; end
        do begin acc = in_ready; @(posedge clk); @(negedge clk); end while (!acc);
      end
      in_valid = 0;
      while (busy) @(negedge clk);
      @(negedge clk);
      checks++;
      if (orows != r) begin failures++; $display("vector %0d: %0d rows out, expected %0d", v, orows, r); end
      checks++;
      if (ndone != 1) begin failures++; $display("%0d done pulses", ndone); end
      begin
        real gsc, esc;
        gsc = real'(scale) / 65536.0; esc = am / 127.0;
        checks++;
        if (gsc - esc > 0.01 * esc + 2.0 / 65536.0 || esc - gsc > 0.01 * esc + 2.0 / 65536.0) begin
          failures++; $display("scale %f exp %f", gsc, esc);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
