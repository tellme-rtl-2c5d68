// tb_quant_unit: absmax int8 quantizer against a real-valued reference.
// Several random vectors (lengths 1..8 rows of 32) are streamed in; every
// output is compared with round(127 * x / max|x|) (+-1 LSB for the fixed-point
// reciprocal), scale with max|x|/127, and beat/row counts with the
// configuration. The first vector runs without back-pressure and its
// start-to-done time is checked against the two-pass schedule
// (4R input beats + 1 reciprocal cycle + R output beats + 1 => 5R+2 edges).
// Later vectors use random output back-pressure.
module tb_quant_unit;
  localparam int IL = 8, OL = 32, ML = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, in_valid, in_ready, out_valid, out_ready, out_last;
  logic [3:0] cfg_rows;
  logic signed [31:0] in_data [IL];
  logic signed [7:0]  out_data [OL];
  logic [31:0] scale, absmax;
  int checks = 0, failures = 0, orows;
  longint t_start, t_done;   // in clock periods ($time / 10), race-free
  int xs [ML];
  real am;
  bit bp;

  quant_unit #(.MAX_LEN(ML), .IN_LANES(IL), .OUT_LANES(OL)) dut (.*);

  always @(posedge clk) if (rst_n && done) t_done = $time / 10;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      for (int l = 0; l < OL; l++) begin
        real e; int ei;
        e = 127.0 * real'(xs[orows * OL + l]) / am;
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
    for (int l = 0; l < IL; l++) in_data[l] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int v = 0; v < 12; v++) begin
      int r, mag;
      r = (v == 0) ? 3 : 1 + $urandom % 8;
      bp = (v != 0);
      mag = (v % 3 == 0) ? 50 * 65536 : (v % 3 == 1) ? 65536 : 3000;
      am = 0;
      for (int i = 0; i < r * OL; i++) begin
        xs[i] = int'($urandom % (2 * mag + 1)) - mag;
        if ((xs[i] < 0 ? -xs[i] : xs[i]) > am) am = (xs[i] < 0 ? -xs[i] : xs[i]);
      end
      orows = 0;
      @(negedge clk); cfg_rows = 4'(r); start = 1;
      @(posedge clk); t_start = $time / 10; t_done = -1;
      @(negedge clk); start = 0;
      for (int b = 0; b < r * OL / IL; b++) begin
        bit acc;
        in_valid = 1;
        for (int l = 0; l < IL; l++) in_data[l] = xs[b * IL + l];
        do begin acc = in_ready; @(posedge clk); @(negedge clk); end while (!acc);
      end
      in_valid = 0;
      while (busy) @(negedge clk);
      @(negedge clk);
      checks++;
      if (orows != r) begin failures++; $display("vector %0d: %0d rows out, expected %0d", v, orows, r); end
      checks++;
      if (absmax != 32'($rtoi(am))) begin failures++; $display("absmax %0d exp %0f", absmax, am); end
      checks++;
      if ($itor(scale) - am / 127.0 > 1.5 || am / 127.0 - $itor(scale) > 1.5) begin
        failures++; $display("scale %0d exp %f", scale, am / 127.0);
      end
      if (v == 0) begin
        checks++;
        if (t_done - t_start != 5 * r + 2) begin
          failures++; $display("latency %0d expected %0d", t_done - t_start, 5 * r + 2);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
