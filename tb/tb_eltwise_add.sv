// tb_eltwise_add: element-wise addition of paired Q16.16 beats vs real arithmetic.
// Random operands (including values that overflow Q16.16, to exercise
// saturation) are streamed with random input gaps and output back-pressure.
// Each lane is compared with the saturated reference a + b;
// beat counts and in_last -> out_last alignment are checked, and a run
// without back-pressure must sustain one beat per cycle.
module tb_eltwise_add;
  localparam int L = 8, NB = 400;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  logic signed [31:0] a_data [L], b_data [L], out_data [L];
  int checks = 0, failures = 0, nout = 0;
  real eq [$];
  bit lq [$];
  bit bp;
  longint t0, t1;

  eltwise_add #(.LANES(L)) dut (.*);

  function automatic real sat(real v);
    if (v > 32767.0 + 65535.0 / 65536.0) return 32767.0 + 65535.0 / 65536.0;
    if (v < -32768.0) return -32768.0;
    return v;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      t1 = $time / 10;
      for (int l = 0; l < L; l++) begin
        real e, g;
        e = eq.pop_front();
        g = real'(out_data[l]) / 65536.0;
        checks++;
        if (g - e > 1.0e-9 || e - g > 1.0e-9) begin failures++; if (failures < 8) $display("lane %0d got %f exp %f", l, g, e); end
      end
      checks++;
      if (out_last != lq.pop_front()) begin failures++; $display("out_last misaligned"); end
      nout++;
    end
  end
  always @(negedge clk) out_ready = bp ? ($urandom % 3 != 0) : 1'b1;

  initial begin
    fork begin #2000000 $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    in_valid = 0; in_last = 0; bp = 0;
    for (int l = 0; l < L; l++) begin a_data[l] = 0; b_data[l] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      bp = (run == 1);
      nout = 0;
      @(negedge clk);
      t0 = $time / 10;
      for (int b = 0; b < NB; b++) begin
        bit acc;
        if (bp) while ($urandom % 4 == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1;
        in_last = (b % 16 == 15);
        lq.push_back(in_last);
        for (int l = 0; l < L; l++) begin
          int a, c;
          a = (b % 5 == 0) ? int'($urandom) : int'($urandom % 2000000000) - 1000000000;
          c = (b % 5 == 0) ? int'($urandom) : int'($urandom % 2000000000) - 1000000000;
          a_data[l] = a; b_data[l] = c;
          eq.push_back(sat((real'(a) + real'(c)) / 65536.0));
        end
        do begin #1 acc = in_ready; @(posedge clk); @(negedge clk); end while (!acc);
      end
      in_valid = 0;
      repeat (20) @(negedge clk);
      checks++;
      if (nout != NB) begin failures++; $display("run %0d: %0d beats out", run, nout); end
      if (run == 0) begin
        checks++;
        if (t1 - t0 != NB) begin failures++; $display("throughput: %0d cycles for %0d beats", t1 - t0, NB); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
