// tb_dequant_silu: dequantization and fused SiLU against real arithmetic.
// Random int32 accumulators and scales; the reference computes
// acc * act_scale * w_scale (and x * sigmoid(x)) in floating point. The
// tolerance covers the Q16.16 rounding and the exponential approximation
// (0.5 % relative + 2^-10 absolute). Back-pressure is applied on the output
// and the number of beats in and out is compared.
module tb_dequant_silu;
  localparam int L = 8, NB = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [31:0] act_scale, w_scale;
  logic silu_en, in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  logic signed [31:0] in_data [L], out_data [L];
  real exp_q [$];
  int checks = 0, failures = 0, nin = 0, nout = 0;

  dequant_silu #(.LANES(L)) dut (.clk, .rst_n, .act_scale, .w_scale, .silu_en, .in_valid, .in_ready,
    .in_data, .in_last, .out_valid, .out_ready, .out_data, .out_last);

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      nout++;
      for (int l = 0; l < L; l++) begin
        real e, g, tol;
        e = exp_q.pop_front();
        g = real'(out_data[l]) / 65536.0;
        tol = 0.005 * (e < 0 ? -e : e) + 1.0 / 1024;  // sigmoid has 2^-16 resolution: abs error grows with |x|
        checks++;
        if (g - e > tol || e - g > tol) begin
          failures++;
          if (failures < 6) $display("lane %0d got %f exp %f", l, g, e);
        end
      end
    end
    out_ready <= ($urandom % 4 != 0);
  end

  initial begin
    in_valid = 0; in_last = 0; silu_en = 0; out_ready = 1;
    act_scale = 32'd655; w_scale = 32'd131072;          // 0.01 and 2.0
    repeat (2) @(posedge clk); rst_n = 1;
    for (int b = 0; b < NB; b++) begin
      silu_en <= (b >= NB / 2);
      for (int l = 0; l < L; l++) begin
        int a;
        real x;
        a = int'($urandom % 2000001) - 1000000;
        if (b % 7 == 0) a = int'($urandom % 2001) - 1000;
        in_data[l] <= a;
        x = real'(a) * (655.0 / 65536.0) * 2.0;
        if (b >= NB / 2) x = x / (1.0 + $exp(-x));
        exp_q.push_back(x);
      end
      in_valid <= 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      nin++;
    end
    in_valid <= 0;
    repeat (20) @(posedge clk);
    checks++;
    if (nout != NB) begin failures++; $display("beats out %0d of %0d", nout, NB); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
