// tb_reverse_scheduler: reverse-reordered causal schedule.
// For several N (including N not a multiple of P) the issued steps are
// checked against an independently written model of the order (batches of P
// queries from the last token down; keys from the batch top down to 0;
// each query loaded with its own key). In addition, the pairs (query, key)
// implied by the slot occupancy are counted: every causal pair k <= q must
// be covered exactly once and no pair with k > q may appear (no masking is
// ever needed). The step count must equal N^2/(2P) + N/2 when P divides N,
// the steps counter must agree, and without back-pressure the scheduler must
// issue one step per cycle.
module tb_reverse_scheduler;
  localparam int P = 4, NMAX = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, step_valid, step_ready, step_load_q, step_first, step_last;
  logic [15:0] cfg_n, step_j, batch_top;
  logic [$clog2(P)-1:0] step_slot;
  logic [$clog2(P+1)-1:0] batch_nq;
  logic [31:0] steps;
  int checks = 0, failures = 0;
  int ej [$], eload [$], eslot [$], efirst [$], elast [$];
  int pairs [NMAX][NMAX];
  int slot_q [P];
  bit bp;
  int nstep;
  longint t0, t1;

  reverse_scheduler #(.P(P)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("step %0d: %s", nstep, what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (step_valid && step_ready) begin
      int j;
      j = ej.pop_front();
      chk(step_j == 16'(j), $sformatf("j %0d exp %0d", step_j, j));
      chk(step_load_q == eload.pop_front(), "load_q");
      chk(int'(step_slot) == eslot.pop_front() || !step_load_q, "slot");
      chk(step_first == efirst.pop_front(), "first");
      chk(step_last == elast.pop_front(), "last");
      if (step_first) for (int s = 0; s < P; s++) slot_q[s] = -1;
      if (step_load_q) slot_q[step_slot] = int'(step_j);
      for (int s = 0; s < P; s++) if (slot_q[s] >= 0) pairs[slot_q[s]][step_j]++;
      nstep++;
      t1 = $time / 10;
    end
  end
  always @(negedge clk) step_ready = bp ? ($urandom % 3 != 0) : 1'b1;

  initial begin
    fork begin #5000000 $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    start = 0; cfg_n = 0; bp = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    foreach (slot_q[s]) slot_q[s] = -1;
    for (int run = 0; run < 10; run++) begin
      int n, exp_steps;
      n = (run == 0) ? 32 : (run == 1) ? 1 : (run == 2) ? 7 : 1 + $urandom % NMAX;
      bp = (run >= 3);
      exp_steps = 0;
      for (int top = n; top > 0; top -= P) begin
        for (int j = top - 1; j >= 0; j--) begin
          ej.push_back(j);
          eload.push_back(j >= top - P);
          eslot.push_back(top - 1 - j);
          efirst.push_back(j == top - 1);
          elast.push_back(j == 0);
          exp_steps++;
        end
      end
      foreach (pairs[a, b]) pairs[a][b] = 0;
      nstep = 0;
      @(negedge clk); cfg_n = 16'(n); start = 1;
      @(negedge clk); start = 0; t0 = $time / 10;
      while (busy) @(negedge clk);
      @(negedge clk);
      chk(nstep == exp_steps, $sformatf("N=%0d: %0d steps, model %0d", n, nstep, exp_steps));
      chk(steps == 32'(nstep), "steps counter");
      if (n % P == 0) chk(nstep == n * n / (2 * P) + n / 2, $sformatf("N=%0d: steps != N^2/2P + N/2", n));
      for (int q = 0; q < n; q++)
        for (int k = 0; k < n; k++)
          chk(pairs[q][k] == (k <= q ? 1 : 0), $sformatf("pair q%0d k%0d seen %0d times", q, k, pairs[q][k]));
      if (run == 0) chk(t1 - t0 == longint'(exp_steps) - 1, $sformatf("rate: %0d cycles for %0d steps", t1 - t0, exp_steps));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
