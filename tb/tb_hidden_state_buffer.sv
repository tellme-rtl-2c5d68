// tb_hidden_state_buffer: write/replay behaviour of the on-chip hidden-state
// buffer (reduced depth 12). Random vectors are written after wr_restart,
// then replayed (full and partial lengths) with random read back-pressure;
// every beat, the rd_last flag and the beat count are checked. A replay
// without back-pressure must deliver one beat per cycle, and rewriting after a
// restart must overwrite from address 0.
module tb_hidden_state_buffer;
  localparam int L = 8, D = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_restart, wr_valid, rd_start, rd_valid, rd_ready, rd_last;
  logic [$clog2(D + 1)-1:0] rd_beats;
  logic signed [31:0] wr_data [L], rd_data [L];
  int checks = 0, failures = 0, nrd;
  int model [D][L];
  bit bp;
  longint t0, t1;

  hidden_state_buffer #(.LANES(L), .DEPTH(D)) dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (rd_valid && rd_ready) begin
      for (int l = 0; l < L; l++) begin
        checks++;
        if (rd_data[l] != model[nrd][l]) begin failures++; if (failures < 8) $display("beat %0d lane %0d", nrd, l); end
      end
      checks++;
      if (rd_last != (nrd == int'(rd_beats) - 1)) begin failures++; $display("rd_last at %0d", nrd); end
      nrd++;
      t1 = $time / 10;
    end
  end
  always @(negedge clk) rd_ready = bp ? ($urandom % 2 == 0) : 1'b1;

  initial begin
    fork begin #1000000 $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end join_none
    wr_restart = 0; wr_valid = 0; rd_start = 0; rd_beats = 0; bp = 0;
    for (int l = 0; l < L; l++) wr_data[l] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 6; run++) begin
      int nw, nr;
      nw = (run < 2) ? D : 1 + $urandom % D;
      nr = (run == 0) ? D : 1 + $urandom % nw;
      bp = (run != 0);
      @(negedge clk); wr_restart = 1;
      @(negedge clk); wr_restart = 0;
      for (int b = 0; b < nw; b++) begin
        wr_valid = ($urandom % 3 != 0) || !bp;
        if (!wr_valid) begin @(negedge clk); wr_valid = 1; end
        for (int l = 0; l < L; l++) begin wr_data[l] = int'($urandom); model[b][l] = wr_data[l]; end
        @(negedge clk);
      end
      wr_valid = 0;
      nrd = 0;
      rd_beats = ($bits(rd_beats))'(nr); rd_start = 1;
      @(negedge clk); rd_start = 0; t0 = $time / 10;
      repeat (4 * D + 4) @(negedge clk);
      checks++;
      if (nrd != nr) begin failures++; $display("run %0d: %0d beats read, expected %0d", run, nrd, nr); end
      if (run == 0) begin
        checks++;
        if (t1 - t0 != nr - 1) begin failures++; $display("rate: %0d cycles for %0d beats", t1 - t0, nr); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
