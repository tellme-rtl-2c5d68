// tb_weight_index_buffer: ping-pong behaviour of the weight-index buffer.
// Entries of 320 bits (Q=4, T=16, 5-bit indices) take two 256-bit beats.
// Bank A is filled, swapped to the compute side and read back while bank B
// is filled with different data; after a second swap bank B is read back.
module tb_weight_index_buffer;
  localparam int Q = 4, T = 16, IW = 5, D = 16, EW = Q * T * IW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic swap, bank, wr_restart, wr_valid, rd_en;
  logic [255:0] wr_beat;
  logic [4:0] wr_count;
  logic [3:0] rd_addr;
  logic [EW-1:0] rd_data;
  logic [EW-1:0] ref_a [D], ref_b [D];
  int checks = 0, failures = 0;

  weight_index_buffer #(.Q(Q), .T(T), .IDX_W(IW), .DEPTH(D), .BEAT_W(256)) dut (
    .clk, .rst_n, .swap, .compute_bank(bank), .wr_restart, .wr_valid, .wr_beat, .wr_count,
    .rd_en, .rd_addr, .rd_data);

  task automatic fill(input bit use_b);
    @(posedge clk); wr_restart <= 1; @(posedge clk); wr_restart <= 0;
    for (int e = 0; e < D; e++) begin
      logic [511:0] w;
      w = '0;
      w[EW-1:0] = use_b ? ref_b[e] : ref_a[e];
      for (int b = 0; b < 2; b++) begin
        wr_valid <= 1; wr_beat <= w[b*256 +: 256];
        rd_en <= 1; rd_addr <= 4'($urandom);   // reads of the other bank in parallel
        @(posedge clk);
      end
    end
    wr_valid <= 0; rd_en <= 0;
    @(posedge clk);
    checks++;
    if (wr_count != 5'(D)) begin failures++; $display("wr_count %0d", wr_count); end
  endtask

  task automatic check_bank(input bit use_b);
    for (int e = 0; e < D; e++) begin
      rd_en <= 1; rd_addr <= 4'(e);
      @(posedge clk); rd_en <= 0; #1;
      checks++;
      if (rd_data !== (use_b ? ref_b[e] : ref_a[e])) begin
        failures++; $display("bank %0d entry %0d mismatch", use_b, e);
      end
    end
  endtask

  initial begin
    swap = 0; wr_restart = 0; wr_valid = 0; rd_en = 0; rd_addr = 0; wr_beat = '0;
    for (int e = 0; e < D; e++) begin
      for (int w = 0; w < EW; w += 32) begin ref_a[e][w +: 32] = $urandom; ref_b[e][w +: 32] = $urandom; end
    end
    repeat (2) @(posedge clk); rst_n = 1;
    fill(0);                                   // fills bank 1 (compute bank is 0)
    @(posedge clk); swap <= 1; @(posedge clk); swap <= 0;
    #1; checks++; if (bank != 1) begin failures++; $display("swap did not toggle"); end
    check_bank(0);
    fill(1);                                   // fills bank 0 while bank 1 is readable
    check_bank(0);                             // compute bank still holds A
    @(posedge clk); swap <= 1; @(posedge clk); swap <= 0;
    check_bank(1);
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
