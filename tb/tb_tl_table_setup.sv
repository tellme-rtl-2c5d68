// tb_tl_table_setup: exhaustive-by-index check of the TL precompute unit.
// For random activation groups, every table entry is compared with the
// signed sum obtained by decoding the entry index into ternary weights.
module tb_tl_table_setup;
  localparam int G = 3;
  localparam int NENT = 27;
  logic signed [7:0] act [G];
  logic signed [10:0] tbl [NENT];
  int checks = 0, failures = 0;

  tl_table_setup #(.G(G), .ACT_W(8)) dut (.act(act), .table_o(tbl));

  initial begin
    for (int it = 0; it < 200; it++) begin
      for (int g = 0; g < G; g++) act[g] = 8'($urandom);
      if (it == 0) begin act[0] = -128; act[1] = -128; act[2] = -128; end
      #1;
      for (int idx = 0; idx < NENT; idx++) begin
        int w0, w1, w2, exp_v;
        w0 = (idx % 3) - 1; w1 = ((idx / 3) % 3) - 1; w2 = ((idx / 9) % 3) - 1;
        exp_v = w0 * int'(act[0]) + w1 * int'(act[1]) + w2 * int'(act[2]);
        checks++;
        if (int'(tbl[idx]) != exp_v) begin
          failures++;
          if (failures < 5) $display("mismatch idx=%0d got=%0d exp=%0d", idx, tbl[idx], exp_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
