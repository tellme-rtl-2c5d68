// tb_tl_matmul: checks the TL ternary matmul against a direct dot product.
// Small configuration (G=3, T=4, Q=4): random int8 activations and ternary
// weights, several tokens, several activation blocks and K groups. The
// testbench packs the weight indices itself (digit g = w+1, base 3) into a
// behavioural weight-buffer array, streams activations with random gaps and
// applies random output back-pressure. It also checks the cycle count of an
// unstalled run against the schedule: per block LOAD beats + 1 + K/Q + 1,
// per token K/OUT_LANES output beats.
module tb_tl_matmul;
  localparam int G = 3, T = 4, Q = 4, AL = 4, OL = 2, KMAX = 32, WD = 64;
  localparam int TG = T * G, LB = TG / AL, IW = 5;
  localparam int NBLK = 3, KGRP = 5, NTOK = 3;
  localparam int N = NBLK * TG, K = KGRP * Q;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, act_valid, act_ready, w_rd_en, out_valid, out_ready, out_last;
  logic signed [7:0] act_data [AL];
  logic [5:0] w_rd_addr;
  logic [Q*T*IW-1:0] w_rd_data, wmem [WD];
  logic signed [31:0] out_data [OL];

  int A [NTOK][N];
  int W [N][K];
  int checks = 0, failures = 0;
  bit gaps;

  tl_matmul #(.G(G), .T(T), .Q(Q), .ACT_LANES(AL), .OUT_LANES(OL), .K_MAX(KMAX), .WDEPTH(WD)) dut (
    .clk, .rst_n, .start, .cfg_n_blk(16'(NBLK)), .cfg_k_grp(4'(KGRP)), .cfg_n_tok(16'(NTOK)),
    .busy, .done, .act_valid, .act_ready, .act_data, .w_rd_en, .w_rd_addr, .w_rd_data,
    .out_valid, .out_ready, .out_data, .out_last);

  always_ff @(posedge clk) if (w_rd_en) w_rd_data <= wmem[w_rd_addr];

  // activation driver
  int a_tok, a_pos;
  always_ff @(posedge clk) begin
    if (act_valid && act_ready) begin
      a_pos <= a_pos + AL;
      if (a_pos + AL == N) begin a_pos <= 0; a_tok <= a_tok + 1; end
    end
  end
  always_comb begin
    for (int l = 0; l < AL; l++) act_data[l] = 8'(A[a_tok % NTOK][(a_pos + l) % N]);
  end
  always_ff @(posedge clk) begin
    act_valid <= gaps ? ($urandom % 3 != 0) : 1'b1;
    out_ready <= gaps ? ($urandom % 3 != 0) : 1'b1;
  end

  // output checker
  int o_tok, o_col;
  always_ff @(posedge clk) begin
    if (out_valid && out_ready) begin
      for (int l = 0; l < OL; l++) begin
        int e;
        e = 0;
        for (int n = 0; n < N; n++) e += A[o_tok][n] * W[n][o_col + l];
        checks++;
        if (out_data[l] != e) begin
          failures++;
          if (failures < 5) $display("tok %0d col %0d got %0d exp %0d", o_tok, o_col + l, out_data[l], e);
        end
      end
      if (out_last != (o_col + OL == K)) begin failures++; $display("out_last wrong"); end
      checks++;
      if (o_col + OL == K) begin o_col <= 0; o_tok <= o_tok + 1; end
      else o_col <= o_col + OL;
    end
  end

  task automatic run(input bit with_gaps, output int cycles);
    gaps = with_gaps;
    a_tok = 0; a_pos = 0; o_tok = 0; o_col = 0;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    cycles = 1;
    while (!done) begin @(posedge clk); cycles++; end
    checks++;
    if (o_tok != NTOK) begin failures++; $display("only %0d tokens out", o_tok); end
  endtask

  initial begin
    int cyc, expc;
    start = 0; gaps = 0;
    for (int t = 0; t < NTOK; t++) for (int n = 0; n < N; n++) A[t][n] = $signed(8'($urandom));
    A[0][0] = -128; A[0][1] = 127;
    for (int n = 0; n < N; n++) for (int k = 0; k < K; k++) W[n][k] = int'($urandom % 3) - 1;
    // pack: entry j*KGRP+m, vector q, table t <- index of W[j*TG + t*G + g][m*Q + q]
    for (int j = 0; j < NBLK; j++)
      for (int m = 0; m < KGRP; m++) begin
        logic [Q*T*IW-1:0] e;
        e = '0;
        for (int q = 0; q < Q; q++)
          for (int t = 0; t < T; t++) begin
            int ix;
            ix = 0;
            for (int g = G - 1; g >= 0; g--) ix = ix * 3 + (W[j*TG + t*G + g][m*Q + q] + 1);
            e[(q*T + t)*IW +: IW] = IW'(ix);
          end
        wmem[j*KGRP + m] = e;
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run(0, cyc);
    expc = NTOK * (NBLK * (LB + 1 + KGRP + 1) + K / OL) + 2;  // +1 start, +1 done register
    checks++;
    if (cyc != expc) begin failures++; $display("cycles %0d expected %0d", cyc, expc); end
    else $display("unstalled run: %0d cycles as scheduled", cyc);
    run(1, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
