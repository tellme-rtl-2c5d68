// tl_matmul: table-lookup (TL) ternary matrix multiplication engine.
//
// Computes O[i][k] = sum_n A[i][n] * W[n][k] for int8 activations A and
// ternary weights W, following Algorithm 1 of the design:
//   for each token row i (outer loop, n_tok rows)
//     for each block j of T*G activations (n_blk blocks)
//       1. load the block (T*G/ACT_LANES beats of ACT_LANES int8);
//       2. set up T look-up tables at once, each holding the 3^G signed sums
//          of its G activations (T tl_table_setup instances, 1 cycle);
//       3. sweep the K outputs in steps of Q: each cycle one weight-buffer
//          entry delivers Q index vectors of T indices, the Q*T table reads
//          are summed per output column and accumulated into the output row
//          buffer. Fully pipelined, one step per cycle.
//     stream the K accumulators out, OUT_LANES per beat.
// Weight buffer address of step m of block j is j*k_grp + m (k_grp = K/Q).
//
// Timing per block: LOAD beats + 1 setup cycle + k_grp look-up cycles + 1
// drain cycle; per token, K/OUT_LANES output beats after the last block.
// Interfaces: act (valid/ready), out (valid/ready, out_last on the final beat
// of a row), start/busy/done for the command, synchronous weight-buffer read
// port with one cycle latency.
// Follows the paper: G, T, Q (3, 32, 16 in its synthesised configuration),
// the full 3^G-entry tables, the loop order and the one-cycle initiation
// interval. Own choices: the handshakes, the int32 accumulators, that the
// first block of a row overwrites rather than clears the accumulators, and
// that block loading is not overlapped with the look-up sweep.
module tl_matmul #(
  parameter int unsigned G         = 3,
  parameter int unsigned T         = 32,
  parameter int unsigned Q         = 16,
  parameter int unsigned ACT_LANES = 32,
  parameter int unsigned OUT_LANES = 8,
  parameter int unsigned K_MAX     = 4096,
  parameter int unsigned WDEPTH    = 2048,
  localparam int unsigned NENT  = 3**G,
  localparam int unsigned IDX_W = $clog2(NENT),
  localparam int unsigned ENT_W = 8 + $clog2(G) + 1,
  localparam int unsigned TG    = T * G,
  localparam int unsigned LBEATS = TG / ACT_LANES,
  localparam int unsigned KG_MAX = K_MAX / Q,
  localparam int unsigned WAW   = $clog2(WDEPTH),
  localparam int unsigned KGW   = $clog2(KG_MAX + 1),
  localparam int unsigned KIW   = (KG_MAX > 1) ? $clog2(KG_MAX) : 1,   // accumulator row index
  localparam int unsigned OPR   = Q / OUT_LANES    // output beats per row of Q
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [15:0]             cfg_n_blk,
  input  logic [KGW-1:0]          cfg_k_grp,
  input  logic [15:0]             cfg_n_tok,
  output logic                    busy,
  output logic                    done,
  // activation stream
  input  logic                    act_valid,
  output logic                    act_ready,
  input  logic signed [7:0]       act_data [ACT_LANES],
  // weight index buffer read port
  output logic                    w_rd_en,
  output logic [WAW-1:0]          w_rd_addr,
  input  logic [Q*T*IDX_W-1:0]    w_rd_data,
  // output stream
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic signed [31:0]      out_data [OUT_LANES],
  output logic                    out_last
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_SETUP, S_LOOK, S_DRAIN, S_OUT} state_e;
  state_e state;

  logic signed [7:0]       a_block [TG];
  logic signed [ENT_W-1:0] tbl_c [T][NENT];
  logic signed [ENT_W-1:0] tbl_q [T][NENT];
  logic signed [31:0]      obuf  [Q][KG_MAX];

  logic [15:0]   n_blk, n_tok, blk, tok;
  logic [KGW-1:0] k_grp, m;
  logic [$clog2(LBEATS+1)-1:0] lbeat;
  logic          look_d;       // a weight entry arrives this cycle
  logic [KIW-1:0] m_d;
  logic          first_blk_d;
  logic [KGW+$clog2(OPR+1):0] obeat, obeats;

  // ---- table setup (T precompute units) ----
  for (genvar t = 0; t < T; t++) begin : g_tab
    logic signed [7:0] grp [G];
    for (genvar g = 0; g < G; g++) begin : g_in
      assign grp[g] = a_block[t*G + g];
    end
    tl_table_setup #(.G(G), .ACT_W(8)) u_setup (.act(grp), .table_o(tbl_c[t]));
  end

  // ---- look-up and column sums ----
  logic signed [31:0] col_sum [Q];
  always_comb begin
    for (int q = 0; q < Q; q++) begin
      logic signed [31:0] s;
      s = '0;
      for (int t = 0; t < T; t++) begin
        logic [IDX_W-1:0] ix;
        ix = w_rd_data[(q*T + t)*IDX_W +: IDX_W];
        s  = s + 32'(tbl_q[t][ix]);
      end
      col_sum[q] = s;
    end
  end

  assign act_ready = (state == S_LOAD);
  assign w_rd_en   = (state == S_LOOK);
  assign w_rd_addr = WAW'(blk * k_grp + 16'(m));
  assign busy      = (state != S_IDLE);
  assign obeats    = ($bits(obeats))'(k_grp) * ($bits(obeats))'(OPR);

  // output beat read
  always_comb begin
    logic [KIW-1:0] row;
    int unsigned    lane0;
    row   = KIW'(32'(obeat) / OPR);
    lane0 = (32'(obeat) % OPR) * OUT_LANES;
    for (int l = 0; l < OUT_LANES; l++) out_data[l] = obuf[lane0 + l][row];
  end
  assign out_valid = (state == S_OUT);
  assign out_last  = (state == S_OUT) && (obeat == obeats - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      n_blk <= '0; n_tok <= '0; k_grp <= '0;
      blk <= '0; tok <= '0; m <= '0; lbeat <= '0;
      look_d <= 1'b0; m_d <= '0; first_blk_d <= 1'b0;
      obeat <= '0;
    end else begin
      done   <= 1'b0;
      look_d <= (state == S_LOOK);
      m_d    <= KIW'(m);
      first_blk_d <= (blk == 16'd0);
      case (state)
        S_IDLE: if (start) begin
          n_blk <= cfg_n_blk; n_tok <= cfg_n_tok; k_grp <= cfg_k_grp;
          blk <= '0; tok <= '0; lbeat <= '0;
          state <= S_LOAD;
        end
        S_LOAD: if (act_valid) begin
          lbeat <= lbeat + 1'b1;
          if (lbeat == ($bits(lbeat))'(LBEATS - 1)) state <= S_SETUP;
        end
        S_SETUP: begin
          m <= '0;
          state <= S_LOOK;
        end
        S_LOOK: begin
          m <= m + 1'b1;
          if (m == k_grp - 1'b1) state <= S_DRAIN;
        end
        S_DRAIN: begin
          lbeat <= '0;
          if (blk == n_blk - 1'b1) begin
            obeat <= '0;
            state <= S_OUT;
          end else begin
            blk   <= blk + 1'b1;
            state <= S_LOAD;
          end
        end
        S_OUT: if (out_ready) begin
          obeat <= obeat + 1'b1;
          if (out_last) begin
            blk <= '0;
            if (tok == n_tok - 1'b1) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              tok   <= tok + 1'b1;
              state <= S_LOAD;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // activation block register and look-up tables
  always_ff @(posedge clk) begin
    if (state == S_LOAD && act_valid)
      for (int l = 0; l < ACT_LANES; l++) a_block[lbeat*ACT_LANES + l] <= act_data[l];
    if (state == S_SETUP) tbl_q <= tbl_c;
  end

  // output row buffer: accumulate (first block of a row overwrites)
  always_ff @(posedge clk) begin
    if (look_d)
      for (int q = 0; q < Q; q++)
        obuf[q][m_d] <= first_blk_d ? col_sum[q] : obuf[q][m_d] + col_sum[q];
  end

endmodule
