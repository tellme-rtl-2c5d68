// weight_index_buffer: ping-pong store of packed ternary weight indices.
//
// Each entry is one "index vector group": Q index vectors of T indices each,
// IDX_W bits per index, i.e. everything the TL matmul consumes in one cycle.
// Entry layout: bits [(q*T + t)*IDX_W +: IDX_W] hold the index of table t for
// output column (m*Q + q).
// Two banks of DEPTH entries: the TL matmul reads the "compute" bank while
// the loader fills the other one from DRAM; a one-cycle 'swap' pulse exchanges
// their roles (ping-pong, as the paper uses its URAM weight buffer).
// Write side: 256-bit beats; ceil(ENT_W/BEAT_W) beats form one entry, written
// at an address that starts at 0 on 'wr_restart' and increments per entry.
// Read side: synchronous, data valid the cycle after rd_en.
// Follows the paper: URAM-resident W_idx, ping-pong operation. Own choice: the
// entry layout, the beat packing and DEPTH (2 x 2048 x 2560 bits, about 36
// UltraRAM blocks at 72 bits x 4K; the paper reports 48 URAM in total).
module weight_index_buffer #(
  parameter int unsigned Q      = 16,
  parameter int unsigned T      = 32,
  parameter int unsigned IDX_W  = 5,
  parameter int unsigned DEPTH  = 2048,
  parameter int unsigned BEAT_W = 256,
  localparam int unsigned ENT_W  = Q * T * IDX_W,
  localparam int unsigned BPE    = (ENT_W + BEAT_W - 1) / BEAT_W,
  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              swap,
  output logic              compute_bank,
  // fill side
  input  logic              wr_restart,
  input  logic              wr_valid,
  input  logic [BEAT_W-1:0] wr_beat,
  output logic [AW:0]       wr_count,     // entries written since restart
  // compute side
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output logic [ENT_W-1:0]  rd_data
);

  logic [ENT_W-1:0] mem0 [DEPTH];
  logic [ENT_W-1:0] mem1 [DEPTH];
  logic [BPE*BEAT_W-1:0] asm_q;
  logic [$clog2(BPE+1)-1:0] beat_idx;
  logic [AW-1:0] wr_addr;
  logic          ent_done;
  logic [BPE*BEAT_W-1:0] asm_next;

  always_comb begin
    asm_next = asm_q;
    asm_next[beat_idx*BEAT_W +: BEAT_W] = wr_beat;
  end
  assign ent_done = wr_valid && (beat_idx == ($bits(beat_idx))'(BPE - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      compute_bank <= 1'b0;
      beat_idx     <= '0;
      wr_addr      <= '0;
      wr_count     <= '0;
      asm_q        <= '0;
    end else begin
      if (swap) compute_bank <= ~compute_bank;
      if (wr_restart) begin
        beat_idx <= '0;
        wr_addr  <= '0;
        wr_count <= '0;
      end else if (wr_valid) begin
        asm_q <= asm_next;
        if (ent_done) begin
          beat_idx <= '0;
          wr_addr  <= wr_addr + 1'b1;
          wr_count <= wr_count + 1'b1;
        end else begin
          beat_idx <= beat_idx + 1'b1;
        end
      end
    end
  end

  // Memory arrays: no reset, as block RAM.
  always_ff @(posedge clk) begin
    if (!wr_restart && ent_done) begin
      if (compute_bank) mem0[wr_addr] <= asm_next[ENT_W-1:0];
      else              mem1[wr_addr] <= asm_next[ENT_W-1:0];
    end
    if (rd_en) rd_data <= compute_bank ? mem1[rd_addr] : mem0[rd_addr];
  end

endmodule
