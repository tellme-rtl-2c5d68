// top_ctrl: top-level controller of the accelerator.
//
// Accepts one command at a time (cmd_t, valid/ready) and runs it:
//   * OP_LOAD_W runs on its own weight-load channel: it requests cmd.d beats
//     on the weight read port and counts them into the idle bank of the
//     weight-index buffer. It may be accepted while a compute command is
//     running, which is what makes the weight buffer ping-pong: the next
//     weight tile streams in while the TL matmul reads the current one.
//     wld_done pulses when the load has finished.
//   * every other op runs on the compute channel: the controller pulses the
//     engine's start, swaps the weight banks first if cmd.swap is set
//     (waiting for a running weight load to finish), requests the operand
//     stream on the DRAM read port (ops whose engines fetch their own data,
//     the attention engines, request nothing here), starts the hidden-state
//     buffer read when the source is on chip, and counts result beats at the
//     sink. The command completes when the expected number of result beats
//     has been delivered and no engine is busy; cmd_done pulses.
// Operand and result beat counts per op are listed in beats_in()/beats_out().
// Statistics: commands per op, cycles in which a weight load overlapped a
// matmul was computing (C_RUN), cycles the compute channel waited for a weight load before a swap.
// The paper shows a top-level control block driving all engines; the
// command set, the two channels and the beat accounting are this design's
// own.
module top_ctrl #(
  parameter int unsigned LBEATS = 3,      // activation beats per T*G block
  parameter int unsigned Q      = 16,
  parameter int unsigned HIDDEN = 1536
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  tellme_pkg::cmd_t      cmd,
  output logic                  cmd_done,
  // compute channel
  output tellme_pkg::cmd_t      cur,
  output logic                  active,
  output logic                  eng_start,
  output logic                  wib_swap,
  output logic                  opr_req_valid,
  input  logic                  opr_req_ready,
  output logic [31:0]           opr_req_beats,
  output logic                  hid_rd_start,
  output logic [15:0]           hid_rd_beats,
  output logic                  hid_wr_restart,
  input  logic                  sink_fire,
  input  logic                  engines_busy,
  // weight-load channel
  output logic                  wld_active,
  output logic                  wld_done,
  output logic                  wld_restart,
  output logic                  wld_req_valid,
  input  logic                  wld_req_ready,
  output logic [31:0]           wld_req_beats,
  input  logic                  wld_beat_fire,
  // statistics
  output logic [31:0]           op_count [10],
  output logic [31:0]           overlap_cycles,
  output logic [31:0]           swap_wait_cycles
);
  import tellme_pkg::*;

  function automatic logic [31:0] beats_in(input cmd_t c);
    logic hid;
    hid = (c.src == LOC_HIDDEN);
    case (c.op)
      OP_MATMUL:          return 32'(c.c) * 32'(c.a) * LBEATS;
      OP_RMSNORM_Q:       return hid ? 32'(c.a) * 4 : 32'(c.a) * 8;
      OP_QUANT:           return hid ? 32'd0 : 32'(c.a) * 4;
      OP_ROPE:            return hid ? 32'd0 : 32'(c.a);
      OP_ADD, OP_MUL:     return hid ? 32'(c.a) : 32'(c.a) * 2;
      default:            return 32'd0;
    endcase
  endfunction

  function automatic logic [15:0] beats_hid(input cmd_t c);
    if (c.src != LOC_HIDDEN) return 16'd0;
    case (c.op)
      OP_RMSNORM_Q, OP_QUANT:          return c.a * 16'd4;
      OP_ROPE, OP_ADD, OP_MUL:         return c.a;
      default:                         return 16'd0;
    endcase
  endfunction

  function automatic logic [31:0] beats_out(input cmd_t c);
    case (c.op)
      OP_MATMUL:                 return 32'(c.c) * 32'(c.b) * (Q / 8);
      OP_PREFILL_AT:             return 32'(c.a) * (HIDDEN / 8);
      OP_DECODE_AT:              return HIDDEN / 8;
      OP_LM_HEAD:                return (c.d + 32'd7) / 8;
      OP_RMSNORM_Q, OP_QUANT:    return 32'(c.a);
      OP_ROPE, OP_ADD, OP_MUL:   return 32'(c.a);
      default:                   return 32'd0;
    endcase
  endfunction

  typedef enum logic [2:0] {C_IDLE, C_SWAP, C_START, C_REQ, C_RUN} cstate_e;
  cstate_e cs;
  logic [31:0] out_cnt, out_exp;
  logic [31:0] wl_cnt, wl_len;
  logic        wl_req_pend;

  logic is_wload, accept;
  assign is_wload  = (cmd.op == OP_LOAD_W);
  assign cmd_ready = is_wload ? !wld_active : (cs == C_IDLE);
  assign accept    = cmd_valid && cmd_ready;
  assign active    = (cs != C_IDLE);

  assign opr_req_valid  = (cs == C_REQ);
  assign opr_req_beats  = beats_in(cur);
  assign wld_req_valid  = wl_req_pend;
  assign wld_req_beats  = wl_len;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs <= C_IDLE; cur <= '0; cmd_done <= 1'b0; eng_start <= 1'b0; wib_swap <= 1'b0;
      hid_rd_start <= 1'b0; hid_rd_beats <= '0; hid_wr_restart <= 1'b0;
      out_cnt <= '0; out_exp <= '0;
      wld_active <= 1'b0; wld_done <= 1'b0; wld_restart <= 1'b0; wl_cnt <= '0; wl_len <= '0; wl_req_pend <= 1'b0;
      for (int i = 0; i < 10; i++) op_count[i] <= '0;
      overlap_cycles <= '0; swap_wait_cycles <= '0;
    end else begin
      cmd_done <= 1'b0; eng_start <= 1'b0; wib_swap <= 1'b0;
      hid_rd_start <= 1'b0; hid_wr_restart <= 1'b0; wld_restart <= 1'b0; wld_done <= 1'b0;

      // ---- weight-load channel ----
      if (accept && is_wload) begin
        wld_active  <= 1'b1;
        wld_restart <= 1'b1;
        wl_cnt      <= '0;
        wl_len      <= cmd.d;
        wl_req_pend <= 1'b1;
        op_count[OP_LOAD_W] <= op_count[OP_LOAD_W] + 1'b1;
      end else if (wld_active) begin
        if (wl_req_pend && wld_req_ready) wl_req_pend <= 1'b0;
        if (wld_beat_fire) wl_cnt <= wl_cnt + 1'b1;
        if (!wl_req_pend && (wl_cnt + 32'(wld_beat_fire) == wl_len)) begin
          wld_active <= 1'b0;
          wld_done   <= 1'b1;
        end
      end
      if (wld_active && cs == C_RUN && cur.op == OP_MATMUL) overlap_cycles <= overlap_cycles + 1'b1;

      // ---- compute channel ----
      case (cs)
        C_IDLE: if (accept && !is_wload) begin
          cur     <= cmd;
          out_cnt <= '0;
          out_exp <= beats_out(cmd);
          op_count[cmd.op] <= op_count[cmd.op] + 1'b1;
          cs <= (cmd.op == OP_MATMUL && cmd.swap) ? C_SWAP : C_START;
        end
        C_SWAP: begin
          if (wld_active) swap_wait_cycles <= swap_wait_cycles + 1'b1;
          else begin wib_swap <= 1'b1; cs <= C_START; end
        end
        C_START: begin
          eng_start      <= 1'b1;
          hid_wr_restart <= (cur.dst == LOC_HIDDEN);
          hid_rd_start   <= (cur.src == LOC_HIDDEN);
          hid_rd_beats   <= beats_hid(cur);
          cs <= (beats_in(cur) != 0) ? C_REQ : C_RUN;
        end
        C_REQ: if (opr_req_ready) cs <= C_RUN;
        C_RUN: begin
          if (sink_fire) out_cnt <= out_cnt + 1'b1;
          if ((out_cnt == out_exp) && !engines_busy && !eng_start) begin
            cmd_done <= 1'b1;
            cs <= C_IDLE;
          end
        end
        default: cs <= C_IDLE;
      endcase
    end
  end
endmodule
