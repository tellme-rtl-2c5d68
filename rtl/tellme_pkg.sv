// tellme_pkg: types and constants shared by the ternary LLM accelerator.
//
// Number formats used throughout the design:
//   * quantized activations and attention operands: signed 8-bit integers;
//   * ternary weights: 2-bit codes (-1, 0, +1), packed G at a time into a
//     base-3 table index;
//   * dequantized ("real") values: signed 32-bit fixed point with 16
//     fractional bits (Q16.16), called fx_t;
//   * scale factors: unsigned Q16.16.
// All vector data moves in 256-bit beats, the AXI width the paper aligns its
// special-function datapaths to: 32 int8 lanes or 8 Q16.16 lanes per beat.
// The bit formats (Q16.16, base-3 digit order, opcodes) are this design's own
// choices; the paper gives only the 8-bit activations, the 1.58-bit weights and
// the 256-bit packet width.
package tellme_pkg;

  localparam int unsigned BEAT_W    = 256;             // AXI data width
  localparam int unsigned I8_LANES  = BEAT_W / 8;      // 32 int8 per beat
  localparam int unsigned FX_LANES  = BEAT_W / 32;     // 8 Q16.16 per beat
  localparam int unsigned FX_FRAC   = 16;

  typedef logic signed [7:0]  act8_t;
  typedef logic signed [31:0] fx_t;
  typedef logic [BEAT_W-1:0]  beat_t;

  localparam fx_t FX_ONE = 32'sh0001_0000;
  localparam fx_t FX_MAX = 32'sh7fff_ffff;
  localparam fx_t FX_MIN = 32'sh8000_0000;

  // Operations the top-level controller can run. One command runs one engine
  // pass over streamed operands.
  typedef enum logic [3:0] {
    OP_LOAD_W     = 4'd0,   // fill the idle weight-index bank from DRAM
    OP_MATMUL     = 4'd1,   // TL ternary matmul + fused dequant (+SiLU)
    OP_PREFILL_AT = 4'd2,   // reverse-scheduled fused prefill attention
    OP_DECODE_AT  = 4'd3,   // decoupled decoding attention, one head
    OP_LM_HEAD    = 4'd4,   // LM head on the decoding attention hardware
    OP_RMSNORM_Q  = 4'd5,   // fused RMSNorm + absmax quantization
    OP_QUANT      = 4'd6,   // absmax quantization
    OP_ROPE       = 4'd7,   // rotary position embedding
    OP_ADD        = 4'd8,   // element-wise add (residual)
    OP_MUL        = 4'd9    // element-wise mul (gating)
  } op_e;

  // Where a command's vector operand comes from and its result goes to.
  typedef enum logic [0:0] {
    LOC_DRAM   = 1'b0,
    LOC_HIDDEN = 1'b1       // on-chip decoding hidden-state BRAM
  } loc_e;


  // One command of the top-level controller. Field use per operation:
  //   OP_LOAD_W    d = beats to load
  //   OP_MATMUL    a = activation blocks per token, b = K/Q, c = tokens,
  //                scale_a = activation scale, scale_b = weight scale,
  //                silu = apply SiLU, swap = swap weight banks first
  //   OP_PREFILL_AT a = prompt tokens, scale_a = s scale (Q8.24),
  //                scale_b = v scale
  //   OP_DECODE_AT a = cached tokens (incl. the new one), scale_a, scale_b
  //   OP_LM_HEAD   d = vocabulary rows, scale_a = logit scale (Q8.24)
  //   OP_RMSNORM_Q a = length / 32
  //   OP_QUANT     a = length / 32
  //   OP_ROPE      a = beats, b = first position
  //   OP_ADD/MUL   a = beats
  typedef struct packed {
    op_e         op;
    loc_e        src;
    loc_e        dst;
    logic        silu;
    logic        swap;
    logic [15:0] a;
    logic [15:0] b;
    logic [15:0] c;
    logic [31:0] d;
    logic [31:0] scale_a;
    logic [31:0] scale_b;
  } cmd_t;

  // Read requests on the DRAM read channel. RQ_OPERAND asks for the
  // command's operand stream (length in beats); the others come from the
  // attention engines' loaders and name a token or a head.
  typedef enum logic [2:0] {
    RQ_OPERAND = 3'd0,
    RQ_ATT_Q   = 3'd1,   // prefill query of a token
    RQ_ATT_KV  = 3'd2,   // prefill key+value of a token
    RQ_DEC_Q   = 3'd3,   // decode query of a head / LM-head hidden vector
    RQ_DEC_K   = 3'd4,   // K cache of a head
    RQ_DEC_V   = 3'd5,   // V cache of a head
    RQ_LM_W    = 3'd6    // LM head weight rows
  } rq_e;

  typedef struct packed {
    rq_e         kind;
    logic [15:0] index;
    logic [31:0] beats;
  } rd_req_t;

  // Saturate a 64-bit signed value to Q16.16 range.
  function automatic fx_t sat_fx(input logic signed [63:0] v);
    if (v > 64'sh0000_0000_7fff_ffff)       return FX_MAX;
    else if (v < -64'sh0000_0000_8000_0000) return FX_MIN;
    else                                    return fx_t'(v);
  endfunction

  // Round-to-nearest and saturate a Q16.16 value to int8.
  function automatic act8_t sat_i8_round(input logic signed [47:0] v_q16);
    logic signed [47:0] r;
    r = (v_q16 + 48'sh8000) >>> FX_FRAC;
    if (r > 48'sd127)       return 8'sd127;
    else if (r < -48'sd127) return -8'sd127;
    else                    return act8_t'(r);
  endfunction

endpackage
