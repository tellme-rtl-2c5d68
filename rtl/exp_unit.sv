// exp_unit: combinational e^x for x <= 0 in Q16.16 (helper of the softmax,
// online-softmax and SiLU datapaths).
//
// e^x = 2^(x*log2 e). The product y is split into an integer part i <= 0 and
// a fraction f in [0,1); 2^f is approximated by 1 + f*(C1 + C2*f) with
// C1 = 0.6565, C2 = 0.3435 (exact at f = 0 and f = 1, max relative error
// about 0.3 %), then shifted right by -i. Positive inputs are treated as 0
// (result 1.0). The approximation is this design's own choice; the paper
// does not say how its exponentials are computed.
module exp_unit (
  input  logic signed [31:0] x,     // Q16.16, expected <= 0
  output logic        [31:0] y      // Q16.16, in [0, 1.0]
);
  localparam logic signed [47:0] LOG2E = 48'sd94548;   // 1.442695 * 2^16
  localparam logic [31:0] C1 = 32'd43025;             // 0.6565 * 2^16
  localparam logic [31:0] C2 = 32'd22511;             // 0.3435 * 2^16

  always_comb begin
    logic signed [47:0] yy;
    logic signed [31:0] ip;
    logic [15:0] f;
    logic [31:0] poly, p2;
    logic [31:0] sh;
    yy   = (48'(x) * LOG2E) >>> 16;               // Q16.16
    ip   = 32'(yy >>> 16);                        // floor
    f    = yy[15:0];                              // fraction, Q0.16
    p2   = (C2 * 32'(f)) >> 16;                   // C2*f
    poly = 32'h0001_0000 + (((C1 + p2) * 32'(f)) >> 16);  // 2^f in Q16.16
    sh   = 32'(-ip);
    if (x >= 0)                y = 32'h0001_0000;
    else if (sh >= 32'd31)     y = 32'd0;
    else                       y = poly >> sh[4:0];
  end
endmodule
