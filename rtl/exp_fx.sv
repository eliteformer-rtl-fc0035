// exp_fx: combinational fixed-point exponential for the attention blocks.
//
// y = e^x with x signed Q16.16 and y unsigned Q.16 (y = int / 65536).
// x is clamped to [-12, 8). The input is scaled by log2(e) and split into an
// integer part n and a fraction f; 2^f is approximated by the quadratic
// 1 + 0.6565 f + 0.3435 f^2 (relative error below 0.3 %) and shifted by n.
// The paper computes this in FP32; the fixed-point form is this design's.
module exp_fx (
  input  logic signed [31:0] x,
  output logic        [31:0] y
);
  localparam logic signed [31:0] XMAX = 32'sd524287;    // just below 8.0
  localparam logic signed [31:0] XMIN = -32'sd786432;   // -12.0
  localparam logic [16:0] LOG2E = 17'd94548;            // log2(e) in Q1.16
  localparam logic [16:0] C1 = 17'd43024;               // 0.6565 in Q.16
  localparam logic [16:0] C2 = 17'd22512;               // 0.3435 in Q.16
  always_comb begin
    logic signed [31:0] xc;
    logic signed [49:0] t;
    logic signed [33:0] tq;    // x*log2(e) in Q.16
    logic signed [17:0] n;
    logic [15:0] f;
    logic [33:0] p1, p2, m;
    xc = (x > XMAX) ? XMAX : (x < XMIN) ? XMIN : x;
    t  = 50'(xc) * $signed({1'b0, LOG2E});
    tq = 34'(t >>> 16);
    n  = 18'(tq >>> 16);
    f  = tq[15:0];
    p1 = (34'(C1) * 34'(f)) >> 16;
    p2 = (((34'(f) * 34'(f)) >> 16) * 34'(C2)) >> 16;
    m  = 34'd65536 + p1 + p2;            // 2^f in Q1.16
    if (n >= 0) y = 32'(m << n);
    else        y = 32'(m >> (-n));
  end
endmodule
