// sid_lut: slope/intercept look-up table of one SID track (EXE0 stage).
//
// The paper evaluates sigmoid, tanh and exp without dedicated hardware: a table
// gives a slope k and an intercept b for the input x, and the multiplier and adder
// of the same track compute k*x + b in the next two stages. This table (the
// contents are this design's) splits [-8, 8) into 64 segments of width 0.25 and
// stores for each the chord through the exact function values at the segment
// ends. Outside the range k = 0 and b is the limit: sigmoid 0 / 1, tanh -1 / 1,
// exp 0 / e^8. The table is computed at elaboration from e^(-1/4) in 24-bit fixed
// point (e^(-m/4) by repeated multiplication):
//   sigmoid(x) = 1 / (1 + e^-|x|) for x >= 0, 1 - sigmoid(-x) otherwise,
//   tanh(x)    = (1 - e^-2|x|) / (1 + e^-2|x|) with the sign of x,
//   exp(x)     = e^-|x| for x < 0, 1 / e^-x otherwise.
// Values are Q16.16. fn: 0 sigmoid, 1 tanh, 2 exp. Purely combinational.
module sid_lut #(
  parameter int unsigned SEG_BITS = 6
) (
  input  logic [1:0]         fn,
  input  logic signed [31:0] x,
  output logic signed [31:0] k,
  output logic signed [31:0] b
);

  localparam int  NSEG  = 1 << SEG_BITS;        // segments over [-8, 8)
  localparam int  SHIFT = 16 + 4 - SEG_BITS;    // log2 of segment width in Q16.16
  localparam longint ONE24 = 64'sd1 << 24;
  localparam longint C24   = 64'sd13066109;     // round(e^-0.25 * 2^24)

  // e^(-m * w) in Q24 where w is the segment width (0.25 for SEG_BITS = 6).
  function automatic longint exp_neg_q24(input int m);
    longint e;
    e = ONE24;
    for (int i = 0; i < m * (64 / NSEG); i++) e = (e * C24 + (ONE24 >>> 1)) >>> 24;
    return e;
  endfunction

  // Function value at segment boundary j (x_j = -8 + j * 16 / NSEG), Q16.16.
  function automatic longint fval(input int fsel, input int j);
    int     m;
    longint e, r;
    m = (j >= NSEG / 2) ? (j - NSEG / 2) : (NSEG / 2 - j);
    case (fsel)
      0: begin
        e = exp_neg_q24(m);
        r = (ONE24 * ONE24) / (ONE24 + e);
        if (j < NSEG / 2) r = ONE24 - r;
      end
      1: begin
        e = exp_neg_q24(2 * m);
        r = ((ONE24 - e) * ONE24) / (ONE24 + e);
        if (j < NSEG / 2) r = -r;
      end
      default: begin
        e = exp_neg_q24(m);
        r = (j < NSEG / 2) ? e : (ONE24 * ONE24) / e;
      end
    endcase
    return (r + 128) >>> 8;
  endfunction

  // Packed table: entry j of function f is {k, b} at bit (f * NSEG + j) * 64.
  function automatic logic [3*NSEG*64-1:0] build_table();
    logic [3*NSEG*64-1:0] t;
    longint f0, f1, kk, bb, xj;
    for (int f = 0; f < 3; f++) begin
      for (int j = 0; j < NSEG; j++) begin
        f0 = fval(f, j);
        f1 = fval(f, j + 1);
        kk = (f1 - f0) <<< (16 - SHIFT);
        xj = (longint'(j) - longint'(NSEG) / 2) <<< SHIFT;
        bb = f0 - ((kk * xj) >>> 16);
        t[(f * NSEG + j) * 64 +: 64] = {kk[31:0], bb[31:0]};
      end
    end
    return t;
  endfunction

  localparam logic [3*NSEG*64-1:0] TABLE = build_table();
  localparam logic signed [31:0] LIM  = 32'sd8 <<< 16;
  localparam logic signed [31:0] EXP8 = 32'(fval(2, NSEG));

  logic [SEG_BITS-1:0] idx;
  logic [31:0]         xo;
  logic [63:0]         entry;
  logic [1:0]          fs;

  assign fs    = (fn > 2'd2) ? 2'd2 : fn;
  assign xo    = x + LIM;
  assign idx   = xo[SHIFT +: SEG_BITS];
  assign entry = TABLE[(int'(fs) * NSEG + int'(idx)) * 64 +: 64];

  always_comb begin
    if (x < -LIM) begin
      k = '0;
      b = (fs == 2'd1) ? -(32'sd1 <<< 16) : '0;
    end else if (x >= LIM) begin
      k = '0;
      b = (fs == 2'd2) ? EXP8 : (32'sd1 <<< 16);
    end else begin
      k = entry[63:32];
      b = entry[31:0];
    end
  end

endmodule
