// sid_exe0: EXE0 stage of the SID datapath (one LUT per track).
//
// Receives the issued control word and the two Block RAM lines that arrive with it,
// and registers the operands each track needs in EXE1 (a, b multiplier inputs) and
// EXE2 (c, the second adder input):
//   Vadd, Vsub, Vsgt, Vmul, Mvmul : a = x, b = y
//   VSsgt                         : a = x, b = the scalar held in lane ylane of y
//   Vsqnorm                       : a = x, b = x
//   Vmaxabs                       : a = x
//   Vsig, Vtanh, Vexp             : a = slope k(x), b = x, c = intercept b(x)
// Lanes at or beyond ctl.nval (the tail of a vector) are zeroed so that they add
// nothing to sums and maxima. One cycle of latency. The LUT placement before the
// multipliers and adders follows the paper; the operand routing is this design's.
module sid_exe0
  import sid_pkg::*;
#(
  parameter int unsigned N_TRACK = 4
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  ctl_t                           ctl_in,
  input  logic [N_TRACK-1:0][DATA_W-1:0] x,
  input  logic [N_TRACK-1:0][DATA_W-1:0] y,
  output ctl_t                           ctl_out,
  output logic [N_TRACK-1:0][DATA_W-1:0] a,
  output logic [N_TRACK-1:0][DATA_W-1:0] b,
  output logic [N_TRACK-1:0][DATA_W-1:0] c
);

  logic [N_TRACK-1:0][DATA_W-1:0] a_n, b_n, c_n, k_l, b_l;
  logic [1:0]  fn;
  logic [DATA_W-1:0] scalar;

  always_comb begin
    case (ctl_in.mode)
      M_VSIG:  fn = 2'd0;
      M_VTANH: fn = 2'd1;
      default: fn = 2'd2;
    endcase
  end

  for (genvar t = 0; t < N_TRACK; t++) begin : g_lut
    sid_lut u_lut (.fn(fn), .x(x[t]), .k(k_l[t]), .b(b_l[t]));
  end

  assign scalar = y[int'(ctl_in.ylane) % int'(N_TRACK)];

  always_comb begin
    for (int t = 0; t < int'(N_TRACK); t++) begin
      a_n[t] = x[t];
      b_n[t] = y[t];
      c_n[t] = '0;
      if (ctl_in.mode == M_VSSGT)   b_n[t] = scalar;
      if (ctl_in.mode == M_VSQNORM) b_n[t] = x[t];
      if (is_lut(ctl_in.mode)) begin
        a_n[t] = k_l[t];
        b_n[t] = x[t];
        c_n[t] = b_l[t];
      end
      if (LEN_W'(t) >= ctl_in.nval) begin
        a_n[t] = '0;
        b_n[t] = '0;
        c_n[t] = '0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ctl_out <= '0;
      a       <= '0;
      b       <= '0;
      c       <= '0;
    end else begin
      ctl_out <= ctl_in;
      a       <= a_n;
      b       <= b_n;
      c       <= c_n;
    end
  end

endmodule
