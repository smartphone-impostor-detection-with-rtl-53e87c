// sid_exe1: EXE1 stage of the SID datapath (one multiplier per track).
//
// Each track multiplies its two operands as Q16.16 fixed point, p = (a * b) >> 16,
// keeping the low 32 bits (no rounding or saturation, a design choice). The product
// is used by Vmul, Mvmul, Vsqnorm (x * x) and the LUT modes (k * x). Vmaxabs takes
// the magnitude |a| here. For Vadd, Vsub, Vsgt and VSsgt the multiplier is bypassed
// and p = a. The second adder input q is b for the element-wise modes and the LUT
// intercept c for the LUT modes. One cycle of latency.
module sid_exe1
  import sid_pkg::*;
#(
  parameter int unsigned N_TRACK = 4
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  ctl_t                           ctl_in,
  input  logic [N_TRACK-1:0][DATA_W-1:0] a,
  input  logic [N_TRACK-1:0][DATA_W-1:0] b,
  input  logic [N_TRACK-1:0][DATA_W-1:0] c,
  output ctl_t                           ctl_out,
  output logic [N_TRACK-1:0][DATA_W-1:0] p,
  output logic [N_TRACK-1:0][DATA_W-1:0] q
);

  logic [N_TRACK-1:0][DATA_W-1:0] p_n, q_n;
  logic signed [2*DATA_W-1:0] prod [N_TRACK];

  always_comb begin
    for (int t = 0; t < int'(N_TRACK); t++) begin
      prod[t] = $signed(a[t]) * $signed(b[t]);
      q_n[t]  = is_lut(ctl_in.mode) ? c[t] : b[t];
      unique case (ctl_in.mode)
        M_VMUL, M_MVMUL, M_VSQNORM, M_VSIG, M_VTANH, M_VEXP:
          p_n[t] = prod[t][FRAC +: DATA_W];
        M_VMAXABS:
          p_n[t] = a[t][DATA_W-1] ? (~a[t] + 1'b1) : a[t];
        default:
          p_n[t] = a[t];
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ctl_out <= '0;
      p       <= '0;
      q       <= '0;
    end else begin
      ctl_out <= ctl_in;
      p       <= p_n;
      q       <= q_n;
    end
  end

endmodule
