// sid_exe2: EXE2 stage of the SID datapath (adders and local scratchpad).
//
// N_TRACK adders with input multiplexers, reused across modes as in the paper:
//   Vadd / Vsub          r[t] = p[t] + q[t] / p[t] - q[t]
//   Vsgt                 r[t] = 1.0 if p[t] >= q[t] else 0    (subtract, test sign)
//   VSsgt                r[t] = 1.0 if p[t] >  q[t] else 0
//   Vsig, Vtanh, Vexp    r[t] = p[t] + q[t]                   (k*x + b)
//   Vmul                 r[t] = p[t]                          (adders idle)
//   Mvmul, Vsqnorm       N_TRACK-1 adders sum the products; the last adder adds the
//                        partial sum of scratchpad entry `row` (0 on the first
//                        column slice). Before the last slice the new partial sum
//                        goes back to the scratchpad; on the last slice it is the
//                        result.
//   Vmaxabs              the adders compare magnitudes by subtraction (pairwise,
//                        then the winners, then the running maximum kept in the
//                        scratchpad).
// "1.0" is the fixed-point one (1 << 16), a design choice so that summed comparison
// vectors are counts in the datapath's number format. Results go to WR one cycle
// later with wen: every iteration of a vector mode writes; a reduction writes its
// single result after its last column slice.
module sid_exe2
  import sid_pkg::*;
#(
  parameter int unsigned N_TRACK = 4,
  parameter int unsigned N_LOCAL = 64
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  ctl_t                           ctl_in,
  input  logic [N_TRACK-1:0][DATA_W-1:0] p,
  input  logic [N_TRACK-1:0][DATA_W-1:0] q,
  output ctl_t                           ctl_out,
  output logic                           wen,
  output logic [N_TRACK-1:0][DATA_W-1:0] r
);

  localparam int unsigned SAW = (N_LOCAL > 1) ? $clog2(N_LOCAL) : 1;

  logic [N_TRACK-1:0][DATA_W-1:0] r_n;
  word_t             sum, mx, acc, acc_in;
  logic [DATA_W-1:0] spad_rd;
  logic              spad_we;
  logic [SAW-1:0]    spad_addr;
  logic              red;

  assign red       = is_reduce(ctl_in.mode);
  assign spad_addr = SAW'(ctl_in.row);
  assign spad_we   = ctl_in.valid && red && !ctl_in.sl_last;

  sid_scratchpad #(.N_LOCAL(N_LOCAL), .DATA_W(DATA_W)) u_spad (
    .clk    (clk),
    .rd_addr(spad_addr),
    .rd_data(spad_rd),
    .wr_en  (spad_we),
    .wr_addr(spad_addr),
    .wr_data(acc)
  );

  always_comb begin
    sum = '0;
    mx  = word_t'(p[0]);
    for (int t = 0; t < int'(N_TRACK); t++) begin
      sum = sum + word_t'(p[t]);
      if (word_t'(p[t]) - mx > 0) mx = word_t'(p[t]);
    end
    acc_in = ctl_in.sl_first ? '0 : word_t'(spad_rd);
    if (ctl_in.mode == M_VMAXABS)
      acc = (ctl_in.sl_first || (mx - acc_in > 0)) ? mx : acc_in;
    else
      acc = acc_in + sum;
  end

  always_comb begin
    for (int t = 0; t < int'(N_TRACK); t++) begin
      unique case (ctl_in.mode)
        M_VADD, M_VSIG, M_VTANH, M_VEXP: r_n[t] = p[t] + q[t];
        M_VSUB:  r_n[t] = p[t] - q[t];
        M_VSGT:  r_n[t] = (word_t'(p[t]) >= word_t'(q[t])) ? FX_ONE : '0;
        M_VSSGT: r_n[t] = (word_t'(p[t]) >  word_t'(q[t])) ? FX_ONE : '0;
        M_MVMUL, M_VSQNORM, M_VMAXABS: r_n[t] = (t == 0) ? acc : '0;
        default: r_n[t] = p[t];
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ctl_out <= '0;
      wen     <= 1'b0;
      r       <= '0;
    end else begin
      ctl_out <= ctl_in;
      wen     <= ctl_in.valid && (!red || ctl_in.sl_last);
      r       <= r_n;
    end
  end

endmodule
