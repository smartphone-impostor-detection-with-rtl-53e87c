// sid_wr: WR (write-back) stage of the SID datapath.
//
// Turns the result registered by EXE2 into one Block RAM line write. A vector
// result covers the line of element address zaddr (a multiple of N_TRACK) and
// writes lanes 0 .. nval-1. A reduction result (Mvmul output element, Vsqnorm,
// Vmaxabs) is one element: it is placed in lane zaddr % N_TRACK of line
// zaddr / N_TRACK and only that lane is enabled. Combinational; the RAM takes the
// write at the end of the WR cycle. The paper shows only the write address and
// data leaving this stage; the lane handling is this design's.
// The write data are EXE2's result lanes passed straight through (lane 0 copied
// to every lane for a reduction); only the line address and the lane mask are
// computed here.
module sid_wr
  import sid_pkg::*;
#(
  parameter int unsigned N_TRACK = 4,
  parameter int unsigned LAW     = 17
) (
  input  ctl_t                           ctl,
  input  logic                           wen,
  input  logic [N_TRACK-1:0][DATA_W-1:0] r,
  output logic [N_TRACK-1:0]             we_mask,
  output logic [LAW-1:0]                 w_line,
  output logic [N_TRACK-1:0][DATA_W-1:0] w_data
);

  localparam int unsigned LOG_N = (N_TRACK > 1) ? $clog2(N_TRACK) : 0;

  int unsigned lane;

  assign w_line = LAW'(ctl.zaddr >> LOG_N);
  assign lane   = int'(ctl.zaddr % ADDR_W'(N_TRACK));

  always_comb begin
    for (int t = 0; t < int'(N_TRACK); t++) begin
      if (is_reduce(ctl.mode)) begin
        w_data[t]  = r[0];
        we_mask[t] = wen && (t == int'(lane));
      end else begin
        w_data[t]  = r[t];
        we_mask[t] = wen && (LEN_W'(t) < ctl.nval);
      end
    end
  end

endmodule
