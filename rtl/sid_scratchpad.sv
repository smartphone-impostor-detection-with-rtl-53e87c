// sid_scratchpad: local scratchpad of the EXE2 stage.
//
// N_LOCAL entries of 32 bits (default 64, the paper's 256-byte scratchpad) hold
// the partial sums of a matrix-vector product, the running sum of a squared norm
// and the running maximum of Vmaxabs during one macro-instruction, so these
// intermediate values never travel to the Block RAM. Reads are combinational and
// writes take effect at the clock edge, so a value written in one cycle can be
// read and updated in the next (a one-row matrix updates the same entry every
// cycle). This timing is a design choice; the paper gives the size and the use.
module sid_scratchpad #(
  parameter int unsigned N_LOCAL = 64,
  parameter int unsigned DATA_W  = 32,
  localparam int unsigned AW     = $clog2(N_LOCAL)
) (
  input  logic              clk,
  input  logic [AW-1:0]     rd_addr,
  output logic [DATA_W-1:0] rd_data,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [DATA_W-1:0] wr_data
);

  logic [DATA_W-1:0] mem [N_LOCAL];

  assign rd_data = mem[rd_addr];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

endmodule
