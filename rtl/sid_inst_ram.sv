// sid_inst_ram: instruction memory of the SID module.
//
// Holds the macro-instruction program, one 128-bit instruction per entry. The
// default depth, 8192 entries, is the paper's 128 KB instruction RAM. Fetch reads
// it through a synchronous port: the instruction addressed in one cycle appears on
// rd_data in the next, and rd_data holds its value while rd_en is low. A single
// write port lets the host memory system load programs. Read latency, hold
// behaviour and the write port are this design's choices (block-RAM style).
module sid_inst_ram #(
  parameter int unsigned DEPTH  = 8192,
  parameter int unsigned INST_W = 128,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output logic [INST_W-1:0] rd_data,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [INST_W-1:0] wr_data
);

  logic [INST_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
