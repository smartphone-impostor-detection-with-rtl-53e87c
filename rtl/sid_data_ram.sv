// sid_data_ram: the SID Block RAM (data memory).
//
// Stores model parameters, sensor samples, vector operands and results. It is
// organised in lines of N_TRACK 32-bit elements so that one line feeds all parallel
// tracks in one cycle; element address e lives in line e / N_TRACK, lane
// e % N_TRACK. The default size, 458752 words, is the paper's 1.75 MB data RAM.
//
// Ports: two synchronous read ports (A for the x operand or host reads, B for the y
// operand) and one write port with an enable per lane. A read returns the line one
// cycle after its address; while a port's enable is low its output keeps the last
// line read, which the datapath uses to reuse an operand without reading it again.
// A read and a write of the same line in one cycle return the old contents. The
// line organisation and the port set are this design's choices; the paper gives the
// size and shows the connections.
module sid_data_ram #(
  parameter int unsigned N_TRACK = 4,
  parameter int unsigned WORDS   = 458752,
  parameter int unsigned DATA_W  = 32,
  localparam int unsigned LINES  = WORDS / N_TRACK,
  localparam int unsigned LAW    = $clog2(LINES)
) (
  input  logic                           clk,
  input  logic                           ra_en,
  input  logic [LAW-1:0]                 ra_line,
  output logic [N_TRACK-1:0][DATA_W-1:0] ra_data,
  input  logic                           rb_en,
  input  logic [LAW-1:0]                 rb_line,
  output logic [N_TRACK-1:0][DATA_W-1:0] rb_data,
  input  logic [N_TRACK-1:0]             we_mask,
  input  logic [LAW-1:0]                 w_line,
  input  logic [N_TRACK-1:0][DATA_W-1:0] w_data
);

  logic [N_TRACK-1:0][DATA_W-1:0] mem [LINES];

  always_ff @(posedge clk) begin
    for (int l = 0; l < int'(N_TRACK); l++) begin
      if (we_mask[l]) mem[w_line][l] <= w_data[l];
    end
  end

  always_ff @(posedge clk) begin
    if (ra_en) ra_data <= mem[ra_line];
  end

  always_ff @(posedge clk) begin
    if (rb_en) rb_data <= mem[rb_line];
  end

endmodule
