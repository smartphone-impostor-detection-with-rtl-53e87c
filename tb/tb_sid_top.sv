// tb_sid_top: end-to-end test of SID with the Block RAM reduced to 8192 words
// (everything else at its default); the test itself is in sid_top_tb_body.svh.
module tb_sid_top;
  import sid_pkg::*;
  import sid_tb_pkg::*;
  sid_top #(.DMEM_WORDS(8192), .IMEM_DEPTH(8192)) dut (.*);
`include "sid_top_tb_body.svh"
endmodule
