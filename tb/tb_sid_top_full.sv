// tb_sid_top_full: end-to-end test of SID at its default size (4 tracks, 64-entry
// scratchpad, 458752-word Block RAM, 8192-entry instruction RAM); the test itself
// is in sid_top_tb_body.svh.
module tb_sid_top_full;
  import sid_pkg::*;
  import sid_tb_pkg::*;
  sid_top dut (.*);
`include "sid_top_tb_body.svh"
endmodule
