// tb_sid_scratchpad: self-checking test of the EXE2 local scratchpad.
// Random writes against a reference array; combinational reads checked every cycle,
// including read-after-write in the next cycle.
module tb_sid_scratchpad;
  localparam int NL = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [5:0] rd_addr, wr_addr;
  logic [31:0] rd_data, wr_data;
  logic wr_en;
  logic [31:0] ref_mem [NL];
  int checks = 0, failures = 0;

  sid_scratchpad #(.N_LOCAL(NL)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_addr = 0; wr_addr = 0; wr_data = 0;
    for (int i = 0; i < NL; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = 6'(i); wr_data = $urandom; ref_mem[i] = wr_data;
    end
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      wr_en = 1'($urandom); wr_addr = 6'($urandom); wr_data = $urandom;
      rd_addr = (i % 3 == 0) ? wr_addr : 6'($urandom);
      #1;
      checks++;
      if (rd_data !== ref_mem[rd_addr]) begin failures++; $display("mismatch %0d", rd_addr); end
      if (wr_en) ref_mem[wr_addr] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
