// tb_sid_fetch: self-checking test of the Fetch stage with an instruction RAM.
// Checks that the instruction at PC is presented without bubbles, that take
// advances the PC, that start restarts at start_pc (also over take and halt), and
// that halt stops fetching and raises done.
module tb_sid_fetch;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, take, halt, inst_valid, done, imem_rd_en, wr_en;
  logic [12:0] start_pc, pc, imem_rd_addr, wr_addr;
  logic [127:0] inst, imem_rd_data, wr_data;
  int checks = 0, failures = 0;

  sid_fetch dut (.*);
  sid_inst_ram #(.DEPTH(8192)) u_ram (.clk(clk), .rd_en(imem_rd_en), .rd_addr(imem_rd_addr),
    .rd_data(imem_rd_data), .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $time); end
  endtask

  function automatic logic [127:0] word(input int a);
    return {32'hC0DE0000 + 32'(a), 32'(a) * 3, 32'(a) ^ 32'h5a5a, 32'(a)};
  endfunction

  initial begin
    rst_n = 0; start = 0; take = 0; halt = 0; start_pc = 0; wr_en = 0; wr_addr = 0; wr_data = 0;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = 13'(i); wr_data = word(i);
    end
    @(negedge clk); wr_en = 0; rst_n = 1;
    @(negedge clk);
    chk(!inst_valid && !done, "idle after reset");
    for (int run = 0; run < 20; run++) begin
      int pcx;
      pcx = $urandom_range(0, 150);
      start_pc = 13'(pcx); start = 1; take = 0; halt = (run > 0) && 1'($urandom);
      @(negedge clk);
      start = 0; take = 0; halt = 0;
      chk(inst_valid && !done, "running after start");
      for (int k = 0; k < 40; k++) begin
        chk(pc == 13'(pcx), "pc value");
        chk(inst == word(pcx), "instruction at pc without bubble");
        take = 1'($urandom);
        @(negedge clk);
        if (take) pcx++;
        take = 0;
      end
      halt = 1;
      @(negedge clk);
      halt = 0;
      chk(!inst_valid && done, "halt stops and raises done");
      @(negedge clk);
      chk(!inst_valid && done, "done holds");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
