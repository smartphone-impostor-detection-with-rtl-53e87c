// tb_sid_inst_ram: self-checking test of the instruction RAM.
// Writes random 128-bit words to random addresses (keeping a reference copy),
// reads them back and checks the one-cycle read latency and that the output holds
// while rd_en is low.
module tb_sid_inst_ram;
  localparam int DEPTH = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rd_en, wr_en;
  logic [7:0] rd_addr, wr_addr;
  logic [127:0] rd_data, wr_data;
  logic [127:0] ref_mem [DEPTH];
  bit           written [DEPTH];
  int checks = 0, failures = 0;

  sid_inst_ram #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_en = 0; wr_en = 0; rd_addr = 0; wr_addr = 0; wr_data = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 8'(i);
      wr_data = {$urandom, $urandom, $urandom, $urandom};
      ref_mem[i] = wr_data; written[i] = 1;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      rd_en = 1; rd_addr = 8'($urandom);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data !== ref_mem[rd_addr]) begin
        failures++; $display("read mismatch at %0d", rd_addr);
      end
      rd_addr = rd_addr + 1;   // address changes while disabled: output must hold
      @(negedge clk);
      checks++;
      if (rd_data !== ref_mem[rd_addr - 1]) begin
        failures++; $display("hold failed");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
