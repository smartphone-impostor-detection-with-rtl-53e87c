// tb_sid_data_ram: self-checking test of the line-organised Block RAM.
// Random lane-masked writes against a reference model, reads on both ports,
// output hold while a port is disabled, and old data on a same-cycle read/write.
module tb_sid_data_ram;
  localparam int N = 4, WORDS = 1024, LINES = WORDS / N;
  logic clk = 0;
  always #5 clk = ~clk;
  logic ra_en, rb_en;
  logic [7:0] ra_line, rb_line, w_line;
  logic [N-1:0][31:0] ra_data, rb_data, w_data;
  logic [N-1:0] we_mask;
  logic [N-1:0][31:0] ref_mem [LINES];
  int checks = 0, failures = 0;

  sid_data_ram #(.N_TRACK(N), .WORDS(WORDS)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_line(input logic [N-1:0][31:0] got, input logic [N-1:0][31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++; $display("%s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    ra_en = 0; rb_en = 0; ra_line = 0; rb_line = 0; w_line = 0; w_data = '0; we_mask = '0;
    for (int l = 0; l < LINES; l++) begin
      @(negedge clk);
      we_mask = '1; w_line = 8'(l);
      for (int t = 0; t < N; t++) w_data[t] = $urandom;
      ref_mem[l] = w_data;
    end
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      we_mask = 4'($urandom); w_line = 8'($urandom);
      for (int t = 0; t < N; t++) w_data[t] = $urandom;
      ra_en = 1; ra_line = 8'($urandom);
      rb_en = 1; rb_line = (i % 7 == 0) ? w_line : 8'($urandom);
      begin
        logic [N-1:0][31:0] ea, eb;
        ea = ref_mem[ra_line]; eb = ref_mem[rb_line];   // old contents
        for (int t = 0; t < N; t++) if (we_mask[t]) ref_mem[w_line][t] = w_data[t];
        @(negedge clk);
        check_line(ra_data, ea, "port A");
        check_line(rb_data, eb, "port B");
        we_mask = '0; ra_en = 0; rb_en = 0; ra_line = ra_line + 1; rb_line = rb_line + 1;
        @(negedge clk);
        check_line(ra_data, ea, "port A hold");
        check_line(rb_data, eb, "port B hold");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
