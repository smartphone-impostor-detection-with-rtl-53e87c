// tb_sid_mem_arb: self-checking test of the Block RAM port sharing.
// Connects the arbiter to a small Block RAM and drives random datapath writes,
// sensor writes and MMU requests. Checks write priority (datapath, sensor, MMU),
// the sensor ready and restart signals, MMU grants (reads only while idle) and
// MMU read data against a reference memory.
module tb_sid_mem_arb;
  import sid_pkg::*;
  localparam int N = 4, WORDS = 256, LAW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, core_idle, dec_ra_en;
  logic [LAW-1:0] dec_ra_line, dp_line, ra_line, w_line;
  logic [N-1:0] dp_we_mask, we_mask;
  logic [N-1:0][31:0] dp_data, ra_data, w_data, rb_data;
  logic sens_valid, sens_ready, sens_last, sensor_restart;
  logic [31:0] sens_addr, sens_data;
  logic mmu_req, mmu_we, mmu_gnt, mmu_rvalid;
  logic [31:0] mmu_addr, mmu_wdata, mmu_rdata;
  logic ra_en;
  logic [31:0] ref_mem [WORDS];
  int checks = 0, failures = 0;
  int n_sens_blocked = 0, n_mmu_rd = 0, n_mmu_wr = 0;

  sid_mem_arb #(.N_TRACK(N), .LAW(LAW)) dut (.*);
  sid_data_ram #(.N_TRACK(N), .WORDS(WORDS)) u_ram (.clk(clk), .ra_en(ra_en), .ra_line(ra_line),
    .ra_data(ra_data), .rb_en(1'b0), .rb_line('0), .rb_data(rb_data),
    .we_mask(we_mask), .w_line(w_line), .w_data(w_data));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $time); end
  endtask

  logic exp_rvalid;
  logic [31:0] exp_rdata;

  initial begin
    rst_n = 0; core_idle = 1; dec_ra_en = 0; dec_ra_line = 0; dp_we_mask = 0; dp_line = 0; dp_data = '0;
    sens_valid = 0; sens_addr = 0; sens_data = 0; sens_last = 0;
    mmu_req = 0; mmu_we = 0; mmu_addr = 0; mmu_wdata = 0; exp_rvalid = 0;
    @(negedge clk); rst_n = 1;
    // initialise through the MMU
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); mmu_req = 1; mmu_we = 1; mmu_addr = i; mmu_wdata = $urandom; ref_mem[i] = mmu_wdata;
      #1; chk(mmu_gnt, "mmu write granted when free");
    end
    @(negedge clk); mmu_req = 0;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      if (exp_rvalid) begin
        chk(mmu_rvalid, "rvalid");
        chk(mmu_rdata == exp_rdata, "mmu read data");
      end else chk(!mmu_rvalid, "no rvalid");
      core_idle  = 1'($urandom);
      dec_ra_en  = !core_idle && 1'($urandom);
      dec_ra_line = LAW'($urandom);
      dp_we_mask = ($urandom % 3 == 0) ? 4'($urandom) : '0;
      dp_line = LAW'($urandom);
      for (int t = 0; t < N; t++) dp_data[t] = $urandom;
      sens_valid = 1'($urandom); sens_addr = $urandom % WORDS; sens_data = $urandom; sens_last = 1'($urandom);
      mmu_req = 1'($urandom); mmu_we = 1'($urandom); mmu_addr = $urandom % WORDS; mmu_wdata = $urandom;
      #1;
      chk(sens_ready == (dp_we_mask == 0), "sensor ready only when WR idle");
      chk(sensor_restart == (sens_valid && sens_ready && sens_last), "sensor restart");
      if (sens_valid && !sens_ready) n_sens_blocked++;
      chk(mmu_gnt == (mmu_req && (mmu_we ? (dp_we_mask == 0 && !sens_valid) : core_idle)), "mmu grant");
      exp_rvalid = mmu_req && !mmu_we && mmu_gnt;
      if (exp_rvalid) begin exp_rdata = ref_mem[mmu_addr]; n_mmu_rd++; end
      if (!exp_rvalid) begin chk(ra_en == dec_ra_en && (!dec_ra_en || ra_line == dec_ra_line), "port A to decode"); end
      // reference memory update with the priority the arbiter must apply
      if (dp_we_mask != 0) begin
        for (int t = 0; t < N; t++) if (dp_we_mask[t]) ref_mem[int'(dp_line) * N + t] = dp_data[t];
      end else if (sens_valid) ref_mem[sens_addr] = sens_data;
      else if (mmu_req && mmu_we) begin ref_mem[mmu_addr] = mmu_wdata; n_mmu_wr++; end
      if (exp_rvalid && dp_we_mask == 0 && !sens_valid && mmu_we) exp_rdata = exp_rdata;
    end
    // read the whole memory back through the MMU
    @(negedge clk); dp_we_mask = 0; sens_valid = 0; core_idle = 1; dec_ra_en = 0;
    for (int i = 0; i < WORDS; i++) begin
      mmu_req = 1; mmu_we = 0; mmu_addr = i;
      @(negedge clk);
      mmu_req = 0;
      chk(mmu_rvalid && mmu_rdata == ref_mem[i], "final memory contents");
    end
    chk(n_sens_blocked > 0 && n_mmu_rd > 0 && n_mmu_wr > 0, "all arbitration cases seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
