// tb_sid_svm: runs one RBF-kernel SVM decision on SID at its default size. The
// same program shape serves the one-class SVM (OCSVM) with a different number of
// support vectors.
//
// For each support vector s_k the program computes d_k = |x - s_k|^2 (Vsub, then
// Vsqnorm, whose scalar results land in consecutive words), then the kernel
// values K_k = exp(-gamma * d_k) (Vmul by a vector of -gamma, Vexp), the score
// sum_k alpha_k K_k + b (Mvmul with one row, Vadd) and the class (Vsgt against 0).
// NSV = 893 support vectors of 384 elements is about 1340 KB of model, the size
// of the SVM detector in the published comparison; the vectors themselves are
// random here. Every d_k, K_k, the score and the class are checked against the
// testbench's own arithmetic on the DUT's inputs to that step (sums exactly,
// exp within 1% + 0.002), and the run time against one iteration per cycle plus
// the 4-cycle drain per instruction.
module tb_sid_svm;
  import sid_pkg::*;
  import sid_tb_pkg::*;

  sid_top dut (.*);

  localparam int NSV = 893;
  localparam int D = 384;
  localparam int N = 4;

  logic clk = 0;
  always #5 clk = ~clk;
  logic        rst_n, start, busy, done;
  logic [12:0] start_pc;
  logic        imem_we;
  logic [12:0] imem_addr;
  logic [127:0] imem_wdata;
  logic        mmu_req, mmu_we, mmu_gnt, mmu_rvalid;
  logic [31:0] mmu_addr, mmu_wdata, mmu_rdata;
  logic        sens_valid, sens_ready, sens_last;
  logic [31:0] sens_addr, sens_data;

  int checks = 0, failures = 0;
  logic [127:0] prog [$];
  int prog_iters = 0;
  int ptr = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %t", what, $time); end
  endtask

  task automatic mmu_write(input int addr, input logic [31:0] d);
    mmu_req = 1; mmu_we = 1; mmu_addr = addr; mmu_wdata = d;
    @(negedge clk);
    while (!mmu_gnt) @(negedge clk);
    mmu_req = 0; mmu_we = 0;
  endtask

  task automatic mmu_read(input int addr, output logic [31:0] d);
    mmu_req = 1; mmu_we = 0; mmu_addr = addr;
    @(negedge clk);
    mmu_req = 0;
    @(negedge clk);
    d = mmu_rdata;
  endtask

  function automatic int alloc(input int words);
    int a;
    a = ptr;
    ptr += (words + N - 1) / N * N;
    return a;
  endfunction

  task automatic emit(input mode_e m, input int len, input int wid, input int ax, input int ay, input int az);
    prog.push_back(mk_inst(m, len, wid, ax, ay, az));
    prog_iters += ((len + N - 1) / N) * ((wid == 0) ? 1 : wid) + 4;
  endtask

  function automatic logic [31:0] rnd(input int scale_log2);
    return 32'($signed($urandom) >>> (16 + scale_log2));
  endfunction

  logic [31:0] x [D], sv [][], alpha [NSV], bias;
  logic [31:0] ngam;
  int a_x, a_sv, a_df, a_d, a_g, a_k, a_al, a_b, a_sc, a_s, a_z, a_cls;

  initial begin
    logic [31:0] d, acc, sc, dk [NSV], kk [NSV];
    real e, ref_k;
    int c;
    rst_n = 0; start = 0; start_pc = 0; imem_we = 0; imem_addr = 0; imem_wdata = 0;
    mmu_req = 0; mmu_we = 0; mmu_addr = 0; mmu_wdata = 0;
    sens_valid = 0; sens_last = 0; sens_addr = 0; sens_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    ngam = r2fx(-1.0 / 256.0);
    a_x = alloc(D); a_sv = alloc(NSV * D); a_df = alloc(D);
    a_d = alloc(NSV); a_g = alloc(NSV); a_k = alloc(NSV);
    a_al = alloc(NSV); a_b = alloc(1); a_sc = alloc(1); a_s = alloc(1); a_z = alloc(1); a_cls = alloc(1);
    for (int j = 0; j < D; j++) begin x[j] = rnd(0); mmu_write(a_x + j, x[j]); end
    sv = new[NSV];
    for (int k = 0; k < NSV; k++) begin
      sv[k] = new[D];
      for (int j = 0; j < D; j++) begin sv[k][j] = rnd(0); mmu_write(a_sv + k * D + j, sv[k][j]); end
      alpha[k] = rnd(4);
      mmu_write(a_g + k, ngam);
      mmu_write(a_al + k, alpha[k]);
    end
    bias = rnd(2);
    mmu_write(a_b, bias);
    mmu_write(a_z, 32'h0);
    $display("model and input: %0d words", ptr);

    for (int k = 0; k < NSV; k++) begin
      emit(M_VSUB, D, 1, a_x, a_sv + k * D, a_df);
      emit(M_VSQNORM, D, 1, a_df, 0, a_d + k);
    end
    emit(M_VMUL, NSV, 1, a_d, a_g, a_k);
    emit(M_VEXP, NSV, 1, a_k, 0, a_k);
    emit(M_MVMUL, NSV, 1, a_k, a_al, a_sc);       // one row: alpha is already "tiled"
    emit(M_VADD, 1, 1, a_sc, a_b, a_s);
    emit(M_VSGT, 1, 1, a_s, a_z, a_cls);
    prog.push_back(mk_inst(M_END, 0, 0, 0, 0, 0));
    foreach (prog[i]) begin
      imem_we = 1; imem_addr = 13'(i); imem_wdata = prog[i];
      @(negedge clk);
    end
    imem_we = 0;

    start = 1;
    @(negedge clk);
    start = 0;
    c = 1;
    while (!done) begin @(negedge clk); c++; end
    $display("decision: %0d instructions, %0d cycles", prog.size() - 1, c);
    chk(c == prog_iters + 2, "run time = iterations + 4-cycle drain per instruction");

    for (int k = 0; k < NSV; k++) begin
      acc = 0;
      for (int j = 0; j < D; j++) acc += fxmul(x[j] - sv[k][j], x[j] - sv[k][j]);
      mmu_read(a_d + k, d);
      dk[k] = d;
      chk(d == acc, "squared distance");
      mmu_read(a_k + k, d);
      kk[k] = d;
      ref_k = $exp(fx2r(fxmul(dk[k], ngam)));
      e = fx2r(d) - ref_k;
      chk(e < 0.01 * ref_k + 0.002 && e > -(0.01 * ref_k + 0.002), "kernel value");
    end
    sc = 0;
    for (int k = 0; k < NSV; k++) sc += fxmul(alpha[k], kk[k]);
    mmu_read(a_sc, d);
    chk(d == sc, "weighted kernel sum");
    sc += bias;
    mmu_read(a_s, d);
    chk(d == sc, "score");
    mmu_read(a_cls, d);
    chk(d == (($signed(sc) >= 0) ? 32'h10000 : 32'h0), "class decision");
    $display("score %f, class %h", fx2r(sc), d);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
