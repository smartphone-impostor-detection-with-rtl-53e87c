// tb_sid_mlp: runs one inference of the MLP-200-100 detector (384 inputs: a window
// of 64 readings of 6 sensor axes; 200 and 100 sigmoid units; 2 outputs and the
// class decision) on SID at its default size. The same testbench serves the other
// MLP sizes by changing the LAYERS list.
//
// The testbench generates the weights, loads them pre-tiled through the MMU port,
// writes the program (layers wider than the 64-entry scratchpad are split into
// several Mvmul instructions), runs it and reads every layer back. Each layer is
// checked against the testbench's own arithmetic applied to the previous layer as
// the DUT computed it: Mvmul and bias sums exactly (wrapping Q16.16), sigmoid
// within 0.01 of the real function, the class decision exactly. The run time is
// checked against one iteration per cycle plus the 4-cycle drain per instruction.
module tb_sid_mlp;
  import sid_pkg::*;
  import sid_tb_pkg::*;

  sid_top dut (.*);

  localparam int NL = 3;
  localparam int LAYERS [NL+1] = '{384, 200, 100, 2};
  localparam int N = 4;
  localparam int RMAX = 64;

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
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %t", what, $time); end
  endtask

  // Back-to-back element writes: the MMU is granted every cycle while SID is idle.
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

  // Small pseudo-random weights in [-0.125, 0.125), inputs in [-2, 2).
  function automatic logic [31:0] rnd(input int scale_log2);
    return 32'($signed($urandom) >>> (16 + scale_log2));
  endfunction

  logic [31:0] w [NL][][];
  logic [31:0] bias [NL][];
  int wbase [NL], bbase [NL], zbase [NL], abase [NL+1];
  int cls_addr;

  // The output layer is computed one row per instruction with each output in a
  // word of its own line, so that the decision (Vsgt) can compare aligned operands.
  function automatic int tile(input int l);  return (l == NL - 1) ? 1 : RMAX; endfunction
  function automatic int stride(input int l); return (l == NL - 1) ? N : 1; endfunction

  initial begin
    logic [31:0] d, acc, pre;
    int rows, cols, ns, base, c;
    real e;
    rst_n = 0; start = 0; start_pc = 0; imem_we = 0; imem_addr = 0; imem_wdata = 0;
    mmu_req = 0; mmu_we = 0; mmu_addr = 0; mmu_wdata = 0;
    sens_valid = 0; sens_last = 0; sens_addr = 0; sens_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    abase[0] = alloc(LAYERS[0]);
    for (int j = 0; j < LAYERS[0]; j++) mmu_write(abase[0] + j, rnd(-1));
    for (int l = 0; l < NL; l++) begin
      rows = LAYERS[l+1]; cols = LAYERS[l]; ns = (cols + N - 1) / N;
      w[l] = new[rows];
      bias[l] = new[rows];
      for (int r = 0; r < rows; r++) begin
        w[l][r] = new[cols];
        for (int j = 0; j < cols; j++) w[l][r][j] = rnd(3);
        bias[l][r] = rnd(2);
      end
      wbase[l] = alloc(rows * ns * N);
      // tiles of at most RMAX rows; within a tile: slice-major, row-minor
      base = wbase[l];
      for (int r0 = 0; r0 < rows; r0 += tile(l)) begin
        int wt;
        wt = (rows - r0 < tile(l)) ? rows - r0 : tile(l);
        for (int s = 0; s < ns; s++) for (int rr = 0; rr < wt; rr++) for (int t = 0; t < N; t++)
          mmu_write(base + (s * wt + rr) * N + t, (s * N + t < cols) ? w[l][r0 + rr][s * N + t] : 32'h0);
        base += wt * ns * N;
      end
      bbase[l] = alloc(rows * stride(l));
      for (int r = 0; r < rows; r++) mmu_write(bbase[l] + r * stride(l), bias[l][r]);
      zbase[l] = alloc(rows * stride(l));
      abase[l+1] = alloc(rows * stride(l));
    end
    $display("model and input: %0d words", ptr);

    // program
    for (int l = 0; l < NL; l++) begin
      rows = LAYERS[l+1]; cols = LAYERS[l]; ns = (cols + N - 1) / N;
      base = wbase[l];
      for (int r0 = 0; r0 < rows; r0 += tile(l)) begin
        int wt;
        wt = (rows - r0 < tile(l)) ? rows - r0 : tile(l);
        emit(M_MVMUL, cols, wt, abase[l], base, zbase[l] + r0 * stride(l));
        base += wt * ns * N;
      end
      if (l < NL - 1) begin
        emit(M_VADD, rows, 1, zbase[l], bbase[l], abase[l+1]);
        emit(M_VSIG, rows, 1, abase[l+1], 0, abase[l+1]);
      end else begin
        for (int r = 0; r < rows; r++)
          emit(M_VADD, 1, 1, zbase[l] + r * N, bbase[l] + r * N, abase[l+1] + r * N);
      end
    end
    // decision: 1.0 when output 0 >= output 1
    cls_addr = alloc(1);
    emit(M_VSGT, 1, 1, abase[NL], abase[NL] + N, cls_addr);
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
    $display("inference: %0d instructions, %0d cycles", prog.size() - 1, c);
    chk(c == prog_iters + 2, "run time = iterations + 4-cycle drain per instruction");

    // layer-by-layer check against the DUT's own previous layer
    begin
      logic [31:0] a_in [];
      a_in = new[LAYERS[0]];
      for (int j = 0; j < LAYERS[0]; j++) begin mmu_read(abase[0] + j, d); a_in[j] = d; end
      for (int l = 0; l < NL; l++) begin
        logic [31:0] a_out [];
        rows = LAYERS[l+1]; cols = LAYERS[l];
        a_out = new[rows];
        for (int r = 0; r < rows; r++) begin
          acc = 0;
          for (int j = 0; j < cols; j++) acc += fxmul(w[l][r][j], a_in[j]);
          mmu_read(zbase[l] + r * stride(l), d);
          chk(d == acc, "Mvmul output exact");
          pre = acc + bias[l][r];
          mmu_read(abase[l+1] + r * stride(l), d);
          a_out[r] = d;
          if (l < NL - 1) begin
            e = fx2r(d) - sigm(fx2r(pre));
            chk(e < 0.01 && e > -0.01, "sigmoid activation");
          end else
            chk(d == pre, "output layer exact");
        end
        a_in = a_out;
        if (l == NL - 1) begin
          mmu_read(cls_addr, d);
          chk(d == (($signed(a_out[0]) >= $signed(a_out[1])) ? 32'h10000 : 32'h0), "class decision");
          $display("outputs %f %f, decision %h", fx2r(a_out[0]), fx2r(a_out[1]), d);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
