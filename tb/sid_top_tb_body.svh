// Body shared by the end-to-end SID testbenches (tb_sid_top at a reduced memory
// size, tb_sid_top_full at the default size). The including module declares the
// DUT as `dut` with the port names below.
//
// Runs one detection program that uses every operation mode:
//   element-wise Vadd, Vsub, Vmul, Vsgt, Vsig, Vtanh, Vexp on a 10-element vector
//   (a partial last slice, LUT inputs beyond +-8), Mvmul with 5x12, 1x12 and 6x3
//   matrices (all FSM paths), Vsqnorm, Vmaxabs, and the five-step KS test of the
//   paper's example (bnd 1.2 1.6 3.0 4.3 5.0, errors 4.5 3.5 9.5, reference
//   histogram 0 1 2 3 4, giving D = 2 and "normal" for threshold 3).
// Results are read back through the MMU port and compared with values the
// testbench computes itself. Then a motion-sensor sample is written; its last
// element restarts the program, whose result on the new sample is checked. Sensor
// writes during the run exercise the write-port conflict with WR. The run time is
// checked against one iteration per cycle plus a 4-cycle drain per instruction.
// Every mechanism (pipeline interlock, the three FSM states, partial slices,
// operand reuse, sensor restart, sensor stalled by WR, MMU refused while busy, LUT
// saturation) must occur at least once.

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
  int n_stall = 0, n_cont = 0, n_switch = 0, n_partial = 0, n_reuse = 0, n_restart = 0,
      n_sens_block = 0, n_mmu_refused = 0, n_lut_sat = 0;

  localparam int N = 4;
  logic [31:0] mem_ref [int];     // reference of what the program must produce
  logic [127:0] prog [$];
  int prog_iters;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $time); end
  endtask

  task automatic mmu_write(input int addr, input logic [31:0] d);
    @(negedge clk);
    mmu_req = 1; mmu_we = 1; mmu_addr = addr; mmu_wdata = d;
    #1;
    while (!mmu_gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    mmu_req = 0; mmu_we = 0;
  endtask

  task automatic mmu_read(input int addr, output logic [31:0] d);
    @(negedge clk);
    mmu_req = 1; mmu_we = 0; mmu_addr = addr;
    #1;
    while (!mmu_gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    mmu_req = 0;
    d = mmu_rdata;
    chk(mmu_rvalid, "mmu rvalid");
  endtask

  function automatic int n_iter(input mode_e m, input int len, input int wid);
    int ns;
    ns = (len + N - 1) / N;
    return ns * ((wid == 0) ? 1 : wid);
  endfunction

  task automatic emit(input mode_e m, input int len, input int wid, input int ax, input int ay, input int az);
    prog.push_back(mk_inst(m, len, wid, ax, ay, az));
    prog_iters += n_iter(m, len, wid) + 4;
  endtask

  // Coverage of mechanisms, sampled inside the DUT.
  always @(negedge clk) if (rst_n) begin
    if (dut.u_decode.fsm_state == 2'd0 && dut.inst_valid && dut.pipe_busy) n_stall++;
    if (dut.u_decode.fsm_state == 2'd1) n_cont++;
    if (dut.u_decode.fsm_state == 2'd2) n_switch++;
    if (dut.iss.valid && dut.iss.nval < 14'(N)) n_partial++;
    if (dut.iss.valid && !dut.ra_en) n_reuse++;
    if (dut.sensor_restart) n_restart++;
    if (sens_valid && !sens_ready) n_sens_block++;
    if (mmu_req && !mmu_gnt && busy) n_mmu_refused++;
    if (dut.iss.valid && dut.iss.mode inside {M_VSIG, M_VTANH, M_VEXP}) begin
      for (int t = 0; t < N; t++)
        if ($signed(dut.ra_data[t]) >= (32'sd8 <<< 16) || $signed(dut.ra_data[t]) < -(32'sd8 <<< 16)) n_lut_sat++;
    end
  end

  real xr [10] = '{0.5, -1.25, 2.0, -3.5, 9.5, -9.0, 0.125, 4.75, -0.3, 1.0};
  real yr [10] = '{1.5, -1.25, -2.0, 3.0, 0.25, -8.0, 0.5, 4.75, 0.7, -1.0};
  logic [31:0] xv [10], yv [10];
  logic [31:0] wm [5][12], iv [12], w2 [12], w3 [6][3];
  logic [31:0] sens1 [6], sens0 [6];

  task automatic check_elem(input int addr, input logic [31:0] e, input string what);
    logic [31:0] d;
    mmu_read(addr, d);
    checks++;
    if (d !== e) begin failures++; $display("FAIL %s @%0d: got %h exp %h", what, addr, d, e); end
  endtask

  task automatic check_real(input int addr, input real e, input real tol, input string what);
    logic [31:0] d;
    real g;
    mmu_read(addr, d);
    g = fx2r(d);
    checks++;
    if (g - e > tol || e - g > tol) begin failures++; $display("FAIL %s @%0d: got %f exp %f", what, addr, g, e); end
  endtask

  task automatic run_and_time(input string what);
    int c;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    c = 1;
    while (!done) begin @(negedge clk); c++; end
    $display("%s: %0d cycles", what, c);
    chk(c == prog_iters + 2, "run time = iterations + 4-cycle drain per instruction");
  endtask

  initial begin
    logic [31:0] acc, mx, sq, d;
    rst_n = 0; start = 0; start_pc = 13'd0; imem_we = 0; imem_addr = 0; imem_wdata = 0;
    mmu_req = 0; mmu_we = 0; mmu_addr = 0; mmu_wdata = 0;
    sens_valid = 0; sens_last = 0; sens_addr = 0; sens_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---------------- data ----------------
    for (int i = 0; i < 10; i++) begin
      xv[i] = r2fx(xr[i]); yv[i] = r2fx(yr[i]);
      mmu_write(0 + i, xv[i]); mmu_write(16 + i, yv[i]);
    end
    for (int a = 32; a < 144; a++) mmu_write(a, 32'hDEADBEEF);   // sentinels around results
    for (int j = 0; j < 12; j++) begin iv[j] = r2fx(real'(j) * 0.25 - 1.0); mmu_write(200 + j, iv[j]); end
    for (int r = 0; r < 5; r++) for (int j = 0; j < 12; j++) wm[r][j] = r2fx(real'((r * 7 + j * 3) % 11) * 0.125 - 0.6);
    // tiled layout: slice s, row r, N weights per line
    for (int s = 0; s < 3; s++) for (int r = 0; r < 5; r++) for (int t = 0; t < N; t++)
      mmu_write(1024 + (s * 5 + r) * N + t, wm[r][s * N + t]);
    for (int j = 0; j < 12; j++) begin w2[j] = r2fx(real'(j) * 0.1 - 0.5); mmu_write(2048 + j, w2[j]); end
    for (int r = 0; r < 6; r++) for (int t = 0; t < N; t++) begin
      if (t < 3) w3[r][t] = r2fx(real'(r - t) * 0.5);
      mmu_write(2100 + r * N + t, (t < 3) ? w3[r][t] : 32'h0);
    end
    // KS test data (paper's example)
    begin
      real bnd [5] = '{1.2, 1.6, 3.0, 4.3, 5.0};
      real ers [3] = '{4.5, 3.5, 9.5};
      for (int i = 0; i < 5; i++) mmu_write(400 + i, r2fx(bnd[i]));
      for (int i = 0; i < 3; i++) mmu_write(410 + i, r2fx(ers[i]));
      for (int i = 0; i < 5; i++) mmu_write(420 + i, 32'h0);             // observed histogram init
      for (int i = 0; i < 5; i++) mmu_write(448 + i, r2fx(real'(i)));    // reference histogram 0..4
      mmu_write(484, r2fx(3.0));                                         // threshold T
    end
    for (int i = 0; i < 6; i++) begin sens0[i] = r2fx(real'(i) - 2.5); mmu_write(600 + i, sens0[i]); end

    // ---------------- program ----------------
    prog_iters = 0;
    emit(M_VADD,  10, 1, 0, 16, 32);
    emit(M_VSUB,  10, 1, 0, 16, 48);
    emit(M_VMUL,  10, 1, 0, 16, 64);
    emit(M_VSGT,  10, 1, 0, 16, 80);
    emit(M_VSIG,  10, 1, 0, 0, 96);
    emit(M_VTANH, 10, 1, 0, 0, 112);
    emit(M_VEXP,  10, 1, 0, 0, 128);
    emit(M_MVMUL, 12, 5, 200, 1024, 301);   // 5 x 12, 3 column slices
    emit(M_MVMUL, 12, 1, 200, 2048, 520);   // 1 x 12
    emit(M_MVMUL, 3, 6, 200, 2100, 530);    // 6 x 3, one slice
    emit(M_VSQNORM, 10, 1, 0, 0, 500);
    emit(M_VMAXABS, 10, 1, 0, 0, 501);
    for (int k = 0; k < 3; k++) begin       // KS steps 1 and 2
      emit(M_VSSGT, 5, 1, 400, 410 + k, 440);
      emit(M_VADD, 5, 1, 420, 440, 420);
    end
    emit(M_VSUB, 5, 1, 420, 448, 460);      // step 3
    emit(M_VMAXABS, 5, 1, 460, 0, 488);     // step 4
    emit(M_VSGT, 1, 1, 484, 488, 492);      // step 5: T >= D means normal
    emit(M_VSQNORM, 6, 1, 600, 0, 510);     // uses the sensor sample
    
    prog.push_back(mk_inst(M_END, 0, 0, 0, 0, 0));
    foreach (prog[i]) begin
      @(negedge clk); imem_we = 1; imem_addr = 13'(i); imem_wdata = prog[i];
    end
    @(negedge clk); imem_we = 0;

    // ---------------- run 1, with MMU and sensor traffic while busy ----------------
    fork
      run_and_time("run 1");
      begin
        repeat (20) @(negedge clk);
        mmu_req = 1; mmu_we = 0; mmu_addr = 0;      // refused while busy
        repeat (3) @(negedge clk);
        mmu_req = 0;
        for (int i = 0; i < 40; i++) begin          // sensor writes to a scratch area
          sens_valid = 1; sens_addr = 700 + (i % 8); sens_data = 32'(i); sens_last = 0;
          @(negedge clk);
          while (!sens_ready) @(negedge clk);
        end
        sens_valid = 0;
      end
    join

    // element-wise results
    for (int i = 0; i < 10; i++) begin
      check_elem(32 + i, xv[i] + yv[i], "Vadd");
      check_elem(48 + i, xv[i] - yv[i], "Vsub");
      check_elem(64 + i, fxmul(xv[i], yv[i]), "Vmul");
      check_elem(80 + i, ($signed(xv[i]) >= $signed(yv[i])) ? 32'h10000 : 0, "Vsgt");
      check_real(96 + i, sigm(xr[i]), 0.01, "Vsig");
      check_real(112 + i, tanh_r(xr[i]), 0.01, "Vtanh");
      check_real(128 + i, (xr[i] >= 8.0) ? $exp(8.0) : (xr[i] < -8.0) ? 0.0 : $exp(xr[i]),
                 0.01 * ((xr[i] >= 8.0) ? $exp(8.0) : $exp(xr[i])) + 0.002, "Vexp");
    end
    check_elem(42, 32'hDEADBEEF, "tail lanes not written");
    check_elem(47, 32'hDEADBEEF, "tail lanes not written");
    // matrix-vector products
    for (int r = 0; r < 5; r++) begin
      acc = 0;
      for (int j = 0; j < 12; j++) acc += fxmul(wm[r][j], iv[j]);
      check_elem(301 + r, acc, "Mvmul 5x12");
    end
    acc = 0;
    for (int j = 0; j < 12; j++) acc += fxmul(w2[j], iv[j]);
    check_elem(520, acc, "Mvmul 1x12");
    for (int r = 0; r < 6; r++) begin
      acc = 0;
      for (int j = 0; j < 3; j++) acc += fxmul(w3[r][j], iv[j]);
      check_elem(530 + r, acc, "Mvmul 6x3");
    end
    sq = 0; mx = 0;
    for (int i = 0; i < 10; i++) begin
      sq += fxmul(xv[i], xv[i]);
      if ((($signed(xv[i]) < 0) ? -$signed(xv[i]) : $signed(xv[i])) > $signed(mx))
        mx = ($signed(xv[i]) < 0) ? 32'(-$signed(xv[i])) : xv[i];
    end
    check_elem(500, sq, "Vsqnorm");
    check_elem(501, mx, "Vmaxabs");
    // KS test: the paper's example numbers
    begin
      int oh [5] = '{0, 0, 0, 1, 2};
      for (int i = 0; i < 5; i++) check_elem(420 + i, 32'(oh[i]) << 16, "observed histogram");
      check_elem(488, 32'(2) << 16, "KS statistic D = 2");
      check_elem(492, 32'h10000, "normal (T >= D)");
    end
    sq = 0;
    for (int i = 0; i < 6; i++) sq += fxmul(sens0[i], sens0[i]);
    check_elem(510, sq, "norm of first sensor sample");
    for (int i = 0; i < 8; i++) check_elem(700 + i, 32'(32 + i), "sensor writes during run");

    // ---------------- run 2, started by a sensor sample ----------------
    for (int i = 0; i < 6; i++) begin
      @(negedge clk);
      sens1[i] = r2fx(real'(i) * 0.75 + 0.5);
      sens_valid = 1; sens_addr = 600 + i; sens_data = sens1[i]; sens_last = (i == 5);
    end
    @(negedge clk);
    sens_valid = 0; sens_last = 0;
    #1;
    chk(busy, "sensor sample restarted the program");
    while (!done) @(negedge clk);
    sq = 0;
    for (int i = 0; i < 6; i++) sq += fxmul(sens1[i], sens1[i]);
    check_elem(510, sq, "norm of second sensor sample");
    check_elem(423, 32'(2) << 16, "histogram accumulates over runs");
    check_elem(424, 32'(4) << 16, "histogram accumulates over runs");

    $display("mechanisms: stall=%0d continue=%0d switch=%0d partial=%0d reuse=%0d restart=%0d sens_block=%0d mmu_refused=%0d lut_sat=%0d",
             n_stall, n_cont, n_switch, n_partial, n_reuse, n_restart, n_sens_block, n_mmu_refused, n_lut_sat);
    chk(n_stall > 0, "interlock stall happened");
    chk(n_cont > 0, "FSM continue state happened");
    chk(n_switch > 0, "FSM switch state happened");
    chk(n_partial > 0, "partial slice happened");
    chk(n_reuse > 0, "operand reuse happened");
    chk(n_restart == 1, "sensor restart happened");
    chk(n_sens_block > 0, "sensor write stalled by WR happened");
    chk(n_mmu_refused > 0, "MMU refused while busy happened");
    chk(n_lut_sat > 0, "LUT saturation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
