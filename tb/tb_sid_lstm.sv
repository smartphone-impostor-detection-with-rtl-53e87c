// tb_sid_lstm: runs the PED-LSTM-200 detector on SID at its default size for a
// few sensor readings. Each reading (6 values: 3-axis accelerometer and gyroscope)
// is written through the sensor port; its last value restarts the program, which
//   1. forms the prediction error of the previous step, e = |y_pred - x|^2
//      (Vsub, Vsqnorm),
//   2. updates the observed cumulative error histogram and the KS verdict
//      (VSsgt, Vadd, Vsub, Vmaxabs, Vsgt),
//   3. advances the LSTM cell with 200 hidden units: the 800 gate rows over the
//      206-element vector [h; x] are split into 64-row Mvmul instructions, then
//      bias, sigmoid for the i, f, o gates, tanh for g, c = f*c + i*g, h = o*tanh(c),
//   4. predicts the next reading, y_pred = Wy h + by (Mvmul 6 x 200, Vadd).
// After every step the testbench reads all intermediate vectors back and checks
// each against its own arithmetic applied to the DUT's inputs of that
// instruction: sums and products exactly (wrapping Q16.16), sigmoid and tanh within
// 0.01. The layer sizes (LSTM-50/100/200, GRU-like variants) differ only in H.
module tb_sid_lstm;
  import sid_pkg::*;
  import sid_tb_pkg::*;

  sid_top dut (.*);

  localparam int H = 200;          // hidden units
  localparam int XD = 6;           // sensor axes
  localparam int STEPS = 4;
  localparam int N = 4;
  localparam int RMAX = 64;
  localparam int NB = 5;           // reference bins

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
  endtask

  function automatic logic [31:0] rnd(input int scale_log2);
    return 32'($signed($urandom) >>> (16 + scale_log2));
  endfunction

  // store a rows x cols matrix pre-tiled for Mvmul in tiles of at most RMAX rows
  task automatic store_tiled(input int base, ref logic [31:0] m [][], input int rows, input int cols);
    int ns, b;
    ns = (cols + N - 1) / N;
    b = base;
    for (int r0 = 0; r0 < rows; r0 += RMAX) begin
      int wt;
      wt = (rows - r0 < RMAX) ? rows - r0 : RMAX;
      for (int s = 0; s < ns; s++) for (int rr = 0; rr < wt; rr++) for (int t = 0; t < N; t++)
        mmu_write(b + (s * wt + rr) * N + t, (s * N + t < cols) ? m[r0 + rr][s * N + t] : 32'h0);
      b += wt * ns * N;
    end
  endtask

  task automatic emit_mvmul(input int xa, input int base, input int rows, input int cols, input int za);
    int ns, b;
    ns = (cols + N - 1) / N;
    b = base;
    for (int r0 = 0; r0 < rows; r0 += RMAX) begin
      int wt;
      wt = (rows - r0 < RMAX) ? rows - r0 : RMAX;
      emit(M_MVMUL, cols, wt, xa, b, za + r0);
      b += wt * ns * N;
    end
  endtask

  task automatic read_vec(input int a, input int n, ref logic [31:0] v []);
    logic [31:0] d;
    v = new[n];
    for (int i = 0; i < n; i++) begin mmu_read(a + i, d); v[i] = d; end
  endtask

  logic [31:0] wg [][], wy [][], bg [], by [];
  logic [31:0] bnd [NB], refh [NB];
  int a_hx, a_wg, a_bg, a_zg, a_ag, a_c, a_ig, a_tc, a_wy, a_by, a_zy, a_yp, a_df, a_e,
      a_bnd, a_tmp, a_hist, a_ref, a_diff, a_d, a_t, a_norm;

  initial begin
    logic [31:0] d, acc, e2, dmax;
    logic [31:0] hx [], zg [], ag [], c_prev [], c_new [], tc [], h [], zy [], yp_prev [], yp [], x [];
    logic [31:0] hist [NB];
    real er;
    int nstep_restart = 0;
    rst_n = 0; start = 0; start_pc = 0; imem_we = 0; imem_addr = 0; imem_wdata = 0;
    mmu_req = 0; mmu_we = 0; mmu_addr = 0; mmu_wdata = 0;
    sens_valid = 0; sens_last = 0; sens_addr = 0; sens_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---------------- model ----------------
    a_hx = alloc(H + XD);                 // [h; x]: h written by the cell, x by the sensor
    wg = new[4 * H]; bg = new[4 * H];
    for (int r = 0; r < 4 * H; r++) begin
      wg[r] = new[H + XD];
      for (int j = 0; j < H + XD; j++) wg[r][j] = rnd(4);
      bg[r] = rnd(2);
    end
    wy = new[XD]; by = new[XD];
    for (int r = 0; r < XD; r++) begin
      wy[r] = new[H];
      for (int j = 0; j < H; j++) wy[r][j] = rnd(3);
      by[r] = rnd(1);
    end
    a_wg = alloc(4 * H * ((H + XD + N - 1) / N) * N);
    a_bg = alloc(4 * H); a_zg = alloc(4 * H); a_ag = alloc(4 * H);
    a_c = alloc(H); a_ig = alloc(H); a_tc = alloc(H);
    a_wy = alloc(XD * (H / N) * N);
    a_by = alloc(XD); a_zy = alloc(XD); a_yp = alloc(XD); a_df = alloc(XD); a_e = alloc(1);
    a_bnd = alloc(NB); a_tmp = alloc(NB); a_hist = alloc(NB); a_ref = alloc(NB); a_diff = alloc(NB);
    a_d = alloc(1); a_t = alloc(1); a_norm = alloc(1);

    for (int j = 0; j < H + XD; j++) mmu_write(a_hx + j, 32'h0);
    store_tiled(a_wg, wg, 4 * H, H + XD);
    for (int r = 0; r < 4 * H; r++) mmu_write(a_bg + r, bg[r]);
    for (int r = 0; r < H; r++) mmu_write(a_c + r, 32'h0);
    store_tiled(a_wy, wy, XD, H);
    for (int r = 0; r < XD; r++) mmu_write(a_by + r, by[r]);
    for (int r = 0; r < XD; r++) mmu_write(a_yp + r, 32'h0);
    for (int i = 0; i < NB; i++) begin
      bnd[i] = r2fx(0.5 * real'(1 << i));       // squared-error bin boundaries 0.5 .. 8
      refh[i] = 32'(i) << 16;                    // reference cumulative histogram
      hist[i] = 0;
      mmu_write(a_bnd + i, bnd[i]); mmu_write(a_ref + i, refh[i]); mmu_write(a_hist + i, 32'h0);
    end
    mmu_write(a_t, r2fx(2.5));
    $display("model and state: %0d words", ptr);

    // ---------------- program ----------------
    emit(M_VSUB, XD, 1, a_yp, a_hx + H, a_df);           // prediction error
    emit(M_VSQNORM, XD, 1, a_df, 0, a_e);
    emit(M_VSSGT, NB, 1, a_bnd, a_e, a_tmp);             // KS test
    emit(M_VADD, NB, 1, a_hist, a_tmp, a_hist);
    emit(M_VSUB, NB, 1, a_hist, a_ref, a_diff);
    emit(M_VMAXABS, NB, 1, a_diff, 0, a_d);
    emit(M_VSGT, 1, 1, a_t, a_d, a_norm);
    emit_mvmul(a_hx, a_wg, 4 * H, H + XD, a_zg);         // LSTM cell
    emit(M_VADD, 4 * H, 1, a_zg, a_bg, a_ag);
    emit(M_VSIG, 3 * H, 1, a_ag, 0, a_ag);               // i, f, o
    emit(M_VTANH, H, 1, a_ag + 3 * H, 0, a_ag + 3 * H);  // g
    emit(M_VMUL, H, 1, a_ag + H, a_c, a_c);              // f * c
    emit(M_VMUL, H, 1, a_ag, a_ag + 3 * H, a_ig);        // i * g
    emit(M_VADD, H, 1, a_c, a_ig, a_c);
    emit(M_VTANH, H, 1, a_c, 0, a_tc);
    emit(M_VMUL, H, 1, a_ag + 2 * H, a_tc, a_hx);        // h = o * tanh(c)
    emit_mvmul(a_hx, a_wy, XD, H, a_zy);                 // prediction
    emit(M_VADD, XD, 1, a_zy, a_by, a_yp);
    prog.push_back(mk_inst(M_END, 0, 0, 0, 0, 0));
    foreach (prog[i]) begin
      imem_we = 1; imem_addr = 13'(i); imem_wdata = prog[i];
      @(negedge clk);
    end
    imem_we = 0;
    $display("program: %0d instructions", prog.size());

    read_vec(a_hx, H + XD, hx);
    read_vec(a_c, H, c_prev);
    read_vec(a_yp, XD, yp_prev);
    for (int st = 0; st < STEPS; st++) begin
      int cyc;
      // a sensor reading; its last element restarts the program
      x = new[XD];
      for (int i = 0; i < XD; i++) begin
        x[i] = r2fx(real'(st) * 0.7 - 1.0 + 0.3 * real'(i));
        sens_valid = 1; sens_addr = a_hx + H + i; sens_data = x[i]; sens_last = (i == XD - 1);
        @(negedge clk);
        while (!sens_ready) @(negedge clk);
      end
      sens_valid = 0; sens_last = 0;
      chk(busy, "sensor reading restarted the program");
      cyc = 0;
      while (!done) begin @(negedge clk); cyc++; end
      $display("step %0d: %0d cycles", st, cyc);

      // KS part
      e2 = 0;
      for (int i = 0; i < XD; i++) e2 += fxmul(yp_prev[i] - x[i], yp_prev[i] - x[i]);
      mmu_read(a_e, d);
      chk(d == e2, "squared prediction error");
      dmax = 0;
      for (int i = 0; i < NB; i++) begin
        logic [31:0] df, ad;
        hist[i] += ($signed(bnd[i]) > $signed(e2)) ? 32'h10000 : 32'h0;
        mmu_read(a_hist + i, d);
        chk(d == hist[i], "observed histogram");
        df = hist[i] - refh[i];
        ad = $signed(df) < 0 ? -df : df;
        if (ad > dmax) dmax = ad;
      end
      mmu_read(a_d, d);
      chk(d == dmax, "KS statistic");
      mmu_read(a_norm, d);
      chk(d == (($signed(r2fx(2.5)) >= $signed(dmax)) ? 32'h10000 : 32'h0), "KS verdict");
      $display("  error %f, D %f, normal %0d", fx2r(e2), fx2r(dmax), d != 0);

      // LSTM cell
      for (int i = 0; i < XD; i++) hx[H + i] = x[i];
      read_vec(a_zg, 4 * H, zg);
      read_vec(a_ag, 4 * H, ag);
      for (int r = 0; r < 4 * H; r++) begin
        acc = 0;
        for (int j = 0; j < H + XD; j++) acc += fxmul(wg[r][j], hx[j]);
        chk(zg[r] == acc, "gate pre-activation");
        er = fx2r(ag[r]) - ((r < 3 * H) ? sigm(fx2r(acc + bg[r])) : tanh_r(fx2r(acc + bg[r])));
        chk(er < 0.01 && er > -0.01, "gate activation");
      end
      read_vec(a_c, H, c_new);
      read_vec(a_tc, H, tc);
      read_vec(a_hx, H + XD, h);
      for (int r = 0; r < H; r++) begin
        chk(c_new[r] == fxmul(ag[H + r], c_prev[r]) + fxmul(ag[r], ag[3 * H + r]), "cell state");
        er = fx2r(tc[r]) - tanh_r(fx2r(c_new[r]));
        chk(er < 0.01 && er > -0.01, "tanh of cell state");
        chk(h[r] == fxmul(ag[2 * H + r], tc[r]), "hidden state");
      end
      read_vec(a_yp, XD, yp);
      for (int r = 0; r < XD; r++) begin
        acc = by[r];
        for (int j = 0; j < H; j++) acc += fxmul(wy[r][j], h[j]);
        chk(yp[r] == acc, "prediction");
      end
      hx = h; c_prev = c_new; yp_prev = yp;
      nstep_restart++;
    end
    chk(nstep_restart == STEPS, "every reading ran one step");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
