// tb_sid_decode: self-checking test of Decode and its iteration FSM.
// A reference built from the tiling loops (column slice outer, row inner) gives,
// for every instruction, the expected sequence of iterations: read lines and
// enables, lane count, row, slice flags and write address. The testbench checks
// each issued iteration against it, that one instruction issues one iteration per
// cycle (ceil(Length / N) * Width cycles), that the next instruction starts
// exactly when the 4-stage pipeline has drained, that the three FSM states are
// all visited, that END halts, and that a flush abandons an instruction.
module tb_sid_decode;
  import sid_pkg::*;
  import sid_tb_pkg::*;
  localparam int N = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, flush, inst_valid, pipe_busy, take, halt, ra_en, rb_en;
  logic [127:0] inst;
  logic [16:0] ra_line, rb_line;
  ctl_t iss;
  logic [1:0] fsm_state;
  int checks = 0, failures = 0;

  sid_decode #(.N_TRACK(N), .N_LOCAL(64), .LAW(17)) dut (.*);

  // Behavioural stand-in for EXE0..WR occupancy.
  logic v1, v2, v3;
  always_ff @(posedge clk) begin
    v1 <= iss.valid; v2 <= v1; v3 <= v2;
  end
  assign pipe_busy = iss.valid || v1 || v2 || v3;

  typedef struct {
    bit ra_en; int ra_line; bit rb_en; int rb_line;
    bit first, last, sl_first, sl_last; int row, nval, ylane; int zaddr; mode_e mode;
  } exp_t;
  exp_t expq[$];
  logic [127:0] prog[$];
  int prog_iters[$];
  int pidx;
  int cyc;
  int state_seen[3];
  bit mon_en = 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $time); end
  endtask

  function automatic bit usesy(mode_e m);
    return m == M_VADD || m == M_VSUB || m == M_VMUL || m == M_VSGT || m == M_MVMUL || m == M_VSSGT;
  endfunction

  task automatic add_inst(input mode_e m, input int len, input int wid, input int ax, input int ay, input int az);
    int ns, w, it;
    bit red;
    red = (m == M_MVMUL) || (m == M_VSQNORM) || (m == M_VMAXABS);
    prog.push_back(mk_inst(m, len, wid, ax, ay, az));
    ns = (len + N - 1) / N; if (ns == 0) ns = 1;
    w = (wid == 0) ? 1 : wid;
    it = 0;
    for (int s = 0; s < ns; s++) for (int r = 0; r < w; r++) begin
      exp_t e;
      e.mode = m;
      e.ra_en = !(m == M_MVMUL && r != 0);
      e.ra_line = (ax + s * N) / N;
      e.rb_en = usesy(m) && !(m == M_VSSGT && it != 0);
      e.rb_line = (m == M_MVMUL) ? (ay + it * N) / N : (m == M_VSSGT) ? ay / N : (ay + s * N) / N;
      e.first = (it == 0); e.sl_first = (s == 0); e.sl_last = (s == ns - 1);
      e.last = e.sl_last && (r == w - 1);
      e.row = r; e.nval = (len - s * N < N) ? len - s * N : N;
      e.ylane = ay % N;
      e.zaddr = (m == M_MVMUL) ? az + r : red ? az : az + s * N;
      expq.push_back(e);
      it++;
    end
    prog_iters.push_back(ns * w);
  endtask

  // Fetch stand-in: presents prog[pidx], advances on take.
  assign inst = (pidx < prog.size()) ? prog[pidx] : mk_inst(M_END, 0, 0, 0, 0, 0);
  always_ff @(posedge clk) if (take) pidx <= pidx + 1;

  // Monitor: the read request in the issue cycle, the control word one cycle later.
  bit   pend;
  exp_t got;
  int   last_issue, inst_first_issue, inst_count, issued_in_inst;
  always @(negedge clk) begin
    cyc++;
    if (fsm_state < 3) state_seen[fsm_state]++;
    if (pend) begin
      exp_t e;
      pend = 0;
      if (expq.size() == 0) chk(0, "unexpected iteration");
      else begin
        e = expq.pop_front();
        chk(iss.valid, "iss valid");
        chk(iss.mode == e.mode, "mode");
        chk(got.ra_en == e.ra_en, "ra_en");
        if (e.ra_en) chk(got.ra_line == e.ra_line, "ra_line");
        chk(got.rb_en == e.rb_en, "rb_en");
        if (e.rb_en) chk(got.rb_line == e.rb_line, "rb_line");
        chk(iss.first == e.first && iss.last == e.last, "first/last");
        chk(iss.sl_first == e.sl_first && iss.sl_last == e.sl_last, "slice flags");
        chk(int'(iss.row) == e.row, "row");
        chk(int'(iss.nval) == e.nval, "nval");
        chk(int'(iss.zaddr) == e.zaddr, "zaddr");
        if (e.mode == M_VSSGT) chk(int'(iss.ylane) == e.ylane, "ylane");
      end
    end
    // an iteration is issued in this cycle if Decode accepted or is iterating
    if (mon_en && rst_n && !flush && (take || fsm_state != 0)) begin
      pend = 1;
      got.ra_en = ra_en; got.ra_line = ra_line; got.rb_en = rb_en; got.rb_line = rb_line;
      if (take) begin
        if (inst_count > 0) begin
          chk(issued_in_inst == prog_iters[inst_count - 1], "iterations per instruction");
          chk(cyc - last_issue == 5, "next instruction starts after 4-stage drain");
        end
        inst_count++; issued_in_inst = 0; inst_first_issue = cyc;
      end
      issued_in_inst++;
      chk(cyc - inst_first_issue == issued_in_inst - 1, "one iteration per cycle");
      last_issue = cyc;
    end
  end

  initial begin
    rst_n = 0; flush = 0; inst_valid = 0; pidx = 0;
    add_inst(M_VADD, 4, 1, 0, 64, 128);          // Length <= N, Width 1: stays in Fetch
    add_inst(M_VSUB, 10, 1, 8, 72, 136);         // vector with a partial tail
    add_inst(M_MVMUL, 12, 5, 16, 400, 200);      // 3 slices x 5 rows
    add_inst(M_MVMUL, 3, 7, 16, 400, 300);       // one slice, several rows
    add_inst(M_MVMUL, 9, 1, 16, 400, 310);       // one row, several slices
    add_inst(M_MVMUL, 12, 2, 16, 400, 320);      // two rows, three slices
    add_inst(M_MVMUL, 10, 3, 16, 400, 330);      // three rows, three slices
    add_inst(M_VSSGT, 13, 1, 32, 1001, 500);     // scalar at lane 1
    add_inst(M_VSQNORM, 17, 0, 40, 0, 777);      // Width 0 taken as 1
    add_inst(M_VMAXABS, 8, 1, 44, 0, 778);
    add_inst(M_VSIG, 6, 1, 48, 0, 520);
    for (int k = 0; k < 30; k++) begin
      mode_e mm [11] = '{M_VADD, M_VSUB, M_VMUL, M_VSGT, M_VSIG, M_VTANH, M_VEXP,
                         M_MVMUL, M_VSSGT, M_VMAXABS, M_VSQNORM};
      mode_e m;
      m = mm[$urandom % 11];
      add_inst(m, $urandom_range(1, 70), (m == M_MVMUL) ? (($urandom % 2) ? $urandom_range(1, 4) : $urandom_range(1, 64)) : 1,
               4 * $urandom_range(0, 1000), $urandom_range(0, 4000) & ((m == M_VSSGT) ? 32'hffff : 32'hfffc),
               (m == M_MVMUL || m == M_VSQNORM || m == M_VMAXABS) ? $urandom_range(0, 9000) : 4 * $urandom_range(0, 2000));
    end
    repeat (3) @(negedge clk);
    rst_n = 1; inst_valid = 1;
    wait (halt);
    @(negedge clk);
    chk(expq.size() == 0, "all iterations issued");
    chk(pidx == prog.size(), "END not taken");
    chk(state_seen[0] > 0 && state_seen[1] > 0 && state_seen[2] > 0, "all FSM states visited");
    $display("FSM cycles: fetch=%0d continue=%0d switch=%0d", state_seen[0], state_seen[1], state_seen[2]);
    // flush in the middle of a long instruction
    mon_en = 0;
    prog.delete(); expq.delete(); pidx = 0; inst_count = 0;
    prog.push_back(mk_inst(M_VADD, 400, 1, 0, 0, 0));
    @(negedge clk);
    repeat (10) @(negedge clk);
    chk(fsm_state == 2, "long vector in Switch state");
    flush = 1; pend = 0;
    @(negedge clk);
    flush = 0; pend = 0;
    #1;
    chk(fsm_state == 0, "flush returns FSM to Fetch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
