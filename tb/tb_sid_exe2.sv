// tb_sid_exe2: self-checking test of the EXE2 adder stage and its scratchpad.
// Element-wise add/sub/set-greater-than/LUT-intercept results, and multi-cycle
// reductions: Mvmul partial sums over several column slices and rows (result only
// after the last slice), Vsqnorm sums and Vmaxabs running maxima.
module tb_sid_exe2;
  import sid_pkg::*;
  import sid_tb_pkg::*;
  localparam int N = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  ctl_t ctl_in, ctl_out;
  logic wen;
  logic [N-1:0][31:0] p, q, r;
  int checks = 0, failures = 0;

  sid_exe2 #(.N_TRACK(N), .N_LOCAL(64)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // One reduction instruction: slices x rows iterations, random products.
  task automatic reduction(input mode_e m, input int slices, input int rows);
    logic [31:0] expv [64];
    for (int s = 0; s < slices; s++) begin
      for (int rw = 0; rw < rows; rw++) begin
        logic [31:0] sum, mx;
        @(negedge clk);
        ctl_in = '0; ctl_in.valid = 1; ctl_in.mode = m;
        ctl_in.sl_first = (s == 0); ctl_in.sl_last = (s == slices - 1);
        ctl_in.row = 14'(rw); ctl_in.nval = 14'(N);
        ctl_in.zaddr = 32'(100 + rw);
        sum = 0; mx = 0;
        for (int t = 0; t < N; t++) begin
          p[t] = (m == M_VMAXABS) ? ($urandom & 32'h7fffffff) : $urandom;
          sum += p[t];
          if ($signed(p[t]) > $signed(mx) || t == 0) mx = p[t];
        end
        if (m == M_VMAXABS) expv[rw] = (s == 0 || $signed(mx) > $signed(expv[rw])) ? mx : expv[rw];
        else                expv[rw] = (s == 0) ? sum : expv[rw] + sum;
        @(posedge clk); #1;
        chk(wen == (s == slices - 1), "reduction wen only after last slice");
        if (s == slices - 1) chk(r[0] == expv[rw], "reduction result");
      end
    end
    @(negedge clk); ctl_in = '0;
  endtask

  initial begin
    mode_e ew [7] = '{M_VADD, M_VSUB, M_VMUL, M_VSGT, M_VSIG, M_VTANH, M_VSSGT};
    rst_n = 0; ctl_in = '0; p = '0; q = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      ctl_in = '0; ctl_in.valid = 1; ctl_in.mode = ew[$urandom % 7]; ctl_in.nval = 14'(N);
      for (int t = 0; t < N; t++) begin
        p[t] = (i % 3 == 0) ? 32'($urandom % 8) : $urandom;
        q[t] = (i % 3 == 0) ? 32'($urandom % 8) : $urandom;
      end
      @(posedge clk); #1;
      chk(wen == 1, "element-wise wen");
      for (int t = 0; t < N; t++) begin
        logic [31:0] e;
        case (ctl_in.mode)
          M_VADD, M_VSIG, M_VTANH: e = p[t] + q[t];
          M_VSUB:  e = p[t] - q[t];
          M_VSGT:  e = ($signed(p[t]) >= $signed(q[t])) ? 32'h10000 : 0;
          M_VSSGT: e = ($signed(p[t]) >  $signed(q[t])) ? 32'h10000 : 0;
          default: e = p[t];
        endcase
        chk(r[t] == e, "element-wise result");
      end
    end
    for (int k = 0; k < 40; k++) begin
      reduction(M_MVMUL, $urandom_range(1, 6), $urandom_range(1, 64));
      reduction(M_VSQNORM, $urandom_range(1, 20), 1);
      reduction(M_VMAXABS, $urandom_range(1, 20), 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
