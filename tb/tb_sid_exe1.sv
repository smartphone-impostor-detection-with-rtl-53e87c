// tb_sid_exe1: self-checking test of the EXE1 multiplier stage.
// Q16.16 products for the multiplying modes, |a| for Vmaxabs, bypass for the
// adder-only modes, and selection of the second adder operand.
module tb_sid_exe1;
  import sid_pkg::*;
  import sid_tb_pkg::*;
  localparam int N = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  ctl_t ctl_in, ctl_out;
  logic [N-1:0][31:0] a, b, c, p, q;
  int checks = 0, failures = 0;

  sid_exe1 #(.N_TRACK(N)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mode_e modes [11] = '{M_VADD, M_VSUB, M_VMUL, M_VSGT, M_VSIG, M_VTANH, M_VEXP,
                          M_MVMUL, M_VSSGT, M_VMAXABS, M_VSQNORM};
    rst_n = 0; ctl_in = '0; a = '0; b = '0; c = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      ctl_in = '0; ctl_in.valid = 1; ctl_in.mode = modes[$urandom % 11];
      for (int t = 0; t < N; t++) begin
        a[t] = (i % 2) ? $urandom : 32'($signed($urandom % 2000000) - 1000000);
        b[t] = (i % 2) ? $urandom : 32'($signed($urandom % 2000000) - 1000000);
        c[t] = $urandom;
      end
      @(negedge clk);
      checks++;
      if (ctl_out != ctl_in) failures++;
      for (int t = 0; t < N; t++) begin
        logic [31:0] ep, eq;
        case (ctl_in.mode)
          M_VMUL, M_MVMUL, M_VSQNORM, M_VSIG, M_VTANH, M_VEXP: ep = fxmul(a[t], b[t]);
          M_VMAXABS: ep = ($signed(a[t]) < 0) ? 32'(-$signed(a[t])) : a[t];
          default:   ep = a[t];
        endcase
        eq = is_lut(ctl_in.mode) ? c[t] : b[t];
        checks += 2;
        if (p[t] !== ep) begin failures++; $display("p mode %0d lane %0d got %h exp %h", ctl_in.mode, t, p[t], ep); end
        if (q[t] !== eq) begin failures++; $display("q mismatch"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
