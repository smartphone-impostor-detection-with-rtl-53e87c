// tb_sid_exe0: self-checking test of the EXE0 stage.
// Checks operand routing for every mode, zeroing of lanes beyond nval, the VSsgt
// scalar broadcast, and that the LUT slope/intercept reproduce sigmoid, tanh and
// exp (k*x + b compared with the real functions) over [-10, 10].
module tb_sid_exe0;
  import sid_pkg::*;
  import sid_tb_pkg::*;
  localparam int N = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  ctl_t ctl_in, ctl_out;
  logic [N-1:0][31:0] x, y, a, b, c;
  int checks = 0, failures = 0;
  int lut_checks = 0;

  sid_exe0 #(.N_TRACK(N)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    mode_e modes [11] = '{M_VADD, M_VSUB, M_VMUL, M_VSGT, M_VSIG, M_VTANH, M_VEXP,
                          M_MVMUL, M_VSSGT, M_VMAXABS, M_VSQNORM};
    rst_n = 0; ctl_in = '0; x = '0; y = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      ctl_t cin;
      @(negedge clk);
      cin = '0;
      cin.valid = 1;
      cin.mode  = modes[$urandom % 11];
      cin.nval  = 14'((i % 5 == 0) ? $urandom_range(0, N) : N);
      cin.ylane = 8'($urandom % N);
      cin.zaddr = $urandom;
      for (int t = 0; t < N; t++) begin
        x[t] = r2fx((real'($urandom % 20001) - 10000.0) / 1000.0);
        y[t] = $urandom;
      end
      ctl_in = cin;
      @(negedge clk);
      chk(ctl_out == cin, "ctl passes");
      for (int t = 0; t < N; t++) begin
        logic [31:0] ea, eb, ec;
        if (t >= int'(cin.nval)) begin
          ea = 0; eb = 0; ec = 0;
          chk(a[t] == ea && b[t] == eb && c[t] == ec, "masked lane zero");
        end else if (is_lut(cin.mode)) begin
          real xr, got, expv, tol;
          xr  = fx2r(x[t]);
          got = fx2r(fxmul(a[t], b[t]) + c[t]);
          chk(b[t] == x[t], "lut passes x");
          case (cin.mode)
            M_VSIG:  begin expv = sigm(xr);   tol = 0.01; end
            M_VTANH: begin expv = tanh_r(xr); tol = 0.01; end
            default: begin
              expv = (xr >= 8.0) ? $exp(8.0) : ((xr < -8.0) ? 0.0 : $exp(xr));
              tol  = 0.01 * expv + 0.002;
            end
          endcase
          lut_checks++;
          if (got - expv > tol || expv - got > tol)
            $display("mode %0d x=%f got %f exp %f", cin.mode, xr, got, expv);
          chk(!(got - expv > tol || expv - got > tol), "lut value");
        end else begin
          ea = x[t];
          eb = (cin.mode == M_VSSGT) ? y[cin.ylane] : (cin.mode == M_VSQNORM) ? x[t] : y[t];
          chk(a[t] == ea, "a routing");
          if (cin.mode != M_VMAXABS) chk(b[t] == eb, "b routing");
          chk(c[t] == 0, "c zero");
        end
      end
    end
    $display("lut value checks: %0d", lut_checks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
