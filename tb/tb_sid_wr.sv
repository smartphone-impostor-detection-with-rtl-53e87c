// tb_sid_wr: self-checking test of the WR stage: line address, lane masks of
// vector results (partial tails included) and lane placement of scalar results.
module tb_sid_wr;
  import sid_pkg::*;
  localparam int N = 4;
  ctl_t ctl;
  logic wen;
  logic [N-1:0][31:0] r, w_data;
  logic [N-1:0] we_mask;
  logic [16:0] w_line;
  int checks = 0, failures = 0;

  sid_wr #(.N_TRACK(N), .LAW(17)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mode_e modes [11] = '{M_VADD, M_VSUB, M_VMUL, M_VSGT, M_VSIG, M_VTANH, M_VEXP,
                          M_MVMUL, M_VSSGT, M_VMAXABS, M_VSQNORM};
    for (int i = 0; i < 2000; i++) begin
      logic [N-1:0] em;
      logic red;
      ctl = '0;
      ctl.mode  = modes[$urandom % 11];
      ctl.nval  = 14'($urandom_range(0, N));
      ctl.zaddr = $urandom & 32'h3ffff;
      wen = 1'($urandom);
      for (int t = 0; t < N; t++) r[t] = $urandom;
      red = (ctl.mode == M_MVMUL) || (ctl.mode == M_VSQNORM) || (ctl.mode == M_VMAXABS);
      if (!red) ctl.zaddr[1:0] = 2'b00;
      #1;
      em = '0;
      for (int t = 0; t < N; t++)
        em[t] = wen && (red ? (t == int'(ctl.zaddr[1:0])) : (t < int'(ctl.nval)));
      checks++;
      if (we_mask !== em) begin failures++; $display("mask %b exp %b", we_mask, em); end
      checks++;
      if (w_line !== ctl.zaddr[18:2]) begin failures++; $display("line"); end
      for (int t = 0; t < N; t++) if (em[t]) begin
        checks++;
        if (w_data[t] !== (red ? r[0] : r[t])) begin failures++; $display("data lane %0d", t); end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
