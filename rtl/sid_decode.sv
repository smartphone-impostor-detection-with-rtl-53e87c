// sid_decode: Decode stage with the iteration FSM of the SID module.
//
// A macro-instruction describes a whole vector or matrix-vector operation. Decode
// turns it into a sequence of iterations, one per cycle, each covering N_TRACK
// elements (one per parallel track), so the same program runs unchanged on a
// module with a different number of tracks.
//
// The FSM follows the paper's three-state diagram for matrix-vector iteration:
//   S_FETCH  "fetch the next instruction": accepts an instruction and issues its
//            first iteration,
//   S_CONT   "continue to process a column slice": the next row of the slice,
//   S_SWITCH "switch to the next column slice": row 0 of the next slice,
// with three state registers reg_l (elements of the row not yet finished, including
// the current slice), reg_w (rows left in the slice) and reg_wc (copy of Width).
// A vector instruction (Width 1) only uses reg_l and moves between S_FETCH and
// S_SWITCH. One transition differs from the printed diagram: S_SWITCH goes to S_CONT
// whenever reg_wc > 1, which the paper's text (the instruction ends after the last
// column slice) requires; the diagram also asks reg_l > N(Track) there.
//
// For every iteration Decode drives the Block RAM read ports (read port A: x
// operand, port B: y operand) and registers a ctl_t word (iss) that reaches EXE0
// together with the read data one cycle later. The Mvmul input slice is read once
// per slice and the VSsgt scalar once per instruction; the RAM holds its output
// in between. Element addresses of vector operands must be multiples of N_TRACK.
// Mvmul weights are expected in consumption order (slice by slice, row by row,
// N_TRACK per line). A new instruction is accepted only when no iteration of the
// previous one is left in the pipeline (pipe_busy low), so every result is in
// memory before it is read again; this interlock, the mode encoding and the END
// mode (halt) are design choices. `flush` (a program restart) abandons the
// instruction in progress.
module sid_decode
  import sid_pkg::*;
#(
  parameter int unsigned N_TRACK = 4,
  parameter int unsigned N_LOCAL = 64,
  parameter int unsigned LAW     = 17
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             flush,
  input  logic [INST_W-1:0] inst,
  input  logic             inst_valid,
  input  logic             pipe_busy,
  output logic             take,
  output logic             halt,
  output logic             ra_en,
  output logic [LAW-1:0]   ra_line,
  output logic             rb_en,
  output logic [LAW-1:0]   rb_line,
  output ctl_t             iss,
  output logic [1:0]       fsm_state
);

  localparam int unsigned LOG_N = (N_TRACK > 1) ? $clog2(N_TRACK) : 0;
  localparam logic [LEN_W-1:0] NT = LEN_W'(N_TRACK);

  typedef enum logic [1:0] {S_FETCH = 2'd0, S_CONT = 2'd1, S_SWITCH = 2'd2} state_e;

  state_e            state;
  mode_e             mode_q;
  logic [LEN_W-1:0]  reg_l, reg_w, reg_wc;
  logic [LEN_W-1:0]  row_q, slice_q;
  logic [ADDR_W-1:0] iter_q;
  logic [ADDR_W-1:0] ax_q, ay_q, az_q;

  inst_t             in;
  mode_e             cm;
  logic [LEN_W-1:0]  cl, cwc, crow, cslice;
  logic [ADDR_W-1:0] citer, cax, cay, caz;
  logic [ADDR_W-1:0] xa, ya, za;
  logic              is_end, go;

  assign in = inst_t'(inst);
  assign fsm_state = state;

  // Values of the iteration issued in this cycle.
  always_comb begin
    if (state == S_FETCH) begin
      cm     = mode_e'(in.mode);
      cl     = in.length;
      cwc    = (in.width == '0) ? LEN_W'(1) : in.width;
      crow   = '0;
      cslice = '0;
      citer  = '0;
      cax    = in.addr_x;
      cay    = in.addr_y;
      caz    = in.addr_z;
    end else begin
      cm     = mode_q;
      cl     = reg_l;
      cwc    = reg_wc;
      crow   = row_q;
      cslice = slice_q;
      citer  = iter_q;
      cax    = ax_q;
      cay    = ay_q;
      caz    = az_q;
    end
  end

  assign is_end = (state == S_FETCH) && (in.mode > 4'd10);

  always_comb begin
    if (state == S_FETCH) go = inst_valid && !pipe_busy && !iss.valid && !is_end && !flush;
    else                  go = !flush;
  end

  assign take = go && (state == S_FETCH);
  assign halt = (state == S_FETCH) && inst_valid && !pipe_busy && !iss.valid && is_end && !flush;

  // Operand and result addresses.
  always_comb begin
    xa = cax + (ADDR_W'(cslice) << LOG_N);
    if (cm == M_MVMUL)      ya = cay + (citer << LOG_N);
    else if (cm == M_VSSGT) ya = cay;
    else                    ya = cay + (ADDR_W'(cslice) << LOG_N);
    if (cm == M_MVMUL)      za = caz + ADDR_W'(crow);
    else if (is_reduce(cm)) za = caz;
    else                    za = caz + (ADDR_W'(cslice) << LOG_N);
  end

  assign ra_line = LAW'(xa >> LOG_N);
  assign rb_line = LAW'(ya >> LOG_N);
  // The Mvmul input slice is read on row 0 only; the VSsgt scalar on the first iteration only.
  assign ra_en   = go && !(cm == M_MVMUL && crow != '0);
  assign rb_en   = go && uses_y(cm) && !(cm == M_VSSGT && citer != '0);

  // Registered control word for EXE0.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      iss <= '0;
    end else begin
      iss.valid    <= go;
      iss.mode     <= cm;
      iss.first    <= (citer == '0);
      iss.last     <= (cl <= NT) && (crow == cwc - 1'b1);
      iss.sl_first <= (cslice == '0);
      iss.sl_last  <= (cl <= NT);
      iss.row      <= crow;
      iss.nval     <= (cl < NT) ? cl : NT;
      iss.ylane    <= 8'(cay & ADDR_W'(N_TRACK - 1));
      iss.zaddr    <= za;
    end
  end

  // Iteration FSM (paper's matrix-vector iteration diagram).
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_FETCH;
      mode_q  <= M_END;
      reg_l   <= '0;
      reg_w   <= '0;
      reg_wc  <= '0;
      row_q   <= '0;
      slice_q <= '0;
      iter_q  <= '0;
      ax_q    <= '0;
      ay_q    <= '0;
      az_q    <= '0;
    end else if (flush) begin
      state <= S_FETCH;
    end else if (go) begin
      iter_q <= citer + 1'b1;
      unique case (state)
        S_FETCH: begin
          mode_q <= cm;
          ax_q   <= cax;
          ay_q   <= cay;
          az_q   <= caz;
          if (cwc > 1) begin                 // Width > 1
            state   <= S_CONT;
            reg_l   <= cl;
            reg_w   <= cwc - 1'b1;
            reg_wc  <= cwc;
            row_q   <= LEN_W'(1);
            slice_q <= '0;
          end else if (cl > NT) begin        // Length > N(Track) && Width = 1
            state   <= S_SWITCH;
            reg_l   <= cl - NT;
            reg_w   <= LEN_W'(1);
            reg_wc  <= LEN_W'(1);
            row_q   <= '0;
            slice_q <= LEN_W'(1);
          end                                // else: Length <= N(Track) && Width = 1
        end
        S_CONT: begin
          if (reg_w > 1) begin               // Reg_W > 1
            reg_w <= reg_w - 1'b1;
            row_q <= row_q + 1'b1;
          end else if (reg_l <= NT) begin    // Reg_L <= N(Track) && Reg_W = 1
            state <= S_FETCH;
          end else begin                     // Reg_L > N(Track) && Reg_W = 1
            state   <= S_SWITCH;
            reg_w   <= reg_wc;
            reg_l   <= reg_l - NT;
            row_q   <= '0;
            slice_q <= slice_q + 1'b1;
          end
        end
        S_SWITCH: begin
          if (reg_wc > 1) begin              // Reg_Wcopy > 1
            state <= S_CONT;
            reg_w <= reg_wc - 1'b1;
            row_q <= LEN_W'(1);
          end else if (reg_l > NT) begin     // Reg_L > N(Track) && Reg_Wcopy = 1
            reg_w   <= reg_wc;
            reg_l   <= reg_l - NT;
            slice_q <= slice_q + 1'b1;
          end else begin                     // Reg_L <= N(Track) && Reg_W = 1
            state <= S_FETCH;
          end
        end
        default: state <= S_FETCH;
      endcase
    end
  end

  // An Mvmul instruction may cover at most N_LOCAL rows (one scratchpad entry each).
  a_rows_fit: assert property (@(posedge clk) disable iff (!rst_n)
      (take && in.mode == 4'(M_MVMUL)) |-> (in.width <= LEN_W'(N_LOCAL)));

endmodule
