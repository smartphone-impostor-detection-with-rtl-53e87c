// sid_top: SID, a small programmable engine for on-phone impostor detection.
//
// SID runs the inference of the detection models (MLP, SVM, logistic regression,
// LSTM/GRU) and the Kolmogorov-Smirnov comparison of prediction-error
// distributions from a program of 128-bit macro-instructions. Each instruction is
// a whole vector or matrix-vector operation; the iteration FSM in Decode breaks it
// into one N_TRACK-wide iteration per cycle. The pipeline is
//   Fetch -> Decode/FSM -> EXE0 (LUT) -> EXE1 (MUL) -> EXE2 (ADD + scratchpad) -> WR
// with operands read from, and results written back to, the Block RAM.
//
// Interface: the host memory management unit loads the instruction RAM (imem_*)
// and the Block RAM (mmu_*, element accesses, reads only while idle); the motion
// sensor writes its samples into the Block RAM (sens_*). `start`, or the last
// element of a sensor sample, starts the program at start_pc; `done` rises when
// the END instruction has been reached and all results are written; `busy` is high
// in between. All control state has a synchronous active-low reset; the RAMs are
// not reset. Block structure and sizes follow the paper; interface protocols are
// this design's. A program runs one iteration per cycle; a new instruction issues
// only after the previous one has left the pipeline (4 cycles after its last
// iteration), so a run of K instructions with I iterations in all takes I + 4K + 2
// cycles from `start` to `done`.
// The Fetch PC and the FSM state are not used at this level (they are kept as
// named nets for debugging), which the linter reports as unused signals.
module sid_top
  import sid_pkg::*;
#(
  parameter int unsigned N_TRACK    = 4,
  parameter int unsigned N_LOCAL    = 64,
  parameter int unsigned DMEM_WORDS = 458752,
  parameter int unsigned IMEM_DEPTH = 8192,
  localparam int unsigned IAW       = $clog2(IMEM_DEPTH),
  localparam int unsigned LAW       = $clog2(DMEM_WORDS / N_TRACK)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [IAW-1:0]     start_pc,
  output logic               busy,
  output logic               done,
  // instruction RAM load (MMU)
  input  logic               imem_we,
  input  logic [IAW-1:0]     imem_addr,
  input  logic [INST_W-1:0]  imem_wdata,
  // Block RAM access (MMU)
  input  logic               mmu_req,
  input  logic               mmu_we,
  input  logic [ADDR_W-1:0]  mmu_addr,
  input  logic [DATA_W-1:0]  mmu_wdata,
  output logic               mmu_gnt,
  output logic               mmu_rvalid,
  output logic [DATA_W-1:0]  mmu_rdata,
  // motion sensor
  input  logic               sens_valid,
  output logic               sens_ready,
  input  logic [ADDR_W-1:0]  sens_addr,
  input  logic [DATA_W-1:0]  sens_data,
  input  logic               sens_last
);

  typedef logic [N_TRACK-1:0][DATA_W-1:0] line_t;

  // fetch / instruction RAM
  logic              go_start, sensor_restart, take, halt, inst_valid, imem_rd_en;
  logic [INST_W-1:0] inst, imem_rd_data;
  logic [IAW-1:0]    imem_rd_addr, pc;
  // decode
  logic              dec_ra_en, rb_en, pipe_busy, core_idle;
  logic [LAW-1:0]    dec_ra_line, rb_line;
  logic [1:0]        fsm_state;
  ctl_t              iss, c1, c2, c3;
  // datapath
  line_t             ra_data, rb_data, a, b, c, p, q, r;
  logic              wen;
  // write port
  logic [N_TRACK-1:0] dp_we_mask, we_mask;
  logic [LAW-1:0]     dp_line, w_line, ra_line;
  line_t              dp_data, w_data;
  logic               ra_en;

  assign go_start  = start || sensor_restart;
  assign pipe_busy = iss.valid || c1.valid || c2.valid || c3.valid;
  assign core_idle = !inst_valid && !pipe_busy;
  assign busy      = !core_idle;

  sid_inst_ram #(.DEPTH(IMEM_DEPTH), .INST_W(INST_W)) u_iram (
    .clk(clk), .rd_en(imem_rd_en), .rd_addr(imem_rd_addr), .rd_data(imem_rd_data),
    .wr_en(imem_we), .wr_addr(imem_addr), .wr_data(imem_wdata));

  sid_fetch #(.IMEM_AW(IAW), .INST_W(INST_W)) u_fetch (
    .clk(clk), .rst_n(rst_n), .start(go_start), .start_pc(start_pc),
    .take(take), .halt(halt), .inst(inst), .inst_valid(inst_valid), .done(done),
    .pc(pc), .imem_rd_en(imem_rd_en), .imem_rd_addr(imem_rd_addr),
    .imem_rd_data(imem_rd_data));

  sid_decode #(.N_TRACK(N_TRACK), .N_LOCAL(N_LOCAL), .LAW(LAW)) u_decode (
    .clk(clk), .rst_n(rst_n), .flush(go_start), .inst(inst), .inst_valid(inst_valid),
    .pipe_busy(pipe_busy), .take(take), .halt(halt),
    .ra_en(dec_ra_en), .ra_line(dec_ra_line), .rb_en(rb_en), .rb_line(rb_line),
    .iss(iss), .fsm_state(fsm_state));

  sid_data_ram #(.N_TRACK(N_TRACK), .WORDS(DMEM_WORDS), .DATA_W(DATA_W)) u_dram (
    .clk(clk), .ra_en(ra_en), .ra_line(ra_line), .ra_data(ra_data),
    .rb_en(rb_en), .rb_line(rb_line), .rb_data(rb_data),
    .we_mask(we_mask), .w_line(w_line), .w_data(w_data));

  sid_exe0 #(.N_TRACK(N_TRACK)) u_exe0 (
    .clk(clk), .rst_n(rst_n), .ctl_in(iss), .x(ra_data), .y(rb_data),
    .ctl_out(c1), .a(a), .b(b), .c(c));

  sid_exe1 #(.N_TRACK(N_TRACK)) u_exe1 (
    .clk(clk), .rst_n(rst_n), .ctl_in(c1), .a(a), .b(b), .c(c),
    .ctl_out(c2), .p(p), .q(q));

  sid_exe2 #(.N_TRACK(N_TRACK), .N_LOCAL(N_LOCAL)) u_exe2 (
    .clk(clk), .rst_n(rst_n), .ctl_in(c2), .p(p), .q(q),
    .ctl_out(c3), .wen(wen), .r(r));

  sid_wr #(.N_TRACK(N_TRACK), .LAW(LAW)) u_wr (
    .ctl(c3), .wen(wen), .r(r), .we_mask(dp_we_mask), .w_line(dp_line), .w_data(dp_data));

  sid_mem_arb #(.N_TRACK(N_TRACK), .LAW(LAW)) u_arb (
    .clk(clk), .rst_n(rst_n), .core_idle(core_idle),
    .dec_ra_en(dec_ra_en), .dec_ra_line(dec_ra_line),
    .dp_we_mask(dp_we_mask), .dp_line(dp_line), .dp_data(dp_data),
    .sens_valid(sens_valid), .sens_ready(sens_ready), .sens_addr(sens_addr),
    .sens_data(sens_data), .sens_last(sens_last), .sensor_restart(sensor_restart),
    .mmu_req(mmu_req), .mmu_we(mmu_we), .mmu_addr(mmu_addr), .mmu_wdata(mmu_wdata),
    .mmu_gnt(mmu_gnt), .mmu_rvalid(mmu_rvalid), .mmu_rdata(mmu_rdata),
    .ra_en(ra_en), .ra_line(ra_line), .ra_data(ra_data),
    .we_mask(we_mask), .w_line(w_line), .w_data(w_data));

endmodule
