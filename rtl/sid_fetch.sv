// sid_fetch: Fetch stage of the SID control pipeline.
//
// Keeps the program counter and reads the instruction RAM. The RAM read address is
// the next PC, so the instruction at PC is on imem_rd_data in every cycle after
// the PC is set and Decode sees it without a bubble. `take` from Decode advances
// the PC by one instruction (macro-instructions need no branches: the iteration
// FSM does the looping). A start request restarts the program at start_pc; the
// paper has a completed motion-sensor sample reset the PC to the start of the
// detection program, and the top level turns that event into a start. `halt` from
// Decode (the END instruction, this design's addition) stops fetching and raises
// done until the next start. Start wins over take and halt in the same cycle.
// The instruction RAM's output register serves as the Fetch/Decode pipeline
// register, so `inst` is the RAM data passed straight through and the RAM is read
// every cycle (imem_rd_en is constant 1).
module sid_fetch #(
  parameter int unsigned IMEM_AW = 13,
  parameter int unsigned INST_W  = 128
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [IMEM_AW-1:0] start_pc,
  input  logic               take,
  input  logic               halt,
  output logic [INST_W-1:0]  inst,
  output logic               inst_valid,
  output logic               done,
  output logic [IMEM_AW-1:0] pc,
  output logic               imem_rd_en,
  output logic [IMEM_AW-1:0] imem_rd_addr,
  input  logic [INST_W-1:0]  imem_rd_data
);

  logic               running;
  logic [IMEM_AW-1:0] pc_next;

  always_comb begin
    if (start)     pc_next = start_pc;
    else if (take) pc_next = pc + 1'b1;
    else           pc_next = pc;
  end

  assign imem_rd_en   = 1'b1;
  assign imem_rd_addr = pc_next;
  assign inst         = imem_rd_data;
  assign inst_valid   = running;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pc      <= '0;
      running <= 1'b0;
      done    <= 1'b0;
    end else begin
      pc <= pc_next;
      if (start) begin
        running <= 1'b1;
        done    <= 1'b0;
      end else if (halt) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
    end
  end

  // Decode only takes an instruction that Fetch presents.
  a_take_valid: assert property (@(posedge clk) disable iff (!rst_n) take |-> inst_valid);

endmodule
