// sid_mem_arb: Block RAM port sharing for the SID module.
//
// The Block RAM has two read ports and one write port. Three parties use them:
// the datapath (Decode reads, WR writes), the motion-sensor input, which writes
// sensor samples into the RAM, and the host memory management unit (MMU), which
// loads model parameters and reads results. The paper shows these connections but
// not how they are shared; the rules here are this design's:
//   write port: WR stage first, then the sensor, then the MMU,
//   read port A: Decode while the module runs, the MMU while it is idle.
// Sensor and MMU accesses are single 32-bit elements with a valid/ready (sensor)
// or request/grant (MMU) handshake. An MMU read returns its element one cycle
// after the grant with mmu_rvalid. A sensor element flagged last completes a
// sample; sensor_restart then restarts the detection program, as the paper
// suggests ("a valid incoming sensor input can reset the program counter").
module sid_mem_arb
  import sid_pkg::*;
#(
  parameter int unsigned N_TRACK = 4,
  parameter int unsigned LAW     = 17
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           core_idle,
  // datapath
  input  logic                           dec_ra_en,
  input  logic [LAW-1:0]                 dec_ra_line,
  input  logic [N_TRACK-1:0]             dp_we_mask,
  input  logic [LAW-1:0]                 dp_line,
  input  logic [N_TRACK-1:0][DATA_W-1:0] dp_data,
  // motion sensor
  input  logic                           sens_valid,
  output logic                           sens_ready,
  input  logic [ADDR_W-1:0]              sens_addr,
  input  logic [DATA_W-1:0]              sens_data,
  input  logic                           sens_last,
  output logic                           sensor_restart,
  // MMU
  input  logic                           mmu_req,
  input  logic                           mmu_we,
  input  logic [ADDR_W-1:0]              mmu_addr,
  input  logic [DATA_W-1:0]              mmu_wdata,
  output logic                           mmu_gnt,
  output logic                           mmu_rvalid,
  output logic [DATA_W-1:0]              mmu_rdata,
  // Block RAM side
  output logic                           ra_en,
  output logic [LAW-1:0]                 ra_line,
  input  logic [N_TRACK-1:0][DATA_W-1:0] ra_data,
  output logic [N_TRACK-1:0]             we_mask,
  output logic [LAW-1:0]                 w_line,
  output logic [N_TRACK-1:0][DATA_W-1:0] w_data
);

  localparam int unsigned LOG_N = (N_TRACK > 1) ? $clog2(N_TRACK) : 0;

  logic        dp_wr, sens_fire, mmu_wr_ok, mmu_rd_ok;
  int unsigned lane_q;

  assign dp_wr          = |dp_we_mask;
  assign sens_ready     = !dp_wr;
  assign sens_fire      = sens_valid && sens_ready;
  assign sensor_restart = sens_fire && sens_last;
  assign mmu_wr_ok      = mmu_req && mmu_we && !dp_wr && !sens_valid;
  assign mmu_rd_ok      = mmu_req && !mmu_we && core_idle;
  assign mmu_gnt        = mmu_wr_ok || mmu_rd_ok;

  always_comb begin
    we_mask = '0;
    w_line  = dp_line;
    w_data  = dp_data;
    if (dp_wr) begin
      we_mask = dp_we_mask;
    end else if (sens_valid) begin
      w_line = LAW'(sens_addr >> LOG_N);
      for (int t = 0; t < int'(N_TRACK); t++) begin
        w_data[t]  = sens_data;
        we_mask[t] = (ADDR_W'(t) == sens_addr % ADDR_W'(N_TRACK));
      end
    end else if (mmu_wr_ok) begin
      w_line = LAW'(mmu_addr >> LOG_N);
      for (int t = 0; t < int'(N_TRACK); t++) begin
        w_data[t]  = mmu_wdata;
        we_mask[t] = (ADDR_W'(t) == mmu_addr % ADDR_W'(N_TRACK));
      end
    end
  end

  assign ra_en   = mmu_rd_ok ? 1'b1 : dec_ra_en;
  assign ra_line = mmu_rd_ok ? LAW'(mmu_addr >> LOG_N) : dec_ra_line;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mmu_rvalid <= 1'b0;
      lane_q     <= 0;
    end else begin
      mmu_rvalid <= mmu_rd_ok;
      if (mmu_rd_ok) lane_q <= int'(mmu_addr % ADDR_W'(N_TRACK));
    end
  end

  assign mmu_rdata = ra_data[lane_q];

  // The datapath never reads port A while the host owns it.
  a_port_a_excl: assert property (@(posedge clk) disable iff (!rst_n) !(mmu_rd_ok && dec_ra_en));

endmodule
