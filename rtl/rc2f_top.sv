// rc2f_top: the RC2F basic design that the cloud loads onto an FPGA for the
// accelerator service models: the static RC2F core plus NUM_VFPGA virtual
// FPGA regions, each here filled with the matrix multiplication example.
//
// Structure, as in the paper's block diagram:
//   PCIe endpoint (outside this module, its channels are the ports below)
//     -> rc2f_bus -> per vFPGA: write FIFO, read FIFO, ucs   (vfpga_slot)
//                 -> gcs of the RC2F controller              (rc2f_gcs)
//   rc2f_clocking gates the user clock of each vFPGA with the gcs
//   allocation mask; the gcs also drives the full reset, per-vFPGA user
//   reset and test loopback signals.
//
// Clocks: sys_clk is the endpoint's clock (all host-facing ports); usr_clk
// is the user clock from which every vFPGA clock is gated. Resets are
// asynchronous and active high; sys_rst is the endpoint's reset and also
// resets the user clock domain through synchronisers.
//
// Host usage: write GCS_ALLOC (and clear GCS_URST) to start a vFPGA's
// clock, set bit 0 of ucs[0] of that vFPGA to let its core run, stream
// 2*N*N words (A then B, row-major, IEEE single precision) to its channel,
// read N*N words of C back from the card-to-host stream, tagged with the
// channel; h2c_room shows which channels can take a word. With all vFPGAs streaming, each gets 1/NUM_VFPGA of the
// card-to-host words.
module rc2f_top
  import rc2f_pkg::*;
#(
  parameter int unsigned NUM_VFPGA  = 4,
  parameter int unsigned MM_N       = 16,
  parameter int unsigned FIFO_DEPTH = 512,
  localparam int unsigned CH_W      = (NUM_VFPGA > 1) ? $clog2(NUM_VFPGA) : 1
) (
  input  logic                 sys_clk,
  input  logic                 sys_rst,
  input  logic                 usr_clk,
  // host-to-card stream
  input  logic                 h2c_valid,
  input  logic [CH_W-1:0]      h2c_chan,
  input  logic [31:0]          h2c_data,
  output logic                 h2c_ready,
  output logic [NUM_VFPGA-1:0] h2c_room,
  // card-to-host stream
  output logic                 c2h_valid,
  output logic [CH_W-1:0]      c2h_chan,
  output logic [31:0]          c2h_data,
  input  logic                 c2h_ready,
  // memory port (gcs and ucs)
  input  logic                 mem_en,
  input  logic                 mem_we,
  input  logic [REGION_W-1:0]  mem_region,
  input  logic [CFG_AW-1:0]    mem_addr,
  input  logic [CFG_W-1:0]     mem_wdata,
  output logic                 mem_rvalid,
  output logic [CFG_W-1:0]     mem_rdata,
  // status
  output logic [NUM_VFPGA-1:0] vclk_on
);
  logic                 fw_rst;
  logic [NUM_VFPGA-1:0] alloc, urst, loopback, vclk;

  logic [NUM_VFPGA-1:0] wf_wr_en, wf_full, rf_rd_en, rf_empty, ucs_en;
  logic [31:0]          wf_wdata;
  logic [31:0]          rf_rdata [NUM_VFPGA];
  logic                 gcs_en, gcs_we, ucs_we;
  logic [CFG_AW-1:0]    gcs_addr, ucs_addr;
  logic [CFG_W-1:0]     gcs_wdata, gcs_rdata, ucs_wdata;
  logic [CFG_W-1:0]     ucs_rdata [NUM_VFPGA];

  logic usr_rst;

  rst_sync u_usr_rst (.clk(usr_clk), .rst_i(sys_rst), .rst_o(usr_rst));

  rc2f_gcs #(.NUM_VFPGA(NUM_VFPGA)) u_gcs (
    .sys_clk(sys_clk), .sys_rst(sys_rst),
    .en(gcs_en), .we(gcs_we), .addr(gcs_addr), .wdata(gcs_wdata), .rdata(gcs_rdata),
    .wfull(wf_full), .rempty(rf_empty),
    .fw_rst(fw_rst), .alloc(alloc), .urst(urst), .loopback(loopback)
  );

  rc2f_clocking #(.NUM_VFPGA(NUM_VFPGA)) u_clocking (
    .usr_clk(usr_clk), .usr_rst(usr_rst), .alloc(alloc), .vclk(vclk), .vclk_on(vclk_on)
  );

  rc2f_bus #(.NUM_VFPGA(NUM_VFPGA), .DATA_W(32)) u_bus (
    .sys_clk(sys_clk), .rst(fw_rst),
    .h2c_valid(h2c_valid), .h2c_chan(h2c_chan), .h2c_data(h2c_data), .h2c_ready(h2c_ready),
    .h2c_room(h2c_room),
    .c2h_valid(c2h_valid), .c2h_chan(c2h_chan), .c2h_data(c2h_data), .c2h_ready(c2h_ready),
    .mem_en(mem_en), .mem_we(mem_we), .mem_region(mem_region), .mem_addr(mem_addr),
    .mem_wdata(mem_wdata), .mem_rvalid(mem_rvalid), .mem_rdata(mem_rdata),
    .wf_wr_en(wf_wr_en), .wf_wdata(wf_wdata), .wf_full(wf_full),
    .rf_rd_en(rf_rd_en), .rf_rdata(rf_rdata), .rf_empty(rf_empty),
    .gcs_en(gcs_en), .gcs_we(gcs_we), .gcs_addr(gcs_addr), .gcs_wdata(gcs_wdata),
    .gcs_rdata(gcs_rdata),
    .ucs_en(ucs_en), .ucs_we(ucs_we), .ucs_addr(ucs_addr), .ucs_wdata(ucs_wdata),
    .ucs_rdata(ucs_rdata)
  );

  for (genvar i = 0; i < NUM_VFPGA; i++) begin : g_vfpga
    vfpga_slot #(.MM_N(MM_N), .FIFO_DEPTH(FIFO_DEPTH), .UCS_AW(CFG_AW)) u_slot (
      .sys_clk(sys_clk), .fw_rst(fw_rst), .vclk(vclk[i]),
      .urst(urst[i]), .loopback(loopback[i]),
      .wf_wr_en(wf_wr_en[i]), .wf_wdata(wf_wdata), .wf_full(wf_full[i]),
      .rf_rd_en(rf_rd_en[i]), .rf_rdata(rf_rdata[i]), .rf_empty(rf_empty[i]),
      .ucs_en(ucs_en[i]), .ucs_we(ucs_we), .ucs_addr(ucs_addr), .ucs_wdata(ucs_wdata),
      .ucs_rdata(ucs_rdata[i])
    );
  end
endmodule
