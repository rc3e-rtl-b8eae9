// vfpga_slot: one virtual FPGA region (vFPGA) with its interfaces to the
// static RC2F part.
//
// Following the block diagram, a vFPGA region holds a read FIFO and a write
// FIFO (32-bit, asynchronous, crossing from the system clock to the user
// clock), a vControl block with the user configuration space (ucs, 8-bit
// dual-port memory) and the user design. The user design instantiated here
// is the matrix multiplication example (matmul_core); in a deployed system
// this is the partially reconfigured part.
//
// The gcs control signals of this vFPGA arrive on the system clock:
//   urst      holds the user design in reset (synchronised release);
//   loopback  test loopback: every word of the write FIFO is copied into
//             the read FIFO and the user design sees no data and no room,
//             so the host can test its path without a working user core;
//   fw_rst    the framework reset, which also empties both FIFOs.
// vclk is this vFPGA's gated user clock from rc2f_clocking; with it stopped
// the user side is frozen while the host side still accepts words until the
// write FIFO is full. The routing of these signals and the loopback point
// (between the two FIFOs, on the user clock) are this design's choices.
module vfpga_slot #(
  parameter int unsigned MM_N       = 16,
  parameter int unsigned FIFO_DEPTH = 512,
  parameter int unsigned UCS_AW     = 8
) (
  input  logic              sys_clk,
  input  logic              fw_rst,      // asynchronous, active high, system domain
  input  logic              vclk,        // gated user clock
  input  logic              urst,        // gcs user reset (system domain)
  input  logic              loopback,    // gcs test loopback (system domain)
  // host side of the write FIFO
  input  logic              wf_wr_en,
  input  logic [31:0]       wf_wdata,
  output logic              wf_full,
  // host side of the read FIFO
  input  logic              rf_rd_en,
  output logic [31:0]       rf_rdata,
  output logic              rf_empty,
  // host port of the ucs
  input  logic              ucs_en,
  input  logic              ucs_we,
  input  logic [UCS_AW-1:0] ucs_addr,
  input  logic [7:0]        ucs_wdata,
  output logic [7:0]        ucs_rdata
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH) + 1;

  // user clock domain
  logic fifo_rst_u, core_rst_u, core_rst_req, loop_u;

  logic        wf_rd_u, wf_empty_u;
  logic [31:0] wf_rdata_u;
  logic        rf_wr_u, rf_full_u;
  logic [31:0] rf_wdata_u;

  logic        core_in_rd, core_out_wr;
  logic [31:0] core_out_data;

  logic [UCS_AW-1:0] ucs_b_raddr, ucs_b_waddr;
  logic [7:0]        ucs_b_rdata, ucs_b_wdata;
  logic              ucs_b_we;

  logic [CW-1:0] wf_count_unused, rf_count_unused;

  assign core_rst_req = fw_rst || urst;

  rst_sync u_rst_fifo (.clk(vclk), .rst_i(fw_rst),       .rst_o(fifo_rst_u));
  rst_sync u_rst_core (.clk(vclk), .rst_i(core_rst_req), .rst_o(core_rst_u));
  sync_2ff #(.W(1)) u_sync_loop (.clk(vclk), .rst(fifo_rst_u), .d(loopback), .q(loop_u));

  async_fifo #(.DATA_W(32), .DEPTH(FIFO_DEPTH)) u_write_fifo (
    .wclk(sys_clk), .wrst(fw_rst), .wr_en(wf_wr_en), .wdata(wf_wdata),
    .full(wf_full), .wcount(wf_count_unused),
    .rclk(vclk), .rrst(fifo_rst_u), .rd_en(wf_rd_u), .rdata(wf_rdata_u), .empty(wf_empty_u)
  );

  async_fifo #(.DATA_W(32), .DEPTH(FIFO_DEPTH)) u_read_fifo (
    .wclk(vclk), .wrst(fifo_rst_u), .wr_en(rf_wr_u), .wdata(rf_wdata_u),
    .full(rf_full_u), .wcount(rf_count_unused),
    .rclk(sys_clk), .rrst(fw_rst), .rd_en(rf_rd_en), .rdata(rf_rdata), .empty(rf_empty)
  );

  // Test loopback or user design.
  always_comb begin
    if (loop_u) begin
      wf_rd_u    = !wf_empty_u && !rf_full_u;
      rf_wr_u    = wf_rd_u;
      rf_wdata_u = wf_rdata_u;
    end else begin
      wf_rd_u    = core_in_rd;
      rf_wr_u    = core_out_wr;
      rf_wdata_u = core_out_data;
    end
  end

  vcontrol_ucs #(.AW(UCS_AW), .DW(8)) u_ucs (
    .sys_clk(sys_clk), .a_en(ucs_en), .a_we(ucs_we), .a_addr(ucs_addr),
    .a_wdata(ucs_wdata), .a_rdata(ucs_rdata),
    .usr_clk(vclk), .b_raddr(ucs_b_raddr), .b_rdata(ucs_b_rdata),
    .b_we(ucs_b_we), .b_waddr(ucs_b_waddr), .b_wdata(ucs_b_wdata)
  );

  matmul_core #(.N(MM_N), .UCS_AW(UCS_AW)) u_user_design (
    .clk(vclk), .rst(core_rst_u),
    .in_empty(wf_empty_u || loop_u), .in_data(wf_rdata_u), .in_rd(core_in_rd),
    .out_full(rf_full_u || loop_u), .out_wr(core_out_wr), .out_data(core_out_data),
    .ucs_raddr(ucs_b_raddr), .ucs_rdata(ucs_b_rdata),
    .ucs_we(ucs_b_we), .ucs_waddr(ucs_b_waddr), .ucs_wdata(ucs_b_wdata)
  );
endmodule
