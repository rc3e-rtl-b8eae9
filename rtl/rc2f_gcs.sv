// rc2f_gcs: RC2F controller with its global configuration space (gcs).
//
// In the paper the controller manages the configuration and the user cores
// and monitors status; its memory space is reachable from the host and
// drives dedicated control signals on the FPGA: full reset, user reset and
// test loopback are the ones it names. The register map (rc2f_pkg) is this
// design's own:
//   GCS_ID, GCS_NVFPGA        read-only identification
//   GCS_CTRL bit 0            full reset: returns every gcs register to its
//                             reset value and holds fw_rst for
//                             FULL_RST_CYCLES system clocks
//   GCS_ALLOC                 vFPGA allocated, its user clock runs
//   GCS_URST                  vFPGA user design held in reset
//   GCS_LOOP                  vFPGA streams looped back (test loopback)
//   GCS_WFULL, GCS_REMPTY     live FIFO status, read-only
// After reset no vFPGA is allocated, so every user clock is stopped, as the
// paper describes for an unallocated device.
//
// Interface: one 8-bit memory port on the system clock. A read (en, !we)
// returns rdata on the next clock edge; a write takes effect at the edge.
// Unmapped addresses read as zero and ignore writes.
module rc2f_gcs
  import rc2f_pkg::*;
#(
  parameter int unsigned NUM_VFPGA = 4
) (
  input  logic                 sys_clk,
  input  logic                 sys_rst,     // asynchronous, active high
  // host memory port
  input  logic                 en,
  input  logic                 we,
  input  logic [CFG_AW-1:0]    addr,
  input  logic [CFG_W-1:0]     wdata,
  output logic [CFG_W-1:0]     rdata,
  // monitored status
  input  logic [NUM_VFPGA-1:0] wfull,
  input  logic [NUM_VFPGA-1:0] rempty,
  // dedicated control signals
  output logic                 fw_rst,      // framework reset (power-on or full reset)
  output logic [NUM_VFPGA-1:0] alloc    = '0,   // power-up values, as FPGA
  output logic [NUM_VFPGA-1:0] urst     = '0,   // registers have; they feed
  output logic [NUM_VFPGA-1:0] loopback = '0    // asynchronous resets
);
  localparam int unsigned CW = $clog2(FULL_RST_CYCLES + 1);

  logic [CW-1:0] rst_cnt = '0;   // power-up value, as an FPGA register has
  logic          full_rst_req;

  assign full_rst_req = en && we && (addr == GCS_CTRL) && wdata[0];

  always_ff @(posedge sys_clk or posedge sys_rst) begin
    if (sys_rst) begin
      rst_cnt  <= '0;
      alloc    <= '0;
      urst     <= '0;
      loopback <= '0;
    end else if (full_rst_req) begin
      rst_cnt  <= CW'(FULL_RST_CYCLES);
      alloc    <= '0;
      urst     <= '0;
      loopback <= '0;
    end else begin
      if (rst_cnt != '0) rst_cnt <= rst_cnt - 1'b1;
      if (en && we) begin
        case (addr)
          GCS_ALLOC: alloc    <= wdata[NUM_VFPGA-1:0];
          GCS_URST:  urst     <= wdata[NUM_VFPGA-1:0];
          GCS_LOOP:  loopback <= wdata[NUM_VFPGA-1:0];
          default: ;
        endcase
      end
    end
  end

  assign fw_rst = sys_rst || (rst_cnt != '0);

  always_ff @(posedge sys_clk or posedge sys_rst) begin
    if (sys_rst) begin
      rdata <= '0;
    end else if (en && !we) begin
      case (addr)
        GCS_ID:     rdata <= GCS_ID_VALUE;
        GCS_NVFPGA: rdata <= CFG_W'(NUM_VFPGA);
        GCS_ALLOC:  rdata <= CFG_W'(alloc);
        GCS_URST:   rdata <= CFG_W'(urst);
        GCS_LOOP:   rdata <= CFG_W'(loopback);
        GCS_WFULL:  rdata <= CFG_W'(wfull);
        GCS_REMPTY: rdata <= CFG_W'(rempty);
        default:    rdata <= '0;
      endcase
    end
  end

  initial assert (NUM_VFPGA >= 1 && NUM_VFPGA <= MAX_VFPGA)
    else $error("rc2f_gcs: NUM_VFPGA must be between 1 and %0d", MAX_VFPGA);
endmodule
