// rc2f_pkg: constants and types shared by the RC2F framework modules.
//
// The RC2F framework places up to four virtual FPGA regions (vFPGAs) behind
// one PCIe endpoint. The host reaches three kinds of resource through the
// endpoint: 32-bit streams (one write FIFO and one read FIFO per vFPGA),
// the global configuration space (gcs) of the RC2F controller and one user
// configuration space (ucs) per vFPGA. Configuration spaces are 8 bits wide,
// streams 32 bits wide, as printed in the framework's block diagram.
//
// This package holds the memory-region numbering used on the host memory
// port and the register map of the gcs. The register map, the identifier
// value and the region numbering are choices of this design; the paper only
// lists the kinds of control signal (full reset, user reset, test loopback)
// and says that device status information is kept there.
package rc2f_pkg;

  // Widths printed in the block diagram.
  localparam int unsigned STREAM_W = 32;  // FIFO data width
  localparam int unsigned CFG_W    = 8;   // gcs / ucs data width
  localparam int unsigned CFG_AW   = 8;   // gcs / ucs address width (own choice)
  localparam int unsigned REGION_W = 4;   // host memory port: region select

  // Largest number of vFPGAs a gcs mask register can describe.
  localparam int unsigned MAX_VFPGA = CFG_W;

  // Host memory port regions: 0 selects the gcs, 1+i the ucs of vFPGA i.
  localparam logic [REGION_W-1:0] REGION_GCS = '0;

  // gcs register map.
  typedef enum logic [CFG_AW-1:0] {
    GCS_ID      = 8'h00,  // RO  identifier, GCS_ID_VALUE
    GCS_NVFPGA  = 8'h01,  // RO  number of vFPGA regions
    GCS_CTRL    = 8'h02,  // WO  bit 0: full reset (self clearing)
    GCS_ALLOC   = 8'h03,  // RW  bit i: vFPGA i allocated, its user clock runs
    GCS_URST    = 8'h04,  // RW  bit i: hold user design i in reset
    GCS_LOOP    = 8'h05,  // RW  bit i: test loopback of vFPGA i's FIFOs
    GCS_WFULL   = 8'h06,  // RO  bit i: write FIFO of vFPGA i full
    GCS_REMPTY  = 8'h07   // RO  bit i: read FIFO of vFPGA i empty
  } gcs_reg_e;

  localparam logic [CFG_W-1:0] GCS_ID_VALUE = 8'hC2;

  // Cycles for which a full reset requested through GCS_CTRL is held.
  localparam int unsigned FULL_RST_CYCLES = 4;

endpackage
