// rc2f_clocking: user clock distribution of the RC2F core.
//
// The paper names an RC2F-Clocking block and says that while a device has
// no vFPGA allocated most of its clocks are switched off to save power. It
// gives no more. Here each vFPGA gets its own gated copy of the user clock:
// bit i of the gcs allocation mask (system clock domain) is synchronised
// into the user clock domain and enables the clock gate of vFPGA i. An
// unallocated vFPGA, its user design and the user-side halves of its FIFOs
// and ucs therefore receive no clock edges at all. Generating the user
// clock itself (a PLL/MMCM) is left to the FPGA vendor's primitives; usr_clk
// is an input.
//
// Timing: an allocation bit written at a system clock edge starts or stops
// the vFPGA clock after two rising user clock edges plus the latch phase.
// Reset: usr_rst stops every vFPGA clock until it is released.
module rc2f_clocking #(
  parameter int unsigned NUM_VFPGA = 4
) (
  input  logic                 usr_clk,
  input  logic                 usr_rst,      // asynchronous, active high
  input  logic [NUM_VFPGA-1:0] alloc,        // from gcs, system clock domain
  output logic [NUM_VFPGA-1:0] vclk,         // gated user clock per vFPGA
  output logic [NUM_VFPGA-1:0] vclk_on       // enable as seen in usr_clk domain
);
  sync_2ff #(.W(NUM_VFPGA)) u_sync (
    .clk(usr_clk), .rst(usr_rst), .d(alloc), .q(vclk_on)
  );

  for (genvar i = 0; i < NUM_VFPGA; i++) begin : g_gate
    clock_gate u_gate (.clk(usr_clk), .en(vclk_on[i]), .gclk(vclk[i]));
  end
endmodule
