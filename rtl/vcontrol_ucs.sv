// vcontrol_ucs: user configuration space (ucs) of one vFPGA.
//
// The paper implements the ucs as a dual-port memory for user-definable
// commands: one port belongs to the host (through the endpoint, system
// clock), the other to the user design (user clock), and the memory is one
// of the two interfaces between the static part and the vFPGA region. The
// 8-bit data width is the one printed in the block diagram; the size and
// the split below are this design's own choice.
//
// The address space of 2**AW bytes is split in two halves so that every
// byte has exactly one writer, which keeps the two-clock memory free of
// write-write collisions:
//   lower half  command area: written by the host, read by both sides;
//   upper half  status area:  written by the user design, read by both.
// A host write to the status area or a user write to the command area is
// ignored. Both read ports are synchronous: data appears one clock after
// the address (en on the host port). The contents start at zero, as an FPGA
// block RAM's initial values would.
module vcontrol_ucs #(
  parameter int unsigned AW = 8,
  parameter int unsigned DW = 8
) (
  // host port, system clock
  input  logic          sys_clk,
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [DW-1:0] a_wdata,
  output logic [DW-1:0] a_rdata,
  // user port, user clock
  input  logic          usr_clk,
  input  logic [AW-1:0] b_raddr,
  output logic [DW-1:0] b_rdata,
  input  logic          b_we,
  input  logic [AW-1:0] b_waddr,
  input  logic [DW-1:0] b_wdata
);
  localparam int unsigned HALF = 2 ** (AW - 1);

  logic [DW-1:0] cmd_mem [HALF];   // written by the host
  logic [DW-1:0] sts_mem [HALF];   // written by the user design

  initial begin
    for (int i = 0; i < int'(HALF); i++) begin
      cmd_mem[i] = '0;
      sts_mem[i] = '0;
    end
  end

  // Host port.
  always_ff @(posedge sys_clk) begin
    if (a_en && a_we && !a_addr[AW-1]) cmd_mem[a_addr[AW-2:0]] <= a_wdata;
  end

  always_ff @(posedge sys_clk) begin
    if (a_en) a_rdata <= a_addr[AW-1] ? sts_mem[a_addr[AW-2:0]] : cmd_mem[a_addr[AW-2:0]];
  end

  // User port.
  always_ff @(posedge usr_clk) begin
    if (b_we && b_waddr[AW-1]) sts_mem[b_waddr[AW-2:0]] <= b_wdata;
  end

  always_ff @(posedge usr_clk) begin
    b_rdata <= b_raddr[AW-1] ? sts_mem[b_raddr[AW-2:0]] : cmd_mem[b_raddr[AW-2:0]];
  end
endmodule
