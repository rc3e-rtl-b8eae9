// tb_rc2f_gcs: self-checking test of the RC2F controller's global
// configuration space. Checks the identification registers, write and read
// back of the allocation, user-reset and loopback masks and the control
// outputs they drive, the live FIFO status registers, unmapped addresses,
// the one-clock read latency, and that a full reset through GCS_CTRL holds
// fw_rst for exactly FULL_RST_CYCLES clocks and clears every mask.
module tb_rc2f_gcs;
  import rc2f_pkg::*;
  localparam int unsigned NV = 4;

  logic sys_clk = 0, sys_rst = 0;
  logic en = 0, we = 0;
  logic [CFG_AW-1:0] addr = 0;
  logic [CFG_W-1:0] wdata = 0, rdata;
  logic [NV-1:0] wfull = 0, rempty = 0, alloc, urst, loopback;
  logic fw_rst;
  int checks = 0, failures = 0;

  always #5 sys_clk = ~sys_clk;

  rc2f_gcs #(.NUM_VFPGA(NV)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [7:0] d);
    @(negedge sys_clk); en = 1; we = 1; addr = a; wdata = d;
    @(negedge sys_clk); en = 0; we = 0;
  endtask

  task automatic rd(input logic [7:0] a, output logic [7:0] d);
    @(negedge sys_clk); en = 1; we = 0; addr = a;
    @(posedge sys_clk); #1 d = rdata;    // valid one edge after the request
    @(negedge sys_clk); en = 0;
  endtask

  initial begin
    logic [7:0] d;
    int n;
    #1 sys_rst = 1;
    repeat (2) @(posedge sys_clk);
    sys_rst = 0;
    @(negedge sys_clk);
    check(fw_rst == 0, "fw_rst released");
    check(alloc == 0 && urst == 0 && loopback == 0, "masks clear after reset");
    rd(GCS_ID, d);     check(d == 8'hC2, "id");
    rd(GCS_NVFPGA, d); check(d == NV, "number of vFPGAs");
    wr(GCS_ALLOC, 8'h05); check(alloc == 4'h5, "alloc output");
    wr(GCS_URST, 8'h0A);  check(urst == 4'hA, "urst output");
    wr(GCS_LOOP, 8'h03);  check(loopback == 4'h3, "loopback output");
    rd(GCS_ALLOC, d); check(d == 8'h05, "alloc read back");
    rd(GCS_URST, d);  check(d == 8'h0A, "urst read back");
    rd(GCS_LOOP, d);  check(d == 8'h03, "loop read back");
    wfull = 4'b0110; rempty = 4'b1001;
    rd(GCS_WFULL, d);  check(d == 8'h06, "wfull status");
    rd(GCS_REMPTY, d); check(d == 8'h09, "rempty status");
    wr(8'h40, 8'hFF);
    rd(8'h40, d); check(d == 0, "unmapped address reads zero");
    check(alloc == 4'h5, "unmapped write leaves masks");
    // full reset
    @(negedge sys_clk); en = 1; we = 1; addr = GCS_CTRL; wdata = 8'h01;
    @(negedge sys_clk); en = 0; we = 0;
    n = 0;
    while (fw_rst) begin n++; @(negedge sys_clk); end
    check(n == FULL_RST_CYCLES, $sformatf("full reset held %0d cycles", n));
    check(alloc == 0 && urst == 0 && loopback == 0, "masks cleared by full reset");
    rd(GCS_ID, d); check(d == 8'hC2, "id after full reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge sys_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
