// tb_rc2f_clocking: self-checking test of the per-vFPGA user clock gates.
// Counts the rising edges of every gated clock over fixed windows of the
// user clock while the allocation mask changes, and checks that allocated
// vFPGAs receive every edge and unallocated ones none, that the gate follows
// a mask change within three user clocks, and that every gated pulse has
// the full width of a user clock high phase (no glitches).
module tb_rc2f_clocking;
  localparam int unsigned NV = 4;
  logic usr_clk = 0, usr_rst = 0;
  logic [NV-1:0] alloc = 0, vclk, vclk_on;
  int edges [NV];
  int checks = 0, failures = 0;
  realtime rise_t [NV] = '{default: 0};

  always #4 usr_clk = ~usr_clk;

  rc2f_clocking #(.NUM_VFPGA(NV)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  for (genvar i = 0; i < NV; i++) begin : g_mon
    always @(posedge vclk[i]) begin
      edges[i]++;
      rise_t[i] = $realtime;
    end
    always @(negedge vclk[i]) begin
      if (rise_t[i] > 0) check(($realtime - rise_t[i]) == 4.0, $sformatf("vclk[%0d] pulse width", i));
    end
  end

  task automatic window(input logic [NV-1:0] mask);
    int lat;
    alloc = mask;
    lat = 0;
    while (vclk_on != mask) begin lat++; @(posedge usr_clk); end
    check(lat <= 3, $sformatf("gate latency %0d", lat));
    @(negedge usr_clk);
    for (int i = 0; i < NV; i++) edges[i] = 0;
    repeat (50) @(negedge usr_clk);
    for (int i = 0; i < NV; i++)
      check(edges[i] == (mask[i] ? 50 : 0), $sformatf("mask %b vclk[%0d] edges %0d", mask, i, edges[i]));
  endtask

  initial begin
    #1 usr_rst = 1;   // a rising edge, so the asynchronous reset acts at once
    for (int i = 0; i < NV; i++) edges[i] = 0;
    repeat (3) @(posedge usr_clk);
    @(negedge usr_clk);
    check(edges[0] == 0 && edges[3] == 0, "no edges in reset");
    usr_rst = 0;
    window(4'b0000);
    window(4'b0001);
    window(4'b1011);
    window(4'b0110);
    window(4'b1111);
    window(4'b0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge usr_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
