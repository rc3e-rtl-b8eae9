// tb_vcontrol_ucs: self-checking test of the user configuration space.
// The host port (system clock, 10 ns) and the user port (user clock, 6 ns)
// each write their own half, and the test checks that both sides read both
// halves back with one clock of read latency, that writes into the other
// side's half are ignored and that the memory starts at zero.
module tb_vcontrol_ucs;
  localparam int unsigned AW = 8;
  logic sys_clk = 0, usr_clk = 0;
  logic a_en = 0, a_we = 0, b_we = 0;
  logic [AW-1:0] a_addr = 0, b_raddr = 0, b_waddr = 0;
  logic [7:0] a_wdata = 0, a_rdata, b_rdata, b_wdata = 0;
  logic [7:0] model [256];
  int checks = 0, failures = 0;

  always #5 sys_clk = ~sys_clk;
  always #3 usr_clk = ~usr_clk;

  vcontrol_ucs #(.AW(AW), .DW(8)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic host_write(input int a, input logic [7:0] d);
    @(negedge sys_clk); a_en = 1; a_we = 1; a_addr = AW'(a); a_wdata = d;
    @(negedge sys_clk); a_en = 0; a_we = 0;
  endtask

  task automatic host_read(input int a, output logic [7:0] d);
    @(negedge sys_clk); a_en = 1; a_we = 0; a_addr = AW'(a);
    @(negedge sys_clk); a_en = 0; d = a_rdata;
  endtask

  task automatic user_write(input int a, input logic [7:0] d);
    @(negedge usr_clk); b_we = 1; b_waddr = AW'(a); b_wdata = d;
    @(negedge usr_clk); b_we = 0;
  endtask

  task automatic user_read(input int a, output logic [7:0] d);
    @(negedge usr_clk); b_raddr = AW'(a);
    @(negedge usr_clk); d = b_rdata;
  endtask

  initial begin
    logic [7:0] d;
    for (int i = 0; i < 256; i++) model[i] = 0;
    host_read(5, d);   check(d == 0, "initial zero, command half");
    host_read(200, d); check(d == 0, "initial zero, status half");
    for (int n = 0; n < 60; n++) begin
      int a;
      logic [7:0] v;
      a = $urandom_range(255);
      v = 8'($urandom);
      if ($urandom_range(1)) begin
        host_write(a, v);
        if (a < 128) model[a] = v;
      end else begin
        user_write(a, v);
        if (a >= 128) model[a] = v;
      end
    end
    for (int a = 0; a < 256; a += 3) begin
      host_read(a, d); check(d == model[a], $sformatf("host read %0d: %h vs %h", a, d, model[a]));
      user_read(a, d); check(d == model[a], $sformatf("user read %0d: %h vs %h", a, d, model[a]));
    end
    // writes into the other side's half are ignored
    host_write(130, 8'hA5); user_read(130, d); check(d == model[130], "host write to status half ignored");
    user_write(7, 8'h5A);   host_read(7, d);   check(d == model[7], "user write to command half ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge sys_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
