// tb_vfpga_slot: self-checking test of one vFPGA region with a 4 x 4 matrix
// multiplication core, 16-word FIFOs, system clock 10 ns and user clock
// 6 ns. Covers, in order:
//  - test loopback: words written by the host come back unchanged through
//    the read FIFO and the user core takes none of them;
//  - user reset: with urst held the core takes no input even though run is
//    set; after release it computes the product, which is checked against
//    a single-precision reference, and the host reads the status byte;
//  - stopped user clock: the host fills the write FIFO until full is raised
//    after exactly 16 words; when the clock runs again the product is
//    finished and checked.
module tb_vfpga_slot;
  import tb_fp32_ref_pkg::*;
  localparam int unsigned N = 4;
  localparam int unsigned DEPTH = 16;

  logic sys_clk = 0, uclk = 0, vclk, clk_en = 1, fw_rst = 0, urst = 0, loopback = 0;
  logic wf_wr_en = 0, wf_full, rf_rd_en = 0, rf_empty;
  logic [31:0] wf_wdata = 0, rf_rdata;
  logic ucs_en = 0, ucs_we = 0;
  logic [7:0] ucs_addr = 0, ucs_wdata = 0, ucs_rdata;
  int checks = 0, failures = 0;
  logic [31:0] got [$];

  always #5 sys_clk = ~sys_clk;
  always #3 uclk = ~uclk;
  assign vclk = uclk & clk_en;   // clk_en only changes while uclk is low

  vfpga_slot #(.MM_N(N), .FIFO_DEPTH(DEPTH), .UCS_AW(8)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // host reader: drains the read FIFO continuously
  always @(negedge sys_clk) begin
    rf_rd_en <= 0;
    if (!rf_empty) begin
      rf_rd_en <= 1;
      got.push_back(rf_rdata);
    end
  end

  task automatic push(input logic [31:0] w);
    @(negedge sys_clk);
    while (wf_full) @(negedge sys_clk);
    wf_wr_en = 1; wf_wdata = w;
    @(negedge sys_clk);
    wf_wr_en = 0;
  endtask

  task automatic ucs_write(input logic [7:0] a, input logic [7:0] d);
    @(negedge sys_clk); ucs_en = 1; ucs_we = 1; ucs_addr = a; ucs_wdata = d;
    @(negedge sys_clk); ucs_en = 0; ucs_we = 0;
  endtask

  task automatic ucs_read(input logic [7:0] a, output logic [7:0] d);
    @(negedge sys_clk); ucs_en = 1; ucs_we = 0; ucs_addr = a;
    @(negedge sys_clk); ucs_en = 0; d = ucs_rdata;
  endtask

  logic [31:0] a [N][N], b [N][N];

  task automatic make_operands();
    for (int r = 0; r < N; r++)
      for (int k = 0; k < N; k++) begin a[r][k] = rand_f32(); b[r][k] = rand_f32(); end
  endtask

  task automatic check_product(input string tag);
    logic [31:0] c;
    int t;
    t = 0;
    while (got.size() < N * N && t < 5000) begin @(posedge sys_clk); t++; end
    check(got.size() == N * N, {tag, ": result count"});
    for (int r = 0; r < N; r++)
      for (int j = 0; j < N; j++) begin
        c = 32'd0;
        for (int k = 0; k < N; k++) c = ref_add(c, ref_mul(a[r][k], b[k][j]));
        if (got.size() != 0) check(got.pop_front() == c, $sformatf("%s C[%0d][%0d]", tag, r, j));
      end
  endtask

  initial begin
    logic [7:0] d;
    int n;
    #1 fw_rst = 1;
    repeat (4) @(posedge sys_clk);
    fw_rst = 0;
    repeat (4) @(posedge sys_clk);

    // test loopback (the core is told to run, but loopback hides the FIFOs)
    loopback = 1;
    ucs_write(8'h00, 8'h01);
    repeat (6) @(posedge sys_clk);
    for (int k = 0; k < 40; k++) push(32'hA000_0000 + k);
    repeat (60) @(posedge sys_clk);
    check(got.size() == 40, $sformatf("loopback returned %0d words", got.size()));
    for (int k = 0; k < 40 && got.size() != 0; k++)
      check(got.pop_front() == 32'hA000_0000 + k, $sformatf("loopback word %0d", k));
    ucs_read(8'h80, d); check(d == 0, "core idle during loopback");
    loopback = 0;
    repeat (6) @(posedge sys_clk);

    // user reset holds the core
    urst = 1;
    repeat (6) @(posedge sys_clk);
    make_operands();
    for (int r = 0; r < N; r++) for (int k = 0; k < N; k++) push(a[r][k]);
    repeat (30) @(posedge sys_clk);
    check(got.size() == 0, "no output while in user reset");
    check(wf_full, "core in user reset leaves its input in the write FIFO");
    ucs_read(8'h80, d); check(d == 0, "no product while in user reset");
    urst = 0;
    for (int r = 0; r < N; r++) for (int k = 0; k < N; k++) push(b[r][k]);
    check_product("after user reset");
    repeat (6) @(posedge sys_clk);
    ucs_read(8'h80, d); check(d == 1, $sformatf("status after first product %0d", d));

    // stopped user clock
    @(negedge uclk) clk_en = 0;
    make_operands();
    n = 0;
    for (int r = 0; r < N; r++) for (int k = 0; k < N; k++) begin
      @(negedge sys_clk);
      if (!wf_full) begin wf_wr_en = 1; wf_wdata = a[r][k]; n++; end
      @(negedge sys_clk); wf_wr_en = 0;
    end
    repeat (4) @(posedge sys_clk);
    check(n == DEPTH && wf_full, $sformatf("write FIFO full after %0d words with clock stopped", n));
    @(negedge uclk) clk_en = 1;
    for (int r = 0; r < N; r++) for (int k = 0; k < N; k++) push(b[r][k]);
    check_product("after clock restart");
    repeat (6) @(posedge sys_clk);
    ucs_read(8'h80, d); check(d == 2, "status after second product");

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
