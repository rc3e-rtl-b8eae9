// tb_rc2f_top: end-to-end test of the RC2F design with four vFPGAs, each
// holding a 4 x 4 matrix multiplication core, and 16-word FIFOs. The bench
// plays the host: it drives the endpoint's memory port (gcs and ucs) and
// its two streams, the host-to-card stream taking words for several
// channels in turn and the card-to-host stream applying random
// back-pressure.
//
// Sequence (the host API steps init, write, start, read, reset):
//  1. after reset every vFPGA clock is off; identification registers;
//  2. allocate vFPGAs 0-2 only, start their cores, put vFPGA 2 in test
//     loopback; stream two products to vFPGA 0 and 1, loopback words to
//     vFPGA 2 and one product to unallocated vFPGA 3;
//  3. check every result, that vFPGA 3 produced nothing until allocated and
//     then finished its product, and that the status bytes count products;
//  4. user reset of vFPGA 1 holds its product until released;
//  5. full reset clears the gcs and the FIFOs; with all clocks off a burst
//     to vFPGA 0 fills its write FIFO and stalls the host stream, which
//     resumes when the vFPGA is allocated again.
// Each mechanism is counted; one that never happens is a failure.
module tb_rc2f_top;
  import rc2f_pkg::*;
  import tb_fp32_ref_pkg::*;
  localparam int unsigned NV = 4;
  localparam int unsigned N = 4;
  localparam int unsigned DEPTH = 16;

  logic sys_clk = 0, usr_clk = 0, sys_rst = 0;
  logic [NV-1:0] h2c_room;
  logic h2c_valid = 0, h2c_ready, c2h_valid, c2h_ready = 0;
  logic [1:0] h2c_chan = 0, c2h_chan;
  logic [31:0] h2c_data = 0, c2h_data;
  logic mem_en = 0, mem_we = 0, mem_rvalid;
  logic [REGION_W-1:0] mem_region = 0;
  logic [CFG_AW-1:0] mem_addr = 0;
  logic [CFG_W-1:0] mem_wdata = 0, mem_rdata;
  logic [NV-1:0] vclk_on;

  int checks = 0, failures = 0;

  // mechanism counters
  int n_clock_gated = 0, n_loopback = 0, n_user_reset = 0, n_full_reset = 0;
  int n_h2c_stall = 0, n_c2h_stall = 0, n_shared = 0, n_products = 0;

  always #5 sys_clk = ~sys_clk;
  always #4 usr_clk = ~usr_clk;

  rc2f_top #(.NUM_VFPGA(NV), .MM_N(N), .FIFO_DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- host memory accesses ----------------
  task automatic mem_write(input int region, input logic [7:0] a, input logic [7:0] d);
    @(negedge sys_clk); mem_en = 1; mem_we = 1; mem_region = REGION_W'(region); mem_addr = a; mem_wdata = d;
    @(negedge sys_clk); mem_en = 0; mem_we = 0;
  endtask

  task automatic mem_read(input int region, input logic [7:0] a, output logic [7:0] d);
    @(negedge sys_clk); mem_en = 1; mem_we = 0; mem_region = REGION_W'(region); mem_addr = a;
    @(negedge sys_clk); mem_en = 0;
    check(mem_rvalid, "read answered");
    d = mem_rdata;
  endtask

  // ---------------- host streams ----------------
  logic [31:0] txq [NV][$];
  logic [31:0] rxq [NV][$];
  bit c2h_random = 1;
  int last_ch = -1;

  // sender: one word per clock, taken in turn from the channels that have
  // words queued and whose write FIFO has room; a channel with words but no
  // room counts as back-pressure.
  int next_ch = 0;
  always @(negedge sys_clk) begin
    bit sent;
    sent = 0;
    h2c_valid <= 0;
    for (int k = 0; k < NV; k++) begin
      int c;
      c = (next_ch + k) % NV;
      if (txq[c].size() != 0) begin
        if (!h2c_room[c]) n_h2c_stall++;
        else if (!sent) begin
          sent = 1;
          h2c_valid <= 1;
          h2c_chan  <= 2'(c);
          h2c_data  <= txq[c].pop_front();
          next_ch   <= (c + 1) % NV;
        end
      end
    end
  end
  always @(posedge sys_clk) if (h2c_valid) check(h2c_ready, "word offered to a channel with room is taken");

  // receiver
  always @(posedge sys_clk) begin
    if (c2h_valid && c2h_ready) begin
      rxq[c2h_chan].push_back(c2h_data);
      if (last_ch >= 0 && last_ch != int'(c2h_chan)) n_shared++;
      last_ch = int'(c2h_chan);
    end
    if (c2h_valid && !c2h_ready) n_c2h_stall++;
  end
  always @(negedge sys_clk) c2h_ready <= c2h_random ? 1'($urandom_range(3) != 0) : 1'b1;

  // ---------------- products ----------------
  logic [31:0] expq [NV][$];

  task automatic send_product(input int ch);
    logic [31:0] a [N][N], b [N][N], c;
    for (int r = 0; r < N; r++)
      for (int k = 0; k < N; k++) begin a[r][k] = rand_f32(); b[r][k] = rand_f32(); end
    for (int r = 0; r < N; r++) for (int k = 0; k < N; k++) txq[ch].push_back(a[r][k]);
    for (int r = 0; r < N; r++) for (int k = 0; k < N; k++) txq[ch].push_back(b[r][k]);
    for (int r = 0; r < N; r++)
      for (int j = 0; j < N; j++) begin
        c = 32'd0;
        for (int k = 0; k < N; k++) c = ref_add(c, ref_mul(a[r][k], b[k][j]));
        expq[ch].push_back(c);
      end
  endtask

  task automatic wait_rx(input int ch, input int n, input int limit);
    int t;
    t = 0;
    while (rxq[ch].size() < n && t < limit) begin @(posedge sys_clk); t++; end
  endtask

  task automatic check_rx(input int ch, input string tag);
    int n;
    n = 0;
    while (expq[ch].size() != 0 && rxq[ch].size() != 0) begin
      check(rxq[ch][0] == expq[ch][0], $sformatf("%s: channel %0d word %0d got %h expected %h", tag, ch, n, rxq[ch][0], expq[ch][0]));
      void'(rxq[ch].pop_front()); void'(expq[ch].pop_front());
      n++;
    end
    check(expq[ch].size() == 0 && rxq[ch].size() == 0,
          $sformatf("%s: channel %0d result count (%0d left, %0d extra)", tag, ch, expq[ch].size(), rxq[ch].size()));
  endtask

  initial begin
    logic [7:0] d;
    #1 sys_rst = 1;
    repeat (4) @(posedge sys_clk);
    sys_rst = 0;
    repeat (4) @(posedge sys_clk);

    // 1. identification, clocks off
    mem_read(0, GCS_ID, d);     check(d == GCS_ID_VALUE, "gcs id");
    mem_read(0, GCS_NVFPGA, d); check(d == NV, "number of vFPGAs");
    check(vclk_on == 0, "all vFPGA clocks off after reset");

    // 2. init: allocate 0-2, vFPGA 2 in loopback, start the cores
    mem_write(0, GCS_ALLOC, 8'h07);
    mem_write(0, GCS_LOOP, 8'h04);
    for (int i = 0; i < NV; i++) mem_write(i + 1, 8'h00, 8'h01);
    repeat (5) @(posedge sys_clk);
    check(vclk_on == 4'b0111, "clocks of allocated vFPGAs run");
    send_product(0); send_product(1);
    send_product(0); send_product(1);
    send_product(3);
    for (int k = 0; k < 40; k++) begin
      txq[2].push_back(32'h5EED_0000 + k);
      expq[2].push_back(32'h5EED_0000 + k);
    end
    wait_rx(0, 2 * N * N, 20000);
    wait_rx(1, 2 * N * N, 20000);
    wait_rx(2, 40, 20000);
    check_rx(0, "vFPGA 0");
    check_rx(1, "vFPGA 1");
    check_rx(2, "loopback");
    n_products += 4;
    n_loopback++;
    mem_read(1, 8'h80, d); check(d == 2, "vFPGA 0 status counts 2 products");
    mem_read(2, 8'h80, d); check(d == 2, "vFPGA 1 status counts 2 products");
    mem_read(3, 8'h80, d); check(d == 0, "loopback vFPGA's core took nothing");

    // 3. unallocated vFPGA 3 held its data
    check(rxq[3].size() == 0, "unallocated vFPGA produced nothing");
    mem_read(0, GCS_REMPTY, d); check(d[3] == 1, "gcs shows vFPGA 3 read FIFO empty");
    mem_read(4, 8'h80, d); check(d == 0, "unallocated vFPGA status zero");
    if (rxq[3].size() == 0) n_clock_gated++;
    mem_write(0, GCS_ALLOC, 8'h0F);
    wait_rx(3, N * N, 20000);
    check_rx(3, "vFPGA 3 after allocation");
    n_products++;

    // 4. user reset
    mem_write(0, GCS_URST, 8'h02);
    repeat (10) @(posedge sys_clk);
    send_product(1);
    repeat (300) @(posedge sys_clk);
    check(rxq[1].size() == 0, "user reset holds vFPGA 1");
    if (rxq[1].size() == 0) n_user_reset++;
    mem_write(0, GCS_URST, 8'h00);
    wait_rx(1, N * N, 20000);
    check_rx(1, "vFPGA 1 after user reset");
    n_products++;
    mem_read(2, 8'h80, d); check(d == 1, "user reset restarted the status count");

    // 5. full reset, then a burst against a stopped vFPGA
    mem_write(0, GCS_CTRL, 8'h01);
    repeat (10) @(posedge sys_clk);
    mem_read(0, GCS_ALLOC, d); check(d == 0, "full reset clears allocation");
    mem_read(0, GCS_LOOP, d);  check(d == 0, "full reset clears loopback");
    mem_read(0, GCS_REMPTY, d); check(d == 8'h0F, "full reset empties read FIFOs");
    repeat (5) @(posedge sys_clk);
    check(vclk_on == 0, "full reset stops all vFPGA clocks");
    if (vclk_on == 0) n_full_reset++;
    begin
      int stalls_before;
      stalls_before = n_h2c_stall;
      send_product(0);          // 2*N*N = 32 words > 16-word FIFO
      repeat (200) @(posedge sys_clk);
      mem_read(0, GCS_WFULL, d); check(d[0] == 1, "gcs shows vFPGA 0 write FIFO full");
      check(n_h2c_stall > stalls_before, "full write FIFO holds back the host stream");
      mem_write(0, GCS_ALLOC, 8'h01);
      mem_write(1, 8'h00, 8'h01);   // the core's run bit survives; write it again anyway
      wait_rx(0, N * N, 20000);
      check_rx(0, "vFPGA 0 after full reset");
      n_products++;
    end

    // mechanism coverage
    check(n_clock_gated > 0, "clock gating exercised");
    check(n_loopback > 0, "test loopback exercised");
    check(n_user_reset > 0, "user reset exercised");
    check(n_full_reset > 0, "full reset exercised");
    check(n_h2c_stall > 0, "host-to-card back-pressure exercised");
    check(n_c2h_stall > 0, "card-to-host back-pressure exercised");
    check(n_shared > 0, "card-to-host stream shared between vFPGAs");
    check(n_products == 7, "all products finished");
    $display("mechanisms: gated=%0d loopback=%0d user_reset=%0d full_reset=%0d h2c_stall=%0d c2h_stall=%0d shared=%0d products=%0d",
             n_clock_gated, n_loopback, n_user_reset, n_full_reset, n_h2c_stall, n_c2h_stall, n_shared, n_products);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge sys_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
