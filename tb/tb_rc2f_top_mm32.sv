// tb_rc2f_top_mm32: the 32 x 32 matrix multiplication workload: the RC2F
// design built with two vFPGAs and 32 x 32 single-precision cores
// (NUM_VFPGA=2, MM_N=32, default 512-word FIFOs), running one and then two
// cores at once. Every result word is checked against a single-precision
// reference; the input rate per core is reported and must fall when the
// second core shares the host stream, while the total rises. System clock
// 5 ns, user clock 6 ns.
module tb_rc2f_top_mm32;
  import rc2f_pkg::*;
  import tb_fp32_ref_pkg::*;
  localparam int unsigned NV = 2;
  localparam int unsigned N = 32;
  localparam int unsigned PRODUCTS = 1;

  logic sys_clk = 0, usr_clk = 0, sys_rst = 0;
  logic [NV-1:0] h2c_room, vclk_on;
  logic h2c_valid = 0, h2c_ready, c2h_valid, c2h_ready = 1;
  logic [0:0] h2c_chan = 0, c2h_chan;
  logic [31:0] h2c_data = 0, c2h_data;
  logic mem_en = 0, mem_we = 0, mem_rvalid;
  logic [REGION_W-1:0] mem_region = 0;
  logic [CFG_AW-1:0] mem_addr = 0;
  logic [CFG_W-1:0] mem_wdata = 0, mem_rdata;

  int checks = 0, failures = 0;
  int n_shared_in = 0, n_shared_out = 0, n_products = 0;

  always #2.5 sys_clk = ~sys_clk;
  always #3 usr_clk = ~usr_clk;

  rc2f_top #(.NUM_VFPGA(NV), .MM_N(N)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic mem_write(input int region, input logic [7:0] a, input logic [7:0] d);
    @(negedge sys_clk); mem_en = 1; mem_we = 1; mem_region = REGION_W'(region); mem_addr = a; mem_wdata = d;
    @(negedge sys_clk); mem_en = 0; mem_we = 0;
  endtask

  task automatic mem_read(input int region, input logic [7:0] a, output logic [7:0] d);
    @(negedge sys_clk); mem_en = 1; mem_we = 0; mem_region = REGION_W'(region); mem_addr = a;
    @(negedge sys_clk); mem_en = 0;
    d = mem_rdata;
  endtask

  logic [31:0] txq [NV][$];
  logic [31:0] rxq [NV][$];
  logic [31:0] expq [NV][$];
  int next_ch = 0, last_in = -1, last_out = -1;

  always @(negedge sys_clk) begin
    bit sent;
    sent = 0;
    h2c_valid <= 0;
    for (int k = 0; k < NV; k++) begin
      int c;
      c = (next_ch + k) % NV;
      if (!sent && txq[c].size() != 0 && h2c_room[c]) begin
        sent = 1;
        h2c_valid <= 1;
        h2c_chan  <= 1'(c);
        h2c_data  <= txq[c].pop_front();
        next_ch   <= (c + 1) % NV;
      end
    end
  end

  always @(posedge sys_clk) begin
    if (h2c_valid && h2c_ready) begin
      if (last_in >= 0 && last_in != int'(h2c_chan)) n_shared_in++;
      last_in = int'(h2c_chan);
    end
    if (c2h_valid && c2h_ready) begin
      rxq[c2h_chan].push_back(c2h_data);
      if (last_out >= 0 && last_out != int'(c2h_chan)) n_shared_out++;
      last_out = int'(c2h_chan);
    end
  end

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

  real rate [2];   // input words per system clock per core

  task automatic phase(input int idx, input int cores);
    int t;
    int bad;
    logic [7:0] d, base [NV];
    mem_write(0, GCS_ALLOC, 8'((1 << cores) - 1));
    for (int i = 0; i < cores; i++) begin
      mem_read(i + 1, 8'h80, base[i]);
      mem_write(i + 1, 8'h00, 8'h01);
    end
    repeat (10) @(posedge sys_clk);
    for (int p = 0; p < PRODUCTS; p++) for (int i = 0; i < cores; i++) send_product(i);
    t = 0;
    while (1) begin
      bit done;
      done = 1;
      for (int i = 0; i < cores; i++) if (rxq[i].size() < PRODUCTS * N * N) done = 0;
      if (done || t > 200000) break;
      @(posedge sys_clk);
      t++;
    end
    for (int i = 0; i < cores; i++) begin
      bad = 0;
      check(rxq[i].size() == PRODUCTS * N * N, $sformatf("%0d cores: core %0d result count %0d", cores, i, rxq[i].size()));
      while (rxq[i].size() != 0 && expq[i].size() != 0)
        if (rxq[i].pop_front() != expq[i].pop_front()) bad++;
      check(bad == 0, $sformatf("%0d cores: core %0d has %0d wrong words", cores, i, bad));
      mem_read(i + 1, 8'h80, d);
      check(d == 8'(base[i] + PRODUCTS), $sformatf("%0d cores: core %0d status %0d", cores, i, d));
      n_products += PRODUCTS;
    end
    rate[idx] = real'(PRODUCTS * 2 * N * N) / real'(t);
    $display("%0d core(s): %0d products each in %0d system clocks, input %.3f words/clock per core (%.0f MB/s at 200 MHz), %.3f in total",
             cores, PRODUCTS, t, rate[idx], rate[idx] * 800.0, rate[idx] * cores);
  endtask

  initial begin
    logic [7:0] d;
    #1 sys_rst = 1;
    repeat (4) @(posedge sys_clk);
    sys_rst = 0;
    repeat (4) @(posedge sys_clk);
    mem_read(0, GCS_ID, d);     check(d == GCS_ID_VALUE, "gcs id");
    mem_read(0, GCS_NVFPGA, d); check(d == NV, "two vFPGAs");
    phase(0, 1);
    phase(1, 2);
    check(rate[1] < rate[0], "rate per core falls as cores share the stream");
    check(rate[1] * 2 > rate[0], "two cores move more data in total than one");
    check(n_shared_in > 0 && n_shared_out > 0, "streams shared between vFPGAs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge sys_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
