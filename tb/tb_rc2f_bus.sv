// tb_rc2f_bus: self-checking test of the endpoint-side interconnect.
// The FIFOs, gcs and ucs around the bus are simple models in this bench.
//  - host-to-card: random words to random channels with random full flags;
//    each accepted word must reach exactly its channel's write FIFO and a
//    full FIFO must hold the stream.
//  - card-to-host: with all four read FIFOs loaded the bus must deliver one
//    word per clock, visiting the channels in strict rotation so that each
//    gets a quarter of the bandwidth; with two loaded, half each; with
//    random back-pressure no word may be lost, duplicated or reordered.
//  - memory port: writes and reads to the gcs and to each ucs, reads
//    answered one clock after the request.
module tb_rc2f_bus;
  import rc2f_pkg::*;
  localparam int unsigned NV = 4;
  localparam int unsigned CH_W = 2;

  logic sys_clk = 0, rst = 0;
  logic [NV-1:0] h2c_room;
  logic h2c_valid = 0, h2c_ready, c2h_valid, c2h_ready = 0;
  logic [CH_W-1:0] h2c_chan = 0, c2h_chan;
  logic [31:0] h2c_data = 0, c2h_data, wf_wdata;
  logic mem_en = 0, mem_we = 0, mem_rvalid;
  logic [REGION_W-1:0] mem_region = 0;
  logic [CFG_AW-1:0] mem_addr = 0;
  logic [CFG_W-1:0] mem_wdata = 0, mem_rdata;
  logic [NV-1:0] wf_wr_en, wf_full = 0, rf_rd_en, rf_empty, ucs_en;
  logic [31:0] rf_rdata [NV];
  logic gcs_en, gcs_we, ucs_we;
  logic [CFG_AW-1:0] gcs_addr, ucs_addr;
  logic [CFG_W-1:0] gcs_wdata, gcs_rdata, ucs_wdata;
  logic [CFG_W-1:0] ucs_rdata [NV];

  int checks = 0, failures = 0;

  always #5 sys_clk = ~sys_clk;

  rc2f_bus #(.NUM_VFPGA(NV), .DATA_W(32)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- read FIFO models (first word fall through) ----
  logic [31:0] rq [NV][256];
  int rhead [NV], rtail [NV];
  for (genvar i = 0; i < NV; i++) begin : g_rf
    assign rf_empty[i] = (rhead[i] == rtail[i]);
    assign rf_rdata[i] = rq[i][rhead[i] % 256];
    always @(posedge sys_clk) if (rf_rd_en[i]) begin
      if (rf_empty[i]) check(0, "pop of empty read FIFO");
      rhead[i] <= rhead[i] + 1;
    end
  end

  // ---- gcs / ucs models, one clock read latency ----
  logic [7:0] gmem [256];
  logic [7:0] umem [NV][256];
  always @(posedge sys_clk) begin
    if (gcs_en && gcs_we) gmem[gcs_addr] <= gcs_wdata;
    if (gcs_en && !gcs_we) gcs_rdata <= gmem[gcs_addr];
  end
  for (genvar i = 0; i < NV; i++) begin : g_ucs
    always @(posedge sys_clk) begin
      if (ucs_en[i] && ucs_we) umem[i][ucs_addr] <= ucs_wdata;
      if (ucs_en[i] && !ucs_we) ucs_rdata[i] <= umem[i][ucs_addr];
    end
  end

  // ---- write FIFO monitor ----
  logic [31:0] exp_w [$];
  int exp_ch [$];
  always @(posedge sys_clk) begin
    if (wf_wr_en != 0) begin
      check($onehot(wf_wr_en), "one write FIFO at a time");
      if (exp_w.size() == 0) check(0, "unexpected write FIFO write");
      else begin
        int c;
        logic [31:0] w;
        c = exp_ch.pop_front();
        w = exp_w.pop_front();
        check(wf_wr_en[c] && wf_wdata == w, $sformatf("h2c word to channel %0d", c));
      end
    end
  end

  // collect card-to-host words
  int got_ch [$];
  logic [31:0] got_w [$];
  always @(posedge sys_clk) if (c2h_valid && c2h_ready) begin
    got_ch.push_back(int'(c2h_chan));
    got_w.push_back(c2h_data);
  end

  task automatic load_rf(input int ch, input int n);
    for (int k = 0; k < n; k++) begin
      rq[ch][rtail[ch] % 256] = {8'(ch), 24'(rtail[ch])};
      rtail[ch]++;
    end
  endtask

  task automatic mem_write(input int region, input int a, input logic [7:0] d);
    @(negedge sys_clk); mem_en = 1; mem_we = 1; mem_region = REGION_W'(region); mem_addr = 8'(a); mem_wdata = d;
    @(negedge sys_clk); mem_en = 0; mem_we = 0;
  endtask

  task automatic mem_read(input int region, input int a, output logic [7:0] d);
    @(negedge sys_clk); mem_en = 1; mem_we = 0; mem_region = REGION_W'(region); mem_addr = 8'(a);
    @(negedge sys_clk); mem_en = 0;
    check(mem_rvalid, "rvalid one clock after read");
    d = mem_rdata;
    @(negedge sys_clk);
    check(!mem_rvalid, "rvalid for one clock only");
  endtask

  initial begin
    int held;
    int first_cycle, last_cycle, cyc;
    for (int i = 0; i < NV; i++) begin rhead[i] = 0; rtail[i] = 0; end
    #1 rst = 1;
    repeat (2) @(posedge sys_clk);
    rst = 0;

    // host-to-card
    held = 0;
    for (int n = 0; n < 200; n++) begin
      @(negedge sys_clk);
      wf_full   = NV'($urandom);
      h2c_valid = 1;
      h2c_chan  = CH_W'($urandom);
      h2c_data  = $urandom;
      #1;
      check(h2c_ready == !wf_full[h2c_chan], "h2c_ready follows the target FIFO");
      check(h2c_room == ~wf_full, "h2c_room shows free write FIFOs");
      if (h2c_ready) begin exp_ch.push_back(int'(h2c_chan)); exp_w.push_back(h2c_data); end
      else held++;
    end
    @(negedge sys_clk); h2c_valid = 0; wf_full = 0;
    @(negedge sys_clk);
    check(exp_w.size() == 0, "all accepted words delivered");
    check(held > 0, "back-pressure seen");

    // card-to-host, four busy channels, full rate
    for (int c = 0; c < NV; c++) load_rf(c, 20);
    @(negedge sys_clk); c2h_ready = 1;
    cyc = 0;
    while (got_w.size() < 80 && cyc < 200) begin @(negedge sys_clk); cyc++; end
    check(cyc <= 81, $sformatf("80 words in %0d clocks", cyc));
    for (int k = 0; k < 80; k++) begin
      check(got_ch[k] == k % NV, $sformatf("rotation word %0d channel %0d", k, got_ch[k]));
      check(got_w[k] == {8'(k % NV), 24'(k / NV)}, $sformatf("c2h word %0d", k));
    end
    got_ch.delete(); got_w.delete();

    // two busy channels share half each
    load_rf(1, 10); load_rf(3, 10);
    cyc = 0;
    while (got_w.size() < 20 && cyc < 100) begin @(negedge sys_clk); cyc++; end
    for (int k = 0; k < 20; k++)
      check(got_ch[k] == ((k % 2) ? 3 : 1), "two-channel alternation");
    got_ch.delete(); got_w.delete();

    // random back-pressure
    for (int c = 0; c < NV; c++) load_rf(c, 30);
    fork
      begin
        for (int n = 0; n < 600; n++) begin @(negedge sys_clk); c2h_ready = 1'($urandom); end
        c2h_ready = 1;
      end
    join
    repeat (10) @(negedge sys_clk);
    check(got_w.size() == 120, $sformatf("120 words with back-pressure, got %0d", got_w.size()));
    begin
      int nxt [NV];
      for (int c = 0; c < NV; c++) nxt[c] = rtail[c] - 30;
      for (int k = 0; k < got_w.size(); k++) begin
        check(got_w[k] == {8'(got_ch[k]), 24'(nxt[got_ch[k]])}, "in-order per channel");
        nxt[got_ch[k]]++;
      end
    end

    // memory port
    begin
      logic [7:0] d;
      mem_write(0, 3, 8'h11);
      for (int i = 0; i < NV; i++) mem_write(i + 1, 3, 8'(8'h20 + i));
      mem_read(0, 3, d); check(d == 8'h11, "gcs read");
      for (int i = 0; i < NV; i++) begin
        mem_read(i + 1, 3, d); check(d == 8'(8'h20 + i), $sformatf("ucs %0d read", i));
      end
      mem_read(NV + 1, 3, d); check(d == 0, "unused region reads zero");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge sys_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
