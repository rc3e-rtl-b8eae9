// rc2f_bus: the connection between the PCIe endpoint's channels and the
// resources of the RC2F core and the vFPGAs.
//
// The block diagram draws one bus from the endpoint to every FIFO, to the
// gcs and to each ucs; the paper adds that the endpoint's streaming
// throughput (about 800 MB/s) is shared by the vFPGAs, so that with two
// cores each gets about half and with four about a quarter. How the
// sharing is done is not described. This design uses:
//   host-to-card stream  one 32-bit word per clock at most, tagged with the
//                        target vFPGA; it is steered to that vFPGA's write
//                        FIFO and held (h2c_ready low) while that FIFO is
//                        full. h2c_room tells the endpoint which channels
//                        can take a word, so that a full vFPGA (one whose
//                        clock is stopped, say) need not block the others.
//                        A word for a channel beyond NUM_VFPGA is accepted
//                        and dropped.
//   card-to-host stream  one 32-bit word per clock at most, taken from the
//                        non-empty read FIFOs in round-robin order, so that
//                        N busy vFPGAs each get 1/N of the bandwidth;
//                        valid/ready with a registered output.
//   memory port          8-bit accesses; region 0 is the gcs, region 1+i
//                        the ucs of vFPGA i. Reads answer with mem_rvalid
//                        one clock after the request; writes need no
//                        answer. Other regions read as zero.
module rc2f_bus
  import rc2f_pkg::*;
#(
  parameter int unsigned NUM_VFPGA = 4,
  parameter int unsigned DATA_W    = 32,
  localparam int unsigned CH_W     = (NUM_VFPGA > 1) ? $clog2(NUM_VFPGA) : 1
) (
  input  logic                 sys_clk,
  input  logic                 rst,          // asynchronous, active high
  // endpoint side: host-to-card stream
  input  logic                 h2c_valid,
  input  logic [CH_W-1:0]      h2c_chan,
  input  logic [DATA_W-1:0]    h2c_data,
  output logic                 h2c_ready,
  output logic [NUM_VFPGA-1:0] h2c_room,     // per channel: its write FIFO has room
  // endpoint side: card-to-host stream
  output logic                 c2h_valid,
  output logic [CH_W-1:0]      c2h_chan,
  output logic [DATA_W-1:0]    c2h_data,
  input  logic                 c2h_ready,
  // endpoint side: memory port
  input  logic                 mem_en,
  input  logic                 mem_we,
  input  logic [REGION_W-1:0]  mem_region,
  input  logic [CFG_AW-1:0]    mem_addr,
  input  logic [CFG_W-1:0]     mem_wdata,
  output logic                 mem_rvalid,
  output logic [CFG_W-1:0]     mem_rdata,
  // write FIFOs (host to user)
  output logic [NUM_VFPGA-1:0] wf_wr_en,
  output logic [DATA_W-1:0]    wf_wdata,
  input  logic [NUM_VFPGA-1:0] wf_full,
  // read FIFOs (user to host), first-word-fall-through
  output logic [NUM_VFPGA-1:0] rf_rd_en,
  input  logic [DATA_W-1:0]    rf_rdata [NUM_VFPGA],
  input  logic [NUM_VFPGA-1:0] rf_empty,
  // gcs
  output logic                 gcs_en,
  output logic                 gcs_we,
  output logic [CFG_AW-1:0]    gcs_addr,
  output logic [CFG_W-1:0]     gcs_wdata,
  input  logic [CFG_W-1:0]     gcs_rdata,
  // ucs of every vFPGA
  output logic [NUM_VFPGA-1:0] ucs_en,
  output logic                 ucs_we,
  output logic [CFG_AW-1:0]    ucs_addr,
  output logic [CFG_W-1:0]     ucs_wdata,
  input  logic [CFG_W-1:0]     ucs_rdata [NUM_VFPGA]
);
  // ---------------- host-to-card ----------------
  logic chan_ok;
  assign chan_ok  = int'(h2c_chan) < int'(NUM_VFPGA);
  assign wf_wdata = h2c_data;
  assign h2c_room = ~wf_full;

  always_comb begin
    h2c_ready = 1'b1;
    wf_wr_en  = '0;
    if (chan_ok) begin
      h2c_ready = !wf_full[h2c_chan];
      wf_wr_en[h2c_chan] = h2c_valid && !wf_full[h2c_chan];
    end
  end

  // ---------------- card-to-host, round robin ----------------
  logic [CH_W-1:0] rr_ptr;     // vFPGA that has priority next
  logic [CH_W-1:0] grant;
  logic            grant_ok;
  logic            load;

  always_comb begin
    grant    = '0;
    grant_ok = 1'b0;
    for (int k = int'(NUM_VFPGA) - 1; k >= 0; k--) begin
      int unsigned idx;
      idx = (int'(rr_ptr) + k) % NUM_VFPGA;
      if (!rf_empty[idx]) begin
        grant    = CH_W'(idx);
        grant_ok = 1'b1;
      end
    end
  end

  assign load = !c2h_valid || c2h_ready;

  always_comb begin
    rf_rd_en = '0;
    if (load && grant_ok) rf_rd_en[grant] = 1'b1;
  end

  always_ff @(posedge sys_clk or posedge rst) begin
    if (rst) begin
      c2h_valid <= 1'b0;
      c2h_chan  <= '0;
      c2h_data  <= '0;
      rr_ptr    <= '0;
    end else if (load) begin
      c2h_valid <= grant_ok;
      if (grant_ok) begin
        c2h_chan <= grant;
        c2h_data <= rf_rdata[grant];
        rr_ptr   <= (int'(grant) == int'(NUM_VFPGA) - 1) ? '0 : grant + 1'b1;
      end
    end
  end

  // ---------------- memory port ----------------
  logic                rd_pending;
  logic [REGION_W-1:0] rd_region;

  assign gcs_en    = mem_en && (mem_region == REGION_GCS);
  assign gcs_we    = mem_we;
  assign gcs_addr  = mem_addr;
  assign gcs_wdata = mem_wdata;
  assign ucs_we    = mem_we;
  assign ucs_addr  = mem_addr;
  assign ucs_wdata = mem_wdata;

  always_comb begin
    for (int i = 0; i < int'(NUM_VFPGA); i++)
      ucs_en[i] = mem_en && (int'(mem_region) == i + 1);
  end

  always_ff @(posedge sys_clk or posedge rst) begin
    if (rst) begin
      rd_pending <= 1'b0;
      rd_region  <= '0;
    end else begin
      rd_pending <= mem_en && !mem_we;
      rd_region  <= mem_region;
    end
  end

  always_comb begin
    mem_rdata = '0;
    if (rd_region == REGION_GCS) mem_rdata = gcs_rdata;
    for (int i = 0; i < int'(NUM_VFPGA); i++)
      if (int'(rd_region) == i + 1) mem_rdata = ucs_rdata[i];
  end
  assign mem_rvalid = rd_pending;

  // The card-to-host output holds its word until the endpoint takes it.
  a_c2h_stable: assert property (@(posedge sys_clk) disable iff (rst)
    c2h_valid && !c2h_ready |=> c2h_valid && $stable(c2h_data) && $stable(c2h_chan));
endmodule
