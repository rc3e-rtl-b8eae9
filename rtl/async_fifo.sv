// async_fifo: dual-clock FIFO for the stream channels of a vFPGA.
//
// Each vFPGA has a write FIFO (host to user design) and a read FIFO (user
// design to host). They carry 32-bit words and, as the paper states, also
// separate the system clock of the PCIe side from the user clock of the
// vFPGA. The paper gives neither the depth nor the construction; this is
// the usual Gray-code design: binary pointers of AW+1 bits in each domain,
// their Gray forms passed through two-flop synchronisers to the other
// domain, full and empty computed from the local pointer and the
// synchronised remote one. Full and empty are therefore pessimistic by the
// synchroniser delay, never optimistic.
//
// Interface: write side (wclk) wr_en/wdata/full, with wr_en ignored while
// full; read side (rclk) first-word-fall-through: rdata shows the oldest
// word whenever empty is low and rd_en pops it. wcount is the fill level as
// seen from the write side, for status monitoring.
// Timing: a word written at a wclk edge is visible to the reader after two
// to three rclk edges; a pop frees space for the writer after two to three
// wclk edges. Both resets are asynchronous and must be applied together.
module async_fifo #(
  parameter int unsigned DATA_W = 32,
  parameter int unsigned DEPTH  = 512   // power of two
) (
  input  logic              wclk,
  input  logic              wrst,
  input  logic              wr_en,
  input  logic [DATA_W-1:0] wdata,
  output logic              full,
  output logic [$clog2(DEPTH):0] wcount,

  input  logic              rclk,
  input  logic              rrst,
  input  logic              rd_en,
  output logic [DATA_W-1:0] rdata,
  output logic              empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [DATA_W-1:0] mem [DEPTH];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w, wgray_r;       // remote pointers, synchronised
  logic [AW:0] wbin_next, rbin_next;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---------------- write domain ----------------
  assign wbin_next = wbin + (AW+1)'(wr_en && !full);

  always_ff @(posedge wclk or posedge wrst) begin
    if (wrst) begin
      wbin  <= '0;
      wgray <= '0;
    end else begin
      wbin  <= wbin_next;
      wgray <= bin2gray(wbin_next);
    end
  end

  always_ff @(posedge wclk) begin
    if (wr_en && !full) mem[wbin[AW-1:0]] <= wdata;
  end

  sync_2ff #(.W(AW+1)) u_sync_r2w (.clk(wclk), .rst(wrst), .d(rgray), .q(rgray_w));

  assign full   = (wgray == {~rgray_w[AW:AW-1], rgray_w[AW-2:0]});
  assign wcount = wbin - gray2bin(rgray_w);

  // ---------------- read domain ----------------
  assign rbin_next = rbin + (AW+1)'(rd_en && !empty);

  always_ff @(posedge rclk or posedge rrst) begin
    if (rrst) begin
      rbin  <= '0;
      rgray <= '0;
    end else begin
      rbin  <= rbin_next;
      rgray <= bin2gray(rbin_next);
    end
  end

  sync_2ff #(.W(AW+1)) u_sync_w2r (.clk(rclk), .rst(rrst), .d(wgray), .q(wgray_r));

  assign empty = (rgray == wgray_r);
  assign rdata = mem[rbin[AW-1:0]];

  // Handshake rules: the writer does not push into a full FIFO and the
  // reader does not pop an empty one.
  a_no_overflow:  assert property (@(posedge wclk) disable iff (wrst) !(wr_en && full));
  a_no_underflow: assert property (@(posedge rclk) disable iff (rrst) !(rd_en && empty));
endmodule
