// rst_sync: reset synchroniser, asynchronous assertion and synchronous
// release. rst_o rises together with rst_i and falls on the second rising
// edge of clk after rst_i has fallen. rst_i is also ORed into the output
// directly, so the reset reaches the destination flops even when clk is
// stopped (a vFPGA whose gated clock is off) and whatever state the two
// synchroniser flops powered up in. Used to bring the framework's full reset
// and the per-vFPGA user reset into the user clock domain.
module rst_sync (
  input  logic clk,
  input  logic rst_i,   // asynchronous, active high
  output logic rst_o
);
  logic meta = 1'b0, hold = 1'b0;   // power-up values, as FPGA flops have

  always_ff @(posedge clk or posedge rst_i) begin
    if (rst_i) begin
      meta <= 1'b1;
      hold <= 1'b1;
    end else begin
      meta <= 1'b0;
      hold <= meta;
    end
  end

  assign rst_o = rst_i | hold;
endmodule
