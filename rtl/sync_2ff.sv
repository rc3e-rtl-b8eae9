// sync_2ff: two-flop synchroniser for a level signal entering clock domain
// clk. Output follows the input two rising edges later. Reset value is
// parameterised so that a synchronised reset request can start asserted.
// Used for the gcs control masks (allocation, user reset, loopback) that
// cross from the system clock into a vFPGA's user clock.
module sync_2ff #(
  parameter int unsigned W           = 1,
  parameter logic        RESET_VALUE = 1'b0
) (
  input  logic         clk,
  input  logic         rst,   // asynchronous, active high
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  logic [W-1:0] meta;

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      meta <= {W{RESET_VALUE}};
      q    <= {W{RESET_VALUE}};
    end else begin
      meta <= d;
      q    <= meta;
    end
  end
endmodule
