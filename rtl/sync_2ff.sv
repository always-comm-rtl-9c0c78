// sync_2ff: two-flop synchroniser for a level signal entering clock domain clk.
// The output follows the input two to three clk edges later. Used for the
// handshake levels between the 100 MHz codec/audio domain and the 50 MHz network
// domain, and for the resets.
module sync_2ff #(
  parameter logic RESET_VAL = 1'b0
) (
  input  logic clk,
  input  logic rst,
  input  logic d,
  output logic q
);
  logic meta;
  always_ff @(posedge clk) begin
    if (rst) begin
      meta <= RESET_VAL;
      q    <= RESET_VAL;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end
endmodule
