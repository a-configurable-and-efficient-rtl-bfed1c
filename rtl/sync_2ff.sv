// Two-flop synchronizer for a single level signal entering clock domain clk.
//
// The input is sampled by two flip-flops in series; the output follows the
// input two clock edges later. Only level (held) signals may be passed: both
// control wires of the buffer handshake are held until the other side has
// answered, so no pulse can be lost. The flops reset to RESET_VAL.
module sync_2ff #(
  parameter bit RESET_VAL = 1'b0
) (
  input  logic clk,
  input  logic rst,
  input  logic d_i,
  output logic q_o
);
  logic meta;

  always_ff @(posedge clk) begin
    if (rst) begin
      meta <= RESET_VAL;
      q_o  <= RESET_VAL;
    end else begin
      meta <= d_i;
      q_o  <= meta;
    end
  end
endmodule
