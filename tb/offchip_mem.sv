// Behavioural model of the off-chip memory (not part of the design): answers
// every read request with the word tb_pkg::offchip_word(address) after
// LATENCY cycles of its clock, in request order.
module offchip_mem #(
  parameter int unsigned ADDR_W  = 32,
  parameter int unsigned DATA_W  = 32,
  parameter int unsigned LATENCY = 1
) (
  input  logic              clk,
  input  logic              req_i,
  input  logic [ADDR_W-1:0] addr_i,
  output logic [DATA_W-1:0] data_o,
  output logic              valid_o
);
  logic              v_pipe [LATENCY];
  logic [DATA_W-1:0] d_pipe [LATENCY];

  initial for (int i = 0; i < LATENCY; i++) v_pipe[i] = 1'b0;

  always_ff @(posedge clk) begin
    v_pipe[0] <= req_i;
    d_pipe[0] <= DATA_W'(tb_pkg::offchip_word(32'(addr_i)));
    for (int i = 1; i < LATENCY; i++) begin
      v_pipe[i] <= v_pipe[i-1];
      d_pipe[i] <= d_pipe[i-1];
    end
  end
  assign valid_o = v_pipe[LATENCY-1];
  assign data_o  = d_pipe[LATENCY-1];
endmodule
