// Accelerator-side end of the clock domain crossing between the input buffer
// and hierarchy level 0 (the memory controller's part of the handshake).
//
// buf_full_i comes from the off-chip clock domain and is synchronised by two
// flops. While the synchronised flag is high and no reset request is
// pending, word_valid_o tells level 0 that the buffer word (buf_data_i, held
// stable by the buffer while the flag is high) may be written. In the cycle
// level 0 writes it (word_pop_i) reset_buf_o is raised; it stays high until
// the synchronised full flag has dropped, which completes the four-phase
// handshake. The data bus needs no synchroniser of its own: it is stable for
// as long as the full flag, which reaches this domain two edges late.
module buffer_handshake #(
  parameter int unsigned WORD_W = 128
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              buf_full_i,      // from the off-chip clock domain
  input  logic [WORD_W-1:0] buf_data_i,
  output logic              reset_buf_o,     // to the off-chip clock domain
  output logic              word_valid_o,
  output logic [WORD_W-1:0] word_data_o,
  input  logic              word_pop_i
);
  logic full_s;

  sync_2ff u_sync_full (.clk, .rst, .d_i(buf_full_i), .q_o(full_s));

  assign word_valid_o = full_s && !reset_buf_o;
  assign word_data_o  = buf_data_i;

  always_ff @(posedge clk) begin
    if (rst)                            reset_buf_o <= 1'b0;
    else if (word_pop_i && word_valid_o) reset_buf_o <= 1'b1;
    else if (!full_s)                   reset_buf_o <= 1'b0;
  end

  a_pop_only_valid: assert property (@(posedge clk) disable iff (rst) word_pop_i |-> word_valid_o)
    else $error("buffer_handshake: pop without valid word");
endmodule
