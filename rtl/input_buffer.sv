// Input buffer with its buffer controller, clocked by the off-chip clock.
//
// The buffer requests consecutive words of the off-chip address space,
// starting at start_address_i, and packs WORD_W/OFFCHIP_W of them into one
// word of the first hierarchy level: the first word received ends up in the
// most significant bits. When the word is complete, buf_full_o is raised and
// the word is held on buf_data_o. The accelerator side writes it into level
// 0 and answers with reset_buf_i; this signal comes from the other clock
// domain and is synchronised here by two flops. On seeing it the buffer
// drops buf_full_o and starts collecting the next word at once, but it does
// not raise buf_full_o again before reset_buf_i has gone low (four-phase
// handshake, safe for any ratio of the two clocks).
//
// Off-chip read interface (a choice of this implementation; the design only
// names the address output): rd_req_o is high for one off-chip cycle per
// requested word, with its word address on global_read_address_o; replies
// arrive in request order with data_in_valid_i, after any latency. At most
// one level-0 word worth of requests is outstanding.
module input_buffer #(
  parameter int unsigned OFFCHIP_W = 32,
  parameter int unsigned WORD_W    = 128,
  parameter int unsigned ADDR_W    = 32
) (
  input  logic              ext_clk,
  input  logic              rst,               // synchronous to ext_clk
  input  logic [ADDR_W-1:0] start_address_i,   // sampled during reset
  output logic              rd_req_o,
  output logic [ADDR_W-1:0] global_read_address_o,
  input  logic [OFFCHIP_W-1:0] data_in_i,
  input  logic              data_in_valid_i,
  output logic              buf_full_o,
  output logic [WORD_W-1:0] buf_data_o,
  input  logic              reset_buf_i        // from the accelerator clock domain
);
  localparam int unsigned R  = WORD_W / OFFCHIP_W;   // off-chip words per level word
  localparam int unsigned RW = $clog2(R + 1);

  initial begin
    assert (WORD_W % OFFCHIP_W == 0) else $error("WORD_W must be a multiple of OFFCHIP_W");
  end

  logic          reset_buf_s;
  logic [RW-1:0] req_cnt, got_cnt;
  logic [ADDR_W-1:0] next_addr;

  sync_2ff u_sync_rst (.clk(ext_clk), .rst, .d_i(reset_buf_i), .q_o(reset_buf_s));

  // request while fewer than R words are requested for the current word
  assign rd_req_o              = !rst && !buf_full_o && (req_cnt < RW'(R));
  assign global_read_address_o = next_addr;

  always_ff @(posedge ext_clk) begin
    if (rst) begin
      next_addr  <= start_address_i;
      req_cnt    <= '0;
      got_cnt    <= '0;
      buf_full_o <= 1'b0;
      buf_data_o <= '0;
    end else begin
      if (rd_req_o) begin
        req_cnt   <= req_cnt + 1'b1;
        next_addr <= next_addr + 1'b1;
      end
      if (data_in_valid_i && got_cnt < RW'(R)) begin
        if (R == 1) buf_data_o <= WORD_W'(data_in_i);
        else        buf_data_o <= {buf_data_o[WORD_W-OFFCHIP_W-1:0], data_in_i};
        got_cnt <= got_cnt + 1'b1;
      end
      if (buf_full_o) begin
        if (reset_buf_s) begin
          buf_full_o <= 1'b0;
          req_cnt    <= '0;
          got_cnt    <= '0;
        end
      end else if (got_cnt == RW'(R) && !reset_buf_s) begin
        buf_full_o <= 1'b1;
      end
    end
  end

  a_no_reply_overrun: assert property (@(posedge ext_clk) disable iff (rst)
      !(data_in_valid_i && got_cnt == RW'(R)))
    else $error("input_buffer: reply without request");
endmodule
