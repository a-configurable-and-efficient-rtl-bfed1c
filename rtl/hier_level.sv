// One level of the memory hierarchy: its memory banks, its part of the MCU
// (level_ctrl) and a small output stage.
//
// The level has NUM_BANKS (1 or 2) macros of MACRO_DEPTH words of WIDTH bits;
// its capacity is NUM_BANKS * MACRO_DEPTH words. With two banks, even level
// addresses live in bank 0 and odd ones in bank 1, so a stream of writes and
// a stream of reads tend to hit different banks and two single-ported banks
// behave much like one dual-ported macro.
//
// A word read from a bank arrives one cycle later and is held in the output
// stage until the consumer takes it with out_pop_i (the next level writes it,
// or the output shift register / the accelerator takes it). The output stage
// of an inner level holds one word, and the next read is started no earlier
// than the cycle in which the next level writes the word before it: a read
// cycle and a write cycle alternate, so an inner level hands on at most one
// word every two cycles. The last level (LAST = 1) has a two-word output
// stage, so with reads every cycle it delivers one word per clock cycle.
//
// Interface: src_valid_i/src_data_i offer the next stream word; src_pop_o is
// high in the cycle it is written. out_valid_o/out_data_o present the next
// pattern word; out_pop_i consumes it (only when out_valid_o is high).
module hier_level
  import mh_pkg::*;
#(
  parameter int unsigned WIDTH       = 128,
  parameter int unsigned MACRO_DEPTH = 128,
  parameter int unsigned NUM_BANKS   = 1,
  parameter bit          DUAL_PORT   = 1'b0,
  parameter bit          LAST        = 1'b1
) (
  input  logic             clk,
  input  logic             rst,
  input  level_cfg_t       cfg_i,
  input  logic             src_valid_i,
  input  logic [WIDTH-1:0] src_data_i,
  output logic             src_pop_o,
  output logic             out_valid_o,
  output logic [WIDTH-1:0] out_data_o,
  input  logic             out_pop_i,
  output logic             conflict_o,
  output logic             shift_o
);
  localparam int unsigned DEPTH = NUM_BANKS * MACRO_DEPTH;
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned BAW   = (MACRO_DEPTH > 1) ? $clog2(MACRO_DEPTH) : 1;
  localparam int unsigned OUT_DEPTH = LAST ? 2 : 1;

  logic          wr_en, rd_en, rd_space;
  logic [AW-1:0] wr_addr, rd_addr;

  level_ctrl #(
    .DEPTH(DEPTH), .NUM_BANKS(NUM_BANKS), .DUAL_PORT(DUAL_PORT)
  ) u_ctrl (
    .clk, .rst, .cfg_i,
    .src_valid_i,
    .wr_en_o(wr_en), .wr_addr_o(wr_addr),
    .rd_space_i(rd_space),
    .rd_en_o(rd_en), .rd_addr_o(rd_addr),
    .conflict_o, .shift_o
  );

  assign src_pop_o = wr_en;

  // ---------------------------------------------------------------- banks
  logic [WIDTH-1:0] bank_rdata [NUM_BANKS];
  logic             rd_bank_q;

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    logic           b_wr, b_rd;
    logic [BAW-1:0] b_waddr, b_raddr;
    if (NUM_BANKS == 1) begin : g_one
      assign b_wr    = wr_en;
      assign b_rd    = rd_en;
      assign b_waddr = BAW'(wr_addr);
      assign b_raddr = BAW'(rd_addr);
    end else begin : g_two
      assign b_wr    = wr_en && (wr_addr[0] == 1'(b));
      assign b_rd    = rd_en && (rd_addr[0] == 1'(b));
      assign b_waddr = BAW'(wr_addr >> 1);
      assign b_raddr = BAW'(rd_addr >> 1);
    end
    mem_bank #(
      .DEPTH(MACRO_DEPTH), .WIDTH(WIDTH), .DUAL_PORT(DUAL_PORT)
    ) u_bank (
      .clk,
      .wr_en_i(b_wr), .wr_addr_i(b_waddr), .wr_data_i(src_data_i),
      .rd_en_i(b_rd), .rd_addr_i(b_raddr), .rd_data_o(bank_rdata[b])
    );
  end

  // ---------------------------------------------------------- output stage
  logic             rd_pending;          // read started last cycle
  logic [1:0]       cnt;                 // words held
  logic [WIDTH-1:0] fifo [2];
  logic [WIDTH-1:0] rd_word;
  logic             pop;

  assign rd_word = (NUM_BANKS == 1) ? bank_rdata[0] : bank_rdata[rd_bank_q];
  assign pop     = out_pop_i && out_valid_o;

  always_comb begin
    logic [2:0] used;
    used = 3'(cnt) + 3'(rd_pending) - (pop ? 3'd1 : 3'd0);
    rd_space = (used < 3'(OUT_DEPTH));
  end

  assign out_valid_o = (cnt != 2'd0);
  assign out_data_o  = fifo[0];

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_pending <= 1'b0;
      rd_bank_q  <= 1'b0;
      cnt        <= 2'd0;
      fifo[0]    <= '0;
      fifo[1]    <= '0;
    end else begin
      logic [1:0] c;
      rd_pending <= rd_en;
      rd_bank_q  <= (NUM_BANKS == 2) ? rd_addr[0] : 1'b0;
      c = cnt;
      if (pop) begin
        fifo[0] <= fifo[1];
        c = c - 1'b1;
      end
      if (rd_pending) begin
        if (c == 2'd0) fifo[0] <= rd_word;
        else           fifo[1] <= rd_word;
        c = c + 1'b1;
      end
      cnt <= c;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (rst) cnt <= 2'(OUT_DEPTH))
    else $error("hier_level: output stage overflow");
endmodule
