// Per-level part of the memory control unit (MCU): the pattern calculation
// that every hierarchy level runs.
//
// The level stores the word stream it receives from the previous level (or
// the input buffer) in a circular buffer of DEPTH entries: stream word n is
// written to entry n mod DEPTH, using a write pointer. A one-bit occupancy
// flag per entry says whether the entry holds a word that is still needed.
// A write is started when the entry under the write pointer is empty, the
// reload counter is non-zero and the source offers a word.
//
// Reads follow the access pattern. The read address is
// (offset_pointer + pattern_pointer) mod DEPTH. pattern_pointer runs from 0
// to cycle_length-1; after each completed cycle the skip counter counts up,
// and once skip_shift+1 cycles have been run, offset_pointer moves on by
// inter_cycle_shift. With inter_cycle_shift = 0 the pattern is cyclic, with
// inter_cycle_shift = cycle_length it is linear, in between it is shifted
// cyclic (overlapping). A read is started when the entry holds a word and
// the level's output stage has room (rd_space_i).
//
// Entries are freed as soon as they are read for the last time: the first
// inter_cycle_shift words of the window are cleared during the last repeat
// of each cycle, which lets the level refill them while the rest of the
// window is still being read (round-robin replacement). The reload counter
// counts the words the level may still load; it starts at DEPTH and is
// raised by one for every freed entry.
//
// Port rules: with a single-ported macro (DUAL_PORT = 0, one bank) or with
// two single-ported banks that the read and the write both hit, a write wins
// over a read and the read waits (write-over-read). With two banks, entry
// addresses are interleaved: bank = addr mod 2.
//
// The settings are sampled while rst is high. As in the design this follows,
// they are not checked: they must satisfy 1 <= cycle_length <= DEPTH and
// inter_cycle_shift <= cycle_length.
//
// Timing: wr_en_o/rd_en_o and their addresses are combinational from the
// registered state and src_valid_i/rd_space_i; the state advances at the
// clock edge on which they are high.
module level_ctrl
  import mh_pkg::*;
#(
  parameter int unsigned DEPTH     = 128,
  parameter int unsigned NUM_BANKS = 1,
  parameter bit          DUAL_PORT = 1'b0,
  localparam int unsigned AW       = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst,
  input  level_cfg_t    cfg_i,
  // source side: a word is offered; it is written (and consumed) when wr_en_o
  input  logic          src_valid_i,
  output logic          wr_en_o,
  output logic [AW-1:0] wr_addr_o,
  // read side: rd_space_i says the output stage can take a read started now
  input  logic          rd_space_i,
  output logic          rd_en_o,
  output logic [AW-1:0] rd_addr_o,
  // status
  output logic          conflict_o,   // a read waited because of a write
  output logic          shift_o       // an inter-cycle shift happened
);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  level_cfg_t     cfg;
  logic [DEPTH-1:0] occupied;
  logic [AW-1:0]  wr_ptr, offset_ptr, rd_ptr;
  cfg_word_t      pattern_ptr, skips;
  logic [CW-1:0]  reload_cnt;

  logic want_wr, want_rd, port_clash, last_use, cycle_done;

  // read address: (offset + pattern pointer) mod DEPTH, both operands < DEPTH
  always_comb begin
    logic [AW+CFG_W:0] sum;
    sum = (AW+CFG_W+1)'(offset_ptr) + (AW+CFG_W+1)'(pattern_ptr);
    if (sum >= (AW+CFG_W+1)'(DEPTH)) sum = sum - (AW+CFG_W+1)'(DEPTH);
    rd_ptr = AW'(sum);
  end

  assign want_wr = src_valid_i && (reload_cnt != '0) && !occupied[wr_ptr];
  assign want_rd = rd_space_i && (cfg.cycle_length != '0) && occupied[rd_ptr];

  // do the write and the read need the same single address port?
  always_comb begin
    if (DUAL_PORT)           port_clash = 1'b0;
    else if (NUM_BANKS == 1) port_clash = 1'b1;
    else                     port_clash = (wr_ptr[0] == rd_ptr[0]);
  end

  assign wr_en_o    = want_wr;
  assign rd_en_o    = want_rd && !(port_clash && want_wr);
  assign wr_addr_o  = wr_ptr;
  assign rd_addr_o  = rd_ptr;
  assign conflict_o = want_rd && port_clash && want_wr;

  // last read of this word: last repeat of the cycle and inside the part of
  // the window that the next shift leaves behind
  assign last_use   = (skips == cfg.skip_shift) && (pattern_ptr < cfg.inter_cycle_shift);
  assign cycle_done = (pattern_ptr == cfg.cycle_length - 1'b1);
  assign shift_o    = rd_en_o && cycle_done && (skips == cfg.skip_shift);

  function automatic logic [AW-1:0] wrap_add(logic [AW-1:0] a, cfg_word_t b);
    logic [AW+CFG_W:0] s;
    s = (AW+CFG_W+1)'(a) + (AW+CFG_W+1)'(b);
    if (s >= (AW+CFG_W+1)'(DEPTH)) s = s - (AW+CFG_W+1)'(DEPTH);
    return AW'(s);
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      cfg         <= cfg_i;
      occupied    <= '0;
      wr_ptr      <= '0;
      offset_ptr  <= '0;
      pattern_ptr <= '0;
      skips       <= '0;
      reload_cnt  <= CW'(DEPTH);
    end else begin
      logic [DEPTH-1:0] occ_n;
      logic [CW-1:0]    rel_n;
      occ_n = occupied;
      rel_n = reload_cnt;
      if (rd_en_o) begin
        if (last_use) begin
          occ_n[rd_ptr] = 1'b0;
          rel_n         = rel_n + 1'b1;
        end
        if (cycle_done) begin
          pattern_ptr <= '0;
          if (skips == cfg.skip_shift) begin
            skips      <= '0;
            offset_ptr <= wrap_add(offset_ptr, cfg.inter_cycle_shift);
          end else begin
            skips <= skips + 1'b1;
          end
        end else begin
          pattern_ptr <= pattern_ptr + 1'b1;
        end
      end
      if (wr_en_o) begin
        occ_n[wr_ptr] = 1'b1;
        rel_n         = rel_n - 1'b1;
        wr_ptr       <= wrap_add(wr_ptr, cfg_word_t'(1));
      end
      occupied   <= occ_n;
      reload_cnt <= rel_n;
    end
  end

  a_no_same_entry: assert property (@(posedge clk) disable iff (rst)
      !(wr_en_o && rd_en_o && wr_addr_o == rd_addr_o))
    else $error("level_ctrl: write and read of the same entry");
endmodule
