// Configuration testbench: the deepest hierarchy the design allows, five
// levels of 32-bit words, built through the top with every kind of level:
//   level 0: 64 words in two single-ported banks of 32
//   level 1: 32 words, one single-ported macro
//   level 2: 32 words in two single-ported banks of 16
//   level 3: 16 words, dual-ported
//   level 4: 16 words, dual-ported (last level)
// followed by a 64-bit OSR that hands out 32-bit words (one shift of 32).
// The off-chip memory answers 32-bit words after one cycle, on a clock 20/7
// times faster than the accelerator clock.
//
// Three patterns, each started with a reset cycle, run for 600 outputs:
//   a) levels 0-3 linear (cycle = shift = half their depth), level 4
//      shifted cyclic (cycle 8, shift 2, each cycle run twice);
//   b) level 2 cyclic over 24 words, the levels after it linear, so the
//      cycle is held in a middle level;
//   c) every level shifted cyclic at once (cycles 16, 12, 10, 8, 6, shifts
//      8, 6, 5, 4, 3), so that each level's pattern is applied to the
//      previous level's output.
// Every output word is compared with the five level patterns composed in
// the reference. The testbench counts shifts in every level and
// write-over-read in the single-ported ones, and fails if any level never
// shifted or no single-ported level ever met write-over-read.
module tb_deep_hierarchy;
  import mh_pkg::*;
  logic ext_clk = 0, int_clk = 0;
  always #7  ext_clk = ~ext_clk;
  always #20 int_clk = ~int_clk;
  int checks = 0, failures = 0;

  localparam int NL = 5;

  logic        reset;
  logic [31:0] din, addr, start, dout;
  logic        din_valid, req, dout_valid;
  cfg_word_t   cl [NL], ics [NL], ss [NL];
  logic [NL-1:0] conflict, shift;
  longint      got;
  longint      n_shift [NL];
  longint      n_conflict;

  offchip_mem #(.LATENCY(1)) u_mem (.clk(ext_clk), .req_i(req), .addr_i(addr),
                                    .data_o(din), .valid_o(din_valid));

  mem_hierarchy #(
    .OFFCHIP_W(32), .ADDR_W(32), .WORD_W(32), .NUM_LEVELS(NL),
    .MACRO_DEPTH('{32, 32, 16, 16, 16}), .NUM_BANKS('{2, 1, 2, 1, 1}),
    .DUAL_PORT('{1'b0, 1'b0, 1'b0, 1'b1, 1'b1}),
    .USE_OSR(1'b1), .OSR_W(64), .OUT_W(32), .NUM_SHIFTS(1),
    .SHIFTS('{32, 0, 0, 0, 0, 0, 0, 0})
  ) u_dut (
    .internal_clk_i(int_clk), .external_clk_i(ext_clk), .reset_i(reset),
    .data_in_i(din), .data_in_valid_i(din_valid),
    .global_read_address_o(addr), .global_read_req_o(req),
    .start_address_i(start),
    .cycle_length_i(cl), .inter_cycle_shift_i(ics), .skip_shift_i(ss),
    .disable_output_i(1'b0), .shift_select_i(1'b1),
    .data_out_o(dout), .data_out_valid_o(dout_valid),
    .level_conflict_o(conflict), .level_shift_o(shift));

  // output m is stream word idx, with idx taken back through levels 4..0
  function automatic logic [31:0] expected(longint m);
    longint idx;
    idx = m;
    for (int l = NL - 1; l >= 0; l--)
      idx = longint'(tb_pkg::pattern_index(idx, 32'(cl[l]), 32'(ics[l]), 32'(ss[l])));
    return tb_pkg::offchip_word(start + 32'(idx));
  endfunction

  always @(posedge int_clk) begin
    if (reset) got = 0;
    else begin
      for (int l = 0; l < NL; l++) if (shift[l]) n_shift[l]++;
      for (int l = 0; l < 3; l++) if (conflict[l]) n_conflict++;
      if (dout_valid) begin
        checks++;
        if (dout !== expected(got)) begin
          failures++;
          if (failures < 10) $display("FAIL output %0d: got %h expected %h", got, dout, expected(got));
        end
        got++;
      end
    end
  end

  task automatic run(logic [31:0] st, int c [NL], int s [NL], int k [NL]);
    longint t;
    reset = 1;
    start = st;
    for (int l = 0; l < NL; l++) begin
      cl[l] = CFG_W'(c[l]); ics[l] = CFG_W'(s[l]); ss[l] = CFG_W'(k[l]);
    end
    repeat (4) @(negedge int_clk);
    reset = 0;
    t = 0;
    while (got < 600 && t < 50000) begin @(negedge int_clk); t++; end
    checks++;
    if (got < 600) begin failures++; $display("FAIL pattern stalled after %0d outputs", got); end
    $display("600 outputs in %0d cycles", t);
  endtask

  initial begin
    reset = 1; start = 0;
    for (int l = 0; l < NL; l++) begin cl[l] = 1; ics[l] = 1; ss[l] = 0; n_shift[l] = 0; end
    n_conflict = 0;
    run(32'h1000, '{32, 16, 16, 8, 8}, '{32, 16, 16, 8, 2}, '{0, 0, 0, 0, 1});
    run(32'h2000, '{32, 16, 24, 8, 8}, '{32, 16, 0, 8, 8},  '{0, 0, 0, 0, 0});
    run(32'h3000, '{16, 12, 10, 8, 6}, '{8, 6, 5, 4, 3},    '{0, 0, 0, 0, 0});
    for (int l = 0; l < NL; l++) begin
      checks++;
      if (n_shift[l] == 0) begin failures++; $display("FAIL level %0d never shifted", l); end
    end
    checks++;
    if (n_conflict == 0) begin failures++; $display("FAIL no write-over-read"); end
    $display("shifts per level %0d %0d %0d %0d %0d, write-over-read %0d",
             n_shift[0], n_shift[1], n_shift[2], n_shift[3], n_shift[4], n_conflict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge int_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
