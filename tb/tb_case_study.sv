// Workload testbench: the hierarchy built as the weight memory of an 8x8
// MAC-array accelerator. One dual-ported level of 104 x 128 bit, 32-bit
// off-chip words, and an OSR of 384 bits that hands the array one 384-bit
// weight word (64 weights of 6 bit) every time it is full. The off-chip
// clock runs four times faster than the accelerator clock and the off-chip
// memory answers after one cycle.
//
// The weight stream of each layer of a 13-layer keyword-spotting network
// (TC-ResNet) is run with that layer's cycle length, counted here in
// 128-bit level words: 98, 45, 49, 41, 20, 24, 16, 24, 1, 8, 12, 4, 1.
// The window of each layer is used twice before it moves on by a whole
// cycle (skip shift 1, inter-cycle shift = cycle length), and each layer is
// run for at most 40 output words. The reuse count and the 40-word cut are
// choices of this test; the layer sizes are far larger.
//
// Checked: every 384-bit output against the reference (three consecutive
// level words of the pattern); that a 384-bit word never comes faster than
// every three cycles; and that once a cyclic window is held on chip the
// rate is exactly one output per three cycles. The cycles each layer needed
// are printed with the efficiency (outputs x 3 / cycles).
module tb_case_study;
  import mh_pkg::*;
  logic ext_clk = 0, int_clk = 0;
  always #5  ext_clk = ~ext_clk;
  always #20 int_clk = ~int_clk;
  int checks = 0, failures = 0;

  localparam int NL = 1;
  localparam int NLAYERS = 13;
  localparam int CYCLE_LEN [NLAYERS] = '{98, 45, 49, 41, 20, 24, 16, 24, 1, 8, 12, 4, 1};

  logic        reset;
  logic [31:0] din, addr, start;
  logic        din_valid, req;
  cfg_word_t   cl [NL], ics [NL], ss [NL];
  logic        dis;
  logic        sel;
  logic [383:0] dout;
  logic        dout_valid;
  logic [NL-1:0] conflict, shift;

  offchip_mem #(.LATENCY(1)) u_mem (.clk(ext_clk), .req_i(req), .addr_i(addr),
                                    .data_o(din), .valid_o(din_valid));

  mem_hierarchy #(
    .OFFCHIP_W(32), .ADDR_W(32), .WORD_W(128), .NUM_LEVELS(1),
    .MACRO_DEPTH('{104, 32, 32, 32, 32}), .NUM_BANKS('{1, 1, 1, 1, 1}),
    .DUAL_PORT('{1'b1, 1'b1, 1'b1, 1'b1, 1'b1}),
    .USE_OSR(1'b1), .OSR_W(384), .OUT_W(384), .NUM_SHIFTS(1),
    .SHIFTS('{384, 0, 0, 0, 0, 0, 0, 0})
  ) u_dut (
    .internal_clk_i(int_clk), .external_clk_i(ext_clk), .reset_i(reset),
    .data_in_i(din), .data_in_valid_i(din_valid),
    .global_read_address_o(addr), .global_read_req_o(req),
    .start_address_i(start),
    .cycle_length_i(cl), .inter_cycle_shift_i(ics), .skip_shift_i(ss),
    .disable_output_i(dis), .shift_select_i(sel),
    .data_out_o(dout), .data_out_valid_o(dout_valid),
    .level_conflict_o(conflict), .level_shift_o(shift));

  function automatic logic [127:0] level_word(longint m);
    logic [127:0] w;
    longint n;
    n = longint'(tb_pkg::pattern_index(m, 32'(cl[0]), 32'(ics[0]), 32'(ss[0])));
    for (int j = 0; j < 4; j++) w[127 - 32*j -: 32] = tb_pkg::offchip_word(start + 32'(4*n + j));
    return w;
  endfunction

  longint got;
  longint last_out_cycle, cyc;
  int     n_out;

  always @(posedge int_clk) begin
    cyc++;
    if (reset) begin got = 0; last_out_cycle = -100; end
    else if (dout_valid) begin
      logic [383:0] exp;
      exp = {level_word(3*got), level_word(3*got + 1), level_word(3*got + 2)};
      checks++;
      if (dout !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL output %0d of layer pattern L=%0d", got, cl[0]);
      end
      checks++;
      if (cyc - last_out_cycle < 3) begin
        failures++; $display("FAIL 384-bit outputs %0d cycles apart", cyc - last_out_cycle);
      end
      last_out_cycle = cyc;
      got++;
      n_out++;
    end
  end

  task automatic restart(logic [31:0] st, int L, int S, int K);
    reset = 1;
    start = st;
    cl[0] = CFG_W'(L); ics[0] = CFG_W'(S); ss[0] = CFG_W'(K);
    repeat (4) @(negedge int_clk);
    reset = 0;
  endtask

  initial begin
    longint t0, total_cycles, total_out;
    reset = 1; dis = 0; sel = 1'b1; start = 0; cyc = 0; n_out = 0;
    cl[0] = 1; ics[0] = 1; ss[0] = 0;
    total_cycles = 0; total_out = 0;
    for (int layer = 0; layer < NLAYERS; layer++) begin
      restart(32'(layer) << 20, CYCLE_LEN[layer], CYCLE_LEN[layer], 1);
      t0 = cyc;
      while (got < 40) @(negedge int_clk);
      $display("layer %0d: cycle length %0d, 40 weight words in %0d cycles, efficiency %0d%%",
               layer, CYCLE_LEN[layer], cyc - t0, (40 * 3 * 100) / (cyc - t0));
      total_cycles += cyc - t0;
      total_out += 40;
    end
    $display("all layers: %0d weight words in %0d cycles", total_out, total_cycles);

    // a cyclic window held on chip: exactly one 384-bit word per three cycles
    restart(32'h00F0_0000, 96, 0, 0);
    while (got < 40) @(negedge int_clk);
    n_out = 0;
    repeat (90) @(negedge int_clk);
    checks++;
    if (n_out != 30) begin
      failures++; $display("FAIL on-chip rate: %0d words in 90 cycles", n_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge int_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
