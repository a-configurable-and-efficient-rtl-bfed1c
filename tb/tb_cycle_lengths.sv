// Workload testbench: growing cycle lengths on three two-level builds of
// 32-bit words. Each has a single-ported level 0 of 1,024 words and a
// dual-ported level 1 of 32, 128 or 512 words, no OSR and 32-bit off-chip
// words. The off-chip clock runs 20/7 times faster than the accelerator
// clock and the off-chip memory answers after one cycle.
//
// Cyclic patterns of 16 to 1,024 words are run, each started with a reset
// cycle, once with a 6,000-cycle preload (output disabled) and once
// without. The cycle is held in level 1 when it fits there (level 0 then
// runs linear over half its depth); otherwise level 0 holds it and level 1
// only streams (linear over 16 words). The cycles needed for 5,000 outputs
// are printed for every build and length, and every output word is
// compared with the reference.
//
// Checked with preloading: a cycle held in level 1 gives 5,000 outputs in
// at most 5,050 cycles; a cycle held in level 0 needs between 1.8 and 2.1
// times as many, because a word then passes from level 0 to level 1 at
// most every second cycle. The mechanisms counted are the preload hold,
// shifts of level 1 (streaming) and write-over-read in level 0.
module tb_cycle_lengths;
  import mh_pkg::*;
  logic ext_clk = 0, int_clk = 0;
  always #7  ext_clk = ~ext_clk;
  always #20 int_clk = ~int_clk;
  int checks = 0, failures = 0;

  localparam int NL  = 2;
  localparam int ND  = 3;
  localparam int L1_DEPTH [ND] = '{32, 128, 512};
  localparam int NLEN = 7;
  localparam int LENS [NLEN] = '{16, 32, 64, 128, 256, 512, 1024};
  localparam int NOUT = 5000;

  logic        reset, dis;
  logic [31:0] start;
  cfg_word_t   cl [ND][NL], ics [ND][NL];
  cfg_word_t   ss [NL];
  longint      got [ND];
  longint      n_conflict = 0, n_shift1 = 0, n_held = 0;

  for (genvar i = 0; i < ND; i++) begin : g_dut
    logic [31:0]   din, addr, dout;
    logic          din_valid, req, dout_valid;
    logic [NL-1:0] conflict, shift;

    offchip_mem #(.LATENCY(1)) u_mem (.clk(ext_clk), .req_i(req), .addr_i(addr),
                                      .data_o(din), .valid_o(din_valid));

    mem_hierarchy #(
      .OFFCHIP_W(32), .ADDR_W(32), .WORD_W(32), .NUM_LEVELS(2),
      .MACRO_DEPTH('{1024, L1_DEPTH[i], 32, 32, 32}), .NUM_BANKS('{1, 1, 1, 1, 1}),
      .DUAL_PORT('{1'b0, 1'b1, 1'b1, 1'b1, 1'b1}),
      .USE_OSR(1'b0), .OSR_W(64), .OUT_W(32), .NUM_SHIFTS(1),
      .SHIFTS('{32, 0, 0, 0, 0, 0, 0, 0})
    ) u_dut (
      .internal_clk_i(int_clk), .external_clk_i(ext_clk), .reset_i(reset),
      .data_in_i(din), .data_in_valid_i(din_valid),
      .global_read_address_o(addr), .global_read_req_o(req),
      .start_address_i(start),
      .cycle_length_i(cl[i]), .inter_cycle_shift_i(ics[i]), .skip_shift_i(ss),
      .disable_output_i(dis), .shift_select_i(1'b1),
      .data_out_o(dout), .data_out_valid_o(dout_valid),
      .level_conflict_o(conflict), .level_shift_o(shift));

    function automatic logic [31:0] expected(longint m);
      longint i1, i0;
      i1 = longint'(tb_pkg::pattern_index(m,  32'(cl[i][1]), 32'(ics[i][1]), 0));
      i0 = longint'(tb_pkg::pattern_index(i1, 32'(cl[i][0]), 32'(ics[i][0]), 0));
      return tb_pkg::offchip_word(start + 32'(i0));
    endfunction

    always @(posedge int_clk) begin
      if (reset) got[i] = 0;
      else begin
        if (conflict[0]) n_conflict++;
        if (shift[1]) n_shift1++;
        if (dout_valid) begin
          checks++;
          if (dout !== expected(got[i])) begin
            failures++;
            if (failures < 10) $display("FAIL build %0d output %0d: got %h expected %h",
                                        i, got[i], dout, expected(got[i]));
          end
          got[i]++;
        end
      end
    end
  end

  task automatic run(logic [31:0] st, int len, bit preload, output longint cyc [ND]);
    longint t;
    reset = 1; dis = preload;
    start = st;
    for (int i = 0; i < ND; i++) begin
      if (len <= L1_DEPTH[i]) begin
        cl[i][0] = 512; ics[i][0] = 512;
        cl[i][1] = CFG_W'(len); ics[i][1] = 0;
      end else begin
        cl[i][0] = CFG_W'(len); ics[i][0] = 0;
        cl[i][1] = 16; ics[i][1] = 16;
      end
    end
    repeat (4) @(negedge int_clk);
    reset = 0;
    if (preload) begin
      repeat (6000) @(negedge int_clk);
      checks++;
      if (got[0] != 0 || got[1] != 0 || got[2] != 0) begin
        failures++; $display("FAIL output while disabled");
      end
      n_held++;
      dis = 0;
    end
    for (int i = 0; i < ND; i++) cyc[i] = -1;
    t = 0;
    while ((cyc[0] < 0 || cyc[1] < 0 || cyc[2] < 0) && t < 100000) begin
      @(negedge int_clk);
      t++;
      for (int i = 0; i < ND; i++) if (cyc[i] < 0 && got[i] >= longint'(NOUT)) cyc[i] = t;
    end
  endtask

  initial begin
    longint cyc [ND];
    reset = 1; dis = 1; start = 0;
    for (int i = 0; i < ND; i++)
      for (int l = 0; l < NL; l++) begin cl[i][l] = 1; ics[i][l] = 1; end
    ss[0] = 0; ss[1] = 0;
    $display("cycles for %0d outputs, level 1 depth 32 / 128 / 512", NOUT);
    for (int p = 1; p >= 0; p--) begin
      for (int n = 0; n < NLEN; n++) begin
        run(32'(n) << 16 | 32'(p) << 24, LENS[n], p[0], cyc);
        $display("preload %0d cycle length %4d: %6d %6d %6d", p, LENS[n], cyc[0], cyc[1], cyc[2]);
        if (p == 1) begin
          for (int i = 0; i < ND; i++) begin
            checks++;
            if (LENS[n] <= L1_DEPTH[i] && cyc[i] > longint'(NOUT) + 50) begin
              failures++; $display("FAIL build %0d: cycle held in level 1 too slow", i);
            end
            if (LENS[n] > L1_DEPTH[i] && (cyc[i] < longint'((NOUT * 18) / 10) || cyc[i] > longint'((NOUT * 21) / 10))) begin
              failures++; $display("FAIL build %0d: cycle held in level 0 off the two-cycle rate", i);
            end
          end
        end
      end
    end
    $display("preloads %0d, level-1 shifts %0d, write-over-read %0d", n_held, n_shift1, n_conflict);
    checks++; if (n_shift1 == 0)   begin failures++; $display("FAIL no level-1 shift"); end
    checks++; if (n_conflict == 0) begin failures++; $display("FAIL no write-over-read"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge int_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
