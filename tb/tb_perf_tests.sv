// Workload testbench: the 32-bit two-level builds used to measure
// throughput. Both hierarchies have 32-bit level words, a 512-word level 0
// and a dual-ported 128-word level 1, no OSR, 32-bit off-chip words; one
// has a single-ported level 0, the other a dual-ported one. The off-chip
// clock runs 20/7 times faster than the accelerator clock (a ratio that is
// not an integer, so the two clocks do not stay phase-locked; with an exact
// ratio the word arrivals lock onto the idle cycles between level-0 reads
// and a single port never costs anything), with one cycle of read latency.
//
// Each pattern is started with a reset cycle and, when preloaded, held with
// the output disabled for 3,000 cycles before it is released. The first 200
// outputs are let through, then the cycles needed for the next 1,000 are
// counted. Every output word is compared with the reference. Patterns and
// checks:
//   a) cyclic, cycle length 64 (fits level 1): level 0 linear, level 1
//      cyclic; at most 1.05 cycles per output;
//   b) cyclic, cycle length 256 (larger than level 1, held by level 0):
//      level 0 cyclic, level 1 linear; the level-to-level transfer limits
//      the rate to one output every two cycles (1.9 to 2.1 cycles each);
//   c) shifted cyclic, cycle length 64, inter-cycle shifts 8, 16, 32 and
//      64 in level 1; printed, and the dual-ported level 0 must never be
//      slower than the single-ported one;
//   d) pattern b) without preloading, so that level 0 is still being
//      written while its cycle is read; the dual-ported level 0 must not be
//      slower, and the single-ported one must have met write-over-read.
// Mechanisms counted: write-over-read in the single-ported level 0, shifts
// in level 1, and the output held back by disable_output_i.
module tb_perf_tests;
  import mh_pkg::*;
  logic ext_clk = 0, int_clk = 0;
  always #7  ext_clk = ~ext_clk;
  always #20 int_clk = ~int_clk;
  int checks = 0, failures = 0;

  localparam int NL = 2;
  localparam bit L0_DP [2] = '{1'b0, 1'b1};

  logic        reset, dis;
  logic [31:0] start;
  cfg_word_t   cl [NL], ics [NL], ss [NL];
  longint      got [2];
  longint      n_conflict, n_shift1, n_dis_held;

  function automatic logic [31:0] expected(longint m);
    longint i1, i0;
    i1 = longint'(tb_pkg::pattern_index(m,  32'(cl[1]), 32'(ics[1]), 32'(ss[1])));
    i0 = longint'(tb_pkg::pattern_index(i1, 32'(cl[0]), 32'(ics[0]), 32'(ss[0])));
    return tb_pkg::offchip_word(start + 32'(i0));
  endfunction

  for (genvar i = 0; i < 2; i++) begin : g_dut
    logic [31:0]   din, addr, dout;
    logic          din_valid, req, dout_valid;
    logic [NL-1:0] conflict, shift;

    offchip_mem #(.LATENCY(1)) u_mem (.clk(ext_clk), .req_i(req), .addr_i(addr),
                                      .data_o(din), .valid_o(din_valid));

    mem_hierarchy #(
      .OFFCHIP_W(32), .ADDR_W(32), .WORD_W(32), .NUM_LEVELS(2),
      .MACRO_DEPTH('{512, 128, 32, 32, 32}), .NUM_BANKS('{1, 1, 1, 1, 1}),
      .DUAL_PORT('{L0_DP[i], 1'b1, 1'b1, 1'b1, 1'b1}),
      .USE_OSR(1'b0), .OSR_W(64), .OUT_W(32), .NUM_SHIFTS(1),
      .SHIFTS('{32, 0, 0, 0, 0, 0, 0, 0})
    ) u_dut (
      .internal_clk_i(int_clk), .external_clk_i(ext_clk), .reset_i(reset),
      .data_in_i(din), .data_in_valid_i(din_valid),
      .global_read_address_o(addr), .global_read_req_o(req),
      .start_address_i(start),
      .cycle_length_i(cl), .inter_cycle_shift_i(ics), .skip_shift_i(ss),
      .disable_output_i(dis), .shift_select_i(1'b1),
      .data_out_o(dout), .data_out_valid_o(dout_valid),
      .level_conflict_o(conflict), .level_shift_o(shift));

    always @(posedge int_clk) begin
      if (reset) got[i] = 0;
      else begin
        if (i == 0 && conflict[0]) n_conflict++;
        if (shift[1]) n_shift1++;
        if (dout_valid) begin
          checks++;
          if (dout !== expected(got[i])) begin
            failures++;
            if (failures < 10) $display("FAIL hierarchy %0d output %0d: got %h expected %h",
                                        i, got[i], dout, expected(got[i]));
          end
          got[i]++;
        end
      end
    end
  end

  // returns the cycles each hierarchy needed for n outputs after preloading
  task automatic run(logic [31:0] st, int c0, int s0, int c1, int s1, int n,
                     bit preload, output longint cyc [2]);
    longint t, t0 [2];
    reset = 1; dis = 1;
    start = st;
    cl[0] = CFG_W'(c0); ics[0] = CFG_W'(s0); ss[0] = '0;
    cl[1] = CFG_W'(c1); ics[1] = CFG_W'(s1); ss[1] = '0;
    repeat (4) @(negedge int_clk);
    reset = 0;
    if (preload) begin
      repeat (3000) @(negedge int_clk);
      checks++;
      if (got[0] != 0 || got[1] != 0) begin
        failures++; $display("FAIL output while disabled");
      end
      n_dis_held++;
    end
    dis = 0;
    cyc[0] = -1; cyc[1] = -1; t0[0] = -1; t0[1] = -1;
    t = 0;
    while ((cyc[0] < 0 || cyc[1] < 0) && t < 100000) begin
      @(negedge int_clk);
      t++;
      for (int i = 0; i < 2; i++) begin
        if (t0[i] < 0 && got[i] >= 200) t0[i] = t;
        if (cyc[i] < 0 && got[i] >= 200 + longint'(n)) cyc[i] = t - t0[i];
      end
    end
    $display("L0 %0d/%0d L1 %0d/%0d preload %0d: single-ported L0 %0d cycles, dual-ported L0 %0d cycles for %0d outputs after 200",
             c0, s0, c1, s1, preload, cyc[0], cyc[1], n);
  endtask

  initial begin
    longint cyc [2];
    reset = 1; dis = 1; start = 0;
    for (int l = 0; l < NL; l++) begin cl[l] = 1; ics[l] = 1; ss[l] = 0; end
    n_conflict = 0; n_shift1 = 0; n_dis_held = 0;

    // a) cyclic, fits level 1
    run(32'h1000, 256, 256, 64, 0, 1000, 1'b1, cyc);
    for (int i = 0; i < 2; i++) begin
      checks++;
      if (cyc[i] > 1050) begin failures++; $display("FAIL a) hierarchy %0d too slow", i); end
    end
    // b) cyclic, longer than level 1
    run(32'h2000, 256, 0, 64, 64, 1000, 1'b1, cyc);
    for (int i = 0; i < 2; i++) begin
      checks++;
      if (cyc[i] < 1900 || cyc[i] > 2100) begin
        failures++; $display("FAIL b) hierarchy %0d: %0d cycles", i, cyc[i]);
      end
    end
    // c) shifted cyclic in level 1, growing shifts
    for (int s = 8; s <= 64; s *= 2) begin
      run(32'h3000 + 32'(s) * 32'h100, 256, 256, 64, s, 1000, 1'b1, cyc);
      checks++;
      if (cyc[1] > cyc[0]) begin
        failures++; $display("FAIL c) dual-ported level 0 slower at shift %0d", s);
      end
    end
    // d) no preloading
    run(32'h9000, 256, 0, 64, 64, 1000, 1'b0, cyc);
    checks++;
    if (cyc[1] > cyc[0]) begin failures++; $display("FAIL d) dual-ported level 0 slower"); end
    $display("write-over-read %0d, level-1 shifts %0d, preloads %0d", n_conflict, n_shift1, n_dis_held);
    checks++; if (n_conflict == 0) begin failures++; $display("FAIL no write-over-read"); end
    checks++; if (n_shift1 == 0)   begin failures++; $display("FAIL no level-1 shift"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge int_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
