// End-to-end testbench of the memory hierarchy at its default build
// parameters (two levels: single-ported 128 x 128 bit level 0, dual-ported
// 32 x 128 bit level 1, OSR of 256 bits with 32-bit output, 32-bit off-chip
// words). The off-chip clock runs four times faster than the accelerator
// clock and the off-chip memory answers after one cycle, as in the weight
// memory case study.
//
// Several patterns are run one after the other, each started by a reset
// cycle with new settings. Every output word is compared with a reference
// computed from the pattern settings alone: level 1's pattern selects a
// word of level 0's output stream, level 0's pattern a word of the off-chip
// stream (four off-chip words per level word, first in the top bits), and
// the OSR shift selects the 32 bits of the resulting bit stream.
//
// Mechanisms counted (each must occur): off-chip requests and buffer
// handshakes across the clock domain crossing, reads delayed by a write in
// the single-ported level 0 (write-over-read), inter-cycle shifts in both
// levels, cycles with the output disabled while the hierarchy preloads, OSR
// shift selections 1, 2 and 3 (also switched at run time), pattern restarts, and a cycle length larger
// than level 1 (served by a cyclic level 0). Rate: a shifted-cyclic pattern
// that fits level 1 must give one output per cycle once loaded.
module tb_mem_hierarchy;
  import mh_pkg::*;
  logic ext_clk = 0, int_clk = 0;
  always #5  ext_clk = ~ext_clk;
  always #20 int_clk = ~int_clk;
  int checks = 0, failures = 0;

  localparam int NL = 2;

  logic        reset;
  logic [31:0] din, addr, start;
  logic        din_valid, req;
  cfg_word_t   cl [NL], ics [NL], ss [NL];
  logic        dis;
  logic [1:0]  sel;
  logic [31:0] dout;
  logic        dout_valid;
  logic [NL-1:0] conflict, shift;

  offchip_mem #(.LATENCY(1)) u_mem (.clk(ext_clk), .req_i(req), .addr_i(addr),
                                    .data_o(din), .valid_o(din_valid));

  mem_hierarchy u_dut (
    .internal_clk_i(int_clk), .external_clk_i(ext_clk), .reset_i(reset),
    .data_in_i(din), .data_in_valid_i(din_valid),
    .global_read_address_o(addr), .global_read_req_o(req),
    .start_address_i(start),
    .cycle_length_i(cl), .inter_cycle_shift_i(ics), .skip_shift_i(ss),
    .disable_output_i(dis), .shift_select_i(sel),
    .data_out_o(dout), .data_out_valid_o(dout_valid),
    .level_conflict_o(conflict), .level_shift_o(shift));

  // ---------------------------------------------------------- reference
  function automatic logic [127:0] l0_in_word(longint n);
    logic [127:0] w;
    for (int j = 0; j < 4; j++) w[127 - 32*j -: 32] = tb_pkg::offchip_word(start + 32'(4*n + j));
    return w;
  endfunction

  function automatic logic [127:0] l1_out_word(longint m);
    longint i1, i0;
    i1 = longint'(tb_pkg::pattern_index(m,  32'(cl[1]), 32'(ics[1]), 32'(ss[1])));
    i0 = longint'(tb_pkg::pattern_index(i1, 32'(cl[0]), 32'(ics[0]), 32'(ss[0])));
    return l0_in_word(i0);
  endfunction

  // 32-bit output at bit position b of the level-1 stream: bits [b, b+32)
  function automatic logic [31:0] expected_out(longint b);
    logic [255:0] two;
    longint m;
    int o;
    m = b / 128;
    o = int'(b % 128);
    two = {l1_out_word(m), l1_out_word(m + 1)};
    return two[255 - o -: 32];
  endfunction

  // ----------------------------------------------------------- monitors
  longint got, bitpos;
  int shamt;
  int n_req, n_conflict, n_shift0, n_shift1, n_dis, n_restart, n_long;
  int n_sel [4];
  int outs_window;

  assign shamt = (sel == 2'd1) ? 32 : (sel == 2'd2) ? 16 : 8;

  always @(posedge ext_clk) if (req) n_req++;

  always @(posedge int_clk) begin
    if (reset) begin got = 0; bitpos = 0; end
    else begin
      if (conflict[0]) n_conflict++;
      if (shift[0]) n_shift0++;
      if (shift[1]) n_shift1++;
      if (dis) n_dis++;
      if (dout_valid) begin
        logic [31:0] exp;
        exp = expected_out(bitpos);
        checks++;
        if (dout !== exp) begin
          failures++;
          if (failures < 10) $display("FAIL output %0d: got %h expected %h", got, dout, exp);
        end
        got++;
        bitpos += longint'(shamt);
        outs_window++;
        n_sel[sel]++;
      end
    end
  end

  // ------------------------------------------------------------ phases
  task automatic restart(logic [31:0] st, int l0c, int l0s, int l0k, int l1c, int l1s, int l1k,
                         logic [1:0] sh);
    reset = 1;
    start = st;
    cl[0] = CFG_W'(l0c); ics[0] = CFG_W'(l0s); ss[0] = CFG_W'(l0k);
    cl[1] = CFG_W'(l1c); ics[1] = CFG_W'(l1s); ss[1] = CFG_W'(l1k);
    sel = sh;
    repeat (4) @(negedge int_clk);
    reset = 0;
    n_restart++;
  endtask

  task automatic run_outputs(int n);
    longint target;
    target = got + longint'(n);
    while (got < target) @(negedge int_clk);
  endtask

  initial begin
    reset = 1; dis = 0; sel = 1; start = 0;
    for (int l = 0; l < NL; l++) begin cl[l] = 1; ics[l] = 1; ss[l] = 0; end
    n_req = 0; n_conflict = 0; n_shift0 = 0; n_shift1 = 0; n_dis = 0; n_restart = 0; n_long = 0;
    n_sel = '{0, 0, 0, 0}; outs_window = 0; got = 0;

    // 1: level 0 streams (linear, 64-word windows), level 1 shifted cyclic
    restart(32'h0000_1000, 64, 64, 0, 16, 4, 1, 2'd1);
    run_outputs(600);
    // rate once loaded: one 32-bit output per accelerator cycle
    outs_window = 0;
    repeat (200) @(negedge int_clk);
    checks++;
    if (outs_window < 200) begin
      failures++; $display("FAIL rate: %0d outputs in 200 cycles", outs_window);
    end
    $display("rate with the pattern in level 1: %0d outputs in 200 cycles", outs_window);

    // 2: preload with the output disabled, then release; 16-bit sliding window
    restart(32'h0002_0000, 32, 32, 0, 24, 6, 0, 2'd2);
    dis = 1;
    repeat (300) @(negedge int_clk);
    checks++;
    if (got != 0) begin
      failures++; $display("FAIL output while disabled");
    end
    dis = 0;
    // preloaded: the first output follows the release at once
    begin
      int wait_cycles;
      wait_cycles = 0;
      while (got == 0 && wait_cycles < 50) begin @(negedge int_clk); wait_cycles++; end
      checks++;
      if (wait_cycles > 2) begin
        failures++; $display("FAIL first output %0d cycles after release", wait_cycles);
      end
    end
    run_outputs(500);

    // 3: cycle longer than level 1: level 0 holds a cyclic 100-word pattern,
    //    level 1 streams it linearly; 8-bit shift
    restart(32'h0003_0000, 100, 0, 0, 16, 16, 0, 2'd3);
    run_outputs(800);
    n_long++;

    // 4: cycle longer than level 1 with an inter-cycle shift in level 0
    restart(32'h0004_0000, 80, 20, 0, 8, 8, 0, 2'd1);
    run_outputs(1500);
    n_long++;

    // 5: shift select switched at run time
    restart(32'h0005_0000, 32, 32, 0, 16, 16, 0, 2'd1);
    for (int r = 0; r < 30; r++) begin
      sel = 2'(1 + $urandom_range(2));
      run_outputs(1 + $urandom_range(20));
    end
    sel = 2'd0;
    begin
      longint got_before;
      repeat (2) @(negedge int_clk);
      got_before = got;
      repeat (20) @(negedge int_clk);
      checks++;
      if (got != got_before) begin
        failures++; $display("FAIL output with shift select 0");
      end
    end

    $display("requests %0d conflicts %0d shifts L0 %0d L1 %0d disabled %0d restarts %0d sel1 %0d sel2 %0d sel3 %0d",
             n_req, n_conflict, n_shift0, n_shift1, n_dis, n_restart, n_sel[1], n_sel[2], n_sel[3]);
    checks++; if (n_req == 0)      begin failures++; $display("FAIL no off-chip request"); end
    checks++; if (n_conflict == 0) begin failures++; $display("FAIL no write-over-read"); end
    checks++; if (n_shift0 == 0)   begin failures++; $display("FAIL no level-0 shift"); end
    checks++; if (n_shift1 == 0)   begin failures++; $display("FAIL no level-1 shift"); end
    checks++; if (n_dis == 0)      begin failures++; $display("FAIL output never held back"); end
    checks++; if (n_long != 2)     begin failures++; $display("FAIL long cycles not run"); end
    for (int s = 1; s < 4; s++) begin
      checks++; if (n_sel[s] == 0) begin failures++; $display("FAIL shift select %0d unused", s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge int_clk);
    failures++;
    $display("watchdog expired at output %0d", got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
