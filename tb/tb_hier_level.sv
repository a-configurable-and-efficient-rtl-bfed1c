// Testbench of hier_level: a last level (dual-ported, one bank of 16) and an
// inner level (two single-ported banks of 8) receive a numbered word stream
// and run several access patterns with random source and sink stalls. Each
// word the level hands on must be the stream word the pattern selects
// (tb_pkg::pattern_index). The rates are checked without stalls: the last
// level delivers one word per cycle on a cyclic pattern, an inner level one
// word every two cycles (read cycle, then the next level's write cycle).
module tb_hier_level;
  import mh_pkg::*;
  localparam int W = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       rst;
  level_cfg_t cfg;
  int         pv, ps;
  int         pops [2];

  localparam bit DP   [2] = '{1'b1, 1'b0};
  localparam int NB   [2] = '{1, 2};
  localparam int MD   [2] = '{16, 8};
  localparam bit LAST [2] = '{1'b1, 1'b0};

  function automatic logic [W-1:0] word(longint n);
    return tb_pkg::offchip_word(32'(n));
  endfunction

  for (genvar i = 0; i < 2; i++) begin : g_dut
    logic         src_valid, src_pop, out_valid, out_pop, conflict, shift;
    logic [W-1:0] out_data;
    longint       sent, got;

    hier_level #(.WIDTH(W), .MACRO_DEPTH(MD[i]), .NUM_BANKS(NB[i]),
                 .DUAL_PORT(DP[i]), .LAST(LAST[i])) u_dut (
      .clk, .rst, .cfg_i(cfg),
      .src_valid_i(src_valid), .src_data_i(word(sent)), .src_pop_o(src_pop),
      .out_valid_o(out_valid), .out_data_o(out_data), .out_pop_i(out_pop),
      .conflict_o(conflict), .shift_o(shift));

    always @(posedge clk) begin
      if (rst) begin
        sent <= 0; got = 0;
      end else begin
        if (src_pop) sent <= sent + 1;
        if (out_pop && out_valid) begin
          longint idx;
          idx = longint'(tb_pkg::pattern_index(got, 32'(cfg.cycle_length),
                                               32'(cfg.inter_cycle_shift), 32'(cfg.skip_shift)));
          checks++;
          if (out_data !== word(idx)) begin
            failures++;
            $display("FAIL level%0d output %0d: got %h expected word %0d = %h",
                     i, got, out_data, idx, word(idx));
          end
          got++;
          pops[i]++;
        end
      end
    end

    always @(negedge clk) begin
      src_valid = ($urandom_range(99) < pv);
      out_pop   = ($urandom_range(99) < ps);
    end
  end

  task automatic run(int L, int S, int K, int cycles, int v, int s);
    cfg.cycle_length = CFG_W'(L); cfg.inter_cycle_shift = CFG_W'(S); cfg.skip_shift = CFG_W'(K);
    pv = v; ps = s;
    rst = 1;
    repeat (2) @(negedge clk);
    rst = 0;
    repeat (cycles) @(negedge clk);
  endtask

  task automatic measure(int cycles);
    pops[0] = 0; pops[1] = 0;
    repeat (cycles) @(negedge clk);
  endtask

  initial begin
    pv = 0; ps = 0;
    run(10, 3, 0, 400, 70, 80);
    run(16, 0, 0, 400, 50, 90);
    run(6, 6, 0, 400, 90, 60);
    run(12, 5, 1, 400, 60, 70);
    run(16, 16, 0, 400, 100, 100);
    // cyclic pattern over the whole level, no stalls
    run(16, 0, 0, 60, 100, 100);
    measure(100);
    checks++;
    if (pops[0] != 100) begin
      failures++; $display("FAIL last level rate: %0d words in 100 cycles", pops[0]);
    end
    checks++;
    if (pops[1] != 50) begin
      failures++; $display("FAIL inner level rate: %0d words in 100 cycles", pops[1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
