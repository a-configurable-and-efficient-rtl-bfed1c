// Testbench of level_ctrl: three controllers of depth 8 (one single-ported
// bank, one dual-ported bank, two single-ported banks) run the same
// patterns with random source and sink stalls. A model records which stream
// word each entry received; every read must hit the entry holding the
// stream word the pattern asks for (tb_pkg::pattern_index). Port rules are
// checked (single-ported: never read and write in one cycle; two banks:
// never both in one bank), and the read rate: one read per cycle for the
// dual-ported level with a cyclic pattern, at most one access per cycle for
// the single-ported one.
module tb_level_ctrl;
  import mh_pkg::*;
  localparam int D = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int conflicts = 0;

  logic       rst;
  level_cfg_t cfg;
  logic       src_valid, rd_space;
  int         reads [3];

  localparam bit DP [3] = '{1'b0, 1'b1, 1'b0};
  localparam int NB [3] = '{1, 1, 2};

  for (genvar i = 0; i < 3; i++) begin : g_dut
    logic       wr_en, rd_en, conflict, shift;
    logic [2:0] wr_addr, rd_addr;
    longint     entry [D];
    longint     wcount, rcount;

    level_ctrl #(.DEPTH(D), .NUM_BANKS(NB[i]), .DUAL_PORT(DP[i])) u_dut (
      .clk, .rst, .cfg_i(cfg), .src_valid_i(src_valid),
      .wr_en_o(wr_en), .wr_addr_o(wr_addr), .rd_space_i(rd_space),
      .rd_en_o(rd_en), .rd_addr_o(rd_addr), .conflict_o(conflict), .shift_o(shift));

    always @(posedge clk) begin
      if (rst) begin
        wcount = 0; rcount = 0;
      end else begin
        if (rd_en) begin
          longint exp;
          exp = longint'(tb_pkg::pattern_index(rcount, 32'(cfg.cycle_length),
                                               32'(cfg.inter_cycle_shift), 32'(cfg.skip_shift)));
          checks++;
          if (entry[rd_addr] != exp) begin
            failures++;
            $display("FAIL dut%0d read %0d: entry %0d holds word %0d, expected %0d",
                     i, rcount, rd_addr, entry[rd_addr], exp);
          end
          rcount++;
          reads[i]++;
        end
        if (wr_en) begin
          entry[wr_addr] = wcount;
          checks++;
          if (wr_addr != 3'(wcount % D)) begin
            failures++;
            $display("FAIL dut%0d write %0d to entry %0d", i, wcount, wr_addr);
          end
          wcount++;
        end
        if (conflict) conflicts++;
        if (!DP[i] && NB[i] == 1 && wr_en && rd_en) begin
          failures++;
          $display("FAIL dut%0d: single-ported read and write together", i);
        end
        if (!DP[i] && NB[i] == 2 && wr_en && rd_en && wr_addr[0] == rd_addr[0]) begin
          failures++;
          $display("FAIL dut%0d: same single-ported bank read and written", i);
        end
      end
    end
  end

  task automatic run(int L, int S, int K, int cycles, int pv, int ps);
    cfg.cycle_length = CFG_W'(L); cfg.inter_cycle_shift = CFG_W'(S); cfg.skip_shift = CFG_W'(K);
    rst = 1;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 3; i++) reads[i] = 0;
    repeat (cycles) begin
      src_valid = ($urandom_range(99) < pv);
      rd_space  = ($urandom_range(99) < ps);
      @(negedge clk);
    end
  endtask

  // continue the running pattern without stalls and count reads
  task automatic measure(int cycles);
    for (int i = 0; i < 3; i++) reads[i] = 0;
    src_valid = 1; rd_space = 1;
    repeat (cycles) @(negedge clk);
  endtask

  initial begin
    src_valid = 0; rd_space = 0;
    run(5, 2, 0, 300, 70, 80);   // shifted cyclic
    run(8, 0, 0, 300, 60, 90);   // cyclic, whole level
    run(4, 4, 0, 300, 80, 70);   // linear
    run(6, 3, 1, 300, 50, 50);   // shifted cyclic, each cycle run twice
    run(3, 1, 2, 300, 90, 90);
    run(7, 7, 0, 300, 100, 100); // linear, no stalls
    // rates, no stalls: cyclic pattern over a full level
    run(8, 0, 0, 20, 100, 100);
    measure(100);
    checks++;
    if (reads[1] != 100) begin
      failures++; $display("FAIL dual-ported cyclic rate: %0d reads in 100 cycles", reads[1]);
    end
    // linear stream through a single-ported level: reads and writes share the port
    run(4, 4, 0, 20, 100, 100);
    measure(200);
    checks++;
    if (reads[0] > 100 || reads[0] < 90) begin
      failures++; $display("FAIL single-ported linear rate: %0d reads in 200 cycles", reads[0]);
    end
    checks++;
    if (conflicts == 0) begin
      failures++; $display("FAIL no write-over-read conflict seen");
    end
    $display("conflicts %0d", conflicts);
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
