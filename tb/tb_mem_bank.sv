// Testbench of mem_bank: a single-ported and a dual-ported bank are written
// with known words and read back; checks the one-cycle read latency, that
// the read data holds between reads, and (dual-ported) that a read and a
// write of different addresses work in the same cycle.
module tb_mem_bank;
  localparam int D = 16, W = 24;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          sp_we, sp_re, dp_we, dp_re;
  logic [3:0]    sp_wa, sp_ra, dp_wa, dp_ra;
  logic [W-1:0]  sp_wd, dp_wd, sp_rd, dp_rd;

  mem_bank #(.DEPTH(D), .WIDTH(W), .DUAL_PORT(1'b0)) u_sp (
    .clk, .wr_en_i(sp_we), .wr_addr_i(sp_wa), .wr_data_i(sp_wd),
    .rd_en_i(sp_re), .rd_addr_i(sp_ra), .rd_data_o(sp_rd));
  mem_bank #(.DEPTH(D), .WIDTH(W), .DUAL_PORT(1'b1)) u_dp (
    .clk, .wr_en_i(dp_we), .wr_addr_i(dp_wa), .wr_data_i(dp_wd),
    .rd_en_i(dp_re), .rd_addr_i(dp_ra), .rd_data_o(dp_rd));

  function automatic logic [W-1:0] val(int a, int salt);
    return W'((a * 7919 + salt * 104729) ^ 24'hA5C3);
  endfunction

  task automatic check(logic [W-1:0] got, logic [W-1:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    {sp_we, sp_re, dp_we, dp_re} = '0;
    sp_wa = 0; sp_ra = 0; dp_wa = 0; dp_ra = 0; sp_wd = 0; dp_wd = 0;
    @(negedge clk);
    // fill both
    for (int a = 0; a < D; a++) begin
      sp_we = 1; sp_wa = 4'(a); sp_wd = val(a, 1);
      dp_we = 1; dp_wa = 4'(a); dp_wd = val(a, 2);
      @(negedge clk);
    end
    sp_we = 0; dp_we = 0;
    // read back in reverse order, one-cycle latency
    for (int a = D - 1; a >= 0; a--) begin
      sp_re = 1; sp_ra = 4'(a); dp_re = 1; dp_ra = 4'(a);
      @(negedge clk);
      check(sp_rd, val(a, 1), "sp read");
      check(dp_rd, val(a, 2), "dp read");
    end
    sp_re = 0; dp_re = 0;
    @(negedge clk);
    check(sp_rd, val(0, 1), "sp hold");
    // dual-ported: write a+8 while reading a
    for (int a = 0; a < 8; a++) begin
      dp_we = 1; dp_wa = 4'(a + 8); dp_wd = val(a + 8, 3);
      dp_re = 1; dp_ra = 4'(a);
      @(negedge clk);
      check(dp_rd, val(a, 2), "dp read during write");
    end
    dp_we = 0;
    for (int a = 8; a < 16; a++) begin
      dp_ra = 4'(a);
      @(negedge clk);
      check(dp_rd, val(a, 3), "dp read of concurrent write");
    end
    dp_re = 0;
    // single-ported: alternate write and read
    for (int a = 0; a < 8; a++) begin
      sp_we = 1; sp_wa = 4'(a); sp_wd = val(a, 4);
      @(negedge clk);
      sp_we = 0; sp_re = 1; sp_ra = 4'(a);
      @(negedge clk);
      sp_re = 0;
      check(sp_rd, val(a, 4), "sp write then read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
