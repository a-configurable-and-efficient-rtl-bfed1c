// Testbench of the input buffer. The buffer runs on a fast off-chip clock
// and talks to an off-chip memory model (reply latency 1 or 3); the
// accelerator side of the handshake is played by the testbench on a slower
// clock (a quarter of the rate), with two synchronising flops on the full
// flag. Each level-0 word taken must be the next four off-chip words from
// the start address, first word in the most significant bits; the addresses
// requested must run consecutively. The full flag must stay low while the
// reset request is high (four-phase handshake).
module tb_input_buffer;
  logic ext_clk = 0, int_clk = 0;
  always #5  ext_clk = ~ext_clk;
  always #20 int_clk = ~int_clk;
  int checks = 0, failures = 0;

  logic        rst;
  logic [31:0] start;
  logic        req, full, reset_buf;
  logic [31:0] addr;
  logic [127:0] bdata;
  logic        mval [2];
  logic [31:0] mdata [2];
  int          lat;    // which memory model answers (0: latency 1, 1: latency 3)
  logic        vld;
  logic [31:0] dat;

  offchip_mem #(.LATENCY(1)) u_mem1 (.clk(ext_clk), .req_i(req && lat == 0), .addr_i(addr),
                                     .data_o(mdata[0]), .valid_o(mval[0]));
  offchip_mem #(.LATENCY(3)) u_mem3 (.clk(ext_clk), .req_i(req && lat == 1), .addr_i(addr),
                                     .data_o(mdata[1]), .valid_o(mval[1]));
  assign vld = mval[lat];
  assign dat = mdata[lat];

  input_buffer #(.OFFCHIP_W(32), .WORD_W(128), .ADDR_W(32)) u_dut (
    .ext_clk, .rst, .start_address_i(start),
    .rd_req_o(req), .global_read_address_o(addr),
    .data_in_i(dat), .data_in_valid_i(vld),
    .buf_full_o(full), .buf_data_o(bdata), .reset_buf_i(reset_buf));

  // address check on the off-chip side
  longint next_req;
  always @(posedge ext_clk) begin
    if (rst) next_req = longint'(start);
    else if (req) begin
      checks++;
      if (addr !== 32'(next_req)) begin
        failures++; $display("FAIL request address %h expected %h", addr, 32'(next_req));
      end
      next_req++;
    end
    if (!rst && full && reset_buf && $past(!full)) begin
      failures++; $display("FAIL full raised while reset request high");
    end
  end

  // accelerator side: synchronise, take word, request reset, wait
  logic f1 = 1'b0, f2 = 1'b0;
  always @(posedge int_clk) begin f1 <= full; f2 <= f1; end

  task automatic take_words(int n, logic [31:0] base);
    for (int k = 0; k < n; k++) begin
      logic [127:0] exp;
      while (!(f2 && !reset_buf)) @(posedge int_clk);
      for (int j = 0; j < 4; j++) exp[127 - 32*j -: 32] = tb_pkg::offchip_word(base + 32'(4*k + j));
      checks++;
      if (bdata !== exp) begin
        failures++; $display("FAIL word %0d: got %h expected %h", k, bdata, exp);
      end
      @(posedge int_clk);
      reset_buf <= 1'b1;
      while (f2) @(posedge int_clk);
      reset_buf <= 1'b0;
    end
  endtask

  initial begin
    reset_buf = 0; lat = 0; start = 32'h100;
    rst = 1;
    repeat (4) @(posedge ext_clk);
    rst <= 0;
    take_words(20, 32'h100);
    lat = 1; start = 32'hFFFF_FFF0;   // address wrap-around
    rst = 1;
    repeat (6) @(posedge ext_clk);
    rst <= 0;
    take_words(20, 32'hFFFF_FFF0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge ext_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
