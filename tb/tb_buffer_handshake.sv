// Testbench of the accelerator-side handshake. A model of the buffer
// controller on a faster clock raises the full flag with a new word, drops
// it when it sees the (synchronised) reset request and waits for the request
// to fall before offering the next word. The testbench writes each word
// when word_valid_o is high (sometimes a few cycles late) and checks the
// words arrive in order, exactly once, that word_valid_o drops in the cycle
// after the write (reset request raised) and that the flag's arrival takes
// two synchronising edges.
module tb_buffer_handshake;
  logic ext_clk = 0, clk = 0;
  always #3  ext_clk = ~ext_clk;
  always #10 clk = ~clk;
  int checks = 0, failures = 0;

  logic        rst;
  logic        full, reset_buf, valid, pop;
  logic [31:0] bdata, wdata;

  buffer_handshake #(.WORD_W(32)) u_dut (
    .clk, .rst, .buf_full_i(full), .buf_data_i(bdata),
    .reset_buf_o(reset_buf), .word_valid_o(valid), .word_data_o(wdata), .word_pop_i(pop));

  // buffer controller model (off-chip clock domain)
  int   produced;
  logic r1, r2;
  initial begin
    full = 0; bdata = 0; produced = 0; r1 = 0; r2 = 0;
  end
  always @(posedge ext_clk) begin
    r1 <= reset_buf; r2 <= r1;
    if (!rst) begin
      if (full && r2) full <= 1'b0;
      else if (!full && !r2 && $urandom_range(3) == 0) begin
        full  <= 1'b1;
        bdata <= tb_pkg::offchip_word(32'(produced));
        produced++;
      end
    end
  end

  // accelerator side
  int taken;
  initial begin
    pop = 0; taken = 0;
    rst = 1;
    repeat (3) @(negedge clk);
    rst = 0;
    while (taken < 40) begin
      @(negedge clk);
      pop = 0;
      if (valid && $urandom_range(2) != 0) begin
        checks++;
        if (wdata !== tb_pkg::offchip_word(32'(taken))) begin
          failures++; $display("FAIL word %0d: got %h", taken, wdata);
        end
        pop = 1;
        taken++;
        @(negedge clk);
        pop = 0;
        checks++;
        if (valid || !reset_buf) begin
          failures++; $display("FAIL after write: valid %b reset %b", valid, reset_buf);
        end
      end
    end
    checks++;
    if (produced > taken + 1) begin
      failures++; $display("FAIL %0d words offered, %0d taken", produced, taken);
    end
    // flag arrival: full raised now reaches word_valid_o after two edges
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
