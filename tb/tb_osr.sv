// Testbench of the output shift register. Instance A (128-bit level words,
// 256-bit register, 32-bit output, shifts 32/16/8) is run with every shift
// selection and with random input stalls and output disables; instance B
// (128-bit words, 384-bit register and output, one shift of 384) is the
// weight-memory arrangement of the case study. Each output is compared with
// the bits the selected shift must expose in the concatenated input stream
// (first word first, most significant bit first). Rates: A gives one 32-bit
// output per cycle with shift 32; B needs three cycles per 384-bit output.
// Selection 0 and disable_i must stop the output.
module tb_osr;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst;
  int   pv;          // input valid probability
  int   pdis;        // disable probability
  logic [1:0] sel_a;
  logic       sel_b;
  int   outs [2];

  function automatic logic [127:0] word(longint n);
    logic [127:0] w;
    for (int j = 0; j < 4; j++) w[127 - 32*j -: 32] = tb_pkg::offchip_word(32'(4*n + j));
    return w;
  endfunction

  function automatic logic stream_bit(longint b);
    logic [127:0] w;
    w = word(b / 128);
    return w[7'(127 - (b % 128))];
  endfunction

  localparam int OUTW [2] = '{32, 384};

  for (genvar i = 0; i < 2; i++) begin : g_dut
    logic           in_valid, in_pop, out_valid, dis;
    logic [OUTW[i]-1:0] out_data;
    longint         sent, got;
    int             shamt;

    if (i == 0) begin : g_a
      osr #(.IN_W(128), .OSR_W(256), .OUT_W(32), .NUM_SHIFTS(3), .SHIFTS('{32, 16, 8, 0, 0, 0, 0, 0})) u_dut (
        .clk, .rst, .shift_select_i(sel_a), .disable_i(dis),
        .in_valid_i(in_valid), .in_data_i(word(sent)), .in_pop_o(in_pop),
        .out_valid_o(out_valid), .out_data_o(out_data));
      assign shamt = (sel_a == 1) ? 32 : (sel_a == 2) ? 16 : 8;
    end else begin : g_b
      osr #(.IN_W(128), .OSR_W(384), .OUT_W(384), .NUM_SHIFTS(1), .SHIFTS('{384, 0, 0, 0, 0, 0, 0, 0})) u_dut (
        .clk, .rst, .shift_select_i(sel_b), .disable_i(dis),
        .in_valid_i(in_valid), .in_data_i(word(sent)), .in_pop_o(in_pop),
        .out_valid_o(out_valid), .out_data_o(out_data));
      assign shamt = 384;
    end

    always @(posedge clk) begin
      if (rst) begin
        sent <= 0; got = 0;
      end else begin
        if (in_pop) sent <= sent + 1;
        if (out_valid) begin
          logic [OUTW[i]-1:0] exp;
          for (int b = 0; b < OUTW[i]; b++)
            exp[OUTW[i]-1-b] = stream_bit(got * longint'(shamt) + longint'(b));
          checks++;
          if (out_data !== exp) begin
            failures++;
            $display("FAIL osr%0d output %0d: got %h expected %h", i, got, out_data, exp);
          end
          if (dis) begin
            failures++;
            $display("FAIL osr%0d output while disabled", i);
          end
          got++;
          outs[i]++;
        end
      end
    end

    always @(negedge clk) begin
      in_valid = ($urandom_range(99) < pv);
      dis      = ($urandom_range(99) < pdis);
    end
  end

  task automatic run(logic [1:0] a, int cycles, int v, int d);
    sel_a = a; sel_b = 1'b1; pv = v; pdis = d;
    rst = 1;
    repeat (2) @(negedge clk);
    rst = 0;
    repeat (cycles) @(negedge clk);
  endtask

  task automatic measure(int cycles);
    outs[0] = 0; outs[1] = 0;
    repeat (cycles) @(negedge clk);
  endtask

  initial begin
    sel_a = 0; sel_b = 0; pv = 0; pdis = 0;
    run(2'd1, 200, 70, 20);
    run(2'd2, 200, 50, 10);
    run(2'd3, 200, 90, 30);
    // rates without stalls
    run(2'd1, 10, 100, 0);
    measure(120);
    checks++;
    if (outs[0] != 120) begin
      failures++; $display("FAIL shift-32 rate: %0d outputs in 120 cycles", outs[0]);
    end
    checks++;
    if (outs[1] != 40) begin
      failures++; $display("FAIL 384-bit rate: %0d outputs in 120 cycles", outs[1]);
    end
    // selection 0 stops the output
    sel_a = 2'd0; sel_b = 1'b0;
    measure(20);
    checks++;
    if (outs[0] != 0 || outs[1] != 0) begin
      failures++; $display("FAIL output with shift select 0");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
