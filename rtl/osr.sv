// Output shift register (OSR) between the last hierarchy level and the
// accelerator's processing units.
//
// The OSR is an OSR_W-bit register whose valid bits are kept left-aligned:
// `fill` bits counted from the most significant end hold data, the rest are
// zero. The accelerator sees the top OUT_W bits. shift_select_i picks one
// of the first NUM_SHIFTS shift amounts listed in SHIFTS (select k picks SHIFTS[k-1];
// 0 stops the output). Each cycle in which at least max(OUT_W, shift) bits
// are held and disable_i is low, the current top OUT_W bits are an output
// (out_valid_o) and the register moves left by the selected shift. A shift
// smaller than OUT_W makes successive outputs overlap (sliding window), a
// shift larger than OUT_W skips bits.
//
// In the same cycle, if the register then has room for a whole word of the
// last level (fill after the shift + IN_W <= OSR_W), the next level word is
// taken (in_pop_o) and placed directly below the held bits. Hence an OSR as
// wide as the output and three times the level word is filled in three
// cycles, and a 32-bit output can be produced every cycle from 128-bit level
// words when OSR_W >= IN_W + OUT_W.
//
// Choices of this implementation: the data order (first word in the most
// significant bits), the shift list, OSR_W and the output valid signal.
module osr
  import mh_pkg::*;
#(
  parameter int unsigned IN_W       = 128,
  parameter int unsigned OSR_W      = 256,
  parameter int unsigned OUT_W      = 32,
  parameter int unsigned NUM_SHIFTS = 3,
  parameter int unsigned SHIFTS [MAX_SHIFTS] = '{32, 16, 8, 0, 0, 0, 0, 0},
  localparam int unsigned SEL_W = $clog2(NUM_SHIFTS + 1)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [SEL_W-1:0] shift_select_i,
  input  logic             disable_i,
  input  logic             in_valid_i,
  input  logic [IN_W-1:0]  in_data_i,
  output logic             in_pop_o,
  output logic             out_valid_o,
  output logic [OUT_W-1:0] out_data_o
);
  localparam int unsigned FW = $clog2(OSR_W + 1);

  logic [OSR_W-1:0] sreg;
  logic [FW-1:0]    fill;
  logic [FW-1:0]    shamt, need, fill_a;
  logic [OSR_W-1:0] sreg_a;

  always_comb begin
    shamt = '0;
    for (int k = 0; k < NUM_SHIFTS; k++)
      if (shift_select_i == SEL_W'(k + 1)) shamt = FW'(SHIFTS[k]);
    need = (shamt > FW'(OUT_W)) ? shamt : FW'(OUT_W);
  end

  assign out_valid_o = (shamt != '0) && !disable_i && (fill >= need);
  assign out_data_o  = sreg[OSR_W-1 -: OUT_W];

  assign fill_a   = out_valid_o ? fill - shamt : fill;
  assign sreg_a   = out_valid_o ? (sreg << shamt) : sreg;
  assign in_pop_o = in_valid_i && ((FW+1)'(fill_a) + (FW+1)'(IN_W) <= (FW+1)'(OSR_W));

  always_ff @(posedge clk) begin
    if (rst) begin
      sreg <= '0;
      fill <= '0;
    end else begin
      if (in_pop_o) begin
        sreg <= sreg_a | ((OSR_W'(in_data_i) << (OSR_W - IN_W)) >> fill_a);
        fill <= fill_a + FW'(IN_W);
      end else begin
        sreg <= sreg_a;
        fill <= fill_a;
      end
    end
  end

  initial begin
    assert (OSR_W >= IN_W && OSR_W >= OUT_W) else $error("osr: OSR_W too small");
    for (int k = 0; k < NUM_SHIFTS; k++)
      assert (SHIFTS[k] > 0 && SHIFTS[k] <= OSR_W) else $error("osr: bad shift amount");
  end
endmodule
