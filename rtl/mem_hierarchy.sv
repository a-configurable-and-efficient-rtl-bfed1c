// Configurable on-chip memory hierarchy for a neural network accelerator.
//
// Off-chip words stream in through the input buffer (off-chip clock
// domain), cross into the accelerator clock domain through the buffer
// handshake, and pass through NUM_LEVELS (1..5) hierarchy levels in order:
// level 0 is closest to the off-chip memory, the last level feeds the
// accelerator, directly or through the optional output shift register (OSR).
// Every word traverses every level. Each level runs its own access pattern
// (cycle length, inter-cycle shift, skip shift) over the word stream it
// receives, so the levels together produce sequential, cyclic and shifted
// cyclic (overlapping) patterns, and the OSR adds runtime-selectable
// non-unit shifts. The MCU of the design is distributed: each level carries
// its pattern controller and the buffer handshake is the MCU's link to the
// input buffer.
//
// Build parameters: the off-chip data and address widths, the level word
// width (the same for all levels here), and per level the macro depth, the
// number of banks (1 or 2) and whether the macro is dual-ported; whether the
// OSR is present, its width, the output width and its list of shifts.
// The defaults are a two-level hierarchy with OSR: a single-ported level 0 of
// 128 x 128 bit, a dual-ported level 1 of 32 x 128 bit, 32-bit off-chip words
// and 32-bit outputs.
//
// Runtime: the pattern settings and the start address are taken while
// reset_i is high; a reset cycle starts a new pattern. Each clock domain
// sees reset as soon as reset_i rises and leaves it synchronously, two of its
// own clock edges after reset_i falls; reset_i must be held for a few cycles
// of the slower clock. disable_output_i stops the output while the hierarchy
// keeps preloading; shift_select_i picks the OSR shift (0 stops the OSR).
//
// Added to the named ports: the off-chip read request strobe and reply valid,
// the output valid strobe, and per-level event outputs (a read that had to
// wait for a write, an inter-cycle shift) for observation.
module mem_hierarchy
  import mh_pkg::*;
#(
  parameter int unsigned OFFCHIP_W  = 32,
  parameter int unsigned ADDR_W     = 32,
  parameter int unsigned WORD_W     = 128,
  parameter int unsigned NUM_LEVELS = 2,
  parameter int unsigned MACRO_DEPTH [MAX_LEVELS] = '{128, 32, 32, 32, 32},
  parameter int unsigned NUM_BANKS   [MAX_LEVELS] = '{1, 1, 1, 1, 1},
  parameter bit          DUAL_PORT   [MAX_LEVELS] = '{1'b0, 1'b1, 1'b1, 1'b1, 1'b1},
  parameter bit          USE_OSR    = 1'b1,
  parameter int unsigned OSR_W      = 256,
  parameter int unsigned OUT_W      = 32,
  parameter int unsigned NUM_SHIFTS = 3,
  parameter int unsigned SHIFTS [MAX_SHIFTS] = '{32, 16, 8, 0, 0, 0, 0, 0},
  localparam int unsigned SEL_W = $clog2(NUM_SHIFTS + 1)
) (
  input  logic                 internal_clk_i,
  input  logic                 external_clk_i,
  input  logic                 reset_i,
  // off-chip side (external clock domain)
  input  logic [OFFCHIP_W-1:0] data_in_i,
  input  logic                 data_in_valid_i,
  output logic [ADDR_W-1:0]    global_read_address_o,
  output logic                 global_read_req_o,
  // pattern settings
  input  logic [ADDR_W-1:0]    start_address_i,
  input  cfg_word_t            cycle_length_i      [NUM_LEVELS],
  input  cfg_word_t            inter_cycle_shift_i [NUM_LEVELS],
  input  cfg_word_t            skip_shift_i        [NUM_LEVELS],
  // accelerator side (internal clock domain)
  input  logic                 disable_output_i,
  input  logic [SEL_W-1:0]     shift_select_i,
  output logic [OUT_W-1:0]     data_out_o,
  output logic                 data_out_valid_o,
  output logic [NUM_LEVELS-1:0] level_conflict_o,
  output logic [NUM_LEVELS-1:0] level_shift_o
);
  initial begin
    assert (NUM_LEVELS >= 1 && NUM_LEVELS <= MAX_LEVELS) else $error("NUM_LEVELS out of range");
    assert (USE_OSR || OUT_W == WORD_W) else $error("without OSR, OUT_W must equal WORD_W");
  end

  // ------------------------------------------------------------- resets
  // asserted at once, released after two edges of the domain's own clock
  logic rst_ext, rst_int, rst_ext_s, rst_int_s;
  sync_2ff #(.RESET_VAL(1'b1)) u_rst_ext (.clk(external_clk_i), .rst(1'b0), .d_i(reset_i), .q_o(rst_ext_s));
  sync_2ff #(.RESET_VAL(1'b1)) u_rst_int (.clk(internal_clk_i), .rst(1'b0), .d_i(reset_i), .q_o(rst_int_s));
  assign rst_ext = reset_i | rst_ext_s;
  assign rst_int = reset_i | rst_int_s;

  // ------------------------------------------------------- input buffer
  logic              buf_full, reset_buf;
  logic [WORD_W-1:0] buf_data;

  input_buffer #(
    .OFFCHIP_W(OFFCHIP_W), .WORD_W(WORD_W), .ADDR_W(ADDR_W)
  ) u_input_buffer (
    .ext_clk(external_clk_i), .rst(rst_ext),
    .start_address_i,
    .rd_req_o(global_read_req_o), .global_read_address_o,
    .data_in_i, .data_in_valid_i,
    .buf_full_o(buf_full), .buf_data_o(buf_data),
    .reset_buf_i(reset_buf)
  );

  // ------------------------------------------------- CDC to level 0
  logic              lv_valid [NUM_LEVELS+1];
  logic [WORD_W-1:0] lv_data  [NUM_LEVELS+1];
  logic              lv_pop   [NUM_LEVELS+1];

  buffer_handshake #(.WORD_W(WORD_W)) u_handshake (
    .clk(internal_clk_i), .rst(rst_int),
    .buf_full_i(buf_full), .buf_data_i(buf_data),
    .reset_buf_o(reset_buf),
    .word_valid_o(lv_valid[0]), .word_data_o(lv_data[0]), .word_pop_i(lv_pop[0])
  );

  // ------------------------------------------------------------ levels
  for (genvar l = 0; l < NUM_LEVELS; l++) begin : g_level
    level_cfg_t cfg;
    assign cfg.cycle_length      = cycle_length_i[l];
    assign cfg.inter_cycle_shift = inter_cycle_shift_i[l];
    assign cfg.skip_shift        = skip_shift_i[l];

    hier_level #(
      .WIDTH(WORD_W), .MACRO_DEPTH(MACRO_DEPTH[l]), .NUM_BANKS(NUM_BANKS[l]),
      .DUAL_PORT(DUAL_PORT[l]), .LAST(l == NUM_LEVELS - 1)
    ) u_level (
      .clk(internal_clk_i), .rst(rst_int), .cfg_i(cfg),
      .src_valid_i(lv_valid[l]), .src_data_i(lv_data[l]), .src_pop_o(lv_pop[l]),
      .out_valid_o(lv_valid[l+1]), .out_data_o(lv_data[l+1]), .out_pop_i(lv_pop[l+1]),
      .conflict_o(level_conflict_o[l]), .shift_o(level_shift_o[l])
    );
  end

  // ------------------------------------------------------------ output
  if (USE_OSR) begin : g_osr
    osr #(
      .IN_W(WORD_W), .OSR_W(OSR_W), .OUT_W(OUT_W),
      .NUM_SHIFTS(NUM_SHIFTS), .SHIFTS(SHIFTS)
    ) u_osr (
      .clk(internal_clk_i), .rst(rst_int),
      .shift_select_i, .disable_i(disable_output_i),
      .in_valid_i(lv_valid[NUM_LEVELS]), .in_data_i(lv_data[NUM_LEVELS]),
      .in_pop_o(lv_pop[NUM_LEVELS]),
      .out_valid_o(data_out_valid_o), .out_data_o(data_out_o)
    );
  end else begin : g_direct
    assign data_out_valid_o     = lv_valid[NUM_LEVELS] && !disable_output_i;
    assign lv_pop[NUM_LEVELS]   = data_out_valid_o;
    assign data_out_o           = OUT_W'(lv_data[NUM_LEVELS]);
  end
endmodule
