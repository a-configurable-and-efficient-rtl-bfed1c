// One memory macro of a hierarchy level, written as an array.
//
// DUAL_PORT = 1 models a dual-ported macro with a separate read and write
// address (two address buses, as the level 1 memory of the architecture
// overview). DUAL_PORT = 0 models a single-ported macro: the write and read
// requests share one address port, so at most one of them may be active in a
// cycle; the level controller guarantees this (write wins over read) and an
// assertion checks it. Reads are synchronous: rd_data_o holds the word of the
// address read one clock edge earlier and keeps it until the next read.
// Writing and reading the same address in one cycle is never requested by the
// controller (a dual-ported macro must not see it), which is also asserted.
// The macro content is not reset; the controller tracks which entries hold
// data.
module mem_bank #(
  parameter int unsigned DEPTH     = 128,
  parameter int unsigned WIDTH     = 128,
  parameter bit          DUAL_PORT = 1'b0,
  localparam int unsigned AW       = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             wr_en_i,
  input  logic [AW-1:0]    wr_addr_i,
  input  logic [WIDTH-1:0] wr_data_i,
  input  logic             rd_en_i,
  input  logic [AW-1:0]    rd_addr_i,
  output logic [WIDTH-1:0] rd_data_o
);
  logic [WIDTH-1:0] mem [DEPTH];

  if (DUAL_PORT) begin : g_dp
    always_ff @(posedge clk) begin
      if (wr_en_i) mem[wr_addr_i] <= wr_data_i;
      if (rd_en_i) rd_data_o <= mem[rd_addr_i];
    end
  end else begin : g_sp
    // single address port, as the "L0 address" trace of the read/write waveform
    logic [AW-1:0] addr;
    assign addr = wr_en_i ? wr_addr_i : rd_addr_i;
    always_ff @(posedge clk) begin
      if (wr_en_i)      mem[addr] <= wr_data_i;
      else if (rd_en_i) rd_data_o <= mem[addr];
    end
  end

  // port rules of the macro
  a_sp_one_access: assert property (@(posedge clk) DUAL_PORT || !(wr_en_i && rd_en_i))
    else $error("single-ported bank: read and write in the same cycle");
  a_dp_no_same_addr: assert property (@(posedge clk) !(wr_en_i && rd_en_i && wr_addr_i == rd_addr_i))
    else $error("bank: read and write of the same address in the same cycle");
endmodule
