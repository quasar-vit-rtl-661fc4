// pingpong_buf: a two-bank (ping-pong) on-chip buffer for input or weight tiles.
//
// While the GEMM engine reads one bank, the tile loader fills the other, which
// hides off-chip transfer time behind computation (double buffering). A bank
// holds ITEMS items (tokens of an input tile, or weight rows/lanes of a weight
// tile) of ELEMS elements each.
//
// Write side: NPORT independent ports, one per off-chip read port. A write puts
// one 128-bit word into item wr_item, word wr_word of the bank wr_bank: element
// e of the word sits in a CW-bit container at bit e*CW and its low ELEM_W bits
// are kept; element index = wr_word * (128/CW) + e.
// Read side: RD_ITEMS consecutive items starting at rd_base, combinational.
// The host must not write the same item from two ports in one cycle.
//
// Timing: writes on the clock edge, reads combinational. The two buffers for
// inputs and weights follow the paper; the word/container layout is this
// design's.
module pingpong_buf
  import quasar_pkg::*;
#(
  parameter int ITEMS    = 200,
  parameter int ELEMS    = 16,
  parameter int ELEM_W   = 6,
  parameter int CW       = 8,
  parameter int NPORT    = 4,
  parameter int RD_ITEMS = 8,
  localparam int IT_W    = (ITEMS > 1) ? $clog2(ITEMS) : 1,
  localparam int EPW     = AXI_W / CW,
  localparam int WPI     = (ELEMS + EPW - 1) / EPW,
  localparam int WD_W    = (WPI > 1) ? $clog2(WPI) : 1
) (
  input  logic              clk,
  input  logic              wr_bank,
  input  logic              wr_en   [NPORT],
  input  logic [IT_W-1:0]   wr_item [NPORT],
  input  logic [WD_W-1:0]   wr_word [NPORT],
  input  logic [AXI_W-1:0]  wr_data [NPORT],
  input  logic              rd_bank,
  input  logic [IT_W-1:0]   rd_base,
  output logic [ELEM_W-1:0] rd_data [RD_ITEMS][ELEMS]
);
  logic [ELEM_W-1:0] mem [2][ITEMS][ELEMS];

  always_ff @(posedge clk) begin
    for (int p = 0; p < NPORT; p++)
      if (wr_en[p])
        for (int e = 0; e < EPW; e++)
          if (int'(wr_word[p]) * EPW + e < ELEMS)
            mem[wr_bank][wr_item[p]][int'(wr_word[p]) * EPW + e] <= wr_data[p][e*CW +: ELEM_W];
  end

  always_comb
    for (int i = 0; i < RD_ITEMS; i++)
      rd_data[i] = mem[rd_bank][(int'(rd_base) + i) % ITEMS];
endmodule
