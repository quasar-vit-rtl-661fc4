// out_buffer: two-bank output buffer between the SLS/requantisation stage and
// the tile storer.
//
// A bank holds one finished output tile: ROWS*P_F tokens x T_M lanes of 6-bit
// activations. The drain writes P_F tokens (one row) per cycle into bank
// wr_bank while the storer reads the other bank, so storing tile i overlaps
// computing tile i+1 (the paper's L2 = max(..., L_out) term). Read side:
// NPORT combinational ports, each returning all T_M lanes of one token.
//
// Timing: writes on the clock edge, reads combinational. The paper shows a
// single output buffer; the two banks are this design's way to overlap
// storing with the next tile.
module out_buffer
  import quasar_pkg::*;
#(
  parameter int T_M   = 72,
  parameter int P_F   = 8,
  parameter int F_MAX = 197,
  parameter int NPORT = 2,
  localparam int ROWS  = (F_MAX + P_F - 1) / P_F,
  localparam int ROW_W = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int TOK_W = $clog2(ROWS * P_F)
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic                    wr_bank,
  input  logic [ROW_W-1:0]        wr_row,
  input  logic signed [ACT_W-1:0] wr_data [P_F][T_M],
  input  logic                    rd_bank,
  input  logic [TOK_W-1:0]        rd_tok  [NPORT],
  output logic signed [ACT_W-1:0] rd_data [NPORT][T_M]
);
  logic signed [ACT_W-1:0] mem [2][ROWS][P_F][T_M];

  always_ff @(posedge clk)
    if (wr_en) mem[wr_bank][wr_row] <= wr_data;

  always_comb
    for (int p = 0; p < NPORT; p++)
      rd_data[p] = mem[rd_bank][int'(rd_tok[p]) / P_F][int'(rd_tok[p]) % P_F];
endmodule
