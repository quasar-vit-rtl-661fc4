// tile_storer: writes a finished output tile from the output buffer to
// off-chip memory over NPORT parallel write ports.
//
// Token f (0 .. n_tok-1) is written by port f mod NPORT as OPT = ceil(T_M/16)
// words at base + f*OPT + s; word s holds lanes 16s .. 16s+15, each lane a
// 6-bit activation sign-extended into an 8-bit container (same packing as the
// input activations, D_act = 16 per word). This gives the paper's output
// transfer model L_out = ceil(T_m/D_act) * ceil(F/A_out).
// Each port: w_valid/w_ready/w_addr/w_data, one word per handshake.
// The buffer is read combinationally through rd_tok/rd_data.
// start (while idle) begins a tile; done pulses when all words are accepted.
//
// Timing: one word per port per accepted handshake; the first word is offered
// one cycle after start. The transfer count follows the paper's model; the
// handshake and address layout are this design's.
module tile_storer
  import quasar_pkg::*;
#(
  parameter int T_M     = 72,
  parameter int NPORT   = 2,
  parameter int TOK_MAX = 200,
  localparam int TOK_W  = $clog2(TOK_MAX),
  localparam int OPT    = (T_M + D_ACT - 1) / D_ACT,
  localparam int WD_W   = (OPT > 1) ? $clog2(OPT) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [ADDR_W-1:0]       base,
  input  logic [TOK_W:0]          n_tok,
  output logic                    busy,
  output logic                    done,
  output logic [TOK_W-1:0]        rd_tok  [NPORT],
  input  logic signed [ACT_W-1:0] rd_data [NPORT][T_M],
  output logic                    w_valid [NPORT],
  output logic [ADDR_W-1:0]       w_addr  [NPORT],
  output logic [AXI_W-1:0]        w_data  [NPORT],
  input  logic                    w_ready [NPORT]
);
  logic [ADDR_W-1:0] base_q;
  logic [TOK_W:0]    n_q;
  logic [TOK_W:0]    tok  [NPORT];
  logic [WD_W-1:0]   word [NPORT];
  logic              all_done;

  always_comb begin
    all_done = 1'b1;
    for (int p = 0; p < NPORT; p++) begin
      all_done  &= (tok[p] >= n_q);
      rd_tok[p]  = TOK_W'(tok[p]);
      w_valid[p] = busy && (tok[p] < n_q);
      w_addr[p]  = base_q + ADDR_W'(tok[p]) * ADDR_W'(OPT) + ADDR_W'(word[p]);
      w_data[p]  = '0;
      for (int e = 0; e < D_ACT; e++)
        if (int'(word[p]) * D_ACT + e < T_M)
          w_data[p][e*ACT_CW +: ACT_CW] = ACT_CW'(rd_data[p][int'(word[p]) * D_ACT + e]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      base_q <= '0;
      n_q    <= '0;
      for (int p = 0; p < NPORT; p++) begin
        tok[p]  <= '0;
        word[p] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          base_q <= base;
          n_q    <= n_tok;
          for (int p = 0; p < NPORT; p++) begin
            tok[p]  <= (TOK_W+1)'(p);
            word[p] <= '0;
          end
        end
      end else begin
        for (int p = 0; p < NPORT; p++)
          if (w_valid[p] && w_ready[p]) begin
            if (int'(word[p]) == OPT - 1) begin
              word[p] <= '0;
              tok[p]  <= tok[p] + (TOK_W+1)'(NPORT);
            end else word[p] <= word[p] + 1'b1;
          end
        if (all_done) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
