// tile_loader: moves one tile from off-chip memory into a ping-pong buffer bank
// over NPORT parallel read ports.
//
// A tile is n_items items (tokens of an input tile, or weight lanes of a weight
// tile) of WPI 128-bit words each, stored contiguously from word address base:
// item i, word s is at base + i*WPI + s. Item i is fetched by port i mod NPORT,
// so each port reads ceil(n_items/NPORT) * WPI words, which is the paper's
// transfer model L = ceil(T/D) * ceil(items/A).
//
// Each port is a read-address / read-data pair in the style of an AXI read
// channel: ar_valid/ar_ready/ar_addr issue one word address per handshake,
// r_valid/r_data return the words in order (always accepted). Every returned
// word is handed to the buffer as (wr_item, wr_word, wr_data) with wr_en.
// start (one cycle, while idle) begins a tile; done pulses for one cycle when
// every port has received all its words; busy is high in between.
//
// The port-parallel transfer and its cycle count follow the paper's model;
// the handshake and the address layout are this design's. Lint note: rst_n
// is reported as used both asynchronously (flip-flop reset) and synchronously;
// the synchronous use is only the disable condition of the assertion that
// checks the read-data handshake, and makes no logic.
// wr_data is r_data wired straight through (the buffer stores the word as
// returned); the loader's own logic is the addressing and the counting.
module tile_loader
  import quasar_pkg::*;
#(
  parameter int NPORT     = 4,
  parameter int WPI       = 1,
  parameter int ITEMS_MAX = 200,
  localparam int IT_W     = (ITEMS_MAX > 1) ? $clog2(ITEMS_MAX) : 1,
  localparam int WD_W     = (WPI > 1) ? $clog2(WPI) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base,
  input  logic [IT_W:0]     n_items,
  output logic              busy,
  output logic              done,
  // off-chip read ports
  output logic              ar_valid [NPORT],
  output logic [ADDR_W-1:0] ar_addr  [NPORT],
  input  logic              ar_ready [NPORT],
  input  logic              r_valid  [NPORT],
  input  logic [AXI_W-1:0]  r_data   [NPORT],
  // buffer write
  output logic              wr_en    [NPORT],
  output logic [IT_W-1:0]   wr_item  [NPORT],
  output logic [WD_W-1:0]   wr_word  [NPORT],
  output logic [AXI_W-1:0]  wr_data  [NPORT]
);
  logic [ADDR_W-1:0] base_q;
  logic [IT_W:0]     n_q;
  logic [IT_W:0]     iss_item [NPORT];
  logic [WD_W-1:0]   iss_word [NPORT];
  logic [IT_W:0]     rcv_item [NPORT];
  logic [WD_W-1:0]   rcv_word [NPORT];
  logic              port_done [NPORT];
  logic              all_done;

  always_comb begin
    all_done = 1'b1;
    for (int p = 0; p < NPORT; p++) begin
      port_done[p] = (rcv_item[p] >= n_q);
      all_done &= port_done[p];
      ar_valid[p]  = busy && (iss_item[p] < n_q);
      ar_addr[p]   = base_q + ADDR_W'(iss_item[p]) * ADDR_W'(WPI) + ADDR_W'(iss_word[p]);
      wr_en[p]     = busy && r_valid[p];
      wr_item[p]   = IT_W'(rcv_item[p]);
      wr_word[p]   = rcv_word[p];
      wr_data[p]   = r_data[p];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      base_q <= '0;
      n_q    <= '0;
      for (int p = 0; p < NPORT; p++) begin
        iss_item[p] <= '0;
        iss_word[p] <= '0;
        rcv_item[p] <= '0;
        rcv_word[p] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          base_q <= base;
          n_q    <= n_items;
          for (int p = 0; p < NPORT; p++) begin
            iss_item[p] <= (IT_W+1)'(p);
            iss_word[p] <= '0;
            rcv_item[p] <= (IT_W+1)'(p);
            rcv_word[p] <= '0;
          end
        end
      end else begin
        for (int p = 0; p < NPORT; p++) begin
          if (ar_valid[p] && ar_ready[p]) begin
            if (int'(iss_word[p]) == WPI - 1) begin
              iss_word[p] <= '0;
              iss_item[p] <= iss_item[p] + (IT_W+1)'(NPORT);
            end else iss_word[p] <= iss_word[p] + 1'b1;
          end
          if (r_valid[p]) begin
            if (int'(rcv_word[p]) == WPI - 1) begin
              rcv_word[p] <= '0;
              rcv_item[p] <= rcv_item[p] + (IT_W+1)'(NPORT);
            end else rcv_word[p] <= rcv_word[p] + 1'b1;
          end
        end
        if (all_done) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // a response must never arrive for a word that was not requested
  for (genvar p = 0; p < NPORT; p++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     r_valid[p] |-> busy && !port_done[p])
      else $error("tile_loader: unexpected read data on port %0d", p);
  end
endmodule
