// ddr_model: behavioural model of the shared off-chip memory as the
// accelerator sees it, for testbenches only.
//
// Two groups of read ports (NR0 and NR1 ports) and one group of write ports
// (NW ports), all on one word array of DEPTH 128-bit words (addresses wrap).
// Every read request accepted on ar_valid && ar_ready returns its word LAT
// cycles later on r_valid/r_data, in order, at most one word per cycle per
// port. When stall_pct > 0 the ready signals of all ports drop at random with
// that percentage per cycle, to exercise back-pressure. Testbenches load and
// inspect the array mem directly.
//
// Interface: per port ar_valid/ar_addr/ar_ready and r_valid/r_data for reads,
// w_valid/w_addr/w_data/w_ready for writes; requests are ignored in reset.
// The real memory and its controller are not part of the design.
module ddr_model
  import quasar_pkg::*;
#(
  parameter int NR0       = 2,
  parameter int NR1       = 2,
  parameter int NW        = 1,
  parameter int DEPTH     = 65536,
  parameter int LAT       = 4
) (
  input  logic              clk,
  input  logic              rst_n,     // requests are ignored while low
  input  logic              ar0_valid [NR0],
  input  logic [ADDR_W-1:0] ar0_addr  [NR0],
  output logic              ar0_ready [NR0],
  output logic              r0_valid  [NR0],
  output logic [AXI_W-1:0]  r0_data   [NR0],
  input  logic              ar1_valid [NR1],
  input  logic [ADDR_W-1:0] ar1_addr  [NR1],
  output logic              ar1_ready [NR1],
  output logic              r1_valid  [NR1],
  output logic [AXI_W-1:0]  r1_data   [NR1],
  input  logic              w_valid   [NW],
  input  logic [ADDR_W-1:0] w_addr    [NW],
  input  logic [AXI_W-1:0]  w_data    [NW],
  output logic              w_ready   [NW]
);
  logic [AXI_W-1:0] mem [DEPTH];
  longint cyc = 0;
  int unsigned stall_events = 0;
  int          stall_pct    = 0;   // set by the testbench

  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic rdy();
    return (stall_pct == 0) || (($urandom % 100) >= stall_pct);
  endfunction

  for (genvar p = 0; p < NR0 + NR1; p++) begin : g_rd
    logic [ADDR_W-1:0] qa[$];
    longint            qt[$];
    logic              v, rr, rv;
    logic [ADDR_W-1:0] a;
    logic [AXI_W-1:0]  rd;
    initial begin rr = 1'b1; rv = 1'b0; rd = '0; end
    if (p < NR0) begin : g0
      assign ar0_ready[p] = rr;
      assign v = ar0_valid[p];
      assign a = ar0_addr[p];
      assign r0_valid[p] = rv;
      assign r0_data[p]  = rd;
    end else begin : g1
      assign ar1_ready[p-NR0] = rr;
      assign v = ar1_valid[p-NR0];
      assign a = ar1_addr[p-NR0];
      assign r1_valid[p-NR0] = rv;
      assign r1_data[p-NR0]  = rd;
    end
    always @(posedge clk) begin
      logic              ov;
      logic [AXI_W-1:0]  od;
      if (v && rr && rst_n) begin
        qa.push_back(a);
        qt.push_back(cyc + LAT);
      end
      if (v && !rr) stall_events++;
      ov = 1'b0;
      od = '0;
      if (qa.size() > 0 && qt[0] <= cyc) begin
        ov = 1'b1;
        od = mem[qa[0] % DEPTH];
        void'(qa.pop_front());
        void'(qt.pop_front());
      end
      rv <= ov;
      rd <= od;
      rr <= rdy();
    end
  end

  for (genvar p = 0; p < NW; p++) begin : g_wr
    logic wr;
    initial wr = 1'b1;
    assign w_ready[p] = wr;
    always @(posedge clk) begin
      if (w_valid[p] && wr && rst_n) mem[w_addr[p] % DEPTH] <= w_data[p];
      if (w_valid[p] && !wr) stall_events++;
      wr <= rdy();
    end
  end

endmodule
