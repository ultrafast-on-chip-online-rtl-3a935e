// kan_coeff_store: on-chip storage of the G+S spline coefficients of one KAN
// edge, cyclically partitioned into S+1 banks.
//
// Coefficient c lives in bank c mod (S+1), row c div (S+1). The S+1 active
// coefficients of cell k are c = k..k+S; these are S+1 consecutive indices and
// so fall in S+1 different banks. Each bank therefore needs only one read and
// one write port per sample, and the whole active window is read, and written
// back, in a single cycle. Bank b serves window slot r_b = (b - k) mod (S+1)
// at row (k + r_b) div (S+1); the read data and the write data are rotated
// between bank order and slot order (slot r holds coefficient k+r).
//
// Interface: rd_w is the combinational read of the active window for cell k.
// When wr_en is high the window for the same k is overwritten with wr_w at the
// clock edge (in-place update). cfg_* is a host port to load or inspect any
// single coefficient c; it must not be used in the same cycle as wr_en.
// Reset clears every coefficient to zero.
//
// Follows the paper: coefficient array partitioned cyclically by S+1 over the
// coefficient index so all active coefficients are accessed in parallel.
// Own choices: the host load/read port, zero reset.
// The assertions below are disabled while rst_n is low, which samples the
// asynchronous reset on the clock as well; lint tools report rst_n as used
// both ways. That use is in the checks only, not in the logic.
module kan_coeff_store #(
  parameter int unsigned G  = 10,
  parameter int unsigned S  = 3,
  parameter int unsigned WW = 7,
  localparam int unsigned NC    = G + S,
  localparam int unsigned NB    = S + 1,
  localparam int unsigned DEPTH = (NC + NB - 1) / NB,
  localparam int unsigned KW    = (G > 1) ? $clog2(G) : 1,
  localparam int unsigned CW    = $clog2(NC)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic        [KW-1:0] k,
  output logic signed [WW-1:0] rd_w [NB],
  input  logic                 wr_en,
  input  logic signed [WW-1:0] wr_w [NB],
  input  logic                 cfg_we,
  input  logic        [CW-1:0] cfg_c,
  input  logic signed [WW-1:0] cfg_wdata,
  output logic signed [WW-1:0] cfg_rdata
);

  logic signed [WW-1:0] bank [NB][DEPTH];

  localparam int unsigned SLW = (NB > 1) ? $clog2(NB) : 1;
  localparam int unsigned RW  = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [SLW-1:0] slot [NB];   // window slot served by each bank
  logic [RW-1:0]  row  [NB];   // row addressed in each bank

  always_comb begin
    for (int unsigned bi = 0; bi < NB; bi++) begin
      slot[bi] = SLW'((bi + NB - (int'(k) % NB)) % NB);
      row[bi]  = RW'((int'(k) + int'(slot[bi])) / NB);
    end
    // slot r holds coefficient k+r: bank (k+r) mod NB, row (k+r) div NB
    for (int unsigned r = 0; r < NB; r++)
      rd_w[r] = bank[(int'(k) + r) % NB][(int'(k) + r) / NB];
    cfg_rdata = bank[int'(cfg_c) % NB][int'(cfg_c) / NB];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int bi = 0; bi < NB; bi++)
        for (int d = 0; d < DEPTH; d++) bank[bi][d] <= '0;
    end else if (wr_en) begin
      for (int unsigned bi = 0; bi < NB; bi++) bank[bi][row[bi]] <= wr_w[slot[bi]];
    end else if (cfg_we) begin
      bank[int'(cfg_c) % NB][int'(cfg_c) / NB] <= cfg_wdata;
    end
  end

  a_no_cfg_during_update : assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && cfg_we))
    else $error("host coefficient write during an in-place update");
  a_cell_in_range : assert property (@(posedge clk) disable iff (!rst_n) int'(k) < G)
    else $error("cell index out of range");

endmodule
