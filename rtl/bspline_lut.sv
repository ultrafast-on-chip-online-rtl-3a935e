// bspline_lut: read-only table of the S+1 active B-spline basis values and
// their input derivatives, addressed by the LUT index u of a grid cell.
//
// For spline order S exactly S+1 basis functions are non-zero inside a cell.
// Entry r (0 = leftmost active basis, coefficient k+r) holds
//   b[r]  = B_r(xi_u)          (value, in [0,1])
//   db[r] = dB_r/dx at xi_u    (slope per unit of input, i.e. dB/dxi * 1/H)
// sampled at the midpoint xi_u = (u+0.5)/2^F of bin u. Both are stored in the
// weight format (WW bits, WF fractional), rounded to nearest/even and
// saturated. The entries are computed at elaboration from the exact
// truncated-power formula in kan_pkg, so changing S, F, G or the grid span
// rebuilds the table; nothing is read from a file.
//
// Timing: purely combinational read (one port per table, as a single-port ROM
// per input coordinate).
//
// Follows the paper: precomputed value and derivative tables indexed by u,
// S+1 entries per index, derivative taken with respect to x. Own choices:
// midpoint sampling of each bin and the weight format for the entries.
module bspline_lut #(
  parameter int unsigned S       = 3,      // spline order
  parameter int unsigned F       = 4,      // LUT index bits
  parameter int unsigned WW      = 7,      // weight code width
  parameter int unsigned WF      = 4,      // weight fractional bits
  parameter int unsigned G       = 10,     // grid cells (for 1/H)
  parameter int unsigned XF      = 4,      // input fractional bits (for 1/H)
  parameter longint      SPAN    = 128     // grid span in input codes (for 1/H)
) (
  input  logic        [F-1:0]  u,
  output logic signed [WW-1:0] b  [S+1],
  output logic signed [WW-1:0] db [S+1]
);

  localparam int unsigned NU = 1 << F;

  // 1/H = G / (SPAN * 2^-XF) = (G * 2^XF) / SPAN
  localparam longint INVH_NUM = longint'(G) <<< XF;

  logic signed [WW-1:0] b_tab  [S+1][NU];
  logic signed [WW-1:0] db_tab [S+1][NU];

  for (genvar r = 0; r <= S; r++) begin : g_r
    for (genvar uu = 0; uu < NU; uu++) begin : g_u
      localparam longint BV = kan_pkg::lut_code(longint'(S), longint'(F), r, uu, 0, 1, 1, longint'(WF), longint'(WW));
      localparam longint DV = kan_pkg::lut_code(longint'(S), longint'(F), r, uu, 1, INVH_NUM, SPAN, longint'(WF), longint'(WW));
      assign b_tab[r][uu]  = WW'(BV);
      assign db_tab[r][uu] = WW'(DV);
    end
    assign b[r]  = b_tab[r][u];
    assign db[r] = db_tab[r][u];
  end

  initial assert (S >= 1) else $error("spline order must be at least 1");

endmodule
