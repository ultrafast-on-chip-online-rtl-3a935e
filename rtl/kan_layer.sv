// kan_layer: one KAN layer x (IN values) -> y (OUT values),
//   y_q = sum_p phi_{q,p}(x_p),  phi_{q,p}(x) = sum_i w_{q,p,i} B_i(x),
// with on-chip online learning of every coefficient w_{q,p,i}.
//
// Structure: one grid mapper (holding the (k,u) context) and one basis table
// per input p; IN x OUT edges, each with its own G+S coefficients; a sum over
// p per output (forward) and a sum over q per input (backward). Because the
// spline basis is local, each edge reads and writes only S+1 coefficients per
// sample, independent of G.
//
// Control (one enable per step, driven by kan_ctrl):
//   map_en  : map x to (k,u) for every input and store the context.
//   eval_en : register y_q = sat_round(sum_p phi_{q,p}) in the output format
//             (YW bits, YF fractional). The sum is exact before rounding.
//   bwd_en  : with g_q = dL/dy_q (OW bits, OF fractional) write the updated
//             active coefficients of every edge and register
//             dx_p = sat_round(sum_q g_q * sum_r w_old * dB_r) (output format).
// The context captured by map_en is reused by bwd_en, so the inputs need not
// be held during the backward step. clamp_any reports that an input of the
// current sample lay outside the grid; upd_sat that an update saturated.
// cfg_* loads or reads coefficient (q,p,c) from the host while idle.
//
// Follows the paper: per-edge spline coefficients, index-driven forward and
// backward passes, fully parallel edges. Own choices: one rounding point per
// output and per input gradient, and the step-enable interface.
module kan_layer #(
  parameter int unsigned IN      = 2,
  parameter int unsigned OUT     = 7,
  parameter int unsigned G       = 10,
  parameter int unsigned S       = 3,
  parameter int unsigned F       = 4,
  parameter int unsigned XW      = 7,
  parameter int unsigned XF      = 4,
  parameter int unsigned WW      = 7,
  parameter int unsigned WF      = 4,
  parameter int unsigned OW      = 7,
  parameter int unsigned OF      = 4,
  parameter int unsigned YW      = 7,
  parameter int unsigned YF      = 4,
  parameter longint      GRID_LO = -64,
  parameter longint      GRID_HI = 64,
  parameter longint      ETA     = 1,
  localparam int unsigned QW = (OUT > 1) ? $clog2(OUT) : 1,
  localparam int unsigned PW = (IN > 1) ? $clog2(IN) : 1,
  localparam int unsigned CW = $clog2(G + S)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 map_en,
  input  logic signed [XW-1:0] x [IN],
  input  logic                 eval_en,
  output logic signed [YW-1:0] y [OUT],
  input  logic                 bwd_en,
  input  logic signed [OW-1:0] g [OUT],
  output logic signed [OW-1:0] dx [IN],
  output logic                 clamp_any,
  output logic                 upd_sat,
  input  logic                 cfg_we,
  input  logic        [QW-1:0] cfg_q,
  input  logic        [PW-1:0] cfg_p,
  input  logic        [CW-1:0] cfg_c,
  input  logic signed [WW-1:0] cfg_wdata,
  output logic signed [WW-1:0] cfg_rdata
);
  import kan_pkg::*;

  localparam int unsigned NB    = S + 1;
  localparam int unsigned KW    = (G > 1) ? $clog2(G) : 1;
  localparam int unsigned PHI_W = 2 * WW + $clog2(NB) + 1;
  localparam int unsigned GX_W  = OW + PHI_W;

  logic        [KW-1:0]    k   [IN];
  logic        [F-1:0]     u   [IN];
  logic                    clp [IN];
  logic signed [WW-1:0]    b   [IN][NB];
  logic signed [WW-1:0]    db  [IN][NB];
  logic signed [PHI_W-1:0] phi [OUT][IN];
  logic signed [GX_W-1:0]  gx  [OUT][IN];
  logic                    sat [OUT][IN];
  logic signed [WW-1:0]    rd  [OUT][IN];

  for (genvar p = 0; p < IN; p++) begin : g_in
    kan_grid_map #(.XW(XW), .G(G), .F(F), .GRID_LO(GRID_LO), .GRID_HI(GRID_HI)) u_map (
      .clk, .rst_n, .capture(map_en), .x(x[p]), .k(k[p]), .u(u[p]), .clamped(clp[p])
    );
    bspline_lut #(.S(S), .F(F), .WW(WW), .WF(WF), .G(G), .XF(XF), .SPAN(GRID_HI - GRID_LO)) u_lut (
      .u(u[p]), .b(b[p]), .db(db[p])
    );
  end

  for (genvar q = 0; q < OUT; q++) begin : g_out
    for (genvar p = 0; p < IN; p++) begin : g_edge
      kan_edge #(.G(G), .S(S), .WW(WW), .WF(WF), .OW(OW), .OF(OF), .ETA(ETA)) u_edge (
        .clk, .rst_n, .k(k[p]), .b(b[p]), .db(db[p]), .phi(phi[q][p]),
        .upd_en(bwd_en), .g(g[q]), .gx(gx[q][p]), .upd_sat(sat[q][p]),
        .cfg_we(cfg_we && int'(cfg_q) == q && int'(cfg_p) == p), .cfg_c,
        .cfg_wdata, .cfg_rdata(rd[q][p])
      );
    end
  end

  acc_t ysum [OUT];
  acc_t xsum [IN];
  logic sat_c;
  logic clp_c;

  always_comb begin
    for (int q = 0; q < OUT; q++) begin
      ysum[q] = '0;
      for (int p = 0; p < IN; p++) ysum[q] = ysum[q] + acc_t'(phi[q][p]);
    end
    for (int p = 0; p < IN; p++) begin
      xsum[p] = '0;
      for (int q = 0; q < OUT; q++) xsum[p] = xsum[p] + acc_t'(gx[q][p]);
    end
    sat_c = 1'b0;
    for (int q = 0; q < OUT; q++)
      for (int p = 0; p < IN; p++) sat_c = sat_c | sat[q][p];
    clp_c = 1'b0;
    for (int p = 0; p < IN; p++) clp_c = clp_c | clp[p];
    cfg_rdata = rd[0][0];
    for (int q = 0; q < OUT; q++)
      for (int p = 0; p < IN; p++)
        if (int'(cfg_q) == q && int'(cfg_p) == p) cfg_rdata = rd[q][p];
  end

  assign clamp_any = clp_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int q = 0; q < OUT; q++) y[q] <= '0;
      for (int p = 0; p < IN; p++) dx[p] <= '0;
      upd_sat <= 1'b0;
    end else begin
      if (eval_en)
        for (int q = 0; q < OUT; q++) y[q] <= YW'(fx_round_sat(ysum[q], 2 * WF, YF, YW));
      if (bwd_en)
        for (int p = 0; p < IN; p++) dx[p] <= OW'(fx_round_sat(xsum[p], OF + 2 * WF, OF, OW));
      upd_sat <= bwd_en && sat_c;
    end
  end

endmodule
