// kan_edge: one learnable edge function phi_{q,p}(x_p) of a KAN layer, with
// its coefficient storage, forward evaluation and in-place SGD update.
//
// Forward: phi = sum_{r=0..S} w[k+r] * b[r], where (k, b[]) come from the
// grid mapper and basis table of input p. The sum is exact (2*WF fractional
// bits) and is rounded only once, after the layer adds up all edges of an
// output.
//
// Backward (upd_en): with the upstream gradient g = dL/dy_q (output format,
// OF fractional bits) and learning rate ETA (weight format code):
//   w[k+r] <- sat_round( w[k+r] - ETA * g * b[r] ),   r = 0..S
// and the edge's share of the input gradient, computed from the coefficients
// before the update,
//   gx = g * sum_r w_old[k+r] * db[r]            (exact, OF+2*WF frac bits).
// Only the S+1 active coefficients are touched; the other G-1 keep their
// values. upd_sat flags that a write-back saturated.
//
// Timing: phi and gx are combinational from the stored coefficients; the
// update is written at the clock edge on which upd_en is high.
//
// Follows the paper: the forward sum over active coefficients, the update
// rule, the derivative-table gradient. Own choices: exact products with one
// rounding per stored value, and old coefficients in the gradient (the same
// ordering the paper states for its dense baseline).
module kan_edge #(
  parameter int unsigned G   = 10,
  parameter int unsigned S   = 3,
  parameter int unsigned WW  = 7,
  parameter int unsigned WF  = 4,
  parameter int unsigned OW  = 7,
  parameter int unsigned OF  = 4,
  parameter longint      ETA = 1,                       // learning-rate code
  localparam int unsigned NB    = S + 1,
  localparam int unsigned KW    = (G > 1) ? $clog2(G) : 1,
  localparam int unsigned CW    = $clog2(G + S),
  localparam int unsigned PHI_W = 2 * WW + $clog2(NB) + 1,
  localparam int unsigned GX_W  = OW + PHI_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic        [KW-1:0]    k,
  input  logic signed [WW-1:0]    b  [NB],
  input  logic signed [WW-1:0]    db [NB],
  output logic signed [PHI_W-1:0] phi,
  input  logic                    upd_en,
  input  logic signed [OW-1:0]    g,
  output logic signed [GX_W-1:0]  gx,
  output logic                    upd_sat,
  input  logic                    cfg_we,
  input  logic        [CW-1:0]    cfg_c,
  input  logic signed [WW-1:0]    cfg_wdata,
  output logic signed [WW-1:0]    cfg_rdata
);
  import kan_pkg::*;

  logic signed [WW-1:0] w_act [NB];
  logic signed [WW-1:0] w_new [NB];

  kan_coeff_store #(.G(G), .S(S), .WW(WW)) u_store (
    .clk, .rst_n, .k,
    .rd_w(w_act), .wr_en(upd_en), .wr_w(w_new),
    .cfg_we, .cfg_c, .cfg_wdata, .cfg_rdata
  );

  acc_t phi_acc, slope_acc, delta, wide;

  always_comb begin
    phi_acc   = '0;
    slope_acc = '0;
    upd_sat   = 1'b0;
    for (int r = 0; r < NB; r++) begin
      phi_acc   = phi_acc   + acc_t'(w_act[r]) * acc_t'(b[r]);
      slope_acc = slope_acc + acc_t'(w_act[r]) * acc_t'(db[r]);
      // w (WF) aligned to the product ETA*g*b (WF+OF+WF fractional bits)
      delta    = acc_t'(ETA) * acc_t'(g) * acc_t'(b[r]);
      wide     = (acc_t'(w_act[r]) <<< (WF + OF)) - delta;
      w_new[r] = WW'(fx_round_sat(wide, 2 * WF + OF, WF, WW));
      upd_sat  = upd_sat | fx_overflows(wide, 2 * WF + OF, WF, WW);
    end
    phi = PHI_W'(phi_acc);
    gx  = GX_W'(slope_acc * acc_t'(g));
  end

endmodule
