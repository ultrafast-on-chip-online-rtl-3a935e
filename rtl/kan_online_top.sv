// kan_online_top: streaming KAN kernel that predicts and learns on every
// sample, fully on chip.
//
// Default configuration: the two-layer [2,7,1] network with G=10 grid cells,
// cubic splines (S=3) and <7,3> fixed point for inputs, coefficients and
// outputs (3 integer bits including sign, 4 fractional bits), learning rate
// 0.05, used for adaptive single-shot qubit readout. That is 21 edges of 13
// coefficients = 273 trainable values. NUM_LAYERS=1 gives a single layer
// D_IN -> D_OUT (D_HID unused), as in the [1,1] and [6,4] configurations.
//
// Per sample (see kan_ctrl for the cycle schedule):
//   1. in_valid/in_ready: accept x (D_IN codes in the input format).
//   2. Forward through the layers; out_valid rises with y (D_OUT codes in
//      the output format) 2*NUM_LAYERS-1 cycles after the input handshake.
//   3. fb_valid/fb_ready: accept the feedback fb_grad = dL/dy (output format,
//      e.g. prediction minus target for a squared-error loss, or a policy /
//      value error for actor-critic) and zero_grad. Unless zero_grad is set,
//      the last layer updates its active coefficients in the handshake cycle
//      and the earlier layers follow, one per cycle.
//   4. in_ready again: the next sample may enter. in_grad then holds dL/dx of
//      the network input for the sample just learned.
// Hidden activations are rounded to the input format, gradients between
// layers use the output (feedback) format. The grid spans
// [GRID_MIN, GRID_MAX) in every layer.
//
// The host port cfg_* writes or reads one coefficient (layer, q, p, c); a
// write is accepted only while the kernel is idle. Reset clears all
// coefficients to zero. ev_clamp is high for one cycle after a layer mapped an
// input that lay outside the grid, ev_sat for one cycle after an update
// saturated a coefficient.
//
// Follows the paper: architecture, update rule, LUT-based spline evaluation,
// parameter counts and fixed-point formats of the evaluated configurations.
// Own choices: the handshake, the cycle schedule, grid range, LUT
// resolution F=4, the feedback being dL/dy and the reset/initialisation.
module kan_online_top #(
  parameter int unsigned D_IN       = 2,
  parameter int unsigned D_HID      = 7,
  parameter int unsigned D_OUT      = 1,
  parameter int unsigned NUM_LAYERS = 2,
  parameter int unsigned G          = 10,
  parameter int unsigned S          = 3,
  parameter int unsigned F          = 4,
  parameter int unsigned XW         = 7,     // input_t  <XW,XI>
  parameter int unsigned XI         = 3,
  parameter int unsigned WW         = 7,     // weight_t <WW,WI>
  parameter int unsigned WI         = 3,
  parameter int unsigned OW         = 7,     // output_t <OW,OI>
  parameter int unsigned OI         = 3,
  parameter real         ETA        = 0.05,
  parameter real         GRID_MIN   = -4.0,
  parameter real         GRID_MAX   = 4.0,
  localparam int unsigned DMAX = (D_IN > D_HID) ? ((D_IN > D_OUT) ? D_IN : D_OUT)
                                                : ((D_HID > D_OUT) ? D_HID : D_OUT),
  localparam int unsigned IW   = (DMAX > 1) ? $clog2(DMAX) : 1,
  localparam int unsigned CW   = $clog2(G + S)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // streaming input
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic signed [XW-1:0] in_x [D_IN],
  // streaming prediction
  output logic                 out_valid,
  output logic signed [OW-1:0] out_y [D_OUT],
  // streaming feedback
  input  logic                 fb_valid,
  output logic                 fb_ready,
  input  logic signed [OW-1:0] fb_grad [D_OUT],
  input  logic                 zero_grad,
  output logic signed [OW-1:0] in_grad [D_IN],
  // host coefficient access
  input  logic                 cfg_we,
  input  logic                 cfg_layer,
  input  logic        [IW-1:0] cfg_q,
  input  logic        [IW-1:0] cfg_p,
  input  logic        [CW-1:0] cfg_c,
  input  logic signed [WW-1:0] cfg_wdata,
  output logic signed [WW-1:0] cfg_rdata,
  // events
  output logic                 ev_clamp,
  output logic                 ev_sat
);

  localparam int unsigned XF = XW - XI;
  localparam int unsigned WF = WW - WI;
  localparam int unsigned OF = OW - OI;
  localparam longint ETA_CODE = longint'(ETA * (2.0 ** WF));
  localparam longint GRID_LO  = longint'(GRID_MIN * (2.0 ** XF));
  localparam longint GRID_HI  = longint'(GRID_MAX * (2.0 ** XF));

  logic [NUM_LAYERS-1:0] map_en, eval_en, bwd_en;
  logic                  idle;

  kan_ctrl #(.NL(NUM_LAYERS)) u_ctrl (
    .clk, .rst_n, .in_valid, .in_ready, .out_valid, .fb_valid, .fb_ready,
    .zero_grad, .idle, .map_en, .eval_en, .bwd_en
  );

  logic                  clamp0, sat0;
  logic [NUM_LAYERS-1:0] map_d;
  logic signed [WW-1:0] rd0;

  if (NUM_LAYERS == 1) begin : g_one
    kan_layer #(
      .IN(D_IN), .OUT(D_OUT), .G(G), .S(S), .F(F), .XW(XW), .XF(XF), .WW(WW), .WF(WF),
      .OW(OW), .OF(OF), .YW(OW), .YF(OF), .GRID_LO(GRID_LO), .GRID_HI(GRID_HI), .ETA(ETA_CODE)
    ) u_l0 (
      .clk, .rst_n, .map_en(map_en[0]), .x(in_x), .eval_en(eval_en[0]), .y(out_y),
      .bwd_en(bwd_en[0]), .g(fb_grad), .dx(in_grad), .clamp_any(clamp0), .upd_sat(sat0),
      .cfg_we(cfg_we && idle), .cfg_q(cfg_q[(D_OUT > 1 ? $clog2(D_OUT) : 1)-1:0]),
      .cfg_p(cfg_p[(D_IN > 1 ? $clog2(D_IN) : 1)-1:0]), .cfg_c, .cfg_wdata, .cfg_rdata(rd0)
    );
    assign cfg_rdata = rd0;
    // the context (and its clamp flag) is valid the cycle after map_en
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) map_d <= '0;
      else        map_d <= map_en;
    end
    assign ev_clamp = map_d[0] && clamp0;
    assign ev_sat   = sat0;
  end else begin : g_two
    logic signed [XW-1:0] h  [D_HID];
    logic signed [OW-1:0] gh [D_HID];
    logic                 clamp1, sat1;
    logic signed [WW-1:0] rd1;

    kan_layer #(
      .IN(D_IN), .OUT(D_HID), .G(G), .S(S), .F(F), .XW(XW), .XF(XF), .WW(WW), .WF(WF),
      .OW(OW), .OF(OF), .YW(XW), .YF(XF), .GRID_LO(GRID_LO), .GRID_HI(GRID_HI), .ETA(ETA_CODE)
    ) u_l0 (
      .clk, .rst_n, .map_en(map_en[0]), .x(in_x), .eval_en(eval_en[0]), .y(h),
      .bwd_en(bwd_en[0]), .g(gh), .dx(in_grad), .clamp_any(clamp0), .upd_sat(sat0),
      .cfg_we(cfg_we && idle && cfg_layer == 1'b0),
      .cfg_q(cfg_q[(D_HID > 1 ? $clog2(D_HID) : 1)-1:0]),
      .cfg_p(cfg_p[(D_IN > 1 ? $clog2(D_IN) : 1)-1:0]), .cfg_c, .cfg_wdata, .cfg_rdata(rd0)
    );

    kan_layer #(
      .IN(D_HID), .OUT(D_OUT), .G(G), .S(S), .F(F), .XW(XW), .XF(XF), .WW(WW), .WF(WF),
      .OW(OW), .OF(OF), .YW(OW), .YF(OF), .GRID_LO(GRID_LO), .GRID_HI(GRID_HI), .ETA(ETA_CODE)
    ) u_l1 (
      .clk, .rst_n, .map_en(map_en[1]), .x(h), .eval_en(eval_en[1]), .y(out_y),
      .bwd_en(bwd_en[1]), .g(fb_grad), .dx(gh), .clamp_any(clamp1), .upd_sat(sat1),
      .cfg_we(cfg_we && idle && cfg_layer == 1'b1),
      .cfg_q(cfg_q[(D_OUT > 1 ? $clog2(D_OUT) : 1)-1:0]),
      .cfg_p(cfg_p[(D_HID > 1 ? $clog2(D_HID) : 1)-1:0]), .cfg_c, .cfg_wdata, .cfg_rdata(rd1)
    );

    assign cfg_rdata = cfg_layer ? rd1 : rd0;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) map_d <= '0;
      else        map_d <= map_en;
    end
    assign ev_clamp = (map_d[0] && clamp0) || (map_d[1] && clamp1);
    assign ev_sat   = sat0 || sat1;
  end

endmodule
