// kan_grid_map: maps one input coordinate onto the uniform spline grid and
// keeps the result as the layer's per-sample context.
//
// The grid covers [GRID_LO, GRID_HI) (bounds given as codes in the input
// format) with G cells of width H = (GRID_HI-GRID_LO)/G. For an input x the
// block forms t = (x - GRID_LO)/H with F fractional bits, clamps t to [0, G),
// and splits it into the cell index k = floor(t) and the LUT index u (the F
// bits below the binary point), giving 2^F LUT bins per cell. The division by
// the span is done exactly as a multiplication by a reciprocal constant with
// enough bits (SH = 2*ceil(log2(span))+1) that floor() is never off by one.
//
// Timing: combinational map; k, u and the clamp flag are registered when
// capture is high and then held, so the backward pass of the same sample reads
// the identical (k,u) without recomputing it (index-driven backward pass).
// Reset clears the context to cell 0, bin 0.
//
// Follows the paper: uniform grid, clamp to [0,G), k/u split, stored context.
// Own choices: grid bounds as parameters, bin boundaries at exact multiples of
// H/2^F, the clamp flag output, and one context entry per input p (k and u
// depend only on x_p, so all OUT edges of that input share it).
module kan_grid_map #(
  parameter int unsigned XW      = 7,      // input code width
  parameter int unsigned G       = 10,     // grid cells
  parameter int unsigned F       = 4,      // LUT index bits per cell
  parameter longint      GRID_LO = -64,    // grid lower bound (input codes)
  parameter longint      GRID_HI = 64,     // grid upper bound (input codes)
  localparam int unsigned KW     = (G > 1) ? $clog2(G) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 capture,
  input  logic signed [XW-1:0] x,
  output logic        [KW-1:0] k,
  output logic        [F-1:0]  u,
  output logic                 clamped
);

  localparam longint          SPAN   = GRID_HI - GRID_LO;
  localparam int              SH     = 2 * $clog2(SPAN) + 1;
  localparam longint unsigned KSCALE = longint'(G) <<< F;
  localparam longint unsigned RECIP  = ((KSCALE <<< SH) + longint'(SPAN) - 1) / longint'(SPAN);
  localparam longint unsigned TMAX   = KSCALE - 1;

  longint          a;
  longint unsigned t;
  logic            clamp_c;

  always_comb begin
    a       = longint'(x) - GRID_LO;
    clamp_c = 1'b0;
    if (a < 0) begin
      t       = '0;
      clamp_c = 1'b1;
    end else if (a >= SPAN) begin
      t       = TMAX;
      clamp_c = 1'b1;
    end else begin
      t = (longint'(a) * RECIP) >> SH;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k       <= '0;
      u       <= '0;
      clamped <= 1'b0;
    end else if (capture) begin
      k       <= KW'(t >> F);
      u       <= F'(t);
      clamped <= clamp_c;
    end
  end

  initial begin
    assert (SPAN > 0) else $error("grid span must be positive");
    assert (SH + $clog2(KSCALE) < 63) else $error("grid reciprocal exceeds 64 bits");
  end

endmodule
