// kan_ctrl: sequencer of the streaming online-learning kernel.
//
// Each sample goes through a fixed schedule (static loop bounds, no
// data-dependent timing):
//   IDLE : in_ready=1. On the input handshake layer 0 maps its inputs
//          (map_en[0] in the handshake cycle).
//   FWD  : 2*NL-1 cycles: eval layer 0, map layer 1, eval layer 1, ...
//   OUT  : out_valid=1 and fb_ready=1: the prediction is on the output and
//          the kernel waits for the feedback (dL/dy) of this sample. On the
//          feedback handshake the last layer is updated (bwd_en[NL-1]) in the
//          same cycle, unless zero_grad is set, in which case no parameter
//          changes and the kernel returns to IDLE.
//   BWD  : NL-1 further cycles updating layers NL-2 .. 0 (reverse order,
//          each consuming the input gradient registered by the layer above).
// So a sample costs 2*NL cycles of forward (handshake cycle included) and NL
// cycles of backward. Handshakes are valid/ready: a transfer happens on a
// clock edge where both are high; the source must hold valid (and its data)
// until then.
//
// Follows the paper: forward inference on streaming input, then backward
// pass and in-place update driven by streaming feedback, with a zero_grad
// flag that suppresses the update; deterministic latency. Own choices: the
// valid/ready protocol, one layer step per cycle, and zero_grad sampled with
// the feedback.
// The assertions below are disabled while rst_n is low, which samples the
// asynchronous reset on the clock as well; lint tools report rst_n as used
// both ways. That use is in the checks only, not in the logic.
module kan_ctrl #(
  parameter int unsigned NL = 2   // number of KAN layers
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  output logic          out_valid,
  input  logic          fb_valid,
  output logic          fb_ready,
  input  logic          zero_grad,
  output logic          idle,
  output logic [NL-1:0] map_en,
  output logic [NL-1:0] eval_en,
  output logic [NL-1:0] bwd_en
);

  typedef enum logic [1:0] {
    ST_IDLE = 2'd0,
    ST_FWD  = 2'd1,
    ST_OUT  = 2'd2,
    ST_BWD  = 2'd3
  } state_e;

  localparam int unsigned SW = $clog2(2 * NL + 1);

  state_e        state;
  logic [SW-1:0] step;      // FWD: 1..2NL-1 ; BWD: layer index being updated

  wire in_fire = in_valid && in_ready;
  wire fb_fire = fb_valid && fb_ready;

  always_comb begin
    in_ready  = (state == ST_IDLE);
    out_valid = (state == ST_OUT);
    fb_ready  = (state == ST_OUT);
    idle      = (state == ST_IDLE);
    map_en    = '0;
    eval_en   = '0;
    bwd_en    = '0;
    unique case (state)
      ST_IDLE: map_en[0] = in_fire;
      ST_FWD: begin
        if (step[0]) eval_en[(int'(step) - 1) / 2] = 1'b1;
        else         map_en[int'(step) / 2]        = 1'b1;
      end
      ST_OUT:  bwd_en[NL-1] = fb_fire && !zero_grad;
      ST_BWD:  bwd_en[int'(step)] = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      step  <= '0;
    end else begin
      unique case (state)
        ST_IDLE: if (in_fire) begin
          state <= ST_FWD;
          step  <= SW'(1);
        end
        ST_FWD: begin
          if (int'(step) == 2 * NL - 1) state <= ST_OUT;
          step <= step + SW'(1);
        end
        ST_OUT: if (fb_fire) begin
          if (zero_grad || NL == 1) begin
            state <= ST_IDLE;
          end else begin
            state <= ST_BWD;
            step  <= SW'(NL - 2);
          end
        end
        ST_BWD: begin
          if (step == '0) state <= ST_IDLE;
          else            step  <= step - SW'(1);
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  a_one_step : assert property (@(posedge clk) disable iff (!rst_n)
                                $onehot0({map_en, eval_en, bwd_en}))
    else $error("more than one layer step enabled");
  a_in_hold : assert property (@(posedge clk) disable iff (!rst_n)
                               in_valid && !in_ready |=> in_valid)
    else $error("in_valid dropped before the input was accepted");
  a_fb_hold : assert property (@(posedge clk) disable iff (!rst_n)
                               fb_valid && !fb_ready && out_valid |=> fb_valid)
    else $error("fb_valid dropped before the feedback was accepted");

endmodule
