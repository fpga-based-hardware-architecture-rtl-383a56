// flow_update: the gradient-ascent step of the optimisation loop,
//     v <- v + eta * dC/dv
// applied to both velocity components.
//
// `init` clears the velocity at the start of a batch. On `grad_valid` the
// products eta * grad are formed (stage 1) and added, with saturation, to vx
// and vy (stage 2); `done` pulses in the cycle the new velocity is visible,
// two cycles after grad_valid. eta is unsigned with ETA_F fraction bits.
// The update rule follows the paper; the learning-rate value, its format and
// starting every batch from zero velocity are this design's choice.
module flow_update
  import cm_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  init,
  input  eta_t  eta,
  input  logic  grad_valid,
  input  grad_t grad_x,
  input  grad_t grad_y,
  output vel_t  vx,
  output vel_t  vy,
  output logic  done
);

  localparam int PR_W = GRAD_W + ETA_W + 1;
  localparam int SH   = GRAD_F + ETA_F - VEL_F;

  logic                   p_v;
  logic signed [PR_W-1:0] p_x, p_y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_v <= 1'b0; p_x <= '0; p_y <= '0;
      vx <= '0; vy <= '0; done <= 1'b0;
    end else begin
      p_v  <= grad_valid;
      p_x  <= grad_x * $signed({1'b0, eta});
      p_y  <= grad_y * $signed({1'b0, eta});
      done <= p_v;
      if (init) begin
        vx <= '0;
        vy <= '0;
      end else if (p_v) begin
        vx <= sat_vel(128'(vx) + 128'(p_x >>> SH));
        vy <= sat_vel(128'(vy) + 128'(p_y >>> SH));
      end
    end
  end

endmodule
