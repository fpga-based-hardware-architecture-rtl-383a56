// roi_update: keeps the position of the tracked region of interest and moves
// it by the estimated velocity once a batch has been optimised,
//     (x_roi, y_roi) <- (x_roi, y_roi) + (vx, vy).
//
// The position is kept with VEL_F fraction bits so that sub-pixel motion
// adds up over batches; the ROI corner used for filtering and bank
// addressing is its integer part (rounded down). `load` sets the corner to
// (init_x, init_y); `update` adds the velocity, visible the next cycle.
// The update rule follows the paper; keeping the fractional part is this
// design's choice.
module roi_update
  import cm_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               load,
  input  logic signed [15:0] init_x,
  input  logic signed [15:0] init_y,
  input  logic               update,
  input  vel_t               vx,
  input  vel_t               vy,
  output logic signed [15:0] roi_x,
  output logic signed [15:0] roi_y
);

  localparam int R_W = 16 + VEL_F;

  logic signed [R_W-1:0] px, py;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      px <= '0;
      py <= '0;
    end else if (load) begin
      px <= R_W'(init_x) <<< VEL_F;
      py <= R_W'(init_y) <<< VEL_F;
    end else if (update) begin
      px <= px + R_W'(vx);
      py <= py + R_W'(vy);
    end
  end

  assign roi_x = 16'(px >>> VEL_F);
  assign roi_y = 16'(py >>> VEL_F);

endmodule
