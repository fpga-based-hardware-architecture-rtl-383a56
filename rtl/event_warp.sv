// event_warp: moves each stored event to the batch reference time with the
// constant-velocity model x' = x - dt*vx, y' = y - dt*vy.
//
// Four pipeline stages, one event per cycle:
//   1. tdiff = t_k - t_ref (signed)
//   2. dt    = (tdiff * recip) >>> (31 - DT_F), clamped to [-1, 1]
//      (recip = 2^31 / half batch span, from ref_time_calc)
//   3. mx = dt * vx, my = dt * vy
//   4. x' = x * 2^POS_F - mx >>> (DT_F + VEL_F - POS_F), and likewise y'
// The output carries dt and the warped ROI-relative position with POS_F
// fraction bits. vx, vy, t_ref and recip must stay constant while events are
// in flight. Latency 4 cycles; `busy` is high while any stage holds an event.
// The warp equations and the [-1, 1] scaling of dt follow the paper; the
// fixed-point formats (see cm_pkg) and the stage split are this design's.
module event_warp
  import cm_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  roi_event_t in_ev,
  input  ts_t        t_ref,
  input  recip_t     recip,
  input  vel_t       vx,
  input  vel_t       vy,
  output logic       out_valid,
  output warped_t    out_w,
  output logic       busy
);

  localparam int PROD_SH = 31 - DT_F;
  localparam int MOV_SH  = DT_F + VEL_F - POS_F;
  localparam logic signed [DT_W-1:0] ONE = DT_W'(1) <<< DT_F;

  logic [3:0] v;

  // stage 1
  logic signed [T_W:0] s1_tdiff;
  coord_t              s1_x, s1_y;
  // stage 2
  dt_t                 s2_dt;
  coord_t              s2_x, s2_y;
  // stage 3
  logic signed [DT_W+VEL_W-1:0] s3_mx, s3_my;
  dt_t                 s3_dt;
  coord_t              s3_x, s3_y;

  logic signed [T_W+RECIP_W+1:0] prod;
  logic signed [T_W+RECIP_W+1:0] scaled;

  always_comb begin
    prod   = s1_tdiff * $signed({1'b0, recip});
    scaled = prod >>> PROD_SH;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v        <= '0;
      s1_tdiff <= '0; s1_x <= '0; s1_y <= '0;
      s2_dt    <= '0; s2_x <= '0; s2_y <= '0;
      s3_mx    <= '0; s3_my <= '0; s3_dt <= '0; s3_x <= '0; s3_y <= '0;
      out_w    <= '0;
    end else begin
      v <= {v[2:0], in_valid};
      // 1: time difference to the reference time
      s1_tdiff <= $signed({1'b0, in_ev.t}) - $signed({1'b0, t_ref});
      s1_x     <= in_ev.x;
      s1_y     <= in_ev.y;
      // 2: scale to [-1, 1]
      if (scaled > (T_W+RECIP_W+2)'(ONE))       s2_dt <= ONE;
      else if (scaled < -(T_W+RECIP_W+2)'(ONE)) s2_dt <= -ONE;
      else                                      s2_dt <= dt_t'(scaled);
      s2_x <= s1_x;
      s2_y <= s1_y;
      // 3: displacement dt * v
      s3_mx <= s2_dt * vx;
      s3_my <= s2_dt * vy;
      s3_dt <= s2_dt;
      s3_x  <= s2_x;
      s3_y  <= s2_y;
      // 4: warped position
      out_w.dt <= s3_dt;
      out_w.xw <= (pos_t'(s3_x) <<< POS_F) - pos_t'(s3_mx >>> MOV_SH);
      out_w.yw <= (pos_t'(s3_y) <<< POS_F) - pos_t'(s3_my >>> MOV_SH);
    end
  end

  assign out_valid = v[3];
  assign busy      = |v;

endmodule
