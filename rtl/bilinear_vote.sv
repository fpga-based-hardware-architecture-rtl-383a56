// bilinear_vote: splits one warped event into its four bilinear votes and
// the matching contributions to the two derivative images, and routes each
// to the memory bank that holds that pixel.
//
// With the warped position x' = i + dx, y' = j + dy (i, j integer, dx, dy
// fractions) the four neighbours receive
//     pixel       IWE weight        d/dvx             d/dvy
//     (i,  j)     (1-dx)(1-dy)      +(1-dy)*dt        +(1-dx)*dt
//     (i+1,j)     dx(1-dy)          -(1-dy)*dt        +dx*dt
//     (i,  j+1)   (1-dx)dy          +dy*dt            -(1-dx)*dt
//     (i+1,j+1)   dx*dy             -dy*dt            -dx*dt
// (the derivative columns are dw/ddx * (-dt) and dw/ddy * (-dt)).
//
// ROI pixels are split over four banks by coordinate parity: pixel (px, py)
// lives in bank 2*px[0] + py[0] at address (py>>1)*(ROI_W/2) + (px>>1). The
// four neighbours of any position always differ in parity, so every event
// gives exactly one vote per bank and all four can be written in the same
// cycle. A vote whose pixel lies outside the ROI is marked invalid.
//
// Timing: three pipeline stages, one event per cycle, latency 3 cycles.
// The weights, derivative terms and parity banking follow the paper; the bank
// numbering is read from the colour legend of the paper's memory figure, and
// dropping out-of-ROI votes and the fixed-point formats are this design's
// choice. ROI_W and ROI_H must be powers of two.
module bilinear_vote
  import cm_pkg::*;
#(
  parameter int unsigned ROI_W = 64,
  parameter int unsigned ROI_H = 64,
  localparam int unsigned LW  = $clog2(ROI_W),
  localparam int unsigned LH  = $clog2(ROI_H),
  localparam int unsigned BAW = LW + LH - 2
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  warped_t        in_w,
  output logic [3:0]     out_valid,
  output logic [BAW-1:0] out_addr [4],
  output vote_t          out_vote [4],
  output logic           busy
);

  localparam int IW = POS_W - POS_F;         // integer-part width
  localparam int DSH = POS_F + DT_F - W_F;   // derivative product shift

  // stage 1: split into integer and fractional parts
  logic                  s1_v;
  logic signed [IW-1:0]  s1_i, s1_j;
  logic [POS_F:0]        s1_dx, s1_dy, s1_ox, s1_oy;
  dt_t                   s1_dt;
  // stage 2: products
  logic                  s2_v;
  logic signed [IW-1:0]  s2_i, s2_j;
  acc_t                  s2_w [4];           // index 2*b + a for neighbour (i+a, j+b)
  acc_t                  s2_tx0, s2_tx1, s2_ty0, s2_ty1;

  // signed helpers for the derivative products
  logic signed [POS_F+DT_W+1:0] p_tx0, p_tx1, p_ty0, p_ty1;
  logic [2*POS_F+1:0] p_w [4];
  always_comb begin
    p_w[0] = (2*POS_F+2)'(s1_ox) * (2*POS_F+2)'(s1_oy);
    p_w[1] = (2*POS_F+2)'(s1_dx) * (2*POS_F+2)'(s1_oy);
    p_w[2] = (2*POS_F+2)'(s1_ox) * (2*POS_F+2)'(s1_dy);
    p_w[3] = (2*POS_F+2)'(s1_dx) * (2*POS_F+2)'(s1_dy);
    p_tx0 = $signed({1'b0, s1_oy}) * s1_dt;
    p_tx1 = $signed({1'b0, s1_dy}) * s1_dt;
    p_ty0 = $signed({1'b0, s1_ox}) * s1_dt;
    p_ty1 = $signed({1'b0, s1_dx}) * s1_dt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_i <= '0; s1_j <= '0;
      s1_dx <= '0; s1_dy <= '0; s1_ox <= '0; s1_oy <= '0; s1_dt <= '0;
      s2_v <= 1'b0; s2_i <= '0; s2_j <= '0;
      s2_tx0 <= '0; s2_tx1 <= '0; s2_ty0 <= '0; s2_ty1 <= '0;
      for (int k = 0; k < 4; k++) s2_w[k] <= '0;
    end else begin
      s1_v  <= in_valid;
      s1_i  <= IW'(in_w.xw >>> POS_F);
      s1_j  <= IW'(in_w.yw >>> POS_F);
      s1_dx <= {1'b0, in_w.xw[POS_F-1:0]};
      s1_dy <= {1'b0, in_w.yw[POS_F-1:0]};
      s1_ox <= (POS_F+1)'(1 << POS_F) - {1'b0, in_w.xw[POS_F-1:0]};
      s1_oy <= (POS_F+1)'(1 << POS_F) - {1'b0, in_w.yw[POS_F-1:0]};
      s1_dt <= in_w.dt;

      s2_v   <= s1_v;
      s2_i   <= s1_i;
      s2_j   <= s1_j;
      s2_w[0] <= acc_t'(p_w[0]);
      s2_w[1] <= acc_t'(p_w[1]);
      s2_w[2] <= acc_t'(p_w[2]);
      s2_w[3] <= acc_t'(p_w[3]);
      s2_tx0 <= acc_t'(ACC_W'(p_tx0) >>> DSH);
      s2_tx1 <= acc_t'(ACC_W'(p_tx1) >>> DSH);
      s2_ty0 <= acc_t'(ACC_W'(p_ty0) >>> DSH);
      s2_ty1 <= acc_t'(ACC_W'(p_ty1) >>> DSH);
    end
  end

  // stage 3: route the neighbours to the parity banks. Bank k holds pixels
  // with x parity k[1] and y parity k[0]; it receives neighbour (i+a, j+b)
  // with a = k[1] ^ i[0], b = k[0] ^ j[0].
  logic [3:0]           r_valid;
  logic [BAW-1:0]       r_addr [4];
  vote_t                r_vote [4];
  logic                 r_a [4], r_b [4];
  logic signed [IW-1:0] r_px [4], r_py [4];

  always_comb begin
    for (int k = 0; k < 4; k++) begin
      r_a[k]  = k[1] ^ s2_i[0];
      r_b[k]  = k[0] ^ s2_j[0];
      r_px[k] = s2_i + IW'(r_a[k]);
      r_py[k] = s2_j + IW'(r_b[k]);
      r_valid[k] = s2_v && (r_px[k] >= 0) && (r_px[k] < IW'(ROI_W))
                        && (r_py[k] >= 0) && (r_py[k] < IW'(ROI_H));
      r_addr[k]  = {r_py[k][LH-1:1], r_px[k][LW-1:1]};
      r_vote[k].iw = s2_w[{r_b[k], r_a[k]}];
      r_vote[k].gx = r_a[k] ? -(r_b[k] ? s2_tx1 : s2_tx0) : (r_b[k] ? s2_tx1 : s2_tx0);
      r_vote[k].gy = r_b[k] ? -(r_a[k] ? s2_ty1 : s2_ty0) : (r_a[k] ? s2_ty1 : s2_ty0);
    end
  end

  logic s3_v;  // an event is in stage 3, whether or not its votes are valid

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s3_v      <= 1'b0;
      out_valid <= '0;
      for (int k = 0; k < 4; k++) begin
        out_addr[k] <= '0;
        out_vote[k] <= '0;
      end
    end else begin
      s3_v      <= s2_v;
      out_valid <= r_valid;
      out_addr  <= r_addr;
      out_vote  <= r_vote;
    end
  end

  assign busy = s1_v || s2_v || s3_v;

endmodule
