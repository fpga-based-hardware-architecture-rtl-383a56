// gradient_calc: computes the gradient of the IWE variance with respect to
// the two velocity components,
//     dC/dvx = 2/Np * sum_px (Iw - mean(Iw)) * (Gx - mean(Gx))
//     dC/dvy = 2/Np * sum_px (Iw - mean(Iw)) * (Gy - mean(Gy))
// where Gx, Gy are the derivative images and Np = ROI_W*ROI_H.
//
// The image means are known before the images are read: while voting runs,
// this unit adds up every valid contribution of the four bank lanes (the sum
// of an image equals the sum of all votes written into it), and divides by
// Np, a power of two, with a shift. A `start` pulse then reads address
// 0 .. Np/4-1 of all twelve banks together, i.e. four pixels per cycle; the
// banks clear each word behind the read. Per pixel the means are subtracted,
// the two products are formed (8 multipliers for 4 pixels), the four lanes
// are summed and the result accumulated. At the end the sums are scaled by
// 2/Np and saturated to the GRAD format.
//
// Timing: `sum_clear` at the start of an iteration; `start` after the
// accumulators have drained. grad_valid pulses Np/4 + 7 cycles after start.
// Subtracting the means, multiplying and summing, and the Np/4-cycle readout,
// follow the paper; obtaining the means from the vote stream, the pipeline
// split and the widths are this design's choice.
module gradient_calc
  import cm_pkg::*;
#(
  parameter int unsigned ROI_W = 64,
  parameter int unsigned ROI_H = 64,
  localparam int unsigned LOG2P = $clog2(ROI_W) + $clog2(ROI_H),
  localparam int unsigned BAW   = LOG2P - 2
) (
  input  logic           clk,
  input  logic           rst_n,
  // running image sums
  input  logic           sum_clear,
  input  logic [3:0]     vote_valid,
  input  vote_t          vote [4],
  // bank readout
  input  logic           start,
  output logic           rd_en,
  output logic [BAW-1:0] rd_addr,
  input  logic           rd_valid,
  input  vote_t          rd_data [4],
  // result
  output logic           grad_valid,
  output grad_t          grad_x,
  output grad_t          grad_y,
  output logic           busy
);

  localparam int SUM_W  = ACC_W + 16;
  localparam int D_W    = ACC_W + 1;
  localparam int P_W    = 2 * D_W;
  localparam int L_W    = P_W + 2;
  localparam int GACC_W = L_W + BAW + 1;
  localparam int OUT_SH = LOG2P - 1 + 2 * W_F - GRAD_F;

  logic signed [SUM_W-1:0] s_iw, s_gx, s_gy;
  logic signed [D_W-1:0]   mu_iw, mu_gx, mu_gy;

  logic                    run;
  logic [BAW:0]            addr_cnt;
  logic [3:0]              pv;       // valid of stages P1..P4
  logic signed [D_W-1:0]   d_iw [4], d_gx [4], d_gy [4];
  logic signed [P_W-1:0]   m_x [4], m_y [4];
  logic signed [L_W-1:0]   l_x, l_y;
  logic signed [GACC_W-1:0] a_x, a_y;
  logic                    fin;

  // running sums of the votes
  logic signed [SUM_W-1:0] n_iw, n_gx, n_gy;
  always_comb begin
    n_iw = s_iw; n_gx = s_gx; n_gy = s_gy;
    for (int k = 0; k < 4; k++) begin
      if (vote_valid[k]) begin
        n_iw += SUM_W'(vote[k].iw);
        n_gx += SUM_W'(vote[k].gx);
        n_gy += SUM_W'(vote[k].gy);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_iw <= '0; s_gx <= '0; s_gy <= '0;
    end else if (sum_clear) begin
      s_iw <= '0; s_gx <= '0; s_gy <= '0;
    end else begin
      s_iw <= n_iw; s_gx <= n_gx; s_gy <= n_gy;
    end
  end

  assign rd_en   = run;
  assign rd_addr = BAW'(addr_cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; addr_cnt <= '0; pv <= '0; fin <= 1'b0;
      mu_iw <= '0; mu_gx <= '0; mu_gy <= '0;
      l_x <= '0; l_y <= '0; a_x <= '0; a_y <= '0;
      grad_valid <= 1'b0; grad_x <= '0; grad_y <= '0;
      for (int k = 0; k < 4; k++) begin
        d_iw[k] <= '0; d_gx[k] <= '0; d_gy[k] <= '0;
        m_x[k] <= '0; m_y[k] <= '0;
      end
    end else begin
      grad_valid <= 1'b0;
      // address generator
      if (start && !run) begin
        run      <= 1'b1;
        addr_cnt <= '0;
        mu_iw    <= D_W'(s_iw >>> LOG2P);
        mu_gx    <= D_W'(s_gx >>> LOG2P);
        mu_gy    <= D_W'(s_gy >>> LOG2P);
        a_x      <= '0;
        a_y      <= '0;
      end else if (run) begin
        if (addr_cnt == (BAW+1)'((1 << BAW) - 1)) run <= 1'b0;
        addr_cnt <= addr_cnt + 1'b1;
      end
      // P1: subtract the means
      pv[0] <= rd_valid;
      for (int k = 0; k < 4; k++) begin
        d_iw[k] <= D_W'(rd_data[k].iw) - mu_iw;
        d_gx[k] <= D_W'(rd_data[k].gx) - mu_gx;
        d_gy[k] <= D_W'(rd_data[k].gy) - mu_gy;
      end
      // P2: products
      pv[1] <= pv[0];
      for (int k = 0; k < 4; k++) begin
        m_x[k] <= d_iw[k] * d_gx[k];
        m_y[k] <= d_iw[k] * d_gy[k];
      end
      // P3: sum of the four lanes
      pv[2] <= pv[1];
      l_x <= L_W'(m_x[0]) + L_W'(m_x[1]) + L_W'(m_x[2]) + L_W'(m_x[3]);
      l_y <= L_W'(m_y[0]) + L_W'(m_y[1]) + L_W'(m_y[2]) + L_W'(m_y[3]);
      // P4: accumulate over the image
      pv[3] <= pv[2];
      if (pv[2]) begin
        a_x <= a_x + GACC_W'(l_x);
        a_y <= a_y + GACC_W'(l_y);
      end
      // scale by 2/Np once the last pixel group is in
      fin <= pv[3] && !pv[2];
      if (fin) begin
        grad_x     <= sat_grad(128'(a_x >>> OUT_SH));
        grad_y     <= sat_grad(128'(a_y >>> OUT_SH));
        grad_valid <= 1'b1;
      end
    end
  end

  assign busy = run || rd_valid || (|pv) || fin;

endmodule
