// cm_top: contrast-maximisation (CM) accelerator for event-camera object
// tracking.
//
// A batch of sensor events arrives on the ev_* stream (valid/ready, `last`
// marks the batch's final event). Events inside the current region of
// interest (ROI) are stored; the reference time (middle of the batch) and
// the dt scale are formed in parallel. The stored events are then replayed
// ITERS times. In every iteration each event is warped to the reference time
// with the current velocity (vx, vy), split by bilinear voting into four
// pixel votes plus their derivative terms, and accumulated into twelve
// block-RAM banks (IWE and its two velocity derivatives, each in four
// coordinate-parity banks so one event is absorbed per cycle). The banks are
// then read four pixels per cycle, cleared as they are read, and the variance
// gradient is formed; a gradient-ascent step updates (vx, vy). After the last
// iteration the ROI is moved by the final velocity, result_valid pulses with
// (vx, vy) and the new ROI, and the next batch is accepted.
//
// Cycles per batch, from the first accepted event to result_valid:
// N + 35 + ITERS * (n + ROI_W*ROI_H/4 + 23) for n > 0 stored events
// (N + 35 + ITERS * (ROI_W*ROI_H/4 + 13) for n = 0). A few internal status
// signals (iteration index, forwarding hits, unit busy flags) are wired up
// but left unused here; they are kept for observation and testbenches.
// The ROI must be loaded (roi_load) before the first batch. Parameters:
// ROI size (powers of two), event-buffer depth, iteration count and the
// learning rate ETA (unsigned, cm_pkg::ETA_F fraction bits). The overall
// dataflow follows the paper; interface and formats are this design's.
module cm_top
  import cm_pkg::*;
#(
  parameter int unsigned ROI_W    = 64,
  parameter int unsigned ROI_H    = 64,
  parameter int unsigned EV_DEPTH = 8192,
  parameter int unsigned ITERS    = 100,
  parameter int unsigned ETA      = 262144,
  localparam int unsigned EAW = $clog2(EV_DEPTH),
  localparam int unsigned BAW = $clog2(ROI_W) + $clog2(ROI_H) - 2
) (
  input  logic               clk,
  input  logic               rst_n,
  // event stream
  input  logic               ev_valid,
  output logic               ev_ready,
  input  event_t             ev,
  input  logic               ev_last,
  // ROI initialisation
  input  logic               roi_load,
  input  logic signed [15:0] roi_init_x,
  input  logic signed [15:0] roi_init_y,
  // results
  output logic               result_valid,
  output vel_t               vx,
  output vel_t               vy,
  output logic signed [15:0] roi_x,
  output logic signed [15:0] roi_y,
  output logic [EAW:0]       n_events,
  output logic               overflow,
  output logic               optimising
);

  // controller
  logic batch_clear, ref_finish, ref_done, sum_clear, reader_start;
  logic pipe_busy, grad_start, grad_valid, flow_done, flow_init, roi_step;
  logic [$clog2(ITERS+1)-1:0] iter;
  logic ev_take;

  // preprocessing
  logic           fb_we;
  logic [EAW-1:0] fb_waddr;
  roi_event_t     fb_wdata;
  ts_t            t_ref;
  recip_t         recip;
  logic           ref_busy;

  // stream
  logic           rd_en;
  logic [EAW-1:0] rd_addr;
  roi_event_t     rd_data;
  logic           rdr_valid, rdr_busy;
  roi_event_t     rdr_ev;
  logic           w_valid, w_busy;
  warped_t        w_out;
  logic [3:0]     v_valid;
  logic [BAW-1:0] v_addr [4];
  vote_t          v_vote [4];
  logic           v_busy;

  // banks and gradient
  logic           g_rd_en;
  logic [BAW-1:0] g_rd_addr;
  logic [3:0]     b_rd_valid;
  vote_t          b_rd_data [4];
  logic [11:0]    acc_busy;
  logic [11:0]    acc_hit;
  logic           g_busy;
  grad_t          grad_x, grad_y;

  assign ev_take   = ev_valid && ev_ready;
  // The accumulators stay busy for two cycles after their last vote. v_tail
  // covers those two cycles even when the last event's votes all fell
  // outside the ROI, so the drain time, and with it the batch time, does not
  // depend on the data.
  logic [1:0] v_tail;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_tail <= '0;
    else        v_tail <= {v_tail[0], v_busy};
  end
  assign pipe_busy = rdr_busy || w_busy || v_busy || (|v_tail) || (|acc_busy);

  cm_controller #(.ITERS(ITERS)) u_ctrl (
    .clk, .rst_n,
    .ev_valid, .ev_last, .ev_ready,
    .batch_clear, .ref_finish, .ref_done,
    .sum_clear, .reader_start, .pipe_busy,
    .grad_start, .grad_valid, .flow_done, .flow_init,
    .roi_step, .result_valid, .iter, .optimising
  );

  roi_filter #(.ROI_W(ROI_W), .ROI_H(ROI_H), .EV_DEPTH(EV_DEPTH)) u_filter (
    .clk, .rst_n,
    .clear    (batch_clear),
    .in_valid (ev_take),
    .in_ev    (ev),
    .roi_x, .roi_y,
    .wr_en    (fb_we),
    .wr_addr  (fb_waddr),
    .wr_data  (fb_wdata),
    .count    (n_events),
    .overflow
  );

  ref_time_calc u_ref (
    .clk, .rst_n,
    .clear    (batch_clear),
    .in_valid (ev_take),
    .in_t     (ev.t),
    .finish   (ref_finish),
    .t_ref, .recip,
    .done     (ref_done),
    .busy     (ref_busy)
  );

  bram_sdp #(.DEPTH(EV_DEPTH), .WIDTH($bits(roi_event_t)), .INIT_ZERO(1'b0)) u_evbuf (
    .clk,
    .wr_en   (fb_we),
    .wr_addr (fb_waddr),
    .wr_data (fb_wdata),
    .rd_en   (rd_en),
    .rd_addr (rd_addr),
    .rd_data (rd_data)
  );

  event_reader #(.EV_DEPTH(EV_DEPTH)) u_reader (
    .clk, .rst_n,
    .start     (reader_start),
    .count     (n_events),
    .rd_en, .rd_addr, .rd_data,
    .out_valid (rdr_valid),
    .out_ev    (rdr_ev),
    .busy      (rdr_busy)
  );

  event_warp u_warp (
    .clk, .rst_n,
    .in_valid  (rdr_valid),
    .in_ev     (rdr_ev),
    .t_ref, .recip, .vx, .vy,
    .out_valid (w_valid),
    .out_w     (w_out),
    .busy      (w_busy)
  );

  bilinear_vote #(.ROI_W(ROI_W), .ROI_H(ROI_H)) u_vote (
    .clk, .rst_n,
    .in_valid  (w_valid),
    .in_w      (w_out),
    .out_valid (v_valid),
    .out_addr  (v_addr),
    .out_vote  (v_vote),
    .busy      (v_busy)
  );

  // twelve banks: IWE, d/dvx and d/dvy for each of the four parity banks
  for (genvar k = 0; k < 4; k++) begin : g_bank
    logic iw_rv, gx_rv, gy_rv;

    pixel_accumulator #(.DEPTH(1 << BAW)) u_acc_iw (
      .clk, .rst_n,
      .in_valid (v_valid[k]), .in_addr (v_addr[k]), .in_val (v_vote[k].iw),
      .rd_en (g_rd_en), .rd_addr (g_rd_addr),
      .rd_valid (iw_rv), .rd_data (b_rd_data[k].iw),
      .busy (acc_busy[3*k]), .fwd_hit (acc_hit[3*k])
    );
    pixel_accumulator #(.DEPTH(1 << BAW)) u_acc_gx (
      .clk, .rst_n,
      .in_valid (v_valid[k]), .in_addr (v_addr[k]), .in_val (v_vote[k].gx),
      .rd_en (g_rd_en), .rd_addr (g_rd_addr),
      .rd_valid (gx_rv), .rd_data (b_rd_data[k].gx),
      .busy (acc_busy[3*k+1]), .fwd_hit (acc_hit[3*k+1])
    );
    pixel_accumulator #(.DEPTH(1 << BAW)) u_acc_gy (
      .clk, .rst_n,
      .in_valid (v_valid[k]), .in_addr (v_addr[k]), .in_val (v_vote[k].gy),
      .rd_en (g_rd_en), .rd_addr (g_rd_addr),
      .rd_valid (gy_rv), .rd_data (b_rd_data[k].gy),
      .busy (acc_busy[3*k+2]), .fwd_hit (acc_hit[3*k+2])
    );
    assign b_rd_valid[k] = iw_rv && gx_rv && gy_rv;
  end

  gradient_calc #(.ROI_W(ROI_W), .ROI_H(ROI_H)) u_grad (
    .clk, .rst_n,
    .sum_clear, .vote_valid (v_valid), .vote (v_vote),
    .start    (grad_start),
    .rd_en    (g_rd_en),
    .rd_addr  (g_rd_addr),
    .rd_valid (b_rd_valid[0]),
    .rd_data  (b_rd_data),
    .grad_valid, .grad_x, .grad_y,
    .busy     (g_busy)
  );

  flow_update u_flow (
    .clk, .rst_n,
    .init (flow_init),
    .eta  (eta_t'(ETA)),
    .grad_valid, .grad_x, .grad_y,
    .vx, .vy,
    .done (flow_done)
  );

  roi_update u_roi (
    .clk, .rst_n,
    .load   (roi_load),
    .init_x (roi_init_x),
    .init_y (roi_init_y),
    .update (roi_step),
    .vx, .vy,
    .roi_x, .roi_y
  );

endmodule
