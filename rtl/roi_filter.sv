// roi_filter: first preprocessing stage. Keeps the events that fall inside
// the region of interest (ROI) and writes them to the event buffer.
//
// An event (t, x, y, p) is inside the ROI when roi_x <= x < roi_x + ROI_W and
// roi_y <= y < roi_y + ROI_H, where (roi_x, roi_y) is the ROI's top-left
// corner (signed, so the window may hang over the sensor edge). Accepted
// events are written, with coordinates made relative to the ROI corner and
// without their polarity (the image of warped events does not use it), to
// consecutive buffer addresses 0, 1, 2, ... The count of stored events is the
// n of the iteration loop. An event that would not fit in the EV_DEPTH-deep
// buffer is dropped and raises the sticky `overflow` flag.
//
// Timing: one event per cycle, no back-pressure; the buffer write is issued
// in the cycle after the event arrives. `clear` (one cycle, between batches)
// resets the count and the flag. The test and the write-back of accepted
// events follow the paper; relative coordinates, the drop-on-overflow rule
// and the polarity being discarded are this design's choices.
module roi_filter
  import cm_pkg::*;
#(
  parameter int unsigned ROI_W    = 64,
  parameter int unsigned ROI_H    = 64,
  parameter int unsigned EV_DEPTH = 8192,
  localparam int unsigned EAW = $clog2(EV_DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                in_valid,
  input  event_t              in_ev,
  input  logic signed [15:0]  roi_x,
  input  logic signed [15:0]  roi_y,
  output logic                wr_en,
  output logic [EAW-1:0]      wr_addr,
  output roi_event_t          wr_data,
  output logic [EAW:0]        count,
  output logic                overflow
);

  logic signed [16:0] rx, ry;
  logic               in_roi;

  always_comb begin
    rx = 17'(signed'({1'b0, in_ev.x})) - 17'(roi_x);
    ry = 17'(signed'({1'b0, in_ev.y})) - 17'(roi_y);
    in_roi = (rx >= 0) && (rx < 17'(ROI_W)) && (ry >= 0) && (ry < 17'(ROI_H));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_en    <= 1'b0;
      wr_addr  <= '0;
      wr_data  <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      wr_en <= 1'b0;
      if (clear) begin
        count    <= '0;
        overflow <= 1'b0;
      end else if (in_valid && in_roi) begin
        if (count < (EAW+1)'(EV_DEPTH)) begin
          wr_en   <= 1'b1;
          wr_addr <= EAW'(count);
          wr_data <= '{t: in_ev.t, x: coord_t'(rx), y: coord_t'(ry)};
          count   <= count + 1'b1;
        end else begin
          overflow <= 1'b1;
        end
      end
    end
  end

endmodule
