// cm_pkg: widths, fixed-point formats and shared types of the contrast
// maximisation (CM) accelerator.
//
// All arithmetic is two's-complement fixed point. A name of the form Qa.b
// below means b fractional bits.
//   timestamps      : unsigned T_W bits (sensor ticks, e.g. microseconds)
//   scaled dt       : signed DT_W bits, DT_F fractional bits, range [-1, 1]
//   velocity        : signed VEL_W bits, VEL_F fractional bits, in pixels per
//                     half batch duration (because dt is scaled to [-1, 1])
//   warped position : signed POS_W bits, POS_F fractional bits, ROI-relative
//   image values    : signed ACC_W bits, W_F fractional bits (IWE and both
//                     derivative images share this format)
//   gradient        : signed GRAD_W bits, GRAD_F fractional bits
// The paper gives none of these widths; they are this design's choice and
// were sized so that a 64x64 ROI and batches of several thousand events
// neither overflow nor lose visible precision.
package cm_pkg;

  localparam int T_W     = 32;  // timestamp width
  localparam int COORD_W = 8;   // sensor coordinate width (DAVIS 240C: 240x180)
  localparam int DT_W    = 18;  // scaled dt width
  localparam int DT_F    = 15;  // scaled dt fraction bits
  localparam int RECIP_W = 32;  // width of 2^31 / half_range
  localparam int VEL_W   = 24;  // velocity width
  localparam int VEL_F   = 12;  // velocity fraction bits
  localparam int POS_W   = 24;  // warped position width
  localparam int POS_F   = 8;   // warped position fraction bits
  localparam int ACC_W   = 32;  // accumulated image value width
  localparam int W_F     = 2 * POS_F;  // image value fraction bits (weight = frac*frac)
  localparam int GRAD_W  = 48;  // gradient width
  localparam int GRAD_F  = 24;  // gradient fraction bits
  localparam int ETA_W   = 24;  // learning-rate width (unsigned)
  localparam int ETA_F   = 16;  // learning-rate fraction bits

  typedef logic [T_W-1:0]            ts_t;
  typedef logic [COORD_W-1:0]        coord_t;
  typedef logic signed [DT_W-1:0]    dt_t;
  typedef logic [RECIP_W-1:0]        recip_t;
  typedef logic signed [VEL_W-1:0]   vel_t;
  typedef logic signed [POS_W-1:0]   pos_t;
  typedef logic signed [ACC_W-1:0]   acc_t;
  typedef logic signed [GRAD_W-1:0]  grad_t;
  typedef logic [ETA_W-1:0]          eta_t;

  // One sensor event e_k = (t_k, x_k, y_k, p_k).
  typedef struct packed {
    ts_t    t;
    coord_t x;
    coord_t y;
    logic   p;
  } event_t;

  // An event kept in the event buffer: timestamp and ROI-relative position.
  typedef struct packed {
    ts_t    t;
    coord_t x;
    coord_t y;
  } roi_event_t;

  // Result of warping: scaled dt and warped ROI-relative position.
  typedef struct packed {
    dt_t  dt;
    pos_t xw;
    pos_t yw;
  } warped_t;

  // One bilinear-voting contribution for one pixel bank: the bank address
  // is carried separately because its width depends on the ROI size.
  typedef struct packed {
    acc_t iw;  // bilinear weight for the IWE
    acc_t gx;  // contribution to dIw/dvx
    acc_t gy;  // contribution to dIw/dvy
  } vote_t;

  // Sign-saturate a wide value to GRAD_W bits.
  function automatic grad_t sat_grad(input logic signed [127:0] v);
    localparam logic signed [127:0] MAXV = (128'sd1 <<< (GRAD_W - 1)) - 1;
    localparam logic signed [127:0] MINV = -(128'sd1 <<< (GRAD_W - 1));
    if (v > MAXV) return grad_t'(MAXV);
    if (v < MINV) return grad_t'(MINV);
    return grad_t'(v);
  endfunction

  // Sign-saturate a wide value to VEL_W bits.
  function automatic vel_t sat_vel(input logic signed [127:0] v);
    localparam logic signed [127:0] MAXV = (128'sd1 <<< (VEL_W - 1)) - 1;
    localparam logic signed [127:0] MINV = -(128'sd1 <<< (VEL_W - 1));
    if (v > MAXV) return vel_t'(MAXV);
    if (v < MINV) return vel_t'(MINV);
    return vel_t'(v);
  endfunction

endpackage
