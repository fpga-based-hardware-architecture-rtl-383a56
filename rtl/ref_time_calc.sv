// ref_time_calc: reference-time unit of the preprocessing stage.
//
// While a batch streams in it tracks the smallest (t1) and largest (tN)
// timestamp of every event of the batch, inside the ROI or not. When `finish`
// is pulsed it forms
//     t_ref = t1 + floor((tN - t1) / 2)
//     half  = ceil((tN - t1) / 2)
//     recip = floor(2^31 / half)          (0 when half is 0)
// so that a later stage can scale dt = t_k - t_ref to [-1, 1] with one
// multiplication: dt_scaled = (dt * recip) >>> (31 - DT_F). The reciprocal
// comes from a restoring divider that produces one quotient bit per cycle.
//
// Timing: `done` pulses RECIP_W + 1 cycles after `finish`; t_ref and recip
// then hold until the next `finish`. `clear` starts a new batch. The midpoint
// reference time and the scaling to [-1, 1] follow the paper; taking t1 and
// tN over all events of the batch, rounding the half range up (so |dt| never
// exceeds 1) and the serial reciprocal are this design's choices.
module ref_time_calc
  import cm_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  logic   in_valid,
  input  ts_t    in_t,
  input  logic   finish,
  output ts_t    t_ref,
  output recip_t recip,
  output logic   done,
  output logic   busy
);

  localparam logic [RECIP_W-1:0] DIVIDEND = RECIP_W'(1) << 31;

  ts_t                 t_min, t_max;
  logic                seen;
  logic [T_W-1:0]      half;
  logic [RECIP_W-1:0]  rem;
  logic [RECIP_W-2:0]  quo;
  logic [$clog2(RECIP_W+1)-1:0] bit_idx;
  logic [T_W-1:0]      range_c;
  logic [RECIP_W:0]    rem_shift;

  assign range_c   = t_max - t_min;
  assign rem_shift = {rem[RECIP_W-1:0], DIVIDEND[bit_idx[$clog2(RECIP_W)-1:0]]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_min   <= '0;
      t_max   <= '0;
      seen    <= 1'b0;
      half    <= '0;
      rem     <= '0;
      quo     <= '0;
      bit_idx <= '0;
      busy    <= 1'b0;
      done    <= 1'b0;
      t_ref   <= '0;
      recip   <= '0;
    end else begin
      done <= 1'b0;
      if (clear) begin
        seen <= 1'b0;
        busy <= 1'b0;
      end else if (in_valid) begin
        if (!seen || in_t < t_min) t_min <= in_t;
        if (!seen || in_t > t_max) t_max <= in_t;
        seen <= 1'b1;
      end
      if (finish && !busy) begin
        t_ref   <= t_min + (range_c >> 1);
        half    <= (range_c >> 1) + T_W'(range_c[0]);
        rem     <= '0;
        quo     <= '0;
        bit_idx <= ($clog2(RECIP_W+1))'(RECIP_W - 1);
        busy    <= 1'b1;
      end else if (busy) begin
        // one restoring-division step per cycle, MSB first
        if (rem_shift >= {1'b0, half}) begin
          rem <= RECIP_W'(rem_shift - {1'b0, half});
          quo <= {quo[RECIP_W-3:0], 1'b1};
        end else begin
          rem <= RECIP_W'(rem_shift);
          quo <= {quo[RECIP_W-3:0], 1'b0};
        end
        if (bit_idx == 0) begin
          busy <= 1'b0;
          done <= 1'b1;
          recip <= (half == 0) ? '0
                 : ((rem_shift >= {1'b0, half}) ? {quo[RECIP_W-2:0], 1'b1}
                                                : {quo[RECIP_W-2:0], 1'b0});
        end else begin
          bit_idx <= bit_idx - 1'b1;
        end
      end
    end
  end

endmodule
