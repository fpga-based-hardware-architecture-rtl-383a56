// cm_controller: sequences one batch of the contrast-maximisation tracker.
//
// Phases of a batch:
//   COLLECT   the event stream is accepted (ev_ready high), one event per
//             cycle, until the event flagged `last`; the ROI filter stores
//             the events inside the ROI and the reference-time unit tracks
//             the batch's time span
//   REF       the reference time and the dt scale are finished
//   ITERS times:
//     STREAM  sum_clear, then the stored events are replayed through warping,
//             bilinear voting and accumulation
//     DRAIN   wait until reader, warp, voting and accumulators are all idle
//     GRAD    read-and-clear all banks and compute the gradient
//     FLOW    apply the gradient-ascent step to (vx, vy)
//   ROI       move the ROI by the final velocity; result_valid pulses
// and then the next batch is collected. The input is not accepted while a
// batch is being optimised. Per iteration this costs
// n + Np/4 + (fixed pipeline latencies) cycles, the structure of the paper's
// cycle model.
//
// The phase order, the fixed iteration count (100 by default) and the
// stalled input follow the paper; the `last` flag that ends a batch and the
// busy-based drain detection are this design's choice.
module cm_controller #(
  parameter int unsigned ITERS = 100
) (
  input  logic        clk,
  input  logic        rst_n,
  // event stream handshake
  input  logic        ev_valid,
  input  logic        ev_last,
  output logic        ev_ready,
  // preprocessing
  output logic        batch_clear,
  output logic        ref_finish,
  input  logic        ref_done,
  // iteration
  output logic        sum_clear,
  output logic        reader_start,
  input  logic        pipe_busy,
  output logic        grad_start,
  input  logic        grad_valid,
  input  logic        flow_done,
  output logic        flow_init,
  // batch end
  output logic        roi_step,
  output logic        result_valid,
  output logic [$clog2(ITERS+1)-1:0] iter,
  output logic        optimising
);

  typedef enum logic [3:0] {
    S_START, S_COLLECT, S_REF_GO, S_REF_WAIT, S_ITER, S_STREAM,
    S_GRAD, S_GRAD_WAIT, S_FLOW, S_ROI, S_DONE
  } state_t;

  state_t state;

  always_comb begin
    ev_ready     = (state == S_COLLECT);
    batch_clear  = (state == S_START);
    flow_init    = (state == S_START);
    ref_finish   = (state == S_REF_GO);
    sum_clear    = (state == S_ITER);
    reader_start = (state == S_ITER);
    grad_start   = (state == S_GRAD);
    roi_step     = (state == S_ROI);
    result_valid = (state == S_DONE);
    optimising   = (state != S_START) && (state != S_COLLECT);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_START;
      iter  <= '0;
    end else begin
      unique case (state)
        S_START:     begin iter <= '0; state <= S_COLLECT; end
        S_COLLECT:   if (ev_valid && ev_last) state <= S_REF_GO;
        S_REF_GO:    state <= S_REF_WAIT;
        S_REF_WAIT:  if (ref_done) state <= S_ITER;
        S_ITER:      state <= S_STREAM;
        S_STREAM:    if (!pipe_busy) state <= S_GRAD;
        S_GRAD:      state <= S_GRAD_WAIT;
        S_GRAD_WAIT: if (grad_valid) state <= S_FLOW;
        S_FLOW:      if (flow_done) begin
                       if (iter == ($clog2(ITERS+1))'(ITERS - 1)) state <= S_ROI;
                       else                                       state <= S_ITER;
                       iter <= iter + 1'b1;
                     end
        S_ROI:       state <= S_DONE;
        S_DONE:      state <= S_START;
        default:     state <= S_START;
      endcase
    end
  end

endmodule
