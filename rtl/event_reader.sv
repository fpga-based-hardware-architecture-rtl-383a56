// event_reader: replays the events stored in the event buffer, once per
// optimisation iteration.
//
// A `start` pulse with `count` = n stored events makes it issue buffer reads
// for addresses 0 .. n-1, one per cycle. The buffer answers one cycle later;
// the reader forwards that word as out_ev with out_valid. `busy` is high from
// the start pulse until the last event has been forwarded. With n = 0 it
// forwards nothing and is busy for one cycle only.
//
// Timing: the first event leaves 3 cycles after `start` (address register,
// RAM read, output register), then one per cycle. Reading the buffer back each iteration
// follows the paper; the address counter and this handshake are this design's
// choice.
module event_reader
  import cm_pkg::*;
#(
  parameter int unsigned EV_DEPTH = 8192,
  localparam int unsigned EAW = $clog2(EV_DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [EAW:0]   count,
  // event buffer read port
  output logic           rd_en,
  output logic [EAW-1:0] rd_addr,
  input  roi_event_t     rd_data,
  // event stream towards the warping unit
  output logic           out_valid,
  output roi_event_t     out_ev,
  output logic           busy
);

  logic [EAW:0] idx, n;
  logic         run, rd_pend;

  always_comb begin
    rd_en   = run && (idx < n);
    rd_addr = EAW'(idx);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx       <= '0;
      n         <= '0;
      run       <= 1'b0;
      rd_pend   <= 1'b0;
      out_valid <= 1'b0;
      out_ev    <= '0;
    end else begin
      rd_pend   <= rd_en;
      out_valid <= rd_pend;
      if (rd_pend) out_ev <= rd_data;
      if (start) begin
        idx <= '0;
        n   <= count;
        run <= 1'b1;
      end else if (run) begin
        if (idx < n) idx <= idx + 1'b1;
        else         run <= 1'b0;
      end
    end
  end

  assign busy = start || run || rd_pend || out_valid;

endmodule
