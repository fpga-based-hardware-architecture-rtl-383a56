// tb_cm_top_full: the CM tracker at its default size (64x64 ROI, 8192-entry
// event buffer, 100 iterations) on the workload the design targets: batches
// of N = 5000 events of which about 800 fall inside the ROI (a square outline
// moving at constant velocity, plus noise elsewhere on a 240x180 sensor).
// Every iteration's velocity, the event count and the moved ROI are compared
// with the bit-exact reference in cm_ref_pkg, and the cycles per batch with
// N + 35 + ITERS*(n + Np/4 + 23); at 5000/800 events that is about 190,000
// cycles, 0.9 ms at 210 MHz.
module tb_cm_top_full;
  import cm_pkg::*;
  import cm_ref_pkg::*;

  // the defaults of cm_top
  localparam int RW = 64, RH = 64, DEPTH = 8192, IT = 100;
  localparam int ETA_V = 262144;
  localparam int NP = RW * RH;
  localparam int OBJ = RW * 3 / 8, OFS = RW * 5 / 16;  // square outline side and offset

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ev_valid, ev_ready, ev_last, roi_load;
  event_t ev;
  logic signed [15:0] roi_init_x, roi_init_y, roi_x, roi_y;
  logic result_valid, overflow, optimising;
  vel_t vx, vy;
  logic [$clog2(DEPTH):0] n_events;

  cm_top dut (.*);

  int checks = 0, failures = 0;
  int n_filtered = 0, n_overflow = 0, n_stall = 0, n_fwd = 0, n_vote_out = 0;
  int n_roi_move = 0, n_empty = 0;
  longint cyc = 0;
  longint c_first = -1, c_result = -1;
  bit     in_batch = 0;
  always @(posedge clk) begin
    cyc++;
    if (ev_valid && ev_ready && !in_batch) begin c_first = cyc; in_batch = 1; end
    if (result_valid) begin c_result = cyc; in_batch = 0; end
  end
  always @(posedge clk) if (ev_valid && !ev_ready) n_stall++;
  always @(posedge clk) n_fwd += $countones(dut.acc_hit);

  cm_ref model;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // per-iteration velocity check
  int iter_seen;
  always @(posedge clk) begin
    if (rst_n && dut.flow_done && model != null) begin
      if (iter_seen < model.hist_vx.size()) begin
        check(longint'(dut.vx) == model.hist_vx[iter_seen] &&
              longint'(dut.vy) == model.hist_vy[iter_seen],
              $sformatf("iteration %0d velocity dut=(%0d,%0d) ref=(%0d,%0d)", iter_seen,
                        dut.vx, dut.vy, model.hist_vx[iter_seen], model.hist_vy[iter_seen]));
      end
      iter_seen++;
    end
  end

  // build one batch: kind 0 normal, 1 overflow, 2 empty ROI
  task automatic make_batch(input int kind, input int n_total, input int n_in,
                            input int vtx, input int vty,
                            ref longint bt[$], ref int bx[$], ref int by[$]);
    int rx0, ry0;
    longint t0;
    rx0 = model.roi_x(); ry0 = model.roi_y();
    t0 = 1000 + cyc * 3;
    bt.delete(); bx.delete(); by.delete();
    for (int k = 0; k < n_total; k++) begin
      longint t; int x, y;
      t = t0 + longint'(k) * 2 + longint'($urandom_range(0, 1));
      if (kind != 2 && $urandom_range(0, n_total - 1) < n_in) begin
        // point on an OBJ x OBJ square outline centred in the ROI, moving
        int u, side; real s;
        u = $urandom_range(0, OBJ); side = $urandom_range(0, 3);
        s = (real'(k) - real'(n_total) / 2.0) / (real'(n_total) / 2.0);
        case (side)
          0: begin x = u; y = 0; end
          1: begin x = u; y = OBJ; end
          2: begin x = 0; y = u; end
          default: begin x = OBJ; y = u; end
        endcase
        x = rx0 + OFS + x + int'(real'(vtx) * s);
        y = ry0 + OFS + y + int'(real'(vty) * s);
        if (x < 0) x = 0;
        if (y < 0) y = 0;
      end else begin
        do begin
          x = $urandom_range(0, 239); y = $urandom_range(0, 179);
        end while (x >= rx0 && x < rx0 + RW && y >= ry0 && y < ry0 + RH);
        n_filtered++;
      end
      bt.push_back(t); bx.push_back(x); by.push_back(y);
    end
  endtask

  task automatic run_batch(input int kind, input int n_total, input int n_in,
                           input int vtx, input int vty);
    longint bt[$]; int bx[$], by[$];
    longint c_start, c_end, expect_cyc;
    int rox, roy, n_exp;
    make_batch(kind, n_total, n_in, vtx, vty, bt, bx, by);
    model.begin_batch();
    foreach (bt[k]) model.push(bt[k], bx[k], by[k]);
    model.optimise();
    rox = roi_x; roy = roi_y;
    iter_seen = 0;
    n_exp = model.ev_t.size();
    // stream the batch, one event per cycle while ready
    c_start = -1;
    foreach (bt[k]) begin
      ev_valid <= 1'b1;
      ev <= '{t: ts_t'(bt[k]), x: coord_t'(bx[k]), y: coord_t'(by[k]), p: 1'($urandom)};
      ev_last <= (k == bt.size() - 1);
      @(posedge clk);
      while (!ev_ready) @(posedge clk);
    end
    ev_valid <= 1'b0;
    ev_last  <= 1'b0;
    // let the next batch's first event wait for a few cycles (input stall)
    ev_valid <= 1'b1;
    ev <= '0;
    while (!result_valid) @(posedge clk);
    ev_valid <= 1'b0;
    @(posedge clk);
    c_start = c_first;
    c_end = c_result;
    check(int'(n_events) == n_exp, $sformatf("n_events %0d ref %0d", n_events, n_exp));
    check(overflow == model.ovf, "overflow flag");
    check(longint'(vx) == model.vx && longint'(vy) == model.vy,
          $sformatf("final v dut=(%0d,%0d) ref=(%0d,%0d)", vx, vy, model.vx, model.vy));
    check(int'(roi_x) == model.roi_x() && int'(roi_y) == model.roi_y(),
          $sformatf("roi dut=(%0d,%0d) ref=(%0d,%0d)", roi_x, roi_y, model.roi_x(), model.roi_y()));
    check(iter_seen == IT, $sformatf("iterations %0d", iter_seen));
    expect_cyc = n_total + 35 + IT * (n_exp + NP / 4 + 23);
    if (n_exp == 0) expect_cyc = n_total + 35 + IT * (NP / 4 + 13);
    check(c_end - c_start == expect_cyc,
          $sformatf("batch cycles %0d expected %0d", c_end - c_start, expect_cyc));
    if (model.ovf) n_overflow++;
    if (n_exp == 0) n_empty++;
    if (model.votes_out > 0) n_vote_out++;
    if (roi_x != rox || roi_y != roy) n_roi_move++;
    $display("batch kind=%0d N=%0d n=%0d v=(%0d,%0d) roi=(%0d,%0d) cycles=%0d",
             kind, n_total, n_exp, vx, vy, roi_x, roi_y, c_end - c_start);
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = new(RW, RH, DEPTH, IT, ETA_V);
    ev_valid = 0; ev_last = 0; ev = '0;
    roi_load = 0; roi_init_x = 40; roi_init_y = 30;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    roi_load <= 1'b1;
    @(posedge clk);
    roi_load <= 1'b0;
    model.load_roi(40, 30);
    @(posedge clk);
    // the evaluated workload: N = 5000 events, about 800 inside a 64x64 ROI
    run_batch(0, 5000, 800, 5, -3);
    run_batch(0, 5000, 800, -4, 2);
    $display("mechanisms: filtered=%0d stall=%0d fwd_hits=%0d vote_out=%0d roi_move=%0d",
             n_filtered, n_stall, n_fwd, n_vote_out, n_roi_move);
    check(n_filtered > 0, "no event filtered out");
    check(n_fwd > 0, "no forwarding hit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
