// tb_event_warp: random events, reference times, scale factors and
// velocities; checks dt = clamp((t - t_ref) * recip >>> 16) and
// x' = x*256 - (dt*vx >>> 19), y' likewise, computed here with plain
// integer arithmetic, and the 4-cycle latency at one event per cycle.
module tb_event_warp;
  import cm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid, busy;
  roi_event_t in_ev = '0;
  ts_t t_ref = '0;
  recip_t recip = '0;
  vel_t vx = '0, vy = '0;
  warped_t out_w;
  int checks = 0, failures = 0, n_clamp = 0;
  longint exp_dt [$], exp_x [$], exp_y [$];
  int sent_cyc [$];
  int cyc = 0;

  event_warp dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    cyc++;
    if (rst_n && out_valid) begin
      longint d, x, y; int c;
      d = exp_dt.pop_front(); x = exp_x.pop_front(); y = exp_y.pop_front();
      c = sent_cyc.pop_front();
      check(longint'(out_w.dt) == d && longint'(out_w.xw) == x && longint'(out_w.yw) == y,
            $sformatf("dt %0d/%0d x %0d/%0d y %0d/%0d", out_w.dt, d, out_w.xw, x, out_w.yw, y));
      check(cyc - c == 4, $sformatf("latency %0d", cyc - c));
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 20; b++) begin
      longint half;
      half  = longint'($urandom_range(1, 1 << (b + 4)));
      t_ref = ts_t'($urandom_range(1 << 24, 1 << 30));
      recip = recip_t'((longint'(1) << 31) / half);
      vx = vel_t'($signed($urandom_range(0, 1 << 20)) - (1 << 19));
      vy = vel_t'($signed($urandom_range(0, 1 << 20)) - (1 << 19));
      for (int k = 0; k < 50; k++) begin
        longint t, dt, p;
        t = longint'(t_ref) + longint'($urandom_range(0, 32'(2 * half + 2))) - half - 1;
        @(negedge clk);
        in_valid = ($urandom_range(0, 3) != 0);
        in_ev = '{t: ts_t'(t), x: coord_t'($urandom_range(0, 63)), y: coord_t'($urandom_range(0, 63))};
        p = ((t - longint'(t_ref)) * longint'(recip)) >>> 16;
        dt = p;
        if (dt > 32768) begin dt = 32768; n_clamp++; end
        if (dt < -32768) begin dt = -32768; n_clamp++; end
        if (in_valid) begin
          exp_dt.push_back(dt);
          exp_x.push_back((longint'(in_ev.x) <<< 8) - ((dt * longint'(vx)) >>> 19));
          exp_y.push_back((longint'(in_ev.y) <<< 8) - ((dt * longint'(vy)) >>> 19));
          sent_cyc.push_back(cyc + 1);
        end
      end
      @(negedge clk);
      in_valid = 0;
      repeat (6) @(negedge clk);
    end
    check(exp_dt.size() == 0, "all events came out");
    check(n_clamp > 0, "clamping exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
