// tb_ref_time_calc: random batches of timestamps (in random order, with a
// few degenerate single-time batches); checks t_ref = t1 + floor((tN-t1)/2),
// recip = floor(2^31 / ceil((tN-t1)/2)) (0 for a zero span), and that `done`
// pulses exactly 33 cycles after `finish`.
module tb_ref_time_calc;
  import cm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, in_valid = 0, finish = 0;
  ts_t in_t = '0, t_ref;
  recip_t recip;
  logic done, busy;
  int checks = 0, failures = 0;

  ref_time_calc dut (.*);

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

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 40; b++) begin
      longint tmin, tmax, base, span, rng, half, exp_ref, exp_rec;
      int lat;
      clear = 1; @(negedge clk); clear = 0;
      base = longint'($urandom);
      span = (b % 8 == 0) ? 0 : longint'($urandom_range(1, 1 << (b % 24 + 1)));
      if (base + span > 64'hFFFF_FFFF) base = 64'hFFFF_FFFF - span;
      tmin = -1; tmax = -1;
      for (int k = 0; k < 20; k++) begin
        longint t;
        t = base + longint'($urandom_range(0, 32'(span)));
        if (k == 3) t = base;
        if (k == 11) t = base + span;
        in_valid = 1; in_t = ts_t'(t);
        if (tmin < 0 || t < tmin) tmin = t;
        if (tmax < 0 || t > tmax) tmax = t;
        @(negedge clk);
      end
      in_valid = 0;
      rng = tmax - tmin;
      exp_ref = tmin + rng / 2;
      half = (rng + 1) / 2;
      exp_rec = (half == 0) ? 0 : (longint'(1) << 31) / half;
      finish = 1; @(negedge clk); finish = 0;
      lat = 1;
      while (!done && lat < 100) begin @(negedge clk); lat++; end
      check(lat == 33, $sformatf("done latency %0d", lat));
      check(longint'(t_ref) == exp_ref, $sformatf("t_ref %0d want %0d", t_ref, exp_ref));
      check(longint'(recip) == exp_rec, $sformatf("recip %0d want %0d (half %0d)", recip, exp_rec, half));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
