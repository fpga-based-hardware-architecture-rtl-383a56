// tb_flow_update: random gradients and learning rates; checks
// v <- sat(v + (grad * eta) >>> 28) for both components, visible when `done`
// pulses two cycles after grad_valid, that `init` returns v to zero, and that
// large steps saturate.
module tb_flow_update;
  import cm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic init = 0, grad_valid = 0, done;
  eta_t eta = '0;
  grad_t grad_x = '0, grad_y = '0;
  vel_t vx, vy;
  int checks = 0, failures = 0, n_sat = 0;

  flow_update dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic longint satv(longint v);
    longint mx = (longint'(1) << (VEL_W - 1)) - 1;
    if (v > mx) return mx;
    if (v < -mx - 1) return -mx - 1;
    return v;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint rvx, rvy;
    repeat (2) @(negedge clk);
    rst_n = 1;
    init = 1; @(negedge clk); init = 0;
    rvx = 0; rvy = 0;
    check(vx == 0 && vy == 0, "init clears v");
    for (int n = 0; n < 400; n++) begin
      longint gxv, gyv, e, nx, ny;
      int lat;
      if (n % 50 == 49) begin
        init = 1; @(negedge clk); init = 0;
        rvx = 0; rvy = 0;
        check(vx == 0 && vy == 0, "init clears v");
      end
      gxv = longint'($signed($urandom)) * ((n % 40 == 7) ? 4096 : 1);
      gyv = longint'($signed($urandom)) >>> ($urandom_range(0, 20));
      e   = longint'($urandom_range(0, (1 << ETA_W) - 1));
      eta = eta_t'(e); grad_x = grad_t'(gxv); grad_y = grad_t'(gyv);
      grad_valid = 1;
      @(negedge clk);
      grad_valid = 0;
      nx = rvx + ((128'(gxv) * 128'(e)) >>> (GRAD_F + ETA_F - VEL_F));
      ny = rvy + ((128'(gyv) * 128'(e)) >>> (GRAD_F + ETA_F - VEL_F));
      if (satv(nx) != nx || satv(ny) != ny) n_sat++;
      rvx = satv(nx); rvy = satv(ny);
      lat = 1;
      while (!done && lat < 10) begin @(negedge clk); lat++; end
      check(lat == 2, $sformatf("done after %0d cycles", lat));
      check(longint'(vx) == rvx && longint'(vy) == rvy,
            $sformatf("v (%0d,%0d) want (%0d,%0d)", vx, vy, rvx, rvy));
    end
    check(n_sat > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
