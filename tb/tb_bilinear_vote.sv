// tb_bilinear_vote: random warped events in and around an 8x8 ROI; for each
// of the four neighbour pixels the expected weight (products of the
// fractional distances) and derivative terms are worked out here, the pixel
// is mapped to bank 2*x[0]+y[0] and address (y>>1)*4 + (x>>1), and the
// outputs of every bank lane are compared, including the invalid flag of
// neighbours outside the ROI and the 3-cycle latency.
module tb_bilinear_vote;
  import cm_pkg::*;
  localparam int RW = 8, RH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, busy;
  warped_t in_w = '0;
  logic [3:0] out_valid;
  logic [3:0] out_addr [4];
  vote_t out_vote [4];
  int checks = 0, failures = 0, n_out_roi = 0, cyc = 0;

  typedef struct {
    bit   v [4];
    int   addr [4];
    longint iw [4], gx [4], gy [4];
    int   c;
  } exp_t;
  exp_t q [$];

  bilinear_vote #(.ROI_W(RW), .ROI_H(RH)) dut (.*);

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
    if (rst_n && (|out_valid || (q.size() > 0 && cyc - q[0].c == 3))) begin
      exp_t e;
      e = q.pop_front();
      check(cyc - e.c == 3, $sformatf("latency %0d", cyc - e.c));
      for (int k = 0; k < 4; k++) begin
        check(out_valid[k] == e.v[k], $sformatf("bank %0d valid", k));
        if (e.v[k])
          check(int'(out_addr[k]) == e.addr[k] && longint'(out_vote[k].iw) == e.iw[k] &&
                longint'(out_vote[k].gx) == e.gx[k] && longint'(out_vote[k].gy) == e.gy[k],
                $sformatf("bank %0d: addr %0d/%0d iw %0d/%0d gx %0d/%0d gy %0d/%0d", k,
                          out_addr[k], e.addr[k], out_vote[k].iw, e.iw[k],
                          out_vote[k].gx, e.gx[k], out_vote[k].gy, e.gy[k]));
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      longint xw, yw, dt, fx, fy, ix, iy;
      exp_t e;
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      xw = longint'($urandom_range(0, (RW + 2) * 256)) - 256;
      yw = longint'($urandom_range(0, (RH + 2) * 256)) - 256;
      dt = longint'($urandom_range(0, 65536)) - 32768;
      in_w = '{dt: dt_t'(dt), xw: pos_t'(xw), yw: pos_t'(yw)};
      if (!in_valid) continue;
      ix = xw >>> 8; iy = yw >>> 8; fx = xw - ix * 256; fy = yw - iy * 256;
      for (int k = 0; k < 4; k++) e.v[k] = 0;
      for (int a = 0; a < 2; a++) begin
        for (int b = 0; b < 2; b++) begin
          longint px, py, wx, wy;
          int k;
          px = ix + a; py = iy + b;
          k = int'(2 * (px & 1) + (py & 1));
          wx = a ? fx : 256 - fx;     // weight along x
          wy = b ? fy : 256 - fy;     // weight along y
          e.v[k]    = (px >= 0 && px < RW && py >= 0 && py < RH);
          if (!e.v[k]) n_out_roi++;
          e.addr[k] = int'((py >>> 1) * (RW / 2) + (px >>> 1));
          e.iw[k]   = wx * wy;
          // d w / d dx = +-wy, times -dt; d w / d dy = +-wx, times -dt
          e.gx[k]   = (a ? -1 : 1) * ((wy * dt) >>> 7);
          e.gy[k]   = (b ? -1 : 1) * ((wx * dt) >>> 7);
        end
      end
      e.c = cyc + 1;
      q.push_back(e);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (6) @(negedge clk);
    check(q.size() == 0, "all events came out");
    check(n_out_roi > 0, "neighbours outside the ROI exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
