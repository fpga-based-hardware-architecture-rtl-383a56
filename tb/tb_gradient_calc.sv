// tb_gradient_calc: random 8x8 images Iw, Gx, Gy are first fed through the
// vote inputs (each pixel value as one vote, so the unit's running sums see
// the image totals), then held in a behavioural model of the twelve banks
// that answers reads one cycle later. The gradient is worked out here as
// 2/Np * sum (Iw - mean Iw)(G - mean G) with the same fixed-point scaling
// and compared, as is the Np/4 + 7 cycle latency. Includes rounds with
// large values that drive the result into saturation.
module tb_gradient_calc;
  import cm_pkg::*;
  localparam int RW = 8, RH = 8, NP = RW * RH, L2P = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic sum_clear = 0, start = 0, rd_en, rd_valid = 0, grad_valid, busy;
  logic [3:0] vote_valid = '0;
  vote_t vote [4];
  logic [3:0] rd_addr;
  vote_t rd_data [4];
  grad_t grad_x, grad_y;
  longint iw [NP], gx [NP], gy [NP];
  int checks = 0, failures = 0, n_sat = 0;

  gradient_calc #(.ROI_W(RW), .ROI_H(RH)) dut (.*);

  // bank model: pixel (px, py) in bank 2*px[0]+py[0] at address (py>>1)*4+(px>>1)
  always @(posedge clk) begin
    rd_valid <= rd_en;
    for (int k = 0; k < 4; k++) begin
      int px, py;
      px = 2 * int'(rd_addr[1:0]) + k / 2;
      py = 2 * int'(rd_addr[3:2]) + k % 2;
      rd_data[k].iw <= acc_t'(iw[py * RW + px]);
      rd_data[k].gx <= acc_t'(gx[py * RW + px]);
      rd_data[k].gy <= acc_t'(gy[py * RW + px]);
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 4; k++) vote[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      longint s, sx, sy, mu, mux, muy;
      logic signed [127:0] ax, ay;
      longint ex, ey;
      int lat, range_v;
      range_v = (r < 16) ? 300000 : 2000000000;
      sum_clear = 1;
      @(negedge clk);
      sum_clear = 0;
      s = 0; sx = 0; sy = 0;
      for (int p = 0; p < NP; p++) begin
        iw[p] = longint'($urandom_range(0, range_v));
        gx[p] = longint'($urandom_range(0, 2 * range_v)) - range_v;
        gy[p] = longint'($urandom_range(0, 2 * range_v)) - range_v;
        if (r % 4 == 1) iw[p] = (p % 5 == 0) ? iw[p] : 0;   // sparse image
        s += iw[p]; sx += gx[p]; sy += gy[p];
      end
      // feed the pixels as votes, lane by bank, with random gaps
      for (int p = 0; p < NP; p += 4) begin
        for (int k = 0; k < 4; k++) begin
          vote_valid[k] = 1'b1;
          vote[k] = '{iw: acc_t'(iw[p + k]), gx: acc_t'(gx[p + k]), gy: acc_t'(gy[p + k])};
        end
        @(negedge clk);
        vote_valid = '0;
        if ($urandom_range(0, 1)) @(negedge clk);
      end
      mu = s >>> L2P; mux = sx >>> L2P; muy = sy >>> L2P;
      ax = 0; ay = 0;
      for (int p = 0; p < NP; p++) begin
        ax += 128'(iw[p] - mu) * 128'(gx[p] - mux);
        ay += 128'(iw[p] - mu) * 128'(gy[p] - muy);
      end
      ex = longint'(sat_grad(ax >>> (L2P - 1 + 2 * W_F - GRAD_F)));
      ey = longint'(sat_grad(ay >>> (L2P - 1 + 2 * W_F - GRAD_F)));
      if (ex != longint'(ax >>> (L2P - 1 + 2 * W_F - GRAD_F))) n_sat++;
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!grad_valid && lat < 200) begin @(negedge clk); lat++; end
      check(lat == NP / 4 + 7, $sformatf("latency %0d", lat));
      check(longint'(grad_x) == ex && longint'(grad_y) == ey,
            $sformatf("round %0d grad (%0d,%0d) want (%0d,%0d)", r, grad_x, grad_y, ex, ey));
      @(negedge clk);
      check(!busy, "idle after result");
    end
    check(n_sat > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
