// tb_roi_filter: random events around a 16x8 ROI at a random (possibly
// negative) corner; checks that exactly the events inside are written, to
// consecutive addresses, with ROI-relative coordinates and their timestamp,
// one cycle after they arrive; that the count stops at the buffer depth and
// the overflow flag rises; and that `clear` restarts the count.
module tb_roi_filter;
  import cm_pkg::*;
  localparam int RW = 16, RH = 8, DEPTH = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, in_valid = 0;
  event_t in_ev = '0;
  logic signed [15:0] roi_x = 0, roi_y = 0;
  logic wr_en;
  logic [3:0] wr_addr;
  roi_event_t wr_data;
  logic [4:0] count;
  logic overflow;
  int checks = 0, failures = 0, n_in = 0, n_out = 0, n_ovf = 0;

  roi_filter #(.ROI_W(RW), .ROI_H(RH), .EV_DEPTH(DEPTH)) dut (.*);

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
    for (int b = 0; b < 6; b++) begin
      int exp_cnt;
      bit exp_ovf;
      roi_x = 16'($signed($urandom_range(0, 240)) - 10);
      roi_y = 16'($signed($urandom_range(0, 180)) - 5);
      clear = 1;
      @(negedge clk);
      clear = 0;
      exp_cnt = 0; exp_ovf = 0;
      for (int k = 0; k < 60; k++) begin
        int x, y; bit ins;
        x = int'(roi_x) + $urandom_range(0, RW + 6) - 3;
        y = int'(roi_y) + $urandom_range(0, RH + 6) - 3;
        if (x < 0) x = 0;
        if (x > 255) x = 255;
        if (y < 0) y = 0;
        if (y > 255) y = 255;
        in_valid = ($urandom_range(0, 4) != 0);
        in_ev = '{t: ts_t'($urandom), x: coord_t'(x), y: coord_t'(y), p: 1'($urandom)};
        ins = in_valid && x >= roi_x && x < roi_x + RW && y >= roi_y && y < roi_y + RH;
        @(negedge clk);
        if (ins && exp_cnt < DEPTH) begin
          n_in++;
          check(wr_en && wr_addr == 4'(exp_cnt) && wr_data.t == in_ev.t &&
                wr_data.x == coord_t'(x - roi_x) && wr_data.y == coord_t'(y - roi_y),
                $sformatf("write of event %0d", k));
          exp_cnt++;
        end else begin
          if (ins) exp_ovf = 1;
          if (in_valid && !ins) n_out++;
          check(!wr_en, $sformatf("no write expected for event %0d", k));
        end
        check(int'(count) == exp_cnt && overflow == exp_ovf, "count/overflow");
      end
      if (exp_ovf) n_ovf++;
      in_valid = 0;
    end
    check(n_in > 0 && n_out > 0 && n_ovf > 0, "coverage of inside/outside/overflow");
    $display("inside=%0d outside=%0d overflow batches=%0d", n_in, n_out, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
