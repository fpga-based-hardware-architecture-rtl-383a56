// tb_roi_update: loads random ROI corners and applies random velocity steps;
// checks that the corner is the rounded-down sum of the start position and
// all steps (kept with 12 fraction bits), so sub-pixel steps add up.
module tb_roi_update;
  import cm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load = 0, update = 0;
  logic signed [15:0] init_x = 0, init_y = 0, roi_x, roi_y;
  vel_t vx = '0, vy = '0;
  int checks = 0, failures = 0;

  roi_update dut (.*);

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
    for (int r = 0; r < 20; r++) begin
      longint px, py;
      init_x = 16'($urandom_range(0, 200)); init_y = 16'($urandom_range(0, 150));
      load = 1; @(negedge clk); load = 0;
      px = longint'(init_x) <<< VEL_F; py = longint'(init_y) <<< VEL_F;
      check(roi_x == init_x && roi_y == init_y, "load");
      for (int n = 0; n < 30; n++) begin
        vx = vel_t'($signed($urandom_range(0, 8 * 4096)) - 4 * 4096);
        vy = vel_t'($signed($urandom_range(0, 4096)) - 2048);   // sub-pixel steps
        update = ($urandom_range(0, 3) != 0);
        if (update) begin px += longint'(vx); py += longint'(vy); end
        @(negedge clk);
        update = 0;
        check(longint'(roi_x) == (px >>> VEL_F) && longint'(roi_y) == (py >>> VEL_F),
              $sformatf("roi (%0d,%0d) want (%0d,%0d)", roi_x, roi_y, px >>> VEL_F, py >>> VEL_F));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
