// tb_cm_controller: runs the sequencer (3 iterations) against a behavioural
// environment with random delays: the reference-time unit answers `done`,
// the stream pipeline stays busy, the gradient unit answers `grad_valid` and
// the flow unit `done` after random times. Every control pulse is logged as
// a letter and each batch's log must read
//     B  F  (S G U) x ITERS  R  V
// (batch clear, ref finish, stream start, gradient start, flow update, ROI
// step, result). Also checked: ev_ready only while collecting and never
// while optimising, grad_start only once the pipeline is idle, and the
// iteration count.
module tb_cm_controller;
  localparam int IT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ev_valid = 0, ev_last = 0, ev_ready;
  logic batch_clear, ref_finish, ref_done = 0;
  logic pipe_busy;
  logic sum_clear, reader_start, grad_start, grad_valid = 0, flow_done = 0, flow_init;
  logic roi_step, result_valid, optimising;
  logic [1:0] iter;
  string log_s = "";
  int checks = 0, failures = 0;
  int busy_left = 0, ref_left = -1, grad_left = -1, flow_left = -1;

  cm_controller #(.ITERS(IT)) dut (.*);

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

  // environment and monitor
  always @(posedge clk) begin
    if (rst_n) begin
      if (batch_clear) log_s = {log_s, "B"};
      if (ref_finish) log_s = {log_s, "F"};
      if (reader_start) log_s = {log_s, "S"};
      if (grad_start) log_s = {log_s, "G"};
      if (flow_done) log_s = {log_s, "U"};
      if (roi_step) log_s = {log_s, "R"};
      if (result_valid) log_s = {log_s, "V"};
      if (ev_ready) check(!optimising, "ready while optimising");
      if (grad_start) check(!pipe_busy && busy_left == 0, "gradient started while busy");
      if (reader_start) check(sum_clear, "sum_clear with stream start");
      if (batch_clear) check(flow_init, "flow_init with batch clear");
      if (roi_step) check(int'(iter) == IT, $sformatf("iteration count %0d", iter));
      // reference time unit
      ref_done <= (ref_left == 0);
      if (ref_finish) ref_left <= $urandom_range(1, 40);
      else if (ref_left >= 0) ref_left <= ref_left - 1;
      // stream pipeline
      if (reader_start) busy_left <= $urandom_range(1, 30);
      else if (busy_left > 0) busy_left <= busy_left - 1;
      // gradient unit
      grad_valid <= (grad_left == 0);
      if (grad_start) grad_left <= $urandom_range(1, 20);
      else if (grad_left >= 0) grad_left <= grad_left - 1;
      // flow unit
      flow_done <= (flow_left == 0);
      if (grad_valid) flow_left <= 1;
      else if (flow_left >= 0) flow_left <= flow_left - 1;
    end
  end
  assign pipe_busy = (busy_left > 0);

  initial begin
    string want;
    want = "BF";
    for (int i = 0; i < IT; i++) want = {want, "SGU"};
    want = {want, "RV"};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 5; b++) begin
      int n, accepted;
      n = $urandom_range(1, 12);
      accepted = 0;
      while (accepted < n) begin
        ev_valid = ($urandom_range(0, 3) != 0);
        ev_last = (accepted == n - 1);
        @(posedge clk);
        if (ev_valid && ev_ready) accepted++;
        @(negedge clk);
      end
      ev_valid = 1; ev_last = 0;   // next batch waiting: must be stalled
      while (!result_valid) begin
        check(!ev_ready, "input accepted during optimisation");
        @(negedge clk);
      end
      ev_valid = 0;
      @(negedge clk);
      check(log_s == want || log_s == {"B", want}, $sformatf("batch %0d log %s want %s", b, log_s, want));
      log_s = "";
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
