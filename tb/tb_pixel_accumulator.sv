// tb_pixel_accumulator: streams random signed contributions, one per cycle
// with random gaps, into a 16-word bank, mostly to a few addresses so that
// the same address recurs within one, two and three cycles. After the
// pipeline drains, a readout pass must return the exact sums (worked out
// here), one cycle after each read, and a second pass must return zeros
// (the bank clears itself behind the reads). Forwarding-buffer hits are
// counted and must occur. Several rounds are run back to back.
module tb_pixel_accumulator;
  import cm_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, rd_en = 0, rd_valid, busy, fwd_hit;
  logic [3:0] in_addr = '0, rd_addr = '0;
  acc_t in_val = '0, rd_data;
  longint sums [DEPTH];
  int checks = 0, failures = 0, hits = 0;

  pixel_accumulator #(.DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && fwd_hit) hits++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic readout(input bit expect_zero);
    for (int a = 0; a < DEPTH; a++) begin
      rd_en = 1; rd_addr = 4'(a);
      @(negedge clk);
      rd_en = 0;
      check(rd_valid, "rd_valid one cycle after rd_en");
      check(longint'(rd_data) == (expect_zero ? 0 : sums[a]),
            $sformatf("addr %0d got %0d want %0d", a, rd_data, expect_zero ? 0 : sums[a]));
    end
    @(negedge clk);
    check(!rd_valid, "rd_valid drops");
  endtask

  initial begin
    for (int i = 0; i < DEPTH; i++) sums[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < 8; r++) begin
      for (int n = 0; n < 300; n++) begin
        in_valid = ($urandom_range(0, 5) != 0);
        in_addr  = (r % 2 == 0) ? 4'($urandom_range(0, 2)) : 4'($urandom);
        in_val   = acc_t'($signed($urandom_range(0, 200000)) - 100000);
        if (in_valid) sums[in_addr] += longint'(in_val);
        @(negedge clk);
      end
      in_valid = 0;
      while (busy) @(negedge clk);
      readout(1'b0);
      for (int i = 0; i < DEPTH; i++) sums[i] = 0;
      readout(1'b1);
    end
    $display("forwarding hits=%0d", hits);
    check(hits > 0, "forwarding buffer used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
