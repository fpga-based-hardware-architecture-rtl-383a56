// tb_event_reader: fills a small event buffer with random words and starts
// passes of random length (including zero); checks that the words come out
// in address order, one per cycle, the first one three cycles after
// `start`, exactly n of them, and that `busy` falls once the pass is over.
module tb_event_reader;
  import cm_pkg::*;
  localparam int DEPTH = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0;
  logic [5:0] count = '0;
  logic rd_en, out_valid, busy;
  logic [4:0] rd_addr;
  roi_event_t rd_data, out_ev;
  logic we = 0;
  logic [4:0] wa = '0;
  roi_event_t wd = '0;
  roi_event_t mem_ref [DEPTH];
  int checks = 0, failures = 0;

  bram_sdp #(.DEPTH(DEPTH), .WIDTH($bits(roi_event_t))) u_buf (
    .clk, .wr_en (we), .wr_addr (wa), .wr_data (wd), .rd_en, .rd_addr, .rd_data);
  event_reader #(.EV_DEPTH(DEPTH)) dut (.*);

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
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; wa = 5'(i);
      wd = '{t: ts_t'($urandom), x: coord_t'($urandom), y: coord_t'($urandom)};
      mem_ref[i] = wd;
    end
    @(negedge clk);
    we = 0;
    rst_n = 1;
    @(negedge clk);
    for (int p = 0; p < 12; p++) begin
      int n, got, cyc, first;
      n = (p == 0) ? 0 : (p == 1) ? DEPTH : $urandom_range(1, DEPTH);
      count = 6'(n); start = 1;
      @(negedge clk);
      start = 0;
      got = 0; cyc = 1; first = -1;
      while (busy && cyc < 100) begin
        if (out_valid) begin
          if (first < 0) first = cyc;
          check(out_ev == mem_ref[got], $sformatf("pass %0d word %0d", p, got));
          check(cyc == first + got, "one word per cycle");
          got++;
        end
        @(negedge clk);
        cyc++;
      end
      check(got == n, $sformatf("pass %0d: %0d words, want %0d", p, got, n));
      if (n > 0) check(first == 3, $sformatf("first word after %0d cycles", first));
      check(cyc == ((n > 0) ? n + 3 : 2), $sformatf("busy for %0d cycles (n=%0d)", cyc, n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
