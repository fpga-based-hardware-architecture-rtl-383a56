// tb_bram_sdp: checks the simple dual-port RAM: contents start at zero,
// random writes are read back one cycle after the read request, a read that
// collides with a write to the same address returns the old word, and a
// disabled read port holds its output.
module tb_bram_sdp;
  localparam int DEPTH = 64, WIDTH = 20;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [5:0] wr_addr = 0, rd_addr = 0;
  logic [WIDTH-1:0] wr_data = 0, rd_data;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  bram_sdp #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) ref_mem[i] = '0;
    @(negedge clk);
    // initial contents are zero
    for (int i = 0; i < DEPTH; i += 7) begin
      rd_en = 1; rd_addr = 6'(i);
      @(negedge clk);
      check(rd_data == 0, $sformatf("init addr %0d = %0h", i, rd_data));
    end
    rd_en = 0;
    // random traffic
    for (int n = 0; n < 1000; n++) begin
      logic [WIDTH-1:0] expect_q;
      wr_en = 1'($urandom); wr_addr = 6'($urandom); wr_data = WIDTH'($urandom);
      rd_en = 1'($urandom);
      rd_addr = ($urandom_range(0, 3) == 0) ? wr_addr : 6'($urandom);
      expect_q = rd_en ? ref_mem[rd_addr] : rd_data;   // read-first
      @(negedge clk);
      check(rd_data == expect_q, $sformatf("read %0d got %0h want %0h", rd_addr, rd_data, expect_q));
      if (wr_en) ref_mem[wr_addr] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
