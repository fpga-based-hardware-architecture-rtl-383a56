// bram_sdp: simple dual-port block RAM, one write port and one read port on
// a single clock.
//
// The read is registered: rd_data holds mem[rd_addr] one cycle after rd_en.
// When the same address is read and written in one cycle the read returns
// the old contents (read-first). That behaviour is what the accumulator's
// forwarding buffer is designed around.
//
// Block RAM cannot be cleared by a reset, so there is no reset here. The
// contents start at zero, as an FPGA configuration would load them (INIT_ZERO),
// and the accumulation banks are cleared afterwards by writing zero behind
// each read. The design uses this one RAM for the event buffer and for the
// twelve accumulation banks.
module bram_sdp #(
  parameter int unsigned DEPTH     = 1024,
  parameter int unsigned WIDTH     = 32,
  parameter bit          INIT_ZERO = 1'b1,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  initial begin
    if (INIT_ZERO) begin
      for (int i = 0; i < int'(DEPTH); i++) mem[i] = '0;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
