// pixel_accumulator: accumulates contributions into one block-RAM bank of an
// image (the IWE or one of its two derivative images), and reads the bank
// back while clearing it.
//
// Accumulation is a three-stage read-modify-write, one contribution per
// cycle:
//   stage 1  the address goes to the RAM read port
//   stage 2  the value read is added to the incoming contribution
//   stage 3  the sum is written back to the same address
// A contribution to an address that is still in flight would read a stale
// value, so the last three sums and their addresses are kept in a register
// buffer. In stage 2 the newest buffer entry whose address matches replaces
// the RAM value (`fwd_hit` pulses when that happens).
//
// Readout: rd_en with rd_addr reads a word; rd_valid/rd_data present it one
// cycle later, and in that same cycle a zero is written to the address, so
// the bank is empty again when the readout pass ends. Block RAM has no reset;
// the bank relies on starting at zero (see bram_sdp) and on this clearing.
// Readout and accumulation must not overlap; an assertion checks this.
//
// The three stages, the three-entry forwarding buffer and the clear-behind-
// read follow the paper; port multiplexing and the handshake are this
// design's choice.
module pixel_accumulator
  import cm_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // contributions from bilinear voting
  input  logic          in_valid,
  input  logic [AW-1:0] in_addr,
  input  acc_t          in_val,
  // read-and-clear port for the gradient unit
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic          rd_valid,
  output acc_t          rd_data,
  output logic          busy,
  output logic          fwd_hit
);

  localparam int NFWD = 3;

  typedef struct packed {
    logic          v;
    logic [AW-1:0] addr;
    acc_t          val;
  } fwd_t;

  // RAM ports
  logic          ram_we, ram_re;
  logic [AW-1:0] ram_waddr, ram_raddr;
  acc_t          ram_wdata, ram_q;

  // pipeline
  logic          s1_v;
  logic [AW-1:0] s1_addr;
  acc_t          s1_val;
  logic          s2_v;
  logic [AW-1:0] s2_addr;
  acc_t          s2_sum;
  fwd_t          fwd [NFWD];
  logic          clr_v;
  logic [AW-1:0] clr_addr;

  acc_t base;
  logic hit;

  bram_sdp #(.DEPTH(DEPTH), .WIDTH(ACC_W), .INIT_ZERO(1'b1)) u_ram (
    .clk     (clk),
    .wr_en   (ram_we),
    .wr_addr (ram_waddr),
    .wr_data (ram_wdata),
    .rd_en   (ram_re),
    .rd_addr (ram_raddr),
    .rd_data (ram_q)
  );

  always_comb begin
    ram_re    = in_valid || rd_en;
    ram_raddr = in_valid ? in_addr : rd_addr;
    ram_we    = (s2_v || clr_v) && rst_n;  // no bank write while in reset
    ram_waddr = s2_v ? s2_addr : clr_addr;
    ram_wdata = s2_v ? s2_sum : '0;
  end

  // stage 2 operand: newest matching buffered sum, else the RAM word
  always_comb begin
    base = ram_q;
    hit  = 1'b0;
    for (int k = NFWD - 1; k >= 0; k--) begin
      if (fwd[k].v && fwd[k].addr == s1_addr) begin
        base = fwd[k].val;
        hit  = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_addr <= '0; s1_val <= '0;
      s2_v <= 1'b0; s2_addr <= '0; s2_sum <= '0;
      clr_v <= 1'b0; clr_addr <= '0;
      rd_valid <= 1'b0;
      fwd_hit <= 1'b0;
      for (int k = 0; k < NFWD; k++) fwd[k] <= '0;
    end else begin
      // stage 1
      s1_v    <= in_valid;
      s1_addr <= in_addr;
      s1_val  <= in_val;
      // stage 2
      s2_v    <= s1_v;
      s2_addr <= s1_addr;
      s2_sum  <= base + s1_val;
      fwd_hit <= s1_v && hit;
      fwd[0]  <= '{v: s1_v && !rd_en, addr: s1_addr, val: base + s1_val};
      for (int k = 1; k < NFWD; k++) fwd[k] <= rd_en ? '0 : fwd[k-1];
      // readout: data next cycle, zero written behind it
      clr_v    <= rd_en;
      clr_addr <= rd_addr;
      rd_valid <= rd_en;
    end
  end

  assign rd_data = ram_q;
  assign busy    = s1_v || s2_v;

  // readout and accumulation share the RAM ports and must not overlap
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) !(in_valid && rd_en))
    else $error("pixel_accumulator: contribution during readout");
  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n) !(s2_v && clr_v))
    else $error("pixel_accumulator: write collision");

endmodule
