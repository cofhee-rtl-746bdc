// sram_dp -- true dual-port synchronous SRAM, written as an array.
//
// Ports A and B are identical and independent: each does one read or one
// lane-masked write per cycle, read data one cycle later.  Default size is
// the chip's 8192 x 128 dual-port polynomial memory.  Two writes to the same
// word in one cycle are a usage error (checked by an assertion); a read and
// a write of the same word in one cycle return the old word.  Stands in for
// a foundry memory macro; sizes follow the paper, the rest is this design's
// choice.
module sram_dp #(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned W     = 128,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            en_a,
  input  logic            we_a,
  input  logic [AW-1:0]   addr_a,
  input  logic [W-1:0]    wdata_a,
  input  logic [W/32-1:0] wstrb_a,
  output logic [W-1:0]    rdata_a,
  input  logic            en_b,
  input  logic            we_b,
  input  logic [AW-1:0]   addr_b,
  input  logic [W-1:0]    wdata_b,
  input  logic [W/32-1:0] wstrb_b,
  output logic [W-1:0]    rdata_b
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en_a && !we_a) rdata_a <= mem[addr_a];
    if (en_b && !we_b) rdata_b <= mem[addr_b];
    for (int l = 0; l < W / 32; l++) begin
      if (en_a && we_a && wstrb_a[l]) mem[addr_a][l*32 +: 32] <= wdata_a[l*32 +: 32];
      if (en_b && we_b && wstrb_b[l]) mem[addr_b][l*32 +: 32] <= wdata_b[l*32 +: 32];
    end
  end

  assert property (@(posedge clk) !(en_a && we_a && en_b && we_b && addr_a == addr_b));
endmodule
