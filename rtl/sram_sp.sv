// sram_sp -- single-port synchronous SRAM, written as an array.
//
// One access per cycle: en & we writes the 32-bit lanes selected by wstrb,
// en & !we reads; read data appears in the following cycle and holds until
// the next read.  The default size, 8192 words of 128 bits, is the chip's
// single-port polynomial memory (built there from four 32-bit-wide macros);
// with DEPTH = 4096 it is the 64 KB Cortex-M0 memory.  Contents are not
// reset.  Stands in for a foundry memory macro; sizes follow the paper,
// the lane write enable is this design's choice.
module sram_sp #(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned W     = 128,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            en,
  input  logic            we,
  input  logic [AW-1:0]   addr,
  input  logic [W-1:0]    wdata,
  input  logic [W/32-1:0] wstrb,
  output logic [W-1:0]    rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int l = 0; l < W / 32; l++)
          if (wstrb[l]) mem[addr][l*32 +: 32] <= wdata[l*32 +: 32];
      end else begin
        rdata <= mem[addr];
      end
    end
  end
endmodule
