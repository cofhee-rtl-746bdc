// barrett_modmul -- pipelined modular multiplier, r = a * b mod q.
//
// Five register stages, one new operand pair accepted every cycle (II = 1):
//   1  MULT       p    = a * b                       (2W-bit product)
//   2  MULT+SHIFT qhat = (p * mu) >> k               (Barrett quotient estimate)
//   3  MULT       qq   = qhat * q  (low W+2 bits)
//   4  SUB        r    = p - qq    (low W+2 bits, r < 2q)
//   5  correct    out  = r >= q ? r - q : r
// mu = floor(2^k / q) (register BARRETTCTL2, 160 bits) and k (BARRETTCTL1)
// must satisfy q^2 <= 2^k, e.g. k = 2 * bitlength(q); then the estimate is
// at most one below floor(p / q) and one final subtraction suffices.
// Inputs a, b must be below q.  q, mu and k are configuration values and must
// be stable while operands are in flight.
//
// Interface: in_valid/a/b in cycle T give out_valid/r in cycle T+5.  prod is
// the low W bits of the plain product a*b with the same latency, used for
// the non-modular pointwise multiplication.
//
// From the paper: Barrett reduction (chosen over Montgomery), the
// MULT / MULT / BIT SHIFT / SUB structure of its figure, a 160-bit Barrett
// constant, a five-cycle modular multiplication with II = 1.  Own choice:
// the exact split of work over the five stages.
module barrett_modmul #(
  parameter int unsigned W   = 128,
  parameter int unsigned MUW = 160,
  parameter int unsigned KW  = 9
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  input  logic [W-1:0]   q,
  input  logic [MUW-1:0] mu,
  input  logic [KW-1:0]  k,
  output logic           out_valid,
  output logic [W-1:0]   r,
  output logic [W-1:0]   prod
);
  localparam int unsigned PW = 2 * W;        // product width
  localparam int unsigned XW = PW + MUW;     // p * mu width
  localparam int unsigned RW = W + 2;        // remainder working width

  logic [4:0]     vld;
  logic [PW-1:0]  p1, p2;
  logic [RW-1:0]  qh2, p3, qq3, r4;
  logic [W-1:0]   lo3, lo4;
  logic [XW-1:0]  pm;

  assign pm = XW'(p1) * XW'(mu);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[3:0], in_valid};
  end

  always_ff @(posedge clk) begin
    // stage 1
    p1  <= PW'(a) * PW'(b);
    // stage 2
    qh2 <= RW'(pm >> k);
    p2  <= p1;
    // stage 3
    qq3 <= RW'(qh2 * RW'(q));
    p3  <= p2[RW-1:0];
    lo3 <= p2[W-1:0];
    // stage 4
    r4  <= p3 - qq3;
    lo4 <= lo3;
    // stage 5
    r    <= (r4 >= RW'(q)) ? W'(r4 - RW'(q)) : W'(r4);
    prod <= lo4;
  end

  assign out_valid = vld[4];
endmodule
