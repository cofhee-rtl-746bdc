// pe -- CoFHEE processing element: one Barrett modular multiplier plus a
// modular adder and subtractor, arranged as a radix-2 Cooley-Tukey
// butterfly.
//
// Modes (pe_mode_e), all with II = 1:
//   PE_MODMUL     out0 = a * b mod q      (latency 5; raw=1 gives the low
//                                          128 bits of the plain product a*b)
//   PE_MODADD     out0 = a + b mod q      (latency 1)
//   PE_MODSUB     out0 = a - b mod q      (latency 1)
//   PE_BUTTERFLY  m = b * w mod q; out0 = a + m, out1 = a - m  (latency 6)
// A tag travels with each operand set and comes out with its result, so the
// controller can carry write addresses through the pipeline.  The controller
// must not mix modes of different latency in flight at once (it drains the
// pipeline between commands); an assertion checks that results never collide.
//
// From the paper: one multiplier, one adder/subtractor, the four modes,
// latencies of 1 (add/sub) and 5 (modular multiplication), II = 1, and the
// multiply-then-add/subtract butterfly order.  Own choices: the tag, the
// raw-product option, and the extra register after the butterfly add/sub.
module pe
  import cofhee_pkg::*;
#(
  parameter int unsigned W    = COEF_W,
  parameter int unsigned TAGW = 2 * MEM_AW
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  pe_mode_e        mode,
  input  logic            raw,
  input  logic [W-1:0]    a,
  input  logic [W-1:0]    b,
  input  logic [W-1:0]    w,
  input  logic [TAGW-1:0] in_tag,
  input  logic [W-1:0]    q,
  input  logic [MU_W-1:0] mu,
  input  logic [K_W-1:0]  k,
  output logic            out_valid,
  output logic [W-1:0]    out0,
  output logic [W-1:0]    out1,
  output logic [TAGW-1:0] out_tag
);
  // stage bookkeeping, index i = result of stage i+1
  logic [5:0]      vld;
  pe_mode_e        md  [6];
  logic            rw  [6];
  logic [TAGW-1:0] tg  [6];
  logic [W-1:0]    a_d [5];   // butterfly 'a' waiting for the product

  logic [W-1:0] mul_x, mul_y, mul_r, mul_p;
  logic         mul_v;
  logic [W-1:0] as_r, bf0, bf1;

  assign mul_x = (mode == PE_BUTTERFLY) ? b : a;
  assign mul_y = (mode == PE_BUTTERFLY) ? w : b;

  barrett_modmul #(.W(W), .MUW(MU_W), .KW(K_W)) u_mul (
    .clk, .rst_n,
    .in_valid (in_valid && (mode == PE_MODMUL || mode == PE_BUTTERFLY)),
    .a (mul_x), .b (mul_y), .q, .mu, .k,
    .out_valid (mul_v), .r (mul_r), .prod (mul_p)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[4:0], in_valid};
  end

  always_ff @(posedge clk) begin
    md[0] <= mode;
    rw[0] <= raw;
    tg[0] <= in_tag;
    a_d[0] <= a;
    for (int i = 1; i < 6; i++) begin
      md[i] <= md[i-1];
      rw[i] <= rw[i-1];
      tg[i] <= tg[i-1];
    end
    for (int i = 1; i < 5; i++) a_d[i] <= a_d[i-1];
    // one-cycle add / sub path
    as_r <= (mode == PE_MODSUB) ? mod_sub(a, b, q) : mod_add(a, b, q);
    // butterfly add / sub after the product
    bf0 <= mod_add(a_d[4], mul_r, q);
    bf1 <= mod_sub(a_d[4], mul_r, q);
  end

  logic v_as, v_mul, v_bf;
  assign v_as  = vld[0] && (md[0] == PE_MODADD || md[0] == PE_MODSUB);
  assign v_mul = vld[4] && (md[4] == PE_MODMUL);
  assign v_bf  = vld[5] && (md[5] == PE_BUTTERFLY);

  always_comb begin
    out_valid = v_as || v_mul || v_bf;
    out0      = '0;
    out1      = '0;
    out_tag   = '0;
    if (v_bf) begin
      out0 = bf0; out1 = bf1; out_tag = tg[5];
    end else if (v_mul) begin
      out0 = rw[4] ? mul_p : mul_r; out_tag = tg[4];
    end else if (v_as) begin
      out0 = as_r; out_tag = tg[0];
    end
  end

  // The product leaving the multiplier belongs to the operation in stage 5.
  assert property (@(posedge clk) disable iff (!rst_n)
    mul_v == (vld[4] && (md[4] == PE_MODMUL || md[4] == PE_BUTTERFLY)));
  assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({v_as, v_mul, v_bf}));
endmodule
