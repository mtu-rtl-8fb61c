// mod_mul: Montgomery modular multiplier, y = a * b * 2^-256 mod p.
//
// Word-level REDC: T = a*b; m = (T mod 2^256) * p_inv mod 2^256;
// u = (T + m*p) / 2^256; y = u - p if u >= p. With a, b < p < 2^255 the
// result is fully reduced. The low 256 bits of u are zero by construction
// and are not read. Operands and result are in Montgomery form, so a
// chain of multiplications needs no conversion. p and p_inv (= -p^-1 mod
// 2^256) are runtime inputs, which gives the "arbitrary prime moduli" support
// the MTU needs. The unit is combinational; the enclosing PE adds its output
// register(s) and a synthesis flow is expected to retime them into the three
// wide products to reach a fully pipelined, one-result-per-cycle multiplier.
module mod_mul
  import mtu_pkg::*;
(
  input  word_t a,
  input  word_t b,
  input  word_t p,
  input  word_t p_inv,
  output word_t y
);
  logic [2*W-1:0] t;
  logic [W-1:0]   mq;
  logic [2*W-1:0] mp;
  logic [2*W:0]   u;
  logic [W:0]     r;

  always_comb begin
    t  = {{W{1'b0}}, a} * {{W{1'b0}}, b};
    mq = t[W-1:0] * p_inv;                      // mod 2^256
    mp = {{W{1'b0}}, mq} * {{W{1'b0}}, p};
    u  = {1'b0, t} + {1'b0, mp};
    r  = u[2*W:W];
    y  = (r >= {1'b0, p}) ? word_t'(r - {1'b0, p}) : r[W-1:0];
  end
endmodule
