// mod_add: modular adder/subtractor, y = (a + b) mod p or (a - b) mod p.
//
// Both operands must already be reduced (a, b < p). The sum or difference is
// formed with one extra bit; one conditional correction by p brings it back
// into [0, p). This is the "Mod Add" unit of a PE. It is purely combinational;
// the PE that uses it places the pipeline registers (one stage per PE).
// The modulus is a runtime input so any odd p < 2^255 can be used.
module mod_add
  import mtu_pkg::*;
(
  input  word_t a,
  input  word_t b,
  input  word_t p,
  input  logic  sub,   // 1: a - b, 0: a + b
  output word_t y
);
  logic [W:0] s;
  logic [W:0] t;

  always_comb begin
    if (sub) begin
      s = {1'b0, a} - {1'b0, b};       // s[W] set on borrow
      t = s + {1'b0, p};
      y = s[W] ? t[W-1:0] : s[W-1:0];
    end else begin
      s = {1'b0, a} + {1'b0, b};
      t = s - {1'b0, p};               // t[W] set when s < p
      y = t[W] ? s[W-1:0] : t[W-1:0];
    end
  end
endmodule
