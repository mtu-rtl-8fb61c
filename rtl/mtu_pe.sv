// mtu_pe: processing element of the MTU.
//
// One PE holds a modular multiplier, modular adders and a SHA3-256 engine and
// computes one tree node per cycle (initiation interval 1). The datapath is
// the crossed add/multiply arrangement of the PE: an add unit may feed the
// multiplier and the multiplier may feed an add unit, so that
//   PE_FWD : out_a = a - a*r,       out_b = a*r      (Build MLE: a node gives
//            its two children a(1-r) and a*r with a single multiplication)
//   PE_EVAL: out_a = a + r*(b - a)                    (MLE evaluation fold)
//   PE_MUL : out_a = a*b                              (product trees)
//   PE_HASH: out_a = SHA3-256(a || b)                 (Merkle tree)
// The MLE-evaluation fold needs a subtraction before and an addition after
// the multiplication, so the add unit is built as two adders, one on each side
// of the multiplier; this split is a choice of this design.
// Timing: inputs sampled on a rising edge with en=1 and in_valid; the result
// appears LAT enabled cycles later on out_*. en=0 freezes the whole PE
// (global stall). LAT defaults to 1, the PE latency the DFS schedules assume.
// Of the field configuration fc only p and p_inv are used; mont_one is
// carried for the accumulator's Build MLE root.
module mtu_pe
  import mtu_pkg::*;
#(
  parameter int unsigned LAT = 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic       in_valid,
  input  pe_op_e     op,
  input  word_t      a,
  input  word_t      b,
  input  word_t      r,
  input  field_cfg_t fc,
  output logic       out_valid,
  output word_t      out_a,
  output word_t      out_b
);
  word_t diff, mul_x, mul_y, prod, post, hash;
  word_t res_a, res_b;

  // pre-multiplier adder: b - a (MLE evaluation only)
  mod_add u_pre (.a(b), .b(a), .p(fc.p), .sub(1'b1), .y(diff));

  assign mul_x = (op == PE_EVAL) ? diff : a;
  assign mul_y = (op == PE_MUL)  ? b    : r;

  mod_mul u_mul (.a(mul_x), .b(mul_y), .p(fc.p), .p_inv(fc.p_inv), .y(prod));

  // post-multiplier adder: a - prod (forward) or a + prod (evaluation)
  mod_add u_post (.a(a), .b(prod), .p(fc.p), .sub(op == PE_FWD), .y(post));

  sha3_256_pair u_hash (.left(a), .right(b), .digest(hash));

  always_comb begin
    res_b = prod;
    case (op)
      PE_FWD, PE_EVAL: res_a = post;
      PE_MUL:          res_a = prod;
      default:         res_a = hash;
    endcase
  end

  logic  v_q [LAT];
  word_t a_q [LAT];
  word_t b_q [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) v_q[i] <= 1'b0;
    end else if (en) begin
      v_q[0] <= in_valid;
      for (int i = 1; i < LAT; i++) v_q[i] <= v_q[i-1];
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      a_q[0] <= res_a;
      b_q[0] <= res_b;
      for (int i = 1; i < LAT; i++) begin
        a_q[i] <= a_q[i-1];
        b_q[i] <= b_q[i-1];
      end
    end
  end

  assign out_valid = v_q[LAT-1];
  assign out_a     = a_q[LAT-1];
  assign out_b     = b_q[LAT-1];

  initial assert (LAT >= 1) else $error("mtu_pe: LAT must be at least 1");
endmodule
