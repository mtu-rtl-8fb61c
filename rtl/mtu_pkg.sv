// mtu_pkg: types and constants shared by the Multifunction Tree Unit (MTU).
//
// The MTU evaluates balanced binary trees over 256-bit words. A word is either a
// prime-field element in Montgomery form (field elements are below a modulus
// p < 2^255, Montgomery radix R = 2^256) or a SHA3-256 digest. The package
// defines the word type, the node operations a processing element (PE) can
// perform, the tree workloads (modes) the unit runs, and the runtime field
// configuration (modulus and its Montgomery constants), which is loaded by the
// host so that any odd modulus below 2^255 can be used.
package mtu_pkg;

  localparam int unsigned W = 256;              // datapath word width
  typedef logic [W-1:0] word_t;

  // Node operation of one PE.
  //   PE_FWD : forward (Build MLE) node v, challenge r -> (v - v*r, v*r)
  //   PE_EVAL: MLE evaluation fold a, b, r -> a + r*(b - a)
  //   PE_MUL : product a*b (multiplication tree, Product MLE)
  //   PE_HASH: Merkle node SHA3-256(a || b)
  typedef enum logic [1:0] {PE_FWD, PE_EVAL, PE_MUL, PE_HASH} pe_op_e;

  // Workloads. Only M_BUILD_MLE walks the tree forward (root to leaves).
  typedef enum logic [2:0] {
    M_BUILD_MLE = 3'd0,
    M_MLE_EVAL  = 3'd1,
    M_MUL_TREE  = 3'd2,
    M_PROD_MLE  = 3'd3,
    M_MERKLE    = 3'd4
  } mode_e;

  // Runtime field configuration.
  typedef struct packed {
    word_t p;         // odd modulus, p < 2^255
    word_t p_inv;     // -p^-1 mod 2^256
    word_t mont_one;  // 2^256 mod p (the value 1 in Montgomery form)
  } field_cfg_t;

  function automatic pe_op_e mode_op(mode_e m);
    case (m)
      M_BUILD_MLE: return PE_FWD;
      M_MLE_EVAL:  return PE_EVAL;
      M_MERKLE:    return PE_HASH;
      default:     return PE_MUL;
    endcase
  endfunction

  function automatic logic mode_fwd(mode_e m);
    return m == M_BUILD_MLE;
  endfunction

endpackage
