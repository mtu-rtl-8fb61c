// mtu: the Multifunction Tree Unit, top level.
//
// Computes balanced binary trees for zero-knowledge-proof kernels with a
// hybrid traversal: a pipeline of NUM_IN-1 PEs (tree_pipeline) handles the
// log2(NUM_IN) levels next to the leaves in level order, at NUM_IN leaves per
// cycle and with consecutive leaf indices, and a single-PE DFS accumulator
// (dfs_accumulator) handles every level above depth-first with a small store.
// NUM_IN = 8 gives the paper's 8-PE unit (4 + 2 + 1 pipeline PEs and one
// accumulator PE).
//
// Workloads (cfg_mode), for 2^mu leaves:
//   M_MLE_EVAL  leaves f(x) in, root = f(r) out      (inverted tree, fold)
//   M_MUL_TREE  leaves in, root = product out        (inverted tree, mul)
//   M_PROD_MLE  as M_MUL_TREE, plus every node of every level on pe_out_*
//   M_MERKLE    leaf digests in, root digest out     (inverted tree, SHA3-256)
//   M_BUILD_MLE no input, all 2^mu values eq(x, r) out on leaf_*, NUM_IN per
//               cycle in index order                 (forward tree)
// Field values are in Montgomery form modulo cfg_field.p. Challenge of tree
// level k (level 1 = leaves) is written to chal_addr = k-1.
//
// Interfaces: host registers (cfg_*, chal_*, start, busy, done, error); an
// input stream in_valid/in_ready/in_data of NUM_IN consecutive leaves per
// transfer; output streams leaf_*, root_* and pe_out_*, all qualified by
// out_ready. out_ready low freezes the whole unit for that cycle (memory back
// pressure); in_valid low just inserts a bubble. pe_out_* index k < NUM_IN-1 is
// pipeline PE k (see tree_pipeline), index NUM_IN-1 the accumulator PE, whose
// node level and index are on acc_level/acc_index. Latency: LAT cycles per
// PE stage; one leaf group per cycle in both directions.
module mtu
  import mtu_pkg::*;
#(
  parameter int unsigned NUM_IN = 8,    // leaves per cycle = number of PEs
  parameter int unsigned MAX_MU = 24,   // largest tree: 2^MAX_MU leaves
  parameter int unsigned DEPTH  = 4,    // accumulator store entries per level
  parameter int unsigned LAT    = 1,    // PE latency in cycles
  localparam int unsigned NPE    = NUM_IN,
  localparam int unsigned LOG_IN = $clog2(NUM_IN),
  localparam int unsigned LVW    = $clog2(MAX_MU + 2),
  localparam int unsigned AW     = $clog2(MAX_MU),
  localparam int unsigned IW     = MAX_MU + 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // host
  input  logic           cfg_we,
  input  mode_e          cfg_mode,
  input  logic [LVW-1:0] cfg_mu,
  input  field_cfg_t     cfg_field,
  input  logic           chal_we,
  input  logic [AW-1:0]  chal_addr,
  input  word_t          chal_data,
  input  logic           start,
  output logic           busy,
  output logic           done,
  output logic           error,
  output logic           buf_overflow,
  // leaf input stream (inverted trees)
  input  logic           in_valid,
  output logic           in_ready,
  input  word_t          in_data [NUM_IN],
  // output side
  input  logic           out_ready,
  output logic           leaf_valid,
  output word_t          leaf_data [NUM_IN],
  output logic           root_valid,
  output word_t          root_data,
  output logic           pe_out_valid [NPE],
  output word_t          pe_out_a     [NPE],
  output word_t          pe_out_b     [NPE],
  output logic [LVW-1:0] acc_level,
  output logic [IW-1:0]  acc_index
);
  logic           en;
  mode_e          mode;
  logic [LVW-1:0] mu;
  field_cfg_t     fc;
  word_t          chal [MAX_MU];
  word_t          pchal [LOG_IN];
  logic           go, fwd;
  pe_op_e         op;

  assign en  = out_ready;
  assign fwd = mode_fwd(mode);
  assign op  = mode_op(mode);

  // pipeline <-> accumulator
  logic  p_root_v, a_out_v, a_root_v, a_res_v, a_busy, p_leaf_v;
  word_t p_root_d, a_out_d, a_root_d, a_res_a, a_res_b;
  logic  p_pe_v [NUM_IN-1];
  word_t p_pe_a [NUM_IN-1];
  word_t p_pe_b [NUM_IN-1];
  logic  a_iss_v;
  logic [LVW-1:0] a_iss_l;
  logic [IW-1:0]  a_iss_i;

  mtu_ctrl #(.NUM_IN(NUM_IN), .MAX_MU(MAX_MU)) u_ctrl (
    .clk, .rst_n, .en,
    .cfg_we, .cfg_mode, .cfg_mu, .cfg_field,
    .chal_we, .chal_addr, .chal_data,
    .start_req (start),
    .leaf_valid(p_leaf_v),
    .root_valid(a_root_v),
    .mode, .mu, .fc, .chal,
    .start     (go),
    .busy, .done, .error
  );

  for (genvar c = 0; c < LOG_IN; c++) begin : g_pchal
    assign pchal[c] = chal[c];
  end

  assign in_ready = out_ready && busy && !fwd;

  tree_pipeline #(.NUM_IN(NUM_IN), .LAT(LAT)) u_pipe (
    .clk, .rst_n, .en, .fwd, .op,
    .chal      (pchal),
    .fc,
    .in_valid  (in_valid && in_ready),
    .in_data,
    .top_valid (a_out_v),
    .top_data  (a_out_d),
    .root_valid(p_root_v),
    .root_data (p_root_d),
    .leaf_valid(p_leaf_v),
    .leaf_data,
    .pe_valid  (p_pe_v),
    .pe_a      (p_pe_a),
    .pe_b      (p_pe_b)
  );

  dfs_accumulator #(.NUM_IN(NUM_IN), .MAX_MU(MAX_MU), .DEPTH(DEPTH), .LAT(LAT)) u_acc (
    .clk, .rst_n, .en,
    .start     (go),
    .fwd, .op, .mu, .chal, .fc,
    .in_valid  (p_root_v),
    .in_data   (p_root_d),
    .out_valid (a_out_v),
    .out_data  (a_out_d),
    .root_valid(a_root_v),
    .root_data (a_root_d),
    .res_valid (a_res_v),
    .res_level (acc_level),
    .res_index (acc_index),
    .res_a     (a_res_a),
    .res_b     (a_res_b),
    .iss_valid (a_iss_v),
    .iss_level (a_iss_l),
    .iss_index (a_iss_i),
    .busy      (a_busy),
    .overflow  (buf_overflow)
  );

  assign leaf_valid = p_leaf_v;
  assign root_valid = a_root_v;
  assign root_data  = a_root_d;

  // every PE reaches the output, used by Product MLE (all levels stored)
  for (genvar k = 0; k < NUM_IN - 1; k++) begin : g_pe_out
    assign pe_out_valid[k] = p_pe_v[k] && mode == M_PROD_MLE;
    assign pe_out_a[k]     = p_pe_a[k];
    assign pe_out_b[k]     = p_pe_b[k];
  end
  assign pe_out_valid[NPE-1] = a_res_v && mode == M_PROD_MLE;
  assign pe_out_a[NPE-1]     = a_res_a;
  assign pe_out_b[NPE-1]     = a_res_b;

  // the accumulator's own busy flag and issue trace are for inspection only
  wire unused_ok = &{1'b0, a_busy, a_iss_v, a_iss_l, a_iss_i};
endmodule
