// tree_pipeline: the level-ordered front of the MTU's hybrid traversal.
//
// NUM_IN - 1 PEs are arranged as a complete binary tree of LOG_IN columns:
// column 1 has NUM_IN/2 PEs, column 2 has NUM_IN/4, ..., column LOG_IN has one.
// Column c handles the step between tree levels c and c+1 and uses challenge
// chal[c-1] (level 1 is the leaf level).
//   Inverted tree (fwd = 0: MLE evaluation, products, Merkle): NUM_IN leaves
//   with consecutive indices enter per cycle; column 1 PE i combines leaves 2i
//   and 2i+1, column c PE i combines the results of column c-1 PEs 2i and 2i+1,
//   and column LOG_IN delivers one level-(LOG_IN+1) node per cycle (root_*)
//   to the DFS accumulator.
//   Forward tree (fwd = 1: Build MLE): one level-(LOG_IN+1) node per cycle
//   enters column LOG_IN (top_*); each PE splits its node into two children,
//   the PE's "A" output feeding the even child PE and "B" the odd one, and
//   column 1 emits NUM_IN consecutive leaves per cycle (leaf_*).
// Every PE's result is also brought out (pe_*), for workloads that store every
// level. PE k of column c is pe_*[NUM_IN - (NUM_IN >> (c-1)) + k].
// Timing: LOG_IN * LAT cycles from input to output, one group per cycle,
// en = 0 freezes the pipeline. NUM_IN = 8 gives the 7-PE front of the paper's
// 8-PE example; NUM_IN must be a power of two, at least 2.
module tree_pipeline
  import mtu_pkg::*;
#(
  parameter int unsigned NUM_IN = 8,
  parameter int unsigned LAT    = 1,
  localparam int unsigned LOG_IN = $clog2(NUM_IN),
  localparam int unsigned NPE    = NUM_IN - 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic       fwd,
  input  pe_op_e     op,                 // node operation for inverted trees
  input  word_t      chal   [LOG_IN],    // chal[c-1] is used by column c
  input  field_cfg_t fc,
  input  logic       in_valid,
  input  word_t      in_data [NUM_IN],
  input  logic       top_valid,
  input  word_t      top_data,
  output logic       root_valid,
  output word_t      root_data,
  output logic       leaf_valid,
  output word_t      leaf_data [NUM_IN],
  output logic       pe_valid [NPE],
  output word_t      pe_a     [NPE],
  output word_t      pe_b     [NPE]
);
  localparam int unsigned HALF = NUM_IN / 2;

  // per-column PE outputs, entries beyond the column's width are unused
  logic  cv [LOG_IN+1][HALF];
  word_t ca [LOG_IN+1][HALF];
  word_t cb [LOG_IN+1][HALF];

  pe_op_e pe_op;
  assign pe_op = fwd ? PE_FWD : op;

  for (genvar c = 1; c <= LOG_IN; c++) begin : g_col
    localparam int unsigned NC  = NUM_IN >> c;
    localparam int unsigned OFS = NUM_IN - (NUM_IN >> (c - 1));
    for (genvar i = 0; i < HALF; i++) begin : g_pe
      if (i < NC) begin : g_used
        logic  iv;
        word_t ia, ib;
        always_comb begin
          if (fwd) begin
            if (c == LOG_IN) begin
              iv = top_valid;
              ia = top_data;
            end else begin
              iv = cv[c+1][i/2];
              ia = (i % 2 == 0) ? ca[c+1][i/2] : cb[c+1][i/2];
            end
            ib = '0;
          end else if (c == 1) begin
            iv = in_valid;
            ia = in_data[2*i];
            ib = in_data[2*i+1];
          end else begin
            iv = cv[c-1][2*i];
            ia = ca[c-1][2*i];
            ib = ca[c-1][2*i+1];
          end
        end

        mtu_pe #(.LAT(LAT)) u_pe (
          .clk, .rst_n, .en,
          .in_valid (iv),
          .op       (pe_op),
          .a        (ia),
          .b        (ib),
          .r        (chal[c-1]),
          .fc,
          .out_valid(cv[c][i]),
          .out_a    (ca[c][i]),
          .out_b    (cb[c][i])
        );

        assign pe_valid[OFS+i] = cv[c][i];
        assign pe_a[OFS+i]     = ca[c][i];
        assign pe_b[OFS+i]     = cb[c][i];
      end else begin : g_unused
        assign cv[c][i] = 1'b0;
        assign ca[c][i] = '0;
        assign cb[c][i] = '0;
      end
    end
  end

  for (genvar i = 0; i < HALF; i++) begin : g_col0
    assign cv[0][i] = 1'b0;
    assign ca[0][i] = '0;
    assign cb[0][i] = '0;
  end

  assign root_valid = !fwd && cv[LOG_IN][0];
  assign root_data  = ca[LOG_IN][0];
  assign leaf_valid = fwd && cv[1][0];
  for (genvar i = 0; i < HALF; i++) begin : g_leaf
    assign leaf_data[2*i]   = ca[1][i];
    assign leaf_data[2*i+1] = cb[1][i];
  end

  initial assert (NUM_IN >= 2 && (1 << LOG_IN) == NUM_IN)
    else $error("tree_pipeline: NUM_IN must be a power of two >= 2");
endmodule
