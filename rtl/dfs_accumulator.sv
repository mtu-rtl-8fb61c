// dfs_accumulator: the depth-first back end of the MTU's hybrid traversal.
//
// A single PE, a per-level node store (acc_buffer) and a scheduler process all
// tree levels above the pipeline. With LB = log2(NUM_IN) + 1 the pipeline
// delivers (inverted trees) or consumes (forward trees) one level-LB node per
// cycle; the accumulator covers levels LB .. mu+1, where 2^mu is the number of
// leaves and level mu+1 is the root.
//
// Inverted trees (MLE evaluation, products, Merkle): incoming level-LB nodes
// pair up in a holding register; a complete level-LB pair is issued at once,
// using the arriving node directly. In any other cycle the scheduler issues the
// pair of the lowest level (nearest the leaves) whose two nodes are both
// stored. Each result goes back into the store one level up and can be issued
// from the cycle after it leaves the PE; the level-(mu+1) result is the root.
// With a one-cycle PE this reproduces the paper's inverted-tree schedule
// cycle by cycle.
//
// Forward trees (Build MLE): start places the root value 1 (Montgomery form)
// at level mu+1. A fixed "ruler" pattern assigns cycle c to a level: odd
// cycles to level LB+1, cycles = 2 mod 4 to LB+2, ..., c = 0 mod 2^(d+1) to the
// root level mu+1 (d = mu - LB) and c = 2^d mod 2^(d+1) to nobody. In its cycle
// a level expands its oldest stored node if it has one, otherwise the slot is
// left empty. Children of level-(LB+1) nodes leave as a pair at once; the
// second waits one cycle in a register, so the pipeline gets one level-LB node
// per cycle. This is the fixed-pattern schedule the paper gives for Build MLE.
//
// Every PE result is also reported with its level and index (res_*), for
// Product MLE which stores all levels; iss_* shows each issue for inspection.
// Level k uses challenge chal[k-1]. en = 0 stalls everything. The
// simulation-only checks at the end are qualified by rst_n, so rst_n is
// also read synchronously there; the logic itself resets asynchronously.
// The ruler pattern, the root value 1 and the holding-register details are
// this design's reading of the paper's schedule tables.
module dfs_accumulator
  import mtu_pkg::*;
#(
  parameter int unsigned NUM_IN = 8,
  parameter int unsigned MAX_MU = 24,
  parameter int unsigned DEPTH  = 4,
  parameter int unsigned LAT    = 1,
  localparam int unsigned LB  = $clog2(NUM_IN) + 1,   // first level handled here
  localparam int unsigned LVW = $clog2(MAX_MU + 2),   // level number width
  localparam int unsigned IW  = MAX_MU + 1            // node index width
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  input  logic           start,
  input  logic           fwd,
  input  pe_op_e         op,
  input  logic [LVW-1:0] mu,
  input  word_t          chal [MAX_MU],
  input  field_cfg_t     fc,
  // inverted trees: level-LB nodes from the pipeline
  input  logic           in_valid,
  input  word_t          in_data,
  // forward trees: level-LB nodes to the pipeline
  output logic           out_valid,
  output word_t          out_data,
  // inverted trees: the root
  output logic           root_valid,
  output word_t          root_data,
  // every PE result: level and index of (first) produced node
  output logic           res_valid,
  output logic [LVW-1:0] res_level,
  output logic [IW-1:0]  res_index,
  output word_t          res_a,
  output word_t          res_b,
  // issue trace
  output logic           iss_valid,
  output logic [LVW-1:0] iss_level,
  output logic [IW-1:0]  iss_index,
  output logic           busy,
  output logic           overflow
);
  localparam int unsigned NL  = MAX_MU + 1 - LB;      // stored levels LB+1 .. MAX_MU+1
  localparam int unsigned BLW = (NL > 1) ? $clog2(NL) : 1;
  localparam int unsigned CW  = $clog2(DEPTH + 1);
  localparam int unsigned SW  = MAX_MU + 2;           // ruler counter width

  // ---------------------------------------------------------------- state
  logic           hold_v;
  word_t          hold_d;
  logic [IW-1:0]  idx [MAX_MU+2];                      // issue counter per level
  logic [SW-1:0]  slot;
  logic           emit_b_v;
  word_t          emit_b_d;
  logic [IW-1:0]  emitted;
  logic           tv   [LAT];
  logic [LVW-1:0] tlvl [LAT];
  logic [IW-1:0]  tidx [LAT];

  // ------------------------------------------------------------ node store
  logic           bpush, bpush_two, bpop, bpop_two, buf_uf;
  logic [BLW-1:0] bpush_lvl, bpop_lvl;
  word_t          bpush_d0, bpush_d1, head0, head1;
  logic [CW-1:0]  bcnt [NL];

  acc_buffer #(.NL(NL), .DEPTH(DEPTH)) u_buf (
    .clk, .rst_n, .en,
    .clear    (start),
    .push     (bpush),
    .push_lvl (bpush_lvl),
    .push_two (bpush_two),
    .push_d0  (bpush_d0),
    .push_d1  (bpush_d1),
    .pop      (bpop),
    .pop_lvl  (bpop_lvl),
    .pop_two  (bpop_two),
    .cnt      (bcnt),
    .head0, .head1,
    .overflow,
    .underflow(buf_uf)
  );

  // ---------------------------------------------------------- PE and tags
  logic           pe_v, pe_ov;
  word_t          pe_a, pe_b, pe_r, pe_oa, pe_ob;
  logic [LVW-1:0] pe_lvl;
  logic [IW-1:0]  pe_idx;

  mtu_pe #(.LAT(LAT)) u_pe (
    .clk, .rst_n, .en,
    .in_valid (pe_v),
    .op       (fwd ? PE_FWD : op),
    .a        (pe_a),
    .b        (pe_b),
    .r        (pe_r),
    .fc,
    .out_valid(pe_ov),
    .out_a    (pe_oa),
    .out_b    (pe_ob)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) tv[i] <= 1'b0;
    end else if (en) begin
      tv[0] <= pe_v;
      for (int i = 1; i < LAT; i++) tv[i] <= tv[i-1];
    end
  end
  always_ff @(posedge clk) begin
    if (en) begin
      tlvl[0] <= pe_lvl;
      tidx[0] <= pe_idx;
      for (int i = 1; i < LAT; i++) begin
        tlvl[i] <= tlvl[i-1];
        tidx[i] <= tidx[i-1];
      end
    end
  end

  wire            r_v   = tv[LAT-1];
  wire [LVW-1:0]  r_lvl = tlvl[LAT-1];                 // level that was issued
  wire [IW-1:0]   r_idx = tidx[LAT-1];

  // ------------------------------------------------- forward ruler pattern
  function automatic logic [LVW-1:0] ruler_level(logic [SW-1:0] c,
                                                 logic [LVW-1:0] m,
                                                 output logic ok);
    logic [SW-1:0]  mask, k;
    int unsigned    d, tz;
    d    = int'(m) - LB;
    mask = SW'((64'd2 << d) - 1);
    k    = c & mask;
    ok   = 1'b1;
    if (k == '0) return LVW'(m + 1);
    tz = 0;
    for (int i = SW - 1; i >= 0; i--) if (k[i]) tz = i;
    if (tz < d) return LVW'(LB + 1 + tz);
    ok = 1'b0;
    return '0;
  endfunction

  // ---------------------------------------------------------- scheduling
  logic           slot_ok;
  logic [LVW-1:0] slot_lvl;
  logic           pair_lb;
  logic           found;

  always_comb begin
    pe_v      = 1'b0;
    pe_lvl    = '0;
    bpop      = 1'b0;
    bpop_lvl  = '0;
    bpop_two  = !fwd;
    pair_lb   = 1'b0;
    found     = 1'b0;
    slot_lvl  = ruler_level(slot, mu, slot_ok);

    if (busy) begin
      if (!fwd) begin
        if (in_valid && hold_v) begin
          pair_lb = 1'b1;
          pe_v    = 1'b1;
          pe_lvl  = LVW'(LB);
        end else begin
          for (int l = 0; l < NL; l++) begin
            if (!found && (LB + 1 + l <= int'(mu)) && bcnt[l] >= 2) begin
              found    = 1'b1;
              bpop_lvl = BLW'(l);
            end
          end
          if (found) begin
            bpop   = 1'b1;
            pe_v   = 1'b1;
            pe_lvl = LVW'(LB + 1 + int'(bpop_lvl));
          end
        end
      end else if (slot_ok) begin
        bpop_lvl = BLW'(int'(slot_lvl) - LB - 1);
        if (bcnt[bpop_lvl] >= 1) begin
          bpop   = 1'b1;
          pe_v   = 1'b1;
          pe_lvl = slot_lvl;
        end
      end
    end
    pe_idx = idx[pe_lvl];
    pe_r   = chal[(fwd ? pe_lvl - 1'b1 : pe_lvl) - 1'b1];
  end

  // operands: the level-LB pair bypasses the store, all others come from it
  assign pe_a = pair_lb ? hold_d  : head0;
  assign pe_b = pair_lb ? in_data : head1;

  // ----------------------------------------------------- result routing
  always_comb begin
    bpush      = 1'b0;
    bpush_two  = fwd;
    bpush_lvl  = '0;
    bpush_d0   = pe_oa;
    bpush_d1   = pe_ob;
    root_valid = 1'b0;
    out_valid  = 1'b0;
    out_data   = emit_b_d;
    if (start) begin
      // the root of a forward tree: the value one
      bpush     = fwd;
      bpush_two = 1'b0;
      bpush_lvl = BLW'(int'(mu) - LB);
      bpush_d0  = fc.mont_one;
    end else if (r_v) begin
      if (!fwd) begin
        if (r_lvl == mu) root_valid = 1'b1;
        else begin
          bpush     = 1'b1;
          bpush_lvl = BLW'(int'(r_lvl) + 1 - LB - 1);
        end
      end else if (r_lvl == LVW'(LB + 1)) begin
        out_valid = 1'b1;
        out_data  = pe_oa;
      end else begin
        bpush     = 1'b1;
        bpush_lvl = BLW'(int'(r_lvl) - 1 - LB - 1);
      end
    end
    if (emit_b_v) out_valid = 1'b1;
  end

  assign root_data = pe_oa;
  assign res_valid = r_v;
  assign res_level = fwd ? LVW'(r_lvl - 1'b1) : LVW'(r_lvl + 1'b1);
  assign res_index = fwd ? IW'({r_idx, 1'b0}) : r_idx;
  assign res_a     = pe_oa;
  assign res_b     = pe_ob;
  assign iss_valid = pe_v;
  assign iss_level = pe_lvl;
  assign iss_index = fwd ? pe_idx : IW'({pe_idx, 1'b0});

  // ------------------------------------------------------- registers
  logic        hold_load, emit_load;
  assign hold_load = !fwd && busy && in_valid && !pair_lb;
  assign emit_load = fwd && r_v && r_lvl == LVW'(LB + 1);

  logic [IW:0] lb_total;
  assign lb_total = (IW+1)'(1) << (int'(mu) + 1 - LB);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      hold_v   <= 1'b0;
      emit_b_v <= 1'b0;
      slot     <= '0;
      emitted  <= '0;
      for (int l = 0; l < MAX_MU + 2; l++) idx[l] <= '0;
    end else if (en) begin
      if (start) begin
        busy     <= 1'b1;
        hold_v   <= 1'b0;
        emit_b_v <= 1'b0;
        slot     <= '0;
        emitted  <= '0;
        for (int l = 0; l < MAX_MU + 2; l++) idx[l] <= '0;
      end else begin
        if (busy) slot <= slot + 1'b1;
        if (pe_v) idx[pe_lvl] <= idx[pe_lvl] + 1'b1;
        if (hold_load)    hold_v <= 1'b1;
        else if (pair_lb) hold_v <= 1'b0;
        emit_b_v <= emit_load;
        if (out_valid) emitted <= emitted + 1'b1;
        if (root_valid) busy <= 1'b0;
        if (fwd && out_valid && ((IW+1)'(emitted) + 1'b1 == lb_total)) busy <= 1'b0;
      end
    end
  end

  // the store's underflow flag cannot rise: the scheduler pops only counted
  // entries; the PE's own valid flag duplicates the tag pipeline
  always_ff @(posedge clk)
    if (rst_n && en) assert (!buf_uf && pe_ov == r_v) else $error("dfs_accumulator: internal mismatch");

  // data registers without reset
  always_ff @(posedge clk) begin
    if (en && !start) begin
      if (hold_load) hold_d   <= in_data;
      if (emit_load) emit_b_d <= pe_ob;
    end
  end

  // a forward level-(LB+1) node is expanded at most every second cycle, so
  // the held second child never collides with a new pair
  always_ff @(posedge clk)
    if (rst_n && en && fwd && r_v && r_lvl == LVW'(LB + 1))
      assert (!emit_b_v) else $error("dfs_accumulator: output pair collision");

  initial assert (MAX_MU > LB) else $error("dfs_accumulator: MAX_MU too small");
endmodule
