// tb_tree_pipeline: drives the 8-input, 7-PE pipeline with streams of leaf
// groups (inverted trees: MLE-evaluation fold, product, SHA3) and of
// level-4 nodes (forward tree: Build MLE expansion), with random bubbles and
// stalls. Checks each level-4 result, the eight leaves of each forward
// group, the intermediate results on the per-PE outputs, and the latency of
// 3 * LAT enabled cycles. Two instances: LAT = 1 and LAT = 2.
module tb_tree_pipeline;
  import tb_ref_pkg::*;
  import mtu_pkg::*;

  localparam int N = 8;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic       rst_n = 0, en = 1, fwd = 0, iv = 0, tv = 0;
  pe_op_e     op = PE_EVAL;
  word_t      chal [3];
  field_cfg_t fc;
  word_t      in_data [N];
  word_t      top_data = '0;
  logic       rv [2], lv [2];
  word_t      rd [2];
  word_t      ld [2][N];
  logic       pv [2][N-1];
  word_t      pa [2][N-1];
  word_t      pb [2][N-1];

  for (genvar g = 0; g < 2; g++) begin : g_dut
    tree_pipeline #(.NUM_IN(N), .LAT(g + 1)) dut (
      .clk, .rst_n, .en, .fwd, .op, .chal, .fc, .in_valid(iv), .in_data,
      .top_valid(tv), .top_data, .root_valid(rv[g]), .root_data(rd[g]),
      .leaf_valid(lv[g]), .leaf_data(ld[g]), .pe_valid(pv[g]), .pe_a(pa[g]), .pe_b(pb[g]));
  end

  typedef struct {
    word_t root;
    word_t lvl2 [4];     // inverted: column-1 results
    word_t leaves [N];   // forward
    int    t;
  } exp_t;
  exp_t q [2][$];
  int ecyc = 0;

  function automatic word_t node(pe_op_e o, word_t x, word_t y, word_t c);
    case (o)
      PE_EVAL: return madd(x, montmul(c, msub(y, x, P_BLS), P_BLS), P_BLS);
      PE_MUL:  return montmul(x, y, P_BLS);
      default: return hash_pair(x, y);
    endcase
  endfunction

  function automatic exp_t expect_inv(pe_op_e o, word_t l [N], int t);
    exp_t  e;
    word_t l3 [2];
    for (int i = 0; i < 4; i++) e.lvl2[i] = node(o, l[2*i], l[2*i+1], chal[0]);
    for (int i = 0; i < 2; i++) l3[i] = node(o, e.lvl2[2*i], e.lvl2[2*i+1], chal[1]);
    e.root = node(o, l3[0], l3[1], chal[2]);
    e.t = t;
    return e;
  endfunction

  function automatic exp_t expect_fwd(word_t v, int t);
    exp_t e;
    word_t cur [N];
    word_t nxt [N];
    word_t m;
    cur[0] = v;
    for (int c = 2; c >= 0; c--) begin
      for (int i = 0; i < (N >> (c + 1)); i++) begin
        m = montmul(cur[i], chal[c], P_BLS);
        nxt[2*i]   = msub(cur[i], m, P_BLS);
        nxt[2*i+1] = m;
      end
      cur = nxt;
    end
    e.leaves = cur;
    e.t = t;
    return e;
  endfunction

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic observe();
    exp_t e;
    for (int g = 0; g < 2; g++) begin
      if (fwd ? lv[g] : rv[g]) begin
        if (q[g].size() == 0) begin
          chk("unexpected output", 0);
          continue;
        end
        e = q[g].pop_front();
        chk($sformatf("latency LAT=%0d got %0d", g + 1, ecyc - e.t), ecyc - e.t == 3 * (g + 1));
        if (fwd) for (int i = 0; i < N; i++) chk($sformatf("leaf %0d LAT=%0d", i, g + 1), ld[g][i] == e.leaves[i]);
        else     chk("root", rd[g] == e.root);
      end
      chk("no output in the wrong direction", !(fwd ? rv[g] : lv[g]));
    end
    // column-1 results of the LAT=1 instance, one cycle after its inputs
    if (!fwd && pv[0][0] && q[0].size() > 0) begin
      // the oldest group still in flight whose column-1 stage is done
      for (int k = 0; k < q[0].size(); k++)
        if (ecyc - q[0][k].t == 1)
          for (int i = 0; i < 4; i++) chk("column-1 output", pa[0][i] == q[0][k].lvl2[i]);
    end
  endtask

  task automatic run(logic f, pe_op_e o, int n);
    int sent;
    exp_t e;
    sent = 0;
    @(negedge clk);
    fwd = f; op = o;
    while (sent < n || q[0].size() != 0 || q[1].size() != 0) begin
      @(negedge clk);
      en = ($urandom % 6) != 0;
      iv = 0; tv = 0;
      if (sent < n && ($urandom % 4) != 0) begin
        if (f) begin
          tv = 1; top_data = rand_fe(P_BLS);
        end else begin
          iv = 1;
          for (int i = 0; i < N; i++) in_data[i] = (o == PE_HASH) ? rand_w() : rand_fe(P_BLS);
        end
      end
      @(posedge clk);
      if (en) begin
        if (iv || tv) begin
          e = f ? expect_fwd(top_data, ecyc) : expect_inv(o, in_data, ecyc);
          q[0].push_back(e);
          q[1].push_back(e);
          sent++;
        end
        ecyc++;
        #1;
        observe();
      end
    end
    // one enabled idle cycle clears the last valid flags before a mode change
    @(negedge clk);
    en = 1; iv = 0; tv = 0;
    @(posedge clk);
    ecyc++;
  endtask

  initial begin
    fc.p = P_BLS; fc.p_inv = neg_pinv(P_BLS); fc.mont_one = mont_one(P_BLS);
    for (int i = 0; i < 3; i++) chal[i] = rand_fe(P_BLS);
    for (int i = 0; i < N; i++) in_data[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(0, PE_EVAL, 40);
    run(0, PE_MUL, 40);
    run(0, PE_HASH, 20);
    run(1, PE_FWD, 40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
