// tb_mtu: end-to-end test of the MTU at its default configuration (8 PEs).
// Runs every workload on small trees through the host interface and the
// streams: MLE evaluation, multiplication tree, Merkle tree, Product MLE
// (every node of every level checked on the per-PE outputs) and Build MLE
// (all 2^mu outputs checked in order), first with random input bubbles and
// output stalls, then without, where the rate is checked: one input group
// accepted per cycle, and for Build MLE one output group per cycle from the
// first to the last. Also an illegal tree size. Each mechanism (stall, bubble,
// depth-first issue from the store, forward pair output, every mode, error)
// is counted and must occur.
module tb_mtu;
  import tb_ref_pkg::*;
  import mtu_pkg::*;

  localparam int N = 8;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic       rst_n = 0, cfg_we = 0, chal_we = 0, start = 0, in_valid = 0, out_ready = 1;
  mode_e      cfg_mode = M_MLE_EVAL;
  logic [4:0] cfg_mu = 0;
  field_cfg_t cfg_field;
  logic [4:0] chal_addr = 0;
  word_t      chal_data = '0;
  word_t      in_data [N];
  logic       busy, done, error, ovf, in_ready, leaf_valid, root_valid;
  word_t      leaf_data [N];
  word_t      root_data;
  logic       pv [N];
  word_t      pa [N];
  word_t      pb [N];
  logic [4:0] acc_level;
  logic [24:0] acc_index;

  mtu dut (
    .clk, .rst_n, .cfg_we, .cfg_mode, .cfg_mu, .cfg_field, .chal_we, .chal_addr, .chal_data,
    .start, .busy, .done, .error, .buf_overflow(ovf), .in_valid, .in_ready, .in_data,
    .out_ready, .leaf_valid, .leaf_data, .root_valid, .root_data,
    .pe_out_valid(pv), .pe_out_a(pa), .pe_out_b(pb), .acc_level, .acc_index);

  word_t chal [24];
  int n_stall = 0, n_bubble = 0, n_deep = 0, n_pair = 0, n_err = 0;
  int n_mode [5] = '{0, 0, 0, 0, 0};

  // mechanism counters, observed inside the unit
  always @(posedge clk) if (rst_n) begin
    if (busy && !out_ready) n_stall++;
    if (busy && in_ready && !in_valid) n_bubble++;
    if (out_ready && dut.u_acc.iss_valid && dut.u_acc.iss_level > 5'(dut.u_acc.LB)) n_deep++;
    if (out_ready && dut.u_acc.emit_b_v) n_pair++;
  end

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic word_t node(mode_e m, word_t x, word_t y, word_t c);
    case (m)
      M_MLE_EVAL: return madd(x, montmul(c, msub(y, x, P_BLS), P_BLS), P_BLS);
      M_MERKLE:   return hash_pair(x, y);
      default:    return montmul(x, y, P_BLS);
    endcase
  endfunction

  task automatic setup(mode_e m, int mu);
    @(negedge clk);
    cfg_we = 1; cfg_mode = m; cfg_mu = 5'(mu);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic go();
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
  endtask

  // inverted-tree workload; all levels kept for Product MLE
  task automatic run_inv(mode_e m, int mu, logic randomise);
    word_t lv [][$];
    word_t got [][$];
    int    groups, sent, cyc;
    logic  seen;
    lv  = new[mu + 2];
    got = new[mu + 2];
    for (int i = 0; i < (1 << mu); i++) lv[1].push_back(m == M_MERKLE ? rand_w() : rand_fe(P_BLS));
    for (int k = 1; k <= mu; k++)
      for (int i = 0; i < lv[k].size() / 2; i++)
        lv[k+1].push_back(node(m, lv[k][2*i], lv[k][2*i+1], chal[k-1]));
    for (int k = 0; k <= mu + 1; k++) got[k] = {};
    setup(m, mu);
    go();
    groups = (1 << mu) / N; sent = 0; cyc = 0; seen = 0;
    while (busy && cyc < 100000) begin
      out_ready = randomise ? (($urandom % 5) != 0) : 1'b1;
      in_valid  = sent < groups && (!randomise || ($urandom % 4) != 0);
      for (int i = 0; i < N; i++) in_data[i] = in_valid ? lv[1][sent*N + i] : '0;
      #1;
      if (out_ready) begin
        if (in_valid) chk("input accepted while running", in_ready);
        if (in_valid && in_ready) sent++;
        if (root_valid) begin
          chk($sformatf("%s root", m.name()), root_data == lv[mu+1][0]);
          seen = 1;
        end
        for (int k = 0; k < N - 1; k++)
          if (pv[k]) begin
            // pipeline PE k: column c, position i
            int c = 1, i = k;
            while (i >= (N >> c)) begin
              i -= N >> c;
              c++;
            end
            got[c+1].push_back(pa[k]);
          end
        if (pv[N-1]) begin
          chk("accumulator node index in order", acc_index == got[acc_level].size());
          got[acc_level].push_back(pa[N-1]);
        end
      end
      @(negedge clk);
      cyc++;
    end
    in_valid = 0; out_ready = 1;
    chk("root seen and done", seen && done && !busy);
    chk("no overflow", !ovf);
    if (!randomise) chk($sformatf("rate: %0d cycles for %0d groups", cyc, groups),
                        cyc <= groups + 3 * mu + 8);
    if (m == M_PROD_MLE) begin
      // pipeline outputs arrive column by column; reorder level 2..4 by index
      for (int k = 2; k <= mu + 1; k++) begin
        word_t srt [$];
        int    w = (k <= 4) ? (N >> (k - 1)) : 1;
        srt = {};
        if (k <= 4) begin
          // got[k] holds, per group, w nodes in order PE 0..w-1
          chk($sformatf("level %0d count", k), got[k].size() == lv[k].size());
          foreach (got[k][j]) if (j < lv[k].size()) srt.push_back(got[k][j]);
        end else begin
          chk($sformatf("level %0d count", k), got[k].size() == lv[k].size());
          srt = got[k];
        end
        foreach (srt[j]) if (j < lv[k].size()) chk($sformatf("level %0d node %0d", k, j), srt[j] == lv[k][j]);
      end
    end
    n_mode[m]++;
  endtask

  task automatic run_fwd(int mu, logic randomise);
    word_t cur [$];
    word_t nxt [$];
    word_t x;
    int    got, cyc, first, last;
    cur = {cfg_field.mont_one};
    for (int k = mu; k >= 1; k--) begin
      nxt = {};
      foreach (cur[i]) begin
        x = montmul(cur[i], chal[k-1], P_BLS);
        nxt.push_back(msub(cur[i], x, P_BLS));
        nxt.push_back(x);
      end
      cur = nxt;
    end
    setup(M_BUILD_MLE, mu);
    go();
    got = 0; cyc = 0; first = -1; last = -1;
    while (busy && cyc < 100000) begin
      out_ready = randomise ? (($urandom % 5) != 0) : 1'b1;
      #1;
      chk("no input accepted in forward mode", !in_ready);
      if (out_ready && leaf_valid) begin
        for (int i = 0; i < N; i++)
          chk($sformatf("eq value %0d", got*N + i), leaf_data[i] == cur[got*N + i]);
        got++;
        if (first < 0) first = cyc;
        last = cyc;
      end
      @(negedge clk);
      cyc++;
    end
    out_ready = 1;
    chk("all Build MLE outputs", got == (1 << mu) / N && done);
    chk("no overflow", !ovf);
    if (!randomise) chk($sformatf("rate: groups %0d..%0d", first, last), last - first == got - 1);
    n_mode[M_BUILD_MLE]++;
  endtask

  initial begin
    for (int i = 0; i < N; i++) in_data[i] = '0;
    cfg_field.p = P_BLS; cfg_field.p_inv = neg_pinv(P_BLS); cfg_field.mont_one = mont_one(P_BLS);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 24; i++) begin
      @(negedge clk);
      chal[i] = rand_fe(P_BLS);
      chal_we = 1; chal_addr = 5'(i); chal_data = chal[i];
    end
    @(negedge clk);
    chal_we = 0;
    // illegal size
    setup(M_MERKLE, 3);
    go();
    chk("illegal size rejected", error && !busy);
    if (error) n_err++;
    run_inv(M_MLE_EVAL, 9, 1);
    run_inv(M_MUL_TREE, 8, 1);
    run_inv(M_MERKLE, 6, 1);
    run_inv(M_PROD_MLE, 7, 1);
    run_fwd(8, 1);
    run_inv(M_MLE_EVAL, 10, 0);
    run_fwd(10, 0);
    run_inv(M_PROD_MLE, 4, 0);
    run_fwd(4, 0);
    $display("mechanisms: stalls=%0d bubbles=%0d deep=%0d pairs=%0d errors=%0d", n_stall, n_bubble, n_deep, n_pair, n_err);
    chk($sformatf("stalls happened (%0d)", n_stall), n_stall > 0);
    chk($sformatf("input bubbles happened (%0d)", n_bubble), n_bubble > 0);
    chk($sformatf("depth-first issues from the store (%0d)", n_deep), n_deep > 0);
    chk($sformatf("forward pair outputs (%0d)", n_pair), n_pair > 0);
    chk("illegal size flagged", n_err > 0);
    foreach (n_mode[i]) chk($sformatf("mode %0d ran", i), n_mode[i] > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
