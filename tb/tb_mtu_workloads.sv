// tb_mtu_workloads: the paper's evaluation workloads at their evaluated size,
// 2^20 entries, on the default 8-PE MTU: Build MLE (all 2^20 eq(x, r) values
// checked), Product MLE (every node of every level checked, the root being
// the multiplication-tree result) and Merkle tree commitment (root checked).
// MLE evaluation at the same size is run by tb_mtu_full. Inputs stream
// without bubbles; the cycle counts are printed and each run must sustain one
// group of eight leaves per cycle.
module tb_mtu_workloads;
  import tb_ref_pkg::*;
  import mtu_pkg::*;

  localparam int N  = 8;
  localparam int MU = 20;
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

  word_t chal [MU];
  word_t rinv;
  int    bad;

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (bad++ < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic start_run(mode_e m);
    @(negedge clk);
    cfg_we = 1; cfg_mode = m; cfg_mu = 5'(MU);
    @(negedge clk);
    cfg_we = 0; start = 1;
    @(negedge clk);
    start = 0;
  endtask

  // inverted tree; for Product MLE every level is checked
  task automatic run_inv(mode_e m);
    word_t lv [][];
    int    pos [];
    int    sent, cyc, roots;
    lv  = new[MU + 2];
    pos = new[MU + 2];
    for (int k = 1; k <= MU + 1; k++) begin
      lv[k]  = new[1 << (MU + 1 - k)];
      pos[k] = 0;
    end
    foreach (lv[1][i]) lv[1][i] = (m == M_MERKLE) ? rand_w() : rand_fe(P_BLS);
    for (int k = 1; k <= MU; k++)
      foreach (lv[k+1][i])
        lv[k+1][i] = (m == M_MERKLE) ? hash_pair(lv[k][2*i], lv[k][2*i+1])
                                     : montmul_fast(lv[k][2*i], lv[k][2*i+1], P_BLS, rinv);
    start_run(m);
    sent = 0; cyc = 0; roots = 0;
    while (busy && cyc < (1 << MU)) begin
      in_valid = sent < (1 << MU) / N;
      for (int i = 0; i < N; i++) in_data[i] = in_valid ? lv[1][sent*N + i] : '0;
      #1;
      if (in_valid) sent++;
      if (root_valid) begin
        roots++;
        chk($sformatf("%s root", m.name()), root_data == lv[MU+1][0]);
      end
      if (m == M_PROD_MLE) begin
        for (int k = 0; k < N - 1; k++)
          if (pv[k]) begin
            int c = 1, i = k;
            while (i >= (N >> c)) begin
              i -= N >> c;
              c++;
            end
            chk($sformatf("level %0d node %0d", c + 1, pos[c+1]), pa[k] == lv[c+1][pos[c+1]]);
            pos[c+1]++;
          end
        if (pv[N-1]) begin
          chk("accumulator node", acc_index == pos[acc_level] && pa[N-1] == lv[acc_level][acc_index]);
          pos[acc_level]++;
        end
      end
      @(negedge clk);
      cyc++;
    end
    in_valid = 0;
    chk("one root, done", roots == 1 && done && !ovf);
    if (m == M_PROD_MLE)
      for (int k = 2; k <= MU + 1; k++) chk($sformatf("all of level %0d", k), pos[k] == lv[k].size());
    chk($sformatf("%s: %0d cycles", m.name(), cyc), cyc <= (1 << MU) / N + 3 * MU + 8);
    $display("%s of 2^%0d entries: %0d cycles", m.name(), MU, cyc);
  endtask

  task automatic run_build();
    word_t cur [];
    word_t nxt [];
    word_t x;
    int    got, cyc, first, last;
    cur = new[1];
    cur[0] = cfg_field.mont_one;
    for (int k = MU; k >= 1; k--) begin
      nxt = new[2 * cur.size()];
      foreach (cur[i]) begin
        x = montmul_fast(cur[i], chal[k-1], P_BLS, rinv);
        nxt[2*i]   = msub(cur[i], x, P_BLS);
        nxt[2*i+1] = x;
      end
      cur = nxt;
    end
    start_run(M_BUILD_MLE);
    got = 0; cyc = 0; first = -1; last = -1;
    while (busy && cyc < (1 << MU)) begin
      #1;
      if (leaf_valid) begin
        for (int i = 0; i < N; i++) chk($sformatf("eq %0d", got*N + i), leaf_data[i] == cur[got*N + i]);
        got++;
        if (first < 0) first = cyc;
        last = cyc;
      end
      @(negedge clk);
      cyc++;
    end
    chk("all outputs, done", got == (1 << MU) / N && done && !ovf);
    chk("one output group per cycle", last - first == got - 1);
    $display("BUILD_MLE of 2^%0d entries: %0d cycles, first group at %0d", MU, cyc, first);
  endtask

  initial begin
    bad = 0;
    for (int i = 0; i < N; i++) in_data[i] = '0;
    cfg_field.p = P_BLS; cfg_field.p_inv = neg_pinv(P_BLS); cfg_field.mont_one = mont_one(P_BLS);
    rinv = r_inv(P_BLS);
    chk("reference 2^-256", montmul_fast(7, 9, P_BLS, rinv) == montmul(7, 9, P_BLS));
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < MU; i++) begin
      @(negedge clk);
      chal[i] = rand_fe(P_BLS);
      chal_we = 1; chal_addr = 5'(i); chal_data = chal[i];
    end
    @(negedge clk);
    chal_we = 0;
    run_build();
    run_inv(M_PROD_MLE);
    run_inv(M_MERKLE);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3 << (MU - 2)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
