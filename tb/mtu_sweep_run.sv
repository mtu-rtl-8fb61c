// mtu_sweep_run: drives one MTU instance with NUM_IN = N leaves per cycle
// (N PEs) through its host interface, for the PE-count sweep. After `go` it
// runs MLE evaluation with random input bubbles and output stalls, a Product
// MLE (every node of every level checked on the per-PE outputs, no stalls,
// one input group per cycle checked), a Merkle tree and a Build MLE (all
// outputs checked, one output group per cycle from the first to the last),
// each on a tree of 2^(log2(N)+MU_EXTRA) leaves, then raises `fin` with its
// check and failure counts.
module mtu_sweep_run
  import tb_ref_pkg::*;
  import mtu_pkg::*;
#(
  parameter int N        = 8,
  parameter int MU_EXTRA = 5
) (
  input  logic clk,
  input  logic go,
  output logic fin,
  output int   checks,
  output int   failures
);
  localparam int LB = $clog2(N) + 1;
  localparam int MU = LB - 1 + MU_EXTRA;

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

  mtu #(.NUM_IN(N)) dut (
    .clk, .rst_n, .cfg_we, .cfg_mode, .cfg_mu, .cfg_field, .chal_we, .chal_addr, .chal_data,
    .start, .busy, .done, .error, .buf_overflow(ovf), .in_valid, .in_ready, .in_data,
    .out_ready, .leaf_valid, .leaf_data, .root_valid, .root_data,
    .pe_out_valid(pv), .pe_out_a(pa), .pe_out_b(pb), .acc_level, .acc_index);

  word_t chal [24];

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL N=%0d %s", N, what);
    end
  endtask

  function automatic word_t node(mode_e m, word_t x, word_t y, word_t c);
    case (m)
      M_MLE_EVAL: return madd(x, montmul(c, msub(y, x, P_BLS), P_BLS), P_BLS);
      M_MERKLE:   return hash_pair(x, y);
      default:    return montmul(x, y, P_BLS);
    endcase
  endfunction

  task automatic start_run(mode_e m);
    @(negedge clk);
    cfg_we = 1; cfg_mode = m; cfg_mu = 5'(MU);
    @(negedge clk);
    cfg_we = 0; start = 1;
    @(negedge clk);
    start = 0;
  endtask

  task automatic run_inv(mode_e m, logic randomise);
    word_t lv [][$];
    int    pos [];
    int    groups, sent, cyc, roots;
    lv  = new[MU + 2];
    pos = new[MU + 2];
    for (int i = 0; i < (1 << MU); i++) lv[1].push_back(m == M_MERKLE ? rand_w() : rand_fe(P_BLS));
    for (int k = 1; k <= MU; k++) begin
      pos[k+1] = 0;
      for (int i = 0; i < lv[k].size() / 2; i++)
        lv[k+1].push_back(node(m, lv[k][2*i], lv[k][2*i+1], chal[k-1]));
    end
    start_run(m);
    groups = (1 << MU) / N; sent = 0; cyc = 0; roots = 0;
    while (busy && cyc < 100000) begin
      out_ready = randomise ? (($urandom % 5) != 0) : 1'b1;
      in_valid  = sent < groups && (!randomise || ($urandom % 4) != 0);
      for (int i = 0; i < N; i++) in_data[i] = in_valid ? lv[1][sent*N + i] : '0;
      #1;
      if (out_ready) begin
        if (in_valid) chk("input accepted while running", in_ready);
        if (in_valid && in_ready) sent++;
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
            chk("accumulator node", int'(acc_index) == pos[acc_level] && pa[N-1] == lv[acc_level][acc_index]);
            pos[acc_level]++;
          end
        end
      end
      @(negedge clk);
      cyc++;
    end
    in_valid = 0; out_ready = 1;
    chk("one root, done, no overflow", roots == 1 && done && !ovf);
    if (m == M_PROD_MLE)
      for (int k = 2; k <= MU + 1; k++) chk($sformatf("all of level %0d", k), pos[k] == lv[k].size());
    if (!randomise) chk($sformatf("rate: %0d cycles for %0d groups", cyc, groups), cyc <= groups + 3 * MU + 8);
  endtask

  task automatic run_fwd();
    word_t cur [$];
    word_t nxt [$];
    word_t x;
    int    got, cyc, first, last;
    cur = {cfg_field.mont_one};
    for (int k = MU; k >= 1; k--) begin
      nxt = {};
      foreach (cur[i]) begin
        x = montmul(cur[i], chal[k-1], P_BLS);
        nxt.push_back(msub(cur[i], x, P_BLS));
        nxt.push_back(x);
      end
      cur = nxt;
    end
    start_run(M_BUILD_MLE);
    got = 0; cyc = 0; first = -1; last = -1;
    while (busy && cyc < 100000) begin
      #1;
      if (leaf_valid) begin
        for (int i = 0; i < N; i++) chk($sformatf("eq value %0d", got*N + i), leaf_data[i] == cur[got*N + i]);
        got++;
        if (first < 0) first = cyc;
        last = cyc;
      end
      @(negedge clk);
      cyc++;
    end
    chk("all Build MLE outputs, done, no overflow", got == (1 << MU) / N && done && !ovf);
    chk($sformatf("rate: groups %0d..%0d", first, last), last - first == got - 1);
  endtask

  initial begin
    fin = 0; checks = 0; failures = 0;
    for (int i = 0; i < N; i++) in_data[i] = '0;
    cfg_field.p = P_BLS; cfg_field.p_inv = neg_pinv(P_BLS); cfg_field.mont_one = mont_one(P_BLS);
    wait (go);
    @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 24; i++) begin
      @(negedge clk);
      chal[i] = rand_fe(P_BLS);
      chal_we = 1; chal_addr = 5'(i); chal_data = chal[i];
    end
    @(negedge clk);
    chal_we = 0;
    run_inv(M_MLE_EVAL, 1);
    run_inv(M_PROD_MLE, 0);
    run_inv(M_MERKLE, 0);
    run_fwd();
    $display("N=%0d PEs, mu=%0d: checks=%0d failures=%0d, finished at %0t", N, MU, checks, failures, $time);
    fin = 1;
  end
endmodule
