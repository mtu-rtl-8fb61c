// tb_dfs_accumulator: checks the depth-first back end of the MTU.
//  1. Inverted tree, one-cycle PE, one level-4 node per cycle: the issued
//     operand pair and the produced node of every cycle 0..27 must match the
//     paper's inverted-tree schedule table, and the root must be the product
//     of all inputs.
//  2. Forward tree (root at level 8): the issued node and produced children of
//     cycles 0..15 must match the paper's Build MLE schedule table, and the 16
//     level-4 nodes must come out in order with the right values.
//  3. Larger trees on a second instance with a three-cycle PE, random input
//     bubbles and stalls, MLE-evaluation fold and forward expansion, and the
//     smallest legal tree; the store must never overflow.
module tb_dfs_accumulator;
  import tb_ref_pkg::*;
  import mtu_pkg::*;

  localparam int MAXMU = 12;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic       rst_n = 0, en = 1, start = 0, fwd = 0, iv = 0;
  pe_op_e     op = PE_MUL;
  logic [3:0] mu = 4'd10;
  word_t      chal [MAXMU];
  field_cfg_t fc;
  word_t      in_data = '0;

  logic       ov [2], rv [2], resv [2], issv [2], busy [2], ovf [2];
  word_t      od [2], rd [2], ra [2], rb [2];
  logic [3:0] resl [2], issl [2];
  logic [12:0] resi [2], issi [2];

  for (genvar g = 0; g < 2; g++) begin : g_dut
    dfs_accumulator #(.NUM_IN(8), .MAX_MU(MAXMU), .DEPTH(4), .LAT(g == 0 ? 1 : 3)) dut (
      .clk, .rst_n, .en, .start, .fwd, .op, .mu, .chal, .fc,
      .in_valid(iv), .in_data,
      .out_valid(ov[g]), .out_data(od[g]), .root_valid(rv[g]), .root_data(rd[g]),
      .res_valid(resv[g]), .res_level(resl[g]), .res_index(resi[g]),
      .res_a(ra[g]), .res_b(rb[g]),
      .iss_valid(issv[g]), .iss_level(issl[g]), .iss_index(issi[g]),
      .busy(busy[g]), .overflow(ovf[g]));
  end

  // paper's inverted-tree table, cycles 0..27: level*100 + index, -1 for none
  int inv_iss [28] = '{-1, 400, -1, 402, -1, 404, 500, 406, -1, 408, 502, 410, 600, 412,
                       504, 414, -1, 416, 506, 418, 602, 420, 508, 422, 700, 424, 510, 426};
  int inv_out [28] = '{-1, -1, 500, -1, 501, -1, 502, 600, 503, -1, 504, 601, 505, 700,
                       506, 602, 507, -1, 508, 603, 509, 701, 510, 604, 511, 800, 512, 605};
  // paper's forward-tree table, cycles 0..15 (input, output A)
  int fwd_iss [16] = '{800, -1, -1, -1, 700, -1, 600, -1, -1, 500, 601, 501, 701, 502, 602, 503};
  int fwd_out [16] = '{-1, 700, -1, -1, -1, 600, -1, 500, -1, -1, 400, 502, 402, 602, 404, 504};

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic word_t node(pe_op_e o, word_t x, word_t y, word_t c);
    case (o)
      PE_EVAL: return madd(x, montmul(c, msub(y, x, P_BLS), P_BLS), P_BLS);
      PE_MUL:  return montmul(x, y, P_BLS);
      default: return hash_pair(x, y);
    endcase
  endfunction

  // reduce level-4 nodes to the root with challenges of levels 4 .. m
  function automatic word_t ref_root(pe_op_e o, word_t l4 [$], int m);
    word_t cur [$];
    word_t nxt [$];
    cur = l4;
    for (int k = 4; k <= m; k++) begin
      nxt = {};
      for (int i = 0; i < cur.size() / 2; i++) nxt.push_back(node(o, cur[2*i], cur[2*i+1], chal[k-1]));
      cur = nxt;
    end
    return cur[0];
  endfunction

  // expand the root (value one) of a 2^m-leaf tree down to level 4
  function automatic void ref_fwd(int m, ref word_t l4 [$]);
    word_t cur [$];
    word_t nxt [$];
    word_t x;
    cur = {fc.mont_one};
    for (int k = m + 1; k > 4; k--) begin
      nxt = {};
      foreach (cur[i]) begin
        x = montmul(cur[i], chal[k-2], P_BLS);
        nxt.push_back(msub(cur[i], x, P_BLS));
        nxt.push_back(x);
      end
      cur = nxt;
    end
    l4 = cur;
  endfunction

  // one run on instance g; returns the number of cycles from start to done
  task automatic run(int g, logic f, pe_op_e o, int m, logic randomise, logic trace);
    word_t l4 [$];
    word_t got [$];
    int    sent, cyc, n4;
    logic  root_seen;
    n4 = 1 << (m - 3);
    if (f) ref_fwd(m, l4);
    else for (int i = 0; i < n4; i++) l4.push_back(o == PE_HASH ? rand_w() : rand_fe(P_BLS));
    @(negedge clk);
    fwd = f; op = o; mu = 4'(m); start = 1; en = 1; iv = 0;
    @(posedge clk);
    @(negedge clk);
    start = 0;
    sent = 0; cyc = 0; root_seen = 0;
    while (busy[g] && cyc < 20000) begin
      en = randomise ? (($urandom % 5) != 0) : 1'b1;
      iv = 0;
      if (!f && sent < n4 && (!randomise || ($urandom % 3) != 0)) begin
        iv = 1;
        in_data = l4[sent];
      end
      #1;
      if (trace && cyc < (f ? 16 : 28)) begin
        int e_iss = f ? fwd_iss[cyc] : inv_iss[cyc];
        int e_out = f ? fwd_out[cyc] : inv_out[cyc];
        chk($sformatf("cycle %0d issue", cyc),
            (e_iss < 0) ? !issv[g] : (issv[g] && issl[g] == e_iss / 100 && issi[g] == e_iss % 100));
        chk($sformatf("cycle %0d result", cyc),
            (e_out < 0) ? !resv[g] : (resv[g] && resl[g] == e_out / 100 && resi[g] == e_out % 100));
      end
      if (en) begin
        if (iv) sent++;
        if (ov[g]) got.push_back(od[g]);
        if (rv[g]) begin
          chk("root value", rd[g] == ref_root(o, l4, m));
          root_seen = 1;
        end
      end
      @(posedge clk);
      @(negedge clk);
      if (en) cyc++;
    end
    chk("run finished", !busy[g]);
    chk("store never overflowed", !ovf[g]);
    if (f) begin
      chk("all level-4 nodes out", got.size() == l4.size());
      foreach (got[i]) if (i < l4.size()) chk($sformatf("level-4 node %0d", i), got[i] == l4[i]);
    end else begin
      chk("root produced", root_seen);
    end
    en = 1;
  endtask

  initial begin
    fc.p = P_BLS; fc.p_inv = neg_pinv(P_BLS); fc.mont_one = mont_one(P_BLS);
    for (int i = 0; i < MAXMU; i++) chal[i] = rand_fe(P_BLS);
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(0, 0, PE_MUL, 10, 0, 1);     // paper's inverted-tree table
    run(0, 1, PE_FWD, 7, 0, 1);      // paper's forward-tree table
    run(0, 0, PE_HASH, 8, 1, 0);
    run(1, 0, PE_EVAL, 12, 1, 0);
    run(1, 1, PE_FWD, 12, 1, 0);
    run(1, 0, PE_MUL, 4, 1, 0);      // smallest tree: two level-4 nodes
    run(1, 1, PE_FWD, 4, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
