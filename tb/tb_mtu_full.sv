// tb_mtu_full: one complete MLE evaluation at the paper's evaluation size,
// 2^20 table entries, on the MTU with every parameter at its default.
// The table holds a multilinear polynomial that is affine in its variables,
// f(x) = c0 + sum_i c_i * x_i, so the expected result f(r) = c0 + sum_i c_i*r_i
// needs only mu reference multiplications while every table entry still
// differs. Entries stream in at eight per cycle with no bubbles; the run must
// take one cycle per group plus a short drain.
module tb_mtu_full;
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

  word_t r [MU];
  word_t c [MU + 1];

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    word_t expect_v, base;
    int    sent, cyc, roots;
    for (int i = 0; i < N; i++) in_data[i] = '0;
    cfg_field.p = P_BLS; cfg_field.p_inv = neg_pinv(P_BLS); cfg_field.mont_one = mont_one(P_BLS);
    for (int i = 0; i <= MU; i++) c[i] = rand_fe(P_BLS);
    expect_v = c[0];
    for (int i = 0; i < MU; i++) begin
      r[i] = rand_fe(P_BLS);
      expect_v = madd(expect_v, montmul(c[i+1], r[i], P_BLS), P_BLS);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < MU; i++) begin
      @(negedge clk);
      chal_we = 1; chal_addr = 5'(i); chal_data = r[i];
    end
    @(negedge clk);
    chal_we = 0; cfg_we = 1; cfg_mu = 5'(MU);
    @(negedge clk);
    cfg_we = 0; start = 1;
    @(negedge clk);
    start = 0;
    sent = 0; cyc = 0; roots = 0;
    while (busy && cyc < (1 << MU)) begin
      in_valid = sent < (1 << MU) / N;
      if (in_valid) begin
        // group base: the bits above the lowest three
        base = c[0];
        for (int b = 3; b < MU; b++) if (sent[b-3]) base = madd(base, c[b+1], P_BLS);
        for (int i = 0; i < N; i++) begin
          in_data[i] = base;
          for (int b = 0; b < 3; b++) if (i[b]) in_data[i] = madd(in_data[i], c[b+1], P_BLS);
        end
      end
      #1;
      if (in_valid) begin
        chk("input accepted every cycle", in_ready);
        sent++;
      end
      if (root_valid) begin
        roots++;
        chk("f(r) of the 2^20-entry table", root_data == expect_v);
      end
      @(negedge clk);
      cyc++;
    end
    in_valid = 0;
    chk("exactly one root", roots == 1);
    chk("done", done && !busy && !error && !ovf);
    chk($sformatf("%0d cycles for %0d groups", cyc, (1 << MU) / N), cyc <= (1 << MU) / N + 3 * MU + 8);
    $display("MLE evaluation of 2^%0d entries: %0d cycles", MU, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1 << (MU - 1)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
