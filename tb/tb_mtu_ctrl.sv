// tb_mtu_ctrl: checks configuration writes, the challenge register file,
// rejection of illegal tree sizes, write protection while busy, the start
// pulse, and the end of a run (root for inverted trees, the last of 2^mu/8
// leaf groups for forward trees), including stalled cycles that must not
// count.
module tb_mtu_ctrl;
  import tb_ref_pkg::*;
  import mtu_pkg::*;

  localparam int MAXMU = 10;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic       rst_n = 0, en = 1, cfg_we = 0, chal_we = 0, start_req = 0, leaf_v = 0, root_v = 0;
  mode_e      cfg_mode = M_MLE_EVAL;
  logic [3:0] cfg_mu = 0;
  field_cfg_t cfg_field;
  logic [3:0] chal_addr = 0;
  word_t      chal_data = '0;
  mode_e      mode;
  logic [3:0] mu;
  field_cfg_t fc;
  word_t      chal [MAXMU];
  logic       start, busy, done, error;

  mtu_ctrl #(.NUM_IN(8), .MAX_MU(MAXMU)) dut (
    .clk, .rst_n, .en, .cfg_we, .cfg_mode, .cfg_mu, .cfg_field, .chal_we, .chal_addr,
    .chal_data, .start_req, .leaf_valid(leaf_v), .root_valid(root_v),
    .mode, .mu, .fc, .chal, .start, .busy, .done, .error);

  word_t ref_chal [MAXMU];

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic configure(mode_e m, int n);
    @(negedge clk);
    cfg_we = 1; cfg_mode = m; cfg_mu = 4'(n);
    cfg_field.p = rand_w(); cfg_field.p_inv = rand_w(); cfg_field.mont_one = rand_w();
    @(posedge clk); #1;
    cfg_we = 0;
    chk("mode written", mode == m);
    chk("mu written", mu == 4'(n));
    chk("field written", fc == cfg_field);
  endtask

  task automatic kick(logic expect_ok);
    @(negedge clk);
    start_req = 1;
    #1;
    chk("start pulse", start == expect_ok);
    @(posedge clk); #1;
    start_req = 0;
    chk("busy after start", busy == expect_ok);
    chk("error flag", error == !expect_ok);
  endtask

  initial begin
    int g;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // challenge register file
    for (int i = 0; i < MAXMU; i++) begin
      @(negedge clk);
      chal_we = 1; chal_addr = 4'(i); chal_data = rand_w(); ref_chal[i] = chal_data;
    end
    @(negedge clk);
    chal_we = 0;
    foreach (ref_chal[i]) chk("challenge", chal[i] == ref_chal[i]);
    // illegal sizes
    configure(M_MERKLE, 3);
    kick(0);
    configure(M_MERKLE, 11);
    kick(0);
    // inverted run ends on the root
    configure(M_MERKLE, 6);
    kick(1);
    @(negedge clk);
    cfg_we = 1; cfg_mode = M_BUILD_MLE; chal_we = 1; chal_addr = 0; chal_data = '0;
    @(posedge clk); #1;
    cfg_we = 0; chal_we = 0;
    chk("config locked while busy", mode == M_MERKLE && chal[0] == ref_chal[0]);
    repeat (5) @(posedge clk);
    chk("still busy", busy && !done);
    @(negedge clk);
    root_v = 1; en = 0;
    @(posedge clk); #1;
    chk("stalled root not counted", busy);
    @(negedge clk);
    en = 1;
    @(posedge clk); #1;
    root_v = 0;
    chk("done after root", !busy && done);
    // forward run ends after 2^7 / 8 = 16 leaf groups
    configure(M_BUILD_MLE, 7);
    kick(1);
    chk("done cleared by start", !done);
    g = 0;
    while (g < 16) begin
      @(negedge clk);
      leaf_v = ($urandom % 3) != 0;
      en = ($urandom % 4) != 0;
      @(posedge clk); #1;
      if (leaf_v && en) g++;
      if (g < 16) chk("busy until the last group", busy);
    end
    @(negedge clk);
    leaf_v = 0; en = 1;
    chk("done after last group", !busy && done);
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
