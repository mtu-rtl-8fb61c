// tb_mtu_pe_sweep: the MTU at the other PE counts of the scalability sweep,
// NUM_IN = 2, 4, 16 and 32 (the 8-PE default is covered by tb_mtu). Each size
// runs MLE evaluation, Product MLE, Merkle tree and Build MLE through
// mtu_sweep_run, one size after another, with rate checks where no stalls are
// applied.
module tb_mtu_pe_sweep;
  logic clk;
  initial begin
    clk = 0;
    forever #5 clk = ~clk;
  end

  localparam int NS = 4;
  logic go [NS+1];
  logic fin [NS];
  int   c [NS];
  int   f [NS];
  int   checks, failures;

  logic go0 = 1'b0;
  initial begin
    repeat (2) @(posedge clk);
    go0 = 1'b1;
  end
  assign go[0] = go0;
  for (genvar g = 0; g < NS; g++) begin : g_run
    localparam int NN = (g == 0) ? 2 : (g == 1) ? 4 : (g == 2) ? 16 : 32;
    mtu_sweep_run #(.N(NN)) u_run (.clk, .go(go[g]), .fin(fin[g]), .checks(c[g]), .failures(f[g]));
    assign go[g+1] = fin[g];
  end

  initial begin
    wait (go[NS]);
    checks = 0; failures = 0;
    for (int i = 0; i < NS; i++) begin
      checks += c[i];
      failures += f[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
