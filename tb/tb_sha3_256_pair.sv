// tb_sha3_256_pair: checks the Merkle node hash against a software SHA3-256.
// The reference is first checked against the published SHA3-256 digests of
// the empty string and "abc"; then random child pairs (and the all-zero and
// all-one pairs) are hashed by the RTL and compared.
module tb_sha3_256_pair;
  import tb_ref_pkg::*;
  import mtu_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  word_t l, r, d;
  sha3_256_pair dut (.left(l), .right(r), .digest(d));

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    byte unsigned m [];
    m = new[0];
    check("sha3('')", digest_be(sha3_256(m)) ==
          256'ha7ffc6f8bf1ed76651c14756a061d662f580ff4de43b49fa82d80a4b80f8434a);
    m = new[3];
    m[0] = 8'h61; m[1] = 8'h62; m[2] = 8'h63;
    check("sha3('abc')", digest_be(sha3_256(m)) ==
          256'h3a985da74fe225b2045c172d6bd390bd855f086e3e9d525b46bfe24511431532);
    for (int i = 0; i < 40; i++) begin
      if (i == 0) begin l = '0; r = '0; end
      else if (i == 1) begin l = '1; r = '1; end
      else begin l = rand_w(); r = rand_w(); end
      #1;
      check($sformatf("pair %0d", i), d == hash_pair(l, r));
      // the order of the children matters
      if (i > 1) check("order", d != hash_pair(r, l));
      @(posedge clk);
    end
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
