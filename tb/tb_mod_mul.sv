// tb_mod_mul: checks the Montgomery multiplier for two moduli. Each product y
// must be reduced (y < p) and satisfy y * 2^256 = a * b (mod p), checked with
// wide-integer arithmetic, and must equal the bit-serial reference product.
module tb_mod_mul;
  import tb_ref_pkg::*;
  import mtu_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  word_t a, b, p, pinv, y;
  mod_mul dut (.a, .b, .p, .p_inv(pinv), .y);

  task automatic run(word_t ta, word_t tb);
    logic [767:0] lhs, rhs;
    a = ta; b = tb;
    #1;
    lhs = ({512'd0, y} << 256) % {512'd0, p};
    rhs = ({512'd0, ta} * {512'd0, tb}) % {512'd0, p};
    checks++;
    if (y >= p || lhs != rhs || y != montmul(ta, tb, p)) begin
      failures++;
      $display("FAIL a=%h b=%h y=%h", ta, tb, y);
    end
  endtask

  initial begin
    word_t ps [2];
    ps[0] = P_BLS; ps[1] = P_BN;
    foreach (ps[k]) begin
      p    = ps[k];
      pinv = neg_pinv(p);
      checks++;
      if (w_t'(p * pinv) != '1) begin
        failures++;
        $display("FAIL p_inv");
      end
      run(0, 0);
      run(p - 1, p - 1);
      run(mont_one(p), mont_one(p));
      run(1, p - 1);
      for (int i = 0; i < 150; i++) begin
        run(rand_fe(p), rand_fe(p));
        @(posedge clk);
      end
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
