// tb_mod_add: random and corner-case checks of the modular adder/subtractor
// against wide-integer references, for two moduli.
module tb_mod_add;
  import tb_ref_pkg::*;
  import mtu_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  word_t a, b, p, y;
  logic  sub;
  mod_add dut (.a, .b, .p, .sub, .y);

  task automatic run(word_t ta, word_t tb, word_t tp, logic ts);
    logic [257:0] e;
    a = ta; b = tb; p = tp; sub = ts;
    #1;
    if (ts) e = ({2'b0, ta} + {2'b0, tp} - {2'b0, tb}) % {2'b0, tp};
    else    e = ({2'b0, ta} + {2'b0, tb}) % {2'b0, tp};
    checks++;
    if (y != e[255:0]) begin
      failures++;
      $display("FAIL sub=%0d a=%h b=%h y=%h exp=%h", ts, ta, tb, y, e[255:0]);
    end
  endtask

  initial begin
    word_t ps [2];
    ps[0] = P_BLS; ps[1] = P_BN;
    foreach (ps[k]) begin
      run(0, 0, ps[k], 0);
      run(0, 0, ps[k], 1);
      run(ps[k] - 1, ps[k] - 1, ps[k], 0);
      run(0, ps[k] - 1, ps[k], 1);
      run(ps[k] - 1, 1, ps[k], 0);
      run(5, 5, ps[k], 1);
      for (int i = 0; i < 200; i++) begin
        run(rand_fe(ps[k]), rand_fe(ps[k]), ps[k], i[0]);
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
