// tb_acc_buffer: random pushes (one or two words) and pops (one or two words)
// on random levels, compared against per-level queues. Checks the per-level
// counts every cycle, the head words before each pop, the overflow flag on a
// push into a full level and the underflow flag on a pop from an empty one,
// and that clear empties the store.
module tb_acc_buffer;
  import tb_ref_pkg::*;
  import mtu_pkg::*;

  localparam int NL = 5, DEPTH = 4;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n = 0, en = 1, clear = 0, push = 0, push_two = 0, pop = 0, pop_two = 0;
  logic [2:0] push_lvl = 0, pop_lvl = 0;
  word_t d0 = '0, d1 = '0, h0, h1;
  logic [2:0] cnt [NL];
  logic ovf, unf;

  acc_buffer #(.NL(NL), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .en, .clear, .push, .push_lvl, .push_two, .push_d0(d0), .push_d1(d1),
    .pop, .pop_lvl, .pop_two, .cnt, .head0(h0), .head1(h1), .overflow(ovf), .underflow(unf));

  word_t q [NL][$];

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    int npop = 0, npush = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      int need, room;
      @(negedge clk);
      en       = ($urandom % 8) != 0;
      pop_lvl  = 3'($urandom % NL);
      pop_two  = $urandom % 2;
      need     = pop_two ? 2 : 1;
      pop      = ($urandom % 2) && q[pop_lvl].size() >= need;
      push_lvl = 3'($urandom % NL);
      push_two = $urandom % 2;
      room     = DEPTH - q[push_lvl].size() + ((pop && pop_lvl == push_lvl) ? need : 0);
      push     = ($urandom % 2) && room >= (push_two ? 2 : 1);
      d0 = rand_w(); d1 = rand_w();
      #1;
      if (q[pop_lvl].size() >= 1) chk("head0", h0 == q[pop_lvl][0]);
      if (q[pop_lvl].size() >= 2) chk("head1", h1 == q[pop_lvl][1]);
      @(posedge clk);
      if (en) begin
        if (pop) begin
          void'(q[pop_lvl].pop_front());
          if (pop_two) void'(q[pop_lvl].pop_front());
          npop++;
        end
        if (push) begin
          q[push_lvl].push_back(d0);
          if (push_two) q[push_lvl].push_back(d1);
          npush++;
        end
      end
      #1;
      for (int l = 0; l < NL; l++) chk($sformatf("count level %0d", l), cnt[l] == q[l].size());
      chk("no error flags", !ovf && !unf);
    end
    // overflow: fill level 2 and push once more
    @(negedge clk);
    pop = 0; push = 1; push_two = 1; push_lvl = 2;
    while (q[2].size() < DEPTH) begin
      @(posedge clk); #1;
      q[2].push_back(d0); q[2].push_back(d1);
      @(negedge clk);
    end
    push_two = 0;
    @(posedge clk); #1;
    chk("overflow flagged", ovf);
    chk("full level unchanged", cnt[2] == DEPTH);
    // underflow and clear
    @(negedge clk);
    push = 0; clear = 1;
    @(posedge clk); #1;
    chk("clear resets flags", !ovf);
    for (int l = 0; l < NL; l++) chk("cleared", cnt[l] == 0);
    @(negedge clk);
    clear = 0; pop = 1; pop_lvl = 1; pop_two = 0;
    @(posedge clk); #1;
    chk("underflow flagged", unf);
    chk("exercised", npop > 300 && npush > 300);
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
