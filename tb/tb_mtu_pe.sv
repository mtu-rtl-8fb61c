// tb_mtu_pe: drives a random stream of node operations into two PEs (latency
// 1 and 3) with random input bubbles and random stall cycles. Every result is
// compared with the reference node function, and must appear exactly LAT
// enabled cycles after its inputs (one operation per cycle, II = 1).
module tb_mtu_pe;
  import tb_ref_pkg::*;
  import mtu_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic       rst_n = 0, en = 0, iv = 0;
  pe_op_e     op = PE_MUL;
  word_t      a = '0, b = '0, r = '0;
  field_cfg_t fc;
  logic       ov1, ov3;
  word_t      oa1, ob1, oa3, ob3;

  mtu_pe #(.LAT(1)) dut1 (.clk, .rst_n, .en, .in_valid(iv), .op, .a, .b, .r, .fc,
                          .out_valid(ov1), .out_a(oa1), .out_b(ob1));
  mtu_pe #(.LAT(3)) dut3 (.clk, .rst_n, .en, .in_valid(iv), .op, .a, .b, .r, .fc,
                          .out_valid(ov3), .out_a(oa3), .out_b(ob3));

  typedef struct {
    pe_op_e op;
    word_t  ea, eb;
    int     t;       // enabled-cycle count at issue
  } exp_t;
  exp_t q1 [$];
  exp_t q3 [$];
  int   ecyc = 0;
  int   nop [4] = '{0, 0, 0, 0};

  function automatic exp_t expect_of(pe_op_e o, word_t x, word_t y, word_t c, int t);
    exp_t e;
    word_t m;
    e.op = o; e.t = t; e.eb = '0;
    case (o)
      PE_FWD: begin
        m = montmul(x, c, P_BLS);
        e.ea = msub(x, m, P_BLS);
        e.eb = m;
      end
      PE_EVAL: e.ea = madd(x, montmul(c, msub(y, x, P_BLS), P_BLS), P_BLS);
      PE_MUL:  e.ea = montmul(x, y, P_BLS);
      default: e.ea = hash_pair(x, y);
    endcase
    return e;
  endfunction

  task automatic check_out(logic ov, word_t oa, word_t ob, ref exp_t q [$], input int lat);
    exp_t e;
    if (!ov) return;
    checks++;
    if (q.size() == 0) begin
      failures++;
      $display("FAIL LAT=%0d unexpected output", lat);
      return;
    end
    e = q.pop_front();
    if (oa != e.ea || (e.op == PE_FWD && ob != e.eb) || ecyc - e.t != lat) begin
      failures++;
      $display("FAIL LAT=%0d op=%s a=%h exp=%h after %0d cycles", lat, e.op.name(), oa, e.ea,
               ecyc - e.t);
    end
  endtask

  initial begin
    fc.p = P_BLS; fc.p_inv = neg_pinv(P_BLS); fc.mont_one = mont_one(P_BLS);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      en = ($urandom % 5) != 0;
      if (en) begin
        iv = ($urandom % 4) != 0;
        op = pe_op_e'($urandom % 4);
        a  = rand_fe(P_BLS); b = rand_fe(P_BLS); r = rand_fe(P_BLS);
      end
      @(posedge clk);
      #1;
      if (en) begin
        ecyc++;
        if (iv) begin
          q1.push_back(expect_of(op, a, b, r, ecyc - 1));
          q3.push_back(q1[$]);
          nop[op]++;
        end
        check_out(ov1, oa1, ob1, q1, 1);
        check_out(ov3, oa3, ob3, q3, 3);
      end
    end
    @(negedge clk);
    iv = 0; en = 1;
    repeat (4) begin
      @(posedge clk); #1; ecyc++;
      check_out(ov1, oa1, ob1, q1, 1);
      check_out(ov3, oa3, ob3, q3, 3);
    end
    checks++;
    if (q1.size() != 0 || q3.size() != 0 || nop[0] == 0 || nop[1] == 0 || nop[2] == 0 || nop[3] == 0) begin
      failures++;
      $display("FAIL leftover results or an operation never exercised");
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
