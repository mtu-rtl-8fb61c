// acc_buffer: the DFS accumulator's node store, one small FIFO per tree level.
//
// Holds the partial results that wait for their sibling (inverted trees) or
// for their turn to be expanded (forward trees). Level b (0 .. NL-1) has DEPTH
// entries kept in one memory array with a head pointer and a fill count per
// level. Per cycle it takes one push of one or two words to one level and one
// pop of one or two words from one level (the same or another). The two words
// at the head of level pop_lvl are read combinationally (head0 is the oldest),
// so the scheduler can look, choose and pop in the same cycle; pushed words are
// visible from the next cycle. A push that would exceed DEPTH or a pop of
// words that are not there sets the sticky error flags and is otherwise
// ignored. clear empties every level before the push of the same cycle. en = 0 freezes the store.
// The paper describes this store only as a small SRAM; the per-level FIFO
// organisation and the depth are choices of this design.
module acc_buffer
  import mtu_pkg::*;
#(
  parameter int unsigned NL    = 21,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned LW   = (NL > 1) ? $clog2(NL) : 1,
  localparam int unsigned PW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          clear,
  input  logic          push,
  input  logic [LW-1:0] push_lvl,
  input  logic          push_two,
  input  word_t         push_d0,
  input  word_t         push_d1,
  input  logic          pop,
  input  logic [LW-1:0] pop_lvl,
  input  logic          pop_two,
  output logic [CW-1:0] cnt [NL],
  output word_t         head0,
  output word_t         head1,
  output logic          overflow,
  output logic          underflow
);
  word_t         mem [NL][DEPTH];
  logic [PW-1:0] hd  [NL];

  assign head0 = mem[pop_lvl][hd[pop_lvl]];
  assign head1 = mem[pop_lvl][PW'(hd[pop_lvl] + 1'b1)];

  // clear empties the store before this cycle's push, so a clear and the
  // first push of a new run can share a cycle
  logic [CW-1:0] cnt_e [NL];
  logic [PW-1:0] hd_e  [NL];
  always_comb begin
    for (int l = 0; l < NL; l++) begin
      cnt_e[l] = clear ? '0 : cnt[l];
      hd_e[l]  = clear ? '0 : hd[l];
    end
  end

  logic          push_ok, pop_ok;
  logic [CW:0]   push_room;
  always_comb begin
    pop_ok    = pop && !clear && (int'(pop_lvl) < NL) && (cnt[pop_lvl] >= (pop_two ? 2 : 1));
    push_room = (CW+1)'(cnt_e[push_lvl]) + (push_two ? 2 : 1)
              - ((pop_ok && pop_lvl == push_lvl) ? (pop_two ? 2 : 1) : 0);
    push_ok   = push && (int'(push_lvl) < NL) && (int'(push_room) <= DEPTH);
  end

  logic [CW-1:0] cnt_nxt [NL];
  logic [PW-1:0] hd_nxt  [NL];
  always_comb begin
    for (int l = 0; l < NL; l++) begin
      cnt_nxt[l] = cnt_e[l];
      hd_nxt[l]  = hd_e[l];
      if (pop_ok && int'(pop_lvl) == l) begin
        cnt_nxt[l] = cnt_nxt[l] - (pop_two ? 2 : 1);
        hd_nxt[l]  = PW'(hd[l] + (pop_two ? 2 : 1));
      end
      if (push_ok && int'(push_lvl) == l) cnt_nxt[l] = cnt_nxt[l] + (push_two ? 2 : 1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < NL; l++) begin
        cnt[l] <= '0;
        hd[l]  <= '0;
      end
      overflow  <= 1'b0;
      underflow <= 1'b0;
    end else if (en) begin
      cnt <= cnt_nxt;
      hd  <= hd_nxt;
      overflow  <= (overflow && !clear) || (push && !push_ok);
      underflow <= (underflow && !clear) || (pop && !pop_ok && !clear);
    end
  end

  // data array: written at the tail of the pushed level
  always_ff @(posedge clk) begin
    if (en && push_ok) begin
      mem[push_lvl][PW'(hd_e[push_lvl] + cnt_e[push_lvl])] <= push_d0;
      if (push_two)
        mem[push_lvl][PW'(hd_e[push_lvl] + cnt_e[push_lvl] + 1'b1)] <= push_d1;
    end
  end

  initial assert (DEPTH >= 2 && (1 << PW) == DEPTH)
    else $error("acc_buffer: DEPTH must be a power of two >= 2");
endmodule
