// wpq: a write pending queue inside the persistence domain.
//
// EHAP-ORAM has two of them, one for evicted data blocks and one for changed
// PosMap entries, both sized Z*(L+1) = 96 entries in the paper. An eviction
// round is framed by the drainer: "start" opens the queue, entries pushed
// while it is open are held as uncommitted, and "end" commits them all at once.
// Only committed entries are released on the pop side towards the NVM, so a
// round reaches memory either completely or not at all.
//
// power_fail models the paper's battery-backed behaviour: uncommitted entries
// are discarded (the round never happened) while committed entries keep
// draining. The queue is a circular buffer with three pointers: head (next to
// pop), commit (end of committed data) and tail (next free). A push and an end
// in the same cycle commit the pushed entry too. Pops use a valid/ready
// handshake. Pushing while closed or while full is a protocol error: it is
// dropped, raises err, and is flagged by an assertion. Reset empties the
// queue; the pointer scheme and handshake are this design's choices.
module wpq #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 96,
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          end_i,
  input  logic          power_fail,
  input  logic          push_valid,
  input  T              push_data,
  output logic          pop_valid,
  input  logic          pop_ready,
  output T              pop_data,
  output logic          is_open,
  output logic          empty,
  output logic [CW-1:0] count,       // all entries
  output logic [CW-1:0] committed,   // entries released for draining
  output logic          err
);

  T              mem [DEPTH];
  logic [PW-1:0] head, cptr, tail;
  logic [CW-1:0] n_all, n_com;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  logic do_push, do_pop;
  assign do_push   = push_valid && is_open && (n_all < CW'(DEPTH)) && !power_fail;
  assign pop_valid = (n_com != '0);
  assign do_pop    = pop_valid && pop_ready;
  assign pop_data  = mem[head];
  assign empty     = (n_all == '0);
  assign count     = n_all;
  assign committed = n_com;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head <= '0; cptr <= '0; tail <= '0;
      n_all <= '0; n_com <= '0;
      is_open <= 1'b0;
      err <= 1'b0;
    end else begin
      logic [PW-1:0] tail_n;
      logic [CW-1:0] n_all_n, n_com_n;
      tail_n  = tail;
      n_all_n = n_all;
      n_com_n = n_com;
      err <= push_valid && !do_push && !power_fail;
      if (do_push) begin
        mem[tail] <= push_data;
        tail_n  = inc(tail);
        n_all_n = n_all_n + 1'b1;
      end
      if (do_pop) begin
        head    <= inc(head);
        n_all_n = n_all_n - 1'b1;
        n_com_n = n_com_n - 1'b1;
      end
      if (power_fail) begin
        // drop the open round; committed data stays and drains
        tail_n  = cptr;
        n_all_n = n_com_n;
        is_open <= 1'b0;
      end else if (end_i) begin
        cptr    <= tail_n;
        n_com_n = n_all_n;
        is_open <= 1'b0;
      end else if (start) begin
        is_open <= 1'b1;
      end
      tail  <= tail_n;
      n_all <= n_all_n;
      n_com <= n_com_n;
    end
  end

  // a round's entries may only arrive between start and end
  a_push_in_window: assert property (@(posedge clk) disable iff (!rst_n)
    (push_valid && !power_fail) |-> (is_open && n_all < CW'(DEPTH)));

endmodule
