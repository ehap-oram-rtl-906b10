// tb_wpq: self-checking test of the write pending queue (DEPTH = 8).
// Rounds of random length are opened with start, filled and committed with
// end, while the pop side drains with random back-pressure. Checks: nothing
// of an open round is released before end; committed entries come out in
// order; a power failure drops the open round but the committed entries
// still drain, also when the failure comes right after end.
module tb_wpq;
  localparam int D = 8;
  typedef logic [15:0] T;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, end_i = 0, power_fail = 0, push_valid = 0, pop_ready = 0;
  T push_data = '0, pop_data;
  logic pop_valid, is_open, empty, err;
  logic [$clog2(D+1)-1:0] count, committed;

  wpq #(.T(T), .DEPTH(D)) dut (.*);

  T expq[$];       // committed, expected on the pop side
  T pend[$];       // pushed in the open round
  int n_pop = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s @%0t", what, $time); end
  endtask

  // pop-side monitor
  always @(posedge clk) if (rst_n && pop_valid && pop_ready) begin
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL: pop of uncommitted data"); end
    else begin
      T e;
      e = expq.pop_front();
      if (pop_data != e) begin failures++; $display("FAIL: pop %h want %h", pop_data, e); end
    end
    n_pop++;
  end
  always @(negedge clk) pop_ready = ($urandom_range(0, 2) != 0);

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic round(input int n, input bit crash);
    // wait for room
    while (int'(count) + n > D) @(negedge clk);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    chk(is_open, "open after start");
    for (int i = 0; i < n; i++) begin
      push_valid = 1; push_data = T'($urandom);
      pend.push_back(push_data);
      @(negedge clk);
      push_valid = 0;
      if ($urandom_range(0, 1)) @(negedge clk);
      chk(int'(committed) <= expq.size() + n_pop, "open round not released");
    end
    if (crash) begin
      power_fail = 1; @(negedge clk); power_fail = 0;
      pend.delete();
      chk(!is_open, "closed by power failure");
    end else begin
      end_i = 1;
      @(posedge clk);
      foreach (pend[i]) expq.push_back(pend[i]);
      pend.delete();
      @(negedge clk); end_i = 0;
      chk(!is_open, "closed by end");
    end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    chk(empty && !pop_valid, "empty after reset");
    for (int r = 0; r < 60; r++) round($urandom_range(1, D), (r % 7 == 3));
    // drain everything
    repeat (200) @(negedge clk);
    chk(empty && expq.size() == 0, "all committed data drained");
    // a round committed just before a power failure still drains
    round(D, 0);
    power_fail = 1; @(negedge clk); power_fail = 0;
    repeat (100) @(negedge clk);
    chk(empty && expq.size() == 0, "committed round drains after power failure");
    chk(!err, "no protocol error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
