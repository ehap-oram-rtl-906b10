// tb_drainer: self-checking test of the drainer (L = 3, Z = 2: 8 slots).
// Feeds eviction rounds of 8 blocks with PosMap entries on random slots and
// checks: start coincides with ev_begin, every block and entry is routed to
// its queue unchanged, end comes exactly one cycle after the 8th block, and a
// power failure abandons the round without an end.
module tb_drainer;
  import ehap_pkg::*;
  localparam int L = 3, Z = 2, NS = Z * (L + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic power_fail = 0, ev_begin = 0, blk_valid = 0, pm_valid = 0;
  wblk_t blk = '0, dq_data; pm_ent_t pm = '0, pq_data;
  logic start, end_o, dq_push, pq_push, busy, err;

  drainer #(.L(L), .Z(Z)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s @%0t", what, $time); end
  endtask

  int n_end = 0;
  always @(posedge clk) if (end_o) n_end++;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      bit crash;
      int e0;
      crash = (r % 5 == 4);
      e0 = n_end;
      @(negedge clk); ev_begin = 1; #1;
      chk(start, "start with ev_begin");
      @(negedge clk); ev_begin = 0; #1;
      chk(!start && busy, "busy after start");
      for (int i = 0; i < NS; i++) begin
        blk_valid = 1;
        blk.nvm_addr = nvm_addr_t'($urandom); blk.blk.addr = addr_t'($urandom);
        pm_valid = ($urandom_range(0, 2) == 0);
        pm.addr = addr_t'($urandom); pm.path = path_t'($urandom);
        #1;
        chk(dq_push && dq_data == blk, "block routed");
        chk(pq_push == pm_valid && (!pm_valid || pq_data == pm), "entry routed");
        chk(!end_o, "no end before last block");
        if (crash && i == NS / 2) begin
          power_fail = 1;
          @(negedge clk); power_fail = 0; blk_valid = 0; pm_valid = 0;
          break;
        end
        @(negedge clk);
        blk_valid = 0; pm_valid = 0;
      end
      #1;
      if (!crash) begin
        chk(end_o, "end one cycle after last block");
        @(negedge clk); #1;
        chk(!end_o && !busy, "idle after end");
        chk(n_end == e0 + 1, "one end per round");
      end else begin
        chk(!busy && n_end == e0, "power failure abandons round");
      end
    end
    // blocks outside a round are flagged
    @(negedge clk); blk_valid = 1; @(negedge clk); blk_valid = 0; #1;
    chk(err && !dq_push, "block outside round flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
