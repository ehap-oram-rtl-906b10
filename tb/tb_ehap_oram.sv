// tb_ehap_oram: end-to-end test of the EHAP-ORAM controller with a small tree
// (L = 3, Z = 4: 60 slots holding 44 logical blocks; stash and temporary
// PosMap of 40, WPQs of Z*(L+1) = 16) on the behavioural NVM model.
//
// The controller first loads its PosMap from the persistent table. Random
// reads and writes then run against a reference memory: every read must
// return the last value written. Three power failures are injected (at a
// random moment, during an eviction round, during a path load). After each,
// the committed queue contents drain, the controller is reset and reloads its
// PosMap, and the testbench computes from the NVM contents alone what each
// block should now hold: on the path the persistent PosMap names, the copy
// with that path id, a regular copy before a backup copy. That value must be
// one the block really held at some time, and the controller must return it.
// Each mechanism of the design (stash hit, queue stall, backup creation, new
// block, stale-copy drop, restore from a backup, PosMap entry persisted,
// eviction round, crash in an open round, recovery) must occur at least once.
module tb_ehap_oram;
  import ehap_pkg::*;
  localparam int L = 3, Z = 4, C = 40, T = 40, NQ = Z * (L + 1);
  localparam int NB = 44;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic power_fail = 0, rec_start = 0;
  logic req_valid = 0, req_ready, req_write = 0;
  addr_t req_addr = '0; data_t req_wdata = '0;
  logic resp_valid, resp_hit; data_t resp_rdata;
  logic nvm_rd_valid, nvm_rd_ready, nvm_rd_resp_valid;
  nvm_addr_t nvm_rd_addr, nvm_wr_addr; blk_t nvm_rd_resp, nvm_wr_blk;
  logic nvm_wr_valid, nvm_wr_ready;
  logic pm_wr_valid, pm_wr_ready, pm_rd_valid, pm_rd_ready, pm_rd_resp_valid;
  addr_t pm_wr_addr, pm_rd_addr; path_t pm_wr_path, pm_rd_resp;
  logic busy, recovering, idle_persisted, stash_ovf, tpos_ovf, proto_err;
  logic [$clog2(C+1)-1:0] stash_count;
  ehap_events_t events;

  ehap_oram #(.L(L), .Z(Z), .C(C), .T(T), .DWPQ(NQ), .PWPQ(NQ), .NBLK(NB)) dut (.*);
  nvm_model #(.L(L)) u_nvm (.*);

  // ---------------------------------------------------------------- stats
  int n_hit = 0, n_stall = 0, n_backup = 0, n_new = 0, n_stale = 0, n_restore = 0, n_keep = 0;
  int n_persist = 0, n_round = 0, n_open_crash = 0, n_recover = 0, n_ops = 0;
  always @(posedge clk) if (rst_n) begin
    n_hit     += int'(events.stash_hit);
    n_stall   += int'(events.queue_stall);
    n_backup  += int'(events.backup);
    n_new     += int'(events.new_block);
    n_stale   += int'(events.stale_drop);
    n_restore += int'(events.bk_restore);
    n_keep    += int'(events.bk_keep);
    n_persist += int'(events.pm_persist);
    n_round   += int'(events.evict_round);
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s @%0t", what, $time); end
  endtask

  // ----------------------------------------------------------- reference
  data_t ref_v [NB];
  data_t hist [NB][$];
  int    cur_idx [NB];     // index in hist of the current value
  // durability floor: the value a block had before its latest miss access
  // whose eviction round has committed can no longer be lost
  int    floor_idx [NB];
  bit    pend_v [NB];
  int    pend_round [NB], pend_idx [NB];
  int    n_end = 0, n_residue = 0;
  always @(posedge clk) if (rst_n && dut.d_end) n_end++;

  function automatic int hist_idx(int a, data_t v);
    for (int i = hist[a].size() - 1; i >= 0; i--) if (hist[a][i] == v) return i;
    return -1;
  endfunction

  // slot address of (path, level, slot): walk from the root
  function automatic nvm_addr_t slot_addr(path_t p, int k, int s);
    longint b;
    b = 0;
    for (int j = 1; j <= k; j++) b = 2 * b + 1 + ((p >> (L - j)) & 1);
    return nvm_addr_t'((b * Z + s) * 64);
  endfunction

  // what block a holds according to the persistent state alone
  function automatic data_t persisted_value(int a);
    path_t p;
    bit found_bk;
    data_t v_bk;
    p = u_nvm.pm_get(addr_t'(a));
    found_bk = 0; v_bk = '0;
    for (int k = 0; k <= L; k++)
      for (int s = 0; s < Z; s++) begin
        blk_t b;
        b = u_nvm.tree_get(slot_addr(p, k, s));
        if (b.valid && b.addr == addr_t'(a) && b.leaf == p) begin
          if (!b.bk) return b.data;
          if (!found_bk) begin found_bk = 1; v_bk = b.data; end
        end
      end
    return found_bk ? v_bk : '0;
  endfunction

  // -------------------------------------------------------------- driver
  int acc_before = 0;
  int crash_mode = 0;      // 0 none, 1 after crash_wait cycles, 2 in eviction, 3 in load
  int crash_wait = 0;
  bit crashed = 0;

  task automatic crash_now();
    if (dut.u_data_wpq.is_open) n_open_crash++;
    // raise the floors for rounds that have committed
    for (int a = 0; a < NB; a++)
      if (pend_v[a] && n_end > pend_round[a] && pend_idx[a] > floor_idx[a]) floor_idx[a] = pend_idx[a];
    // a block left in the stash by an earlier eviction under its persisted
    // path id has no durable copy in this scheme: it is exempt from the floor
    for (int i = 0; i < C; i++) begin
      blk_t e;
      e = dut.u_stash.mem[i];
      if (e.valid && !e.bk && int'(e.addr) < NB && e.leaf == u_nvm.pm_get(e.addr)) begin
        if (floor_idx[e.addr] > 0) n_residue++;
        floor_idx[e.addr] = 0;
      end
    end
    power_fail = 1;
    @(negedge clk);
    power_fail = 0;
    crashed = 1;
    crash_mode = 0;
  endtask

  // returns 1 when the access completed
  task automatic access(input bit wr, input int a, input data_t wd, output data_t rd, output bit done);
    done = 0; rd = '0;
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_write = wr; req_addr = addr_t'(a); req_wdata = wd;
    acc_before = cur_idx[a];
    if (wr) begin hist[a].push_back(wd); cur_idx[a] = hist[a].size() - 1; end
    @(negedge clk);
    req_valid = 0;
    forever begin
      if (resp_valid) begin
        rd = resp_rdata; done = 1;
        if (!resp_hit) begin
          if (pend_v[a] && n_end > pend_round[a] && pend_idx[a] > floor_idx[a]) floor_idx[a] = pend_idx[a];
          pend_v[a] = 1; pend_round[a] = n_end; pend_idx[a] = acc_before;
        end
        // the eviction round follows the response
        if (crash_mode == 2) begin
          @(negedge clk);
          while (busy || dut.u_drainer.busy) begin
            if (dut.u_drainer.busy && $urandom_range(0, 15) == 0) begin crash_now(); break; end
            @(negedge clk);
          end
        end
        break;
      end
      if (crash_mode == 1) begin
        if (crash_wait == 0) begin crash_now(); break; end
        crash_wait--;
      end
      if (crash_mode == 3 && nvm_rd_valid && $urandom_range(0, 9) == 0) begin crash_now(); break; end
      @(negedge clk);
    end
    @(negedge clk);
  endtask

  task automatic boot();
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    rec_start = 1;
    @(negedge clk);
    rec_start = 0;
    chk(recovering, "recovery started");
    while (busy) @(negedge clk);
    n_recover++;
  endtask

  task automatic run_ops(int n);
    for (int i = 0; i < n && !crashed; i++) begin
      bit wr, done;
      int a;
      data_t wd, rd;
      wr = ($urandom_range(0, 1) == 1);
      a  = ($urandom_range(0, 2) == 0) ? $urandom_range(0, 5) : $urandom_range(0, NB - 1);
      wd = {$urandom, $urandom, 32'(a), 32'(n_ops)};
      access(wr, a, wd, rd, done);
      n_ops++;
      if (done) begin
        if (!wr) chk(rd == ref_v[a], $sformatf("read a=%0d", a));
        if (wr) ref_v[a] = wd;
      end
    end
  endtask

  task automatic recover_and_check();
    data_t expv [NB];
    // battery-backed queues finish draining the committed round
    while (!(dut.u_data_wpq.empty && dut.u_pm_wpq.empty)) @(negedge clk);
    repeat (2) @(negedge clk);
    boot();
    crashed = 0;
    for (int a = 0; a < NB; a++) begin
      int k;
      expv[a] = persisted_value(a);
      k = hist_idx(a, expv[a]);
      chk(k >= 0, $sformatf("persisted value of %0d was once written", a));
      chk(k >= floor_idx[a], $sformatf("block %0d lost: value %0d older than durable %0d", a, k, floor_idx[a]));
      if (k >= 0) begin cur_idx[a] = k; floor_idx[a] = k; end
      pend_v[a] = 0;
    end
    for (int a = 0; a < NB; a++) begin
      bit done;
      data_t rd;
      access(0, a, '0, rd, done);
      chk(done && rd == expv[a], $sformatf("recovered a=%0d", a));
      ref_v[a] = expv[a];
    end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < NB; a++) begin
      ref_v[a] = '0; hist[a].push_back('0); cur_idx[a] = 0; floor_idx[a] = 0; pend_v[a] = 0;
    end
    boot();
    // the on-chip map now equals the persistent table
    for (int a = 0; a < NB; a++)
      chk(dut.u_posmap.mem[a] == u_nvm.pm_get(addr_t'(a)), "PosMap loaded");
    run_ops(300);
    crash_mode = 1; crash_wait = $urandom_range(5, 150);
    run_ops(100);
    chk(crashed, "crash 1 injected");
    recover_and_check();
    run_ops(150);
    crash_mode = 2;
    run_ops(100);
    chk(crashed, "crash 2 injected");
    recover_and_check();
    run_ops(150);
    crash_mode = 3;
    run_ops(100);
    chk(crashed, "crash 3 injected");
    recover_and_check();
    run_ops(200);
    // final full read-back
    for (int a = 0; a < NB; a++) begin
      bit done;
      data_t rd;
      access(0, a, '0, rd, done);
      chk(done && rd == ref_v[a], $sformatf("final read a=%0d", a));
    end
    chk(!stash_ovf && !tpos_ovf && !proto_err, "no overflow or protocol error");
    $display("ops=%0d hit=%0d stall=%0d backup=%0d new=%0d stale=%0d restore=%0d keep=%0d persist=%0d rounds=%0d open_crash=%0d recover=%0d",
             n_ops, n_hit, n_stall, n_backup, n_new, n_stale, n_restore, n_keep, n_persist, n_round, n_open_crash, n_recover);
    $display("blocks exempt as stash residue at a crash: %0d", n_residue);
    $display("nvm reads=%0d writes=%0d posmap writes=%0d", u_nvm.n_rd, u_nvm.n_wr, u_nvm.n_pm_wr);
    chk(n_hit > 0, "stash hit seen");
    chk(n_stall > 0, "queue stall seen");
    chk(n_backup > 0, "backup seen");
    chk(n_new > 0, "new block seen");
    chk(n_stale > 0, "stale drop seen");
    chk(n_restore > 0, "restore from backup seen");
    chk(n_persist > 0, "PosMap persist seen");
    chk(n_round > 0, "eviction round seen");
    chk(n_open_crash > 0, "crash in open round seen");
    chk(n_recover > 1, "recovery seen");
    // every round writes the whole path and only changed PosMap entries
    chk(u_nvm.n_wr % NQ == 0, "whole paths written");
    chk(u_nvm.n_pm_wr <= n_persist, "only changed PosMap entries written");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
