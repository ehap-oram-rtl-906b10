// tb_ehap_oram_full: the controller at its default, full-size configuration
// (4 GB tree: L = 23, Z = 4, 64-byte blocks; stash and temporary PosMap of
// 200; WPQs of 96; 2^26-entry PosMap) on the sparse NVM model.
//
// The PosMap starts with arbitrary path ids (its power-up content), which is a
// valid labelling of an empty tree, so no reload is done here. The test writes
// blocks spread over the whole address range, reads them back, overwrites
// some, and checks every read against a reference. It also checks that each
// eviction round writes exactly Z*(L+1) = 96 slots, that one PosMap entry is
// persisted per round in which the accessed block left the stash, and that
// every miss reads exactly the 96 slots of one path.
module tb_ehap_oram_full;
  import ehap_pkg::*;
  localparam int NQ = 96;

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
  logic [$clog2(201)-1:0] stash_count;
  ehap_events_t events;

  ehap_oram dut (.*);
  nvm_model u_nvm (.*);

  int n_round = 0, n_persist = 0, n_hit = 0;
  always @(posedge clk) if (rst_n) begin
    n_round   += int'(events.evict_round);
    n_persist += int'(events.pm_persist);
    n_hit     += int'(events.stash_hit);
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  data_t ref_v [addr_t];

  task automatic access(input bit wr, input addr_t a, input data_t wd, output data_t rd, output bit hit, output int cyc);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_write = wr; req_addr = a; req_wdata = wd;
    cyc = 0;
    @(negedge clk);
    req_valid = 0;
    while (!resp_valid) begin @(negedge clk); cyc++; end
    rd = resp_rdata; hit = resp_hit;
    @(negedge clk);
    if (wr) ref_v[a] = wd;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addr_t addrs [8];
    data_t rd;
    bit hit;
    int cyc;
    addrs = '{32'd0, 32'd1, 32'd12345, 32'd1048576, 32'd33554431, 32'd40000000, 32'd67108863, 32'd7};
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    // first touch: writes
    foreach (addrs[i]) begin
      data_t wd;
      wd = {$urandom, $urandom, $urandom, addrs[i]};
      access(1, addrs[i], wd, rd, hit, cyc);
      chk(!hit && rd == '0, "first touch reads as zero");
      if (i == 0) $display("miss latency %0d cycles", cyc);
    end
    // read back, reverse order
    for (int i = 7; i >= 0; i--) begin
      access(0, addrs[i], '0, rd, hit, cyc);
      chk(rd == ref_v[addrs[i]], $sformatf("read back %0d", addrs[i]));
    end
    // overwrite half, read everything
    for (int i = 0; i < 8; i += 2) access(1, addrs[i], {$urandom, $urandom, 32'(i)}, rd, hit, cyc);
    foreach (addrs[i]) begin
      access(0, addrs[i], '0, rd, hit, cyc);
      chk(rd == ref_v[addrs[i]], $sformatf("read after overwrite %0d", addrs[i]));
    end
    // let the queues drain
    while (!idle_persisted) @(negedge clk);
    chk(u_nvm.n_wr == NQ * n_round, "each round writes 96 slots");
    chk(u_nvm.n_rd == NQ * n_round, "each miss reads 96 slots");
    chk(u_nvm.n_pm_wr == n_persist && n_persist > 0, "changed PosMap entries persisted");
    chk(!stash_ovf && !tpos_ovf && !proto_err, "no overflow or protocol error");
    $display("rounds=%0d persisted=%0d hits=%0d reads=%0d writes=%0d", n_round, n_persist, n_hit, u_nvm.n_rd, u_nvm.n_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
