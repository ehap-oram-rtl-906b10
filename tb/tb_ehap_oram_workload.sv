// tb_ehap_oram_workload: the controller at its default, full-size
// configuration (L = 23, Z = 4, C = T = 200, WPQs of 96, 2^26-entry PosMap)
// driven by three synthetic last-level-cache miss streams that stand for the
// kinds of program behaviour a memory benchmark suite covers:
//   * streaming: read-modify-write of consecutive blocks, as in array sweeps
//     (lattice and quantum simulation codes);
//   * scattered: reads and writes at random over 2^20 blocks (64 MB), as in
//     pointer-chasing codes with a large footprint;
//   * hot set: reads and writes over 24 blocks, as in compute-bound codes with
//     a small working set. In a tree this sparse an accessed block nearly
//     always fits back on its path, so the stash serves few or none of them.
// The run starts from the boot state that a PosMap reload leaves: every
// address labelled with a random-looking path id. (A PosMap left at its
// all-zero power-up value sends every first touch to path 0, where the
// remapped blocks only fit near the root and the stash fills up.)
// Each read is checked against a reference memory (a block never written
// reads as zero), and after each stream the queues are drained and the NVM
// traffic is checked: Z*(L+1) = 96 slot reads per miss and 96 slot writes per
// eviction round, one persisted PosMap entry per evicted remapped block, and
// no stash or temporary PosMap overflow. The test prints per stream the miss
// count, stash hits, mean miss latency and peak stash occupancy. The stream
// lengths are this test's choice; real benchmark traces are not used.
module tb_ehap_oram_workload;
  import ehap_pkg::*;
  localparam int NQ = 96;
  localparam int N_STREAM = 200;  // accesses per stream

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

  int n_round = 0, n_persist = 0, n_hit = 0, n_stall = 0, peak_stash = 0;
  always @(posedge clk) if (rst_n) begin
    n_round   += int'(events.evict_round);
    n_persist += int'(events.pm_persist);
    n_hit     += int'(events.stash_hit);
    n_stall   += int'(events.queue_stall);
    if (int'(stash_count) > peak_stash) peak_stash = int'(stash_count);
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
  endtask

  // One access with its reference check. A write returns the old value.
  int s_miss, s_hit, s_lat;
  task automatic do_access(input bit wr, input addr_t a, input string tag);
    data_t rd, wd, expect_v;
    bit hit;
    int cyc;
    expect_v = ref_v.exists(a) ? ref_v[a] : '0;
    wd = {$urandom, $urandom, $urandom, $urandom, a};
    access(wr, a, wd, rd, hit, cyc);
    chk(rd == expect_v, $sformatf("%s: value of block %0d", tag, a));
    if (wr) ref_v[a] = wd;
    if (hit) s_hit++;
    else begin s_miss++; s_lat += cyc; end
  endtask

  task automatic stream_done(input string tag);
    int r0;
    while (!idle_persisted) @(negedge clk);
    r0 = n_round;
    chk(u_nvm.n_rd == NQ * n_round, {tag, ": 96 slot reads per miss"});
    chk(u_nvm.n_wr == NQ * n_round, {tag, ": 96 slot writes per round"});
    chk(u_nvm.n_pm_wr == n_persist, {tag, ": every released PosMap entry persisted"});
    chk(!stash_ovf && !tpos_ovf && !proto_err, {tag, ": no overflow or protocol error"});
    $display("%-10s misses=%0d hits=%0d mean_miss_latency=%0d peak_stash=%0d rounds=%0d",
             tag, s_miss, s_hit, (s_miss > 0) ? s_lat / s_miss : 0, peak_stash, r0);
    s_miss = 0; s_hit = 0; s_lat = 0;
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addr_t base, hot [24];
    s_miss = 0; s_hit = 0; s_lat = 0;
    // Boot state: the on-chip PosMap holds the persistent table's content, as
    // after a recovery reload. It is loaded directly here to save the 2^26
    // reload requests; the table's initial content is the memory model's
    // hashed path id of each address, a random-looking labelling.
    for (longint i = 0; i < (longint'(1) << 26); i++)
      dut.u_posmap.mem[i] = u_nvm.init_path(addr_t'(i));
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // streaming: read then write each consecutive block
    base = 32'h0100_0000;
    for (int i = 0; i < N_STREAM / 2; i++) begin
      do_access(0, base + addr_t'(i), "streaming");
      do_access(1, base + addr_t'(i), "streaming");
    end
    stream_done("streaming");

    // scattered: random blocks in a 2^20-block region, half writes
    for (int i = 0; i < N_STREAM; i++)
      do_access(1'($urandom), addr_t'($urandom_range(0, (1 << 20) - 1)), "scattered");
    stream_done("scattered");

    // hot set: 24 blocks, half writes
    foreach (hot[i]) hot[i] = addr_t'($urandom_range(0, (1 << 26) - 1));
    for (int i = 0; i < N_STREAM; i++)
      do_access(1'($urandom), hot[$urandom_range(0, 23)], "hot set");
    stream_done("hot set");

    // everything written so far reads back
    foreach (ref_v[a]) do_access(0, a, "read-back");
    stream_done("read-back");

    chk(n_stall > 0, "queue stalls occurred");
    $display("stash hits in all streams: %0d", n_hit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
