// tb_stash: self-checking test of the stash.
// Fills a small stash (C = 8, L = 3) with random blocks and backup copies and
// checks lookup (non-backup copy preferred), the free-slot finder, occupancy,
// removal, and the eviction candidate choice for every (path, level)
// against a reference computed here from the path-prefix rule.
module tb_stash;
  import ehap_pkg::*;
  localparam int C = 8, L = 3, IW = $clog2(C);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  addr_t lk_addr; logic lk_hit, lk_bk, lk_has_bk; logic [IW-1:0] lk_idx;
  logic [IW-1:0] rd_idx, wr_idx, free_idx, ev_idx;
  blk_t rd_ent, wr_ent;
  logic wr_en = 0, free_found, ev_found;
  path_t ev_leaf; logic [7:0] ev_level;
  logic [$clog2(C+1)-1:0] count;

  stash #(.C(C), .L(L)) dut (.*);

  // reference copy
  blk_t ref_m [C];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input int idx, input blk_t b);
    @(negedge clk); wr_en = 1; wr_idx = IW'(idx); wr_ent = b;
    @(negedge clk); wr_en = 0; ref_m[idx] = b;
  endtask

  function automatic bit elig(path_t lx, path_t l, int k);
    return ((lx[L-1:0] >> (L - k)) == (l[L-1:0] >> (L - k)));
  endfunction

  task automatic check_all();
    // eviction choice for each path and level
    for (int l = 0; l < (1 << L); l++)
      for (int k = 0; k <= L; k++) begin
        int eb, en;
        eb = -1; en = -1;
        for (int i = 0; i < C; i++)
          if (ref_m[i].valid && elig(ref_m[i].leaf, path_t'(l), k)) begin
            if (en < 0) en = i;
            if (ref_m[i].bk && eb < 0) eb = i;
          end
        ev_leaf = path_t'(l); ev_level = 8'(k); #1;
        chk(ev_found == (en >= 0), $sformatf("ev_found l=%0d k=%0d", l, k));
        if (en >= 0)
          chk(int'(ev_idx) == ((eb >= 0) ? eb : en), $sformatf("ev_idx l=%0d k=%0d got %0d", l, k, ev_idx));
      end
    // occupancy and free slot
    begin
      int n, ff;
      n = 0; ff = -1;
      for (int i = 0; i < C; i++) begin
        n += ref_m[i].valid;
        if (!ref_m[i].valid && ff < 0) ff = i;
      end
      #1;
      chk(int'(count) == n, "count");
      chk(free_found == (ff >= 0), "free_found");
      if (ff >= 0) chk(int'(free_idx) == ff, "free_idx");
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < C; i++) ref_m[i] = '0;
    lk_addr = '0; rd_idx = '0; wr_idx = '0; wr_ent = '0; ev_leaf = '0; ev_level = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check_all();
    for (int round = 0; round < 20; round++) begin
      // random fill / removal
      for (int i = 0; i < C; i++) begin
        blk_t b;
        b = '0;
        if ($urandom_range(0, 3) != 0) begin
          b.valid = 1;
          b.bk    = ($urandom_range(0, 3) == 0);
          b.addr  = addr_t'(100 + i + 8 * round);
          b.leaf  = path_t'($urandom_range(0, (1 << L) - 1));
          b.data  = data_t'({$urandom, $urandom});
        end
        wr(i, b);
      end
      check_all();
      // read port
      for (int i = 0; i < C; i++) begin
        rd_idx = IW'(i); #1;
        chk(rd_ent == ref_m[i], "rd_ent");
      end
    end
    // duplicate address: backup and regular copy, lookup prefers the regular one
    for (int i = 0; i < C; i++) wr(i, '0);
    wr(2, '{valid: 1, bk: 1, addr: 32'd77, leaf: 24'd5, data: 512'd1});
    wr(5, '{valid: 1, bk: 0, addr: 32'd77, leaf: 24'd2, data: 512'd2});
    lk_addr = 32'd77; #1;
    chk(lk_hit && lk_idx == 3'd5 && !lk_bk && lk_has_bk, "lookup prefers regular copy");
    wr(5, '0);
    #1; chk(lk_hit && lk_idx == 3'd2 && lk_bk && lk_has_bk, "lookup finds backup copy");
    lk_addr = 32'd78; #1; chk(!lk_hit, "lookup miss");
    // eviction prefers the backup even at a later index
    wr(0, '{valid: 1, bk: 0, addr: 32'd9, leaf: 24'd5, data: 512'd3});
    ev_leaf = 24'd5; ev_level = 8'(L); #1;
    chk(ev_found && ev_idx == 3'd2, "eviction prefers backup");
    // once the backup is gone the first eligible entry wins
    wr(2, '0);
    lk_addr = 32'd77; #1;
    chk(!lk_hit && !lk_has_bk, "removed");
    ev_leaf = 24'd5; ev_level = 8'(L); #1;
    chk(ev_found && ev_idx == 3'd0, "first eligible wins");
    // full
    for (int i = 0; i < C; i++) wr(i, '{valid: 1, bk: 0, addr: addr_t'(i), leaf: '0, data: '0});
    #1; chk(!free_found && int'(count) == C, "full stash");
    // reset empties
    rst_n = 0; #1; rst_n = 1; #1;
    chk(count == 0 && free_found && free_idx == 0, "reset empties");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
