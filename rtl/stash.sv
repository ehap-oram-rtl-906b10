// stash: the on-chip buffer of the Path ORAM controller.
//
// Holds up to C blocks (the paper uses C = 200) with their header. It is a
// register array searched in parallel, the simplest structure that offers what
// the controller asks of it each cycle:
//   * lookup by program address (step 1 "check stash", path loading, step 4).
//     When an address is held twice (a block and its backup copy) the
//     non-backup entry is reported, and lk_has_bk tells whether a backup copy
//     of the address is present;
//   * a free-slot finder for insertion;
//   * eviction candidate selection for step 5: for path ev_leaf and tree level
//     ev_level it returns a block that may legally sit in that level's bucket
//     (its path id agrees with ev_leaf on the ev_level top bits of an L-bit
//     path id). Backup copies are preferred so that the backup of the accessed
//     block always goes back to its original path, as the paper requires; the
//     priority rule itself is this design's choice;
//   * one full-entry write port (insert, update, remove by writing valid = 0).
// Lookups and selections are combinational; writes take effect at the clock
// edge. Reset empties the stash. The paper gives the stash's function, not its
// circuit: the CAM-style search and the one-write-per-cycle port are this
// design's own choices.
module stash
  import ehap_pkg::*;
#(
  parameter int unsigned C = 200,  // stash capacity in blocks
  parameter int unsigned L = 23,   // tree height: levels 0..L, 2^L leaves
  localparam int unsigned IW = (C > 1) ? $clog2(C) : 1,
  localparam int unsigned CW = $clog2(C + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // address lookup
  input  addr_t         lk_addr,
  output logic          lk_hit,
  output logic [IW-1:0] lk_idx,
  output logic          lk_bk,
  output logic          lk_has_bk,
  // read port
  input  logic [IW-1:0] rd_idx,
  output blk_t          rd_ent,
  // write port
  input  logic          wr_en,
  input  logic [IW-1:0] wr_idx,
  input  blk_t          wr_ent,
  // free slot
  output logic          free_found,
  output logic [IW-1:0] free_idx,
  // eviction candidate for (path, level)
  input  path_t         ev_leaf,
  input  logic [7:0]    ev_level,
  output logic          ev_found,
  output logic [IW-1:0] ev_idx,
  // occupancy
  output logic [CW-1:0] count
);

  blk_t mem [C];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < C; i++) mem[i] <= '0;
    end else if (wr_en) begin
      mem[wr_idx] <= wr_ent;
    end
  end

  assign rd_ent = mem[rd_idx];

  // lookup, preferring the non-backup copy
  always_comb begin
    logic hit_n, hit_b;
    logic [IW-1:0] idx_n, idx_b;
    hit_n = 1'b0; hit_b = 1'b0; idx_n = '0; idx_b = '0;
    for (int i = C - 1; i >= 0; i--) begin
      if (mem[i].valid && mem[i].addr == lk_addr) begin
        if (mem[i].bk) begin hit_b = 1'b1; idx_b = IW'(i); end
        else           begin hit_n = 1'b1; idx_n = IW'(i); end
      end
    end
    lk_hit = hit_n | hit_b;
    lk_idx = hit_n ? idx_n : idx_b;
    lk_bk  = !hit_n && hit_b;
    lk_has_bk = hit_b;
  end

  // first free entry
  always_comb begin
    free_found = 1'b0;
    free_idx   = '0;
    for (int i = C - 1; i >= 0; i--) begin
      if (!mem[i].valid) begin free_found = 1'b1; free_idx = IW'(i); end
    end
  end

  // eviction candidate: agrees with ev_leaf on the top ev_level bits of the
  // L-bit path id; backups first
  path_t lvl_mask;
  always_comb begin
    lvl_mask = '0;
    for (int b = 0; b < L; b++)
      if (b >= (L - int'(ev_level))) lvl_mask[b] = 1'b1;
  end

  always_comb begin
    logic f_b, f_n;
    logic [IW-1:0] i_b, i_n;
    f_b = 1'b0; f_n = 1'b0; i_b = '0; i_n = '0;
    for (int i = C - 1; i >= 0; i--) begin
      if (mem[i].valid && (((mem[i].leaf ^ ev_leaf) & lvl_mask) == '0)) begin
        if (mem[i].bk) begin f_b = 1'b1; i_b = IW'(i); end
        f_n = 1'b1; i_n = IW'(i);
      end
    end
    ev_found = f_b | f_n;
    ev_idx   = f_b ? i_b : i_n;
  end

  always_comb begin
    count = '0;
    for (int i = 0; i < C; i++) count += CW'(mem[i].valid);
  end

endmodule
