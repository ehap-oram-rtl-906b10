// ehap_oram: EHAP-ORAM controller, a Path ORAM controller that keeps the ORAM
// crash consistent on non-volatile main memory.
//
// One request (read or write of a 64-byte block) is served in the five steps
// of the EHAP-ORAM protocol:
//   1 check stash   - a hit is served at once and nothing else happens;
//   2 PosMap access - the current path id l is read from the PosMap, a fresh
//                     random path id l' is drawn and parked in the temporary
//                     PosMap (the main PosMap keeps l);
//   3 load path     - the Z*(L+1) slots of path l are read one by one. A copy
//                     whose path id differs from the PosMap's entry for it is
//                     outdated and dropped. Otherwise a regular copy enters the
//                     stash (replacing a copy of the same path id that came
//                     from a backup slot earlier). A backup copy enters as a
//                     regular block when the chip holds no copy (the regular
//                     copy was lost in a crash); it is kept as a backup when
//                     the stash holds the block under a new, not yet persisted
//                     path id (the backup is then still the only durable
//                     copy and must be written back); else it is dropped;
//   4 update stash  - the accessed block gets path id l' (and the write data),
//                     and a backup copy (a, l) holding the data as it was read
//                     is added to the stash;
//   5 eviction      - path l is refilled from the deepest level up, each slot
//                     taking a stash block allowed there (backups first) or a
//                     dummy. Every evicted regular block that has a temporary
//                     PosMap entry releases that entry to the PosMap WPQ. The
//                     drainer frames the round with start/end so the data block
//                     WPQ and the PosMap WPQ commit it together.
// Committed WPQ entries drain to the NVM ports; a drained PosMap entry is also
// merged into the on-chip PosMap at that moment. The next miss waits until
// both queues are empty, so a path is never read while its last write is still
// queued.
//
// power_fail freezes the controller (its volatile state counts as lost); the
// queues drop an uncommitted round and finish draining a committed one. After
// reset, a rec_start pulse reloads the on-chip PosMap from the persistent
// PosMap table through the pm_rd port, entry by entry, before requests are
// taken again. Backup copies left in the tree then stand in for blocks whose
// newer version was lost with the stash.
//
// Interfaces (all valid/ready): req_* from the last-level cache, resp_* back
// (one-cycle pulse), nvm_rd_*/nvm_wr_* to the ORAM tree, pm_wr_*/pm_rd_* to
// the persistent PosMap. Block data crosses the NVM ports in plaintext: the
// paper's AES counter-mode engine would sit on those ports and is not part of
// this RTL. Slot reads are issued one at a time (a new read after the previous
// response) and each kept block costs three cycles; this timing is this
// design's choice, the paper gives no controller cycle counts.
//
// Following the paper: the five steps, temporary PosMap, backup block, drainer
// with start/end, two battery-backed WPQs, on-demand persistence of only the
// changed PosMap entries, and all default sizes (Table 1(b), Section 5.2).
// This design's own choices: the slot-by-slot stash filter rules above,
// backup-first eviction, the waiting rule between rounds, and the recovery
// reload sequence. Not built: the cmov-style oblivious PosMap update (a sweep
// touching every table entry per round; here changed entries are written
// directly), and writes that mark loaded or outdated copies invalid in the
// tree (an outdated copy is recognised by its PosMap mismatch instead).
// The on-chip PosMap has no reset, so the reload must also run at every boot,
// from a table initialised once with random path ids.
module ehap_oram
  import ehap_pkg::*;
#(
  parameter int unsigned     L     = 23,              // tree levels 0..L
  parameter int unsigned     Z     = 4,               // blocks per bucket
  parameter int unsigned     C     = 200,             // stash blocks
  parameter int unsigned     T     = 200,             // temporary PosMap entries
  parameter int unsigned     DWPQ  = 96,              // data block WPQ entries
  parameter int unsigned     PWPQ  = 96,              // PosMap WPQ entries
  parameter longint unsigned NBLK  = 64'd67108864,    // logical blocks (2^26)
  parameter logic [31:0]     SEED  = 32'hACE1_2468,
  localparam int unsigned    SIW   = (C > 1) ? $clog2(C) : 1,
  localparam int unsigned    SCW   = $clog2(C + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          power_fail,
  input  logic          rec_start,
  // requests from the LLC
  input  logic          req_valid,
  output logic          req_ready,
  input  logic          req_write,
  input  addr_t         req_addr,
  input  data_t         req_wdata,
  output logic          resp_valid,
  output data_t         resp_rdata,
  output logic          resp_hit,
  // ORAM tree read
  output logic          nvm_rd_valid,
  input  logic          nvm_rd_ready,
  output nvm_addr_t     nvm_rd_addr,
  input  logic          nvm_rd_resp_valid,
  input  blk_t          nvm_rd_resp,
  // ORAM tree write (data block WPQ drain)
  output logic          nvm_wr_valid,
  input  logic          nvm_wr_ready,
  output nvm_addr_t     nvm_wr_addr,
  output blk_t          nvm_wr_blk,
  // persistent PosMap write (PosMap WPQ drain)
  output logic          pm_wr_valid,
  input  logic          pm_wr_ready,
  output addr_t         pm_wr_addr,
  output path_t         pm_wr_path,
  // persistent PosMap read (recovery)
  output logic          pm_rd_valid,
  input  logic          pm_rd_ready,
  output addr_t         pm_rd_addr,
  input  logic          pm_rd_resp_valid,
  input  path_t         pm_rd_resp,
  // status
  output logic          busy,
  output logic          recovering,
  output logic          idle_persisted,   // no request in flight, queues empty
  output logic [SCW-1:0] stash_count,
  output logic          stash_ovf,        // sticky: a block found no stash slot
  output logic          tpos_ovf,         // sticky: temporary PosMap overflow
  output logic          proto_err,        // sticky: WPQ / drainer protocol error
  output ehap_events_t  events
);

  localparam int unsigned NSLOT = Z * (L + 1);

  typedef enum logic [4:0] {
    S_IDLE, S_CHK, S_WAITQ, S_PMRD, S_PMWAIT, S_LD_REQ, S_LD_WAIT, S_LD_CHK,
    S_UPD_BK, S_UPD, S_EV_BEGIN, S_EV, S_DEAD, S_REC_REQ, S_REC_WAIT
  } state_t;

  state_t st;

  // latched request
  logic  r_write;
  addr_t r_addr;
  data_t r_wdata;
  path_t old_leaf, new_leaf;
  logic [7:0] lvl, slot;
  blk_t  ld_blk;
  addr_t rec_idx;

  path_t leaf_mask;
  always_comb begin
    leaf_mask = '0;
    leaf_mask[L-1:0] = '1;
  end

  // ---------------------------------------------------------------- stash
  addr_t          s_lk_addr;
  logic           s_lk_hit, s_lk_bk, s_lk_has_bk, s_wr_en, s_free_found, s_ev_found;
  logic [SIW-1:0] s_lk_idx, s_rd_idx, s_wr_idx, s_free_idx, s_ev_idx;
  blk_t           s_rd_ent, s_wr_ent;

  stash #(.C(C), .L(L)) u_stash (
    .clk, .rst_n,
    .lk_addr(s_lk_addr), .lk_hit(s_lk_hit), .lk_idx(s_lk_idx), .lk_bk(s_lk_bk),
    .lk_has_bk(s_lk_has_bk),
    .rd_idx(s_rd_idx), .rd_ent(s_rd_ent),
    .wr_en(s_wr_en), .wr_idx(s_wr_idx), .wr_ent(s_wr_ent),
    .free_found(s_free_found), .free_idx(s_free_idx),
    .ev_leaf(old_leaf), .ev_level(lvl), .ev_found(s_ev_found), .ev_idx(s_ev_idx),
    .count(stash_count)
  );

  // ---------------------------------------------------------------- PosMap
  logic  p_rd_en, p_wr_en;
  addr_t p_rd_addr, p_wr_addr;
  path_t p_rd_path, p_wr_path;

  posmap #(.NBLK(NBLK)) u_posmap (
    .clk, .rd_en(p_rd_en), .rd_addr(p_rd_addr), .rd_path(p_rd_path),
    .wr_en(p_wr_en), .wr_addr(p_wr_addr), .wr_path(p_wr_path)
  );

  // ------------------------------------------------- random path id source
  logic  rng_next;
  path_t rng_leaf;
  leaf_rng #(.L(L), .SEED(SEED)) u_rng (.clk, .rst_n, .next(rng_next), .leaf(rng_leaf));

  // ------------------------------------------------------- temporary PosMap
  logic  t_ins_en, t_lk_hit, t_rm_en, t_full, t_ovf;
  addr_t t_lk_addr;
  path_t t_lk_path;
  logic [$clog2(T+1)-1:0] t_count;

  temp_posmap #(.T(T)) u_tpos (
    .clk, .rst_n,
    .ins_en(t_ins_en), .ins_addr(r_addr), .ins_path(rng_leaf & leaf_mask),
    .lk_addr(t_lk_addr), .lk_hit(t_lk_hit), .lk_path(t_lk_path),
    .rm_en(t_rm_en), .full(t_full), .ovf(t_ovf), .count(t_count)
  );

  // --------------------------------------------------------- address logic
  logic [31:0] a_bucket;
  nvm_addr_t   a_nvm;
  addr_logic #(.L(L), .Z(Z)) u_addr (
    .leaf(old_leaf), .level(lvl), .slot(slot), .bucket(a_bucket), .nvm_addr(a_nvm)
  );

  // ---------------------------------------------------- drainer and WPQs
  logic    d_begin, d_blk_valid, d_pm_valid, d_start, d_end, d_busy, d_err;
  logic    dq_push, pq_push;
  wblk_t   d_blk, dq_data, dq_pop_data;
  pm_ent_t d_pm, pq_data, pq_pop_data;

  drainer #(.L(L), .Z(Z)) u_drainer (
    .clk, .rst_n, .power_fail,
    .ev_begin(d_begin), .blk_valid(d_blk_valid), .blk(d_blk),
    .pm_valid(d_pm_valid), .pm(d_pm),
    .start(d_start), .end_o(d_end),
    .dq_push, .dq_data, .pq_push, .pq_data,
    .busy(d_busy), .err(d_err)
  );

  logic dq_pop_valid, dq_empty, dq_open, dq_err;
  logic pq_pop_valid, pq_empty, pq_open, pq_err;
  logic [$clog2(DWPQ+1)-1:0] dq_count, dq_com;
  logic [$clog2(PWPQ+1)-1:0] pq_count, pq_com;

  wpq #(.T(wblk_t), .DEPTH(DWPQ)) u_data_wpq (
    .clk, .rst_n, .start(d_start), .end_i(d_end), .power_fail,
    .push_valid(dq_push), .push_data(dq_data),
    .pop_valid(dq_pop_valid), .pop_ready(nvm_wr_ready), .pop_data(dq_pop_data),
    .is_open(dq_open), .empty(dq_empty), .count(dq_count), .committed(dq_com),
    .err(dq_err)
  );

  wpq #(.T(pm_ent_t), .DEPTH(PWPQ)) u_pm_wpq (
    .clk, .rst_n, .start(d_start), .end_i(d_end), .power_fail,
    .push_valid(pq_push), .push_data(pq_data),
    .pop_valid(pq_pop_valid), .pop_ready(pm_wr_ready), .pop_data(pq_pop_data),
    .is_open(pq_open), .empty(pq_empty), .count(pq_count), .committed(pq_com),
    .err(pq_err)
  );

  assign nvm_wr_valid = dq_pop_valid;
  assign nvm_wr_addr  = dq_pop_data.nvm_addr;
  assign nvm_wr_blk   = dq_pop_data.blk;
  assign pm_wr_valid  = pq_pop_valid;
  assign pm_wr_addr   = pq_pop_data.addr;
  assign pm_wr_path   = pq_pop_data.path;

  logic queues_idle;
  assign queues_idle = dq_empty && pq_empty && !d_busy;

  // ------------------------------------------------------- step control
  logic last_slot;
  assign last_slot = (slot == 8'(Z - 1));

  // path id of a loaded block as the PosMap has it (valid in S_LD_CHK)
  path_t cur_leaf;
  assign cur_leaf = p_rd_path & leaf_mask;

  // what to do with a loaded real block (S_LD_CHK); the stash lookup then
  // reports the regular copy of ld_blk.addr if there is one
  typedef enum logic [2:0] {LD_DROP_STALE, LD_DROP, LD_INSERT, LD_REPLACE, LD_KEEP_BK} ld_act_t;
  ld_act_t ld_act;
  always_comb begin
    if (ld_blk.leaf != cur_leaf)           ld_act = LD_DROP_STALE;
    else if (!ld_blk.bk) begin
      if (!s_lk_hit)                       ld_act = LD_INSERT;
      else if (!s_lk_bk && s_rd_ent.leaf == ld_blk.leaf)
                                           ld_act = LD_REPLACE;  // was restored from a backup
      else                                 ld_act = LD_DROP;
    end else begin
      if (!s_lk_hit)                       ld_act = LD_INSERT;   // restore after a crash
      else if (!s_lk_bk && s_rd_ent.leaf != ld_blk.leaf && !s_lk_has_bk)
                                           ld_act = LD_KEEP_BK;  // still the durable copy
      else                                 ld_act = LD_DROP;
    end
  end

  always_comb begin
    // defaults
    s_lk_addr = r_addr;
    s_rd_idx  = s_lk_idx;
    s_wr_en   = 1'b0;
    s_wr_idx  = s_lk_idx;
    s_wr_ent  = s_rd_ent;
    p_rd_en   = 1'b0;
    p_rd_addr = r_addr;
    t_ins_en  = 1'b0;
    t_lk_addr = s_rd_ent.addr;
    t_rm_en   = 1'b0;
    rng_next  = 1'b0;
    d_begin   = 1'b0;
    d_blk_valid = 1'b0;
    d_blk     = '{nvm_addr: a_nvm, blk: '0};
    d_pm_valid  = 1'b0;
    d_pm      = '{addr: s_rd_ent.addr, path: t_lk_path};
    nvm_rd_valid = 1'b0;
    nvm_rd_addr  = a_nvm;
    pm_rd_valid  = 1'b0;
    pm_rd_addr   = rec_idx;
    req_ready    = 1'b0;

    unique case (st)
      S_IDLE: req_ready = !power_fail && !rec_start;
      S_CHK: begin
        if (s_lk_hit && r_write) begin
          s_wr_en  = 1'b1;
          s_wr_ent = s_rd_ent;
          s_wr_ent.data = r_wdata;
        end
      end
      S_PMRD: p_rd_en = 1'b1;
      S_PMWAIT: begin
        t_ins_en = 1'b1;
        rng_next = 1'b1;
      end
      S_LD_REQ: nvm_rd_valid = 1'b1;
      S_LD_WAIT: begin
        p_rd_en   = nvm_rd_resp_valid && nvm_rd_resp.valid;
        p_rd_addr = nvm_rd_resp.addr;
      end
      S_LD_CHK: begin
        s_lk_addr = ld_blk.addr;
        unique case (ld_act)
          LD_INSERT:  begin s_wr_en = s_free_found; s_wr_idx = s_free_idx; s_wr_ent = ld_blk; s_wr_ent.bk = 1'b0; end
          LD_REPLACE: begin s_wr_en = 1'b1;         s_wr_idx = s_lk_idx;   s_wr_ent = ld_blk; end
          LD_KEEP_BK: begin s_wr_en = s_free_found; s_wr_idx = s_free_idx; s_wr_ent = ld_blk; end
          default: ;
        endcase
      end
      S_UPD_BK: begin
        s_wr_idx = s_free_idx;
        if (s_lk_hit) begin
          s_wr_en  = s_free_found;
          s_wr_ent = s_rd_ent;
          s_wr_ent.bk = 1'b1;
        end else begin
          // first touch of this block: it enters the stash on path l'
          s_wr_en  = s_free_found;
          s_wr_ent = '{valid: 1'b1, bk: 1'b0, addr: r_addr, leaf: new_leaf,
                       data: r_write ? r_wdata : '0};
        end
      end
      S_UPD: begin
        s_wr_en  = 1'b1;
        s_wr_ent = s_rd_ent;
        s_wr_ent.leaf = new_leaf;
        if (r_write) s_wr_ent.data = r_wdata;
      end
      S_EV_BEGIN: d_begin = 1'b1;
      S_EV: begin
        s_rd_idx    = s_ev_idx;
        d_blk_valid = 1'b1;
        if (s_ev_found) begin
          d_blk.blk = s_rd_ent;
          s_wr_en   = 1'b1;
          s_wr_idx  = s_ev_idx;
          s_wr_ent  = '0;
          if (!s_rd_ent.bk && t_lk_hit) begin
            d_pm_valid = 1'b1;
            t_rm_en    = 1'b1;
          end
        end
      end
      S_REC_REQ: pm_rd_valid = 1'b1;
      default: ;
    endcase
  end

  // on-chip PosMap writes: drained PosMap WPQ entries merge into the map;
  // during recovery the persistent table is copied in
  always_comb begin
    p_wr_en   = 1'b0;
    p_wr_addr = pq_pop_data.addr;
    p_wr_path = pq_pop_data.path;
    if (pq_pop_valid && pm_wr_ready) begin
      p_wr_en = 1'b1;
    end else if (st == S_REC_WAIT && pm_rd_resp_valid) begin
      p_wr_en   = 1'b1;
      p_wr_addr = rec_idx;
      p_wr_path = pm_rd_resp;
    end
  end

  // ------------------------------------------------------------ sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      r_write    <= 1'b0;
      r_addr     <= '0;
      r_wdata    <= '0;
      old_leaf   <= '0;
      new_leaf   <= '0;
      lvl        <= '0;
      slot       <= '0;
      ld_blk     <= '0;
      rec_idx    <= '0;
      resp_valid <= 1'b0;
      resp_rdata <= '0;
      resp_hit   <= 1'b0;
      stash_ovf  <= 1'b0;
      tpos_ovf   <= 1'b0;
      proto_err  <= 1'b0;
      events     <= '0;
    end else begin
      resp_valid <= 1'b0;
      events     <= '0;
      if (t_ovf) tpos_ovf <= 1'b1;
      if (dq_err || pq_err || d_err) proto_err <= 1'b1;

      if (power_fail) begin
        st <= S_DEAD;
      end else begin
        unique case (st)
          S_IDLE: begin
            if (rec_start) begin
              st      <= S_REC_REQ;
              rec_idx <= '0;
            end else if (req_valid) begin
              r_write <= req_write;
              r_addr  <= req_addr;
              r_wdata <= req_wdata;
              st      <= S_CHK;
            end
          end
          S_CHK: begin
            if (s_lk_hit) begin
              resp_valid <= 1'b1;
              resp_hit   <= 1'b1;
              resp_rdata <= s_rd_ent.data;
              events.stash_hit <= 1'b1;
              st <= S_IDLE;
            end else begin
              if (!queues_idle) events.queue_stall <= 1'b1;
              st <= S_WAITQ;
            end
          end
          S_WAITQ: if (queues_idle) st <= S_PMRD;
          S_PMRD:  st <= S_PMWAIT;
          S_PMWAIT: begin
            old_leaf <= p_rd_path & leaf_mask;
            new_leaf <= rng_leaf & leaf_mask;
            lvl  <= '0;
            slot <= '0;
            st   <= S_LD_REQ;
          end
          S_LD_REQ: if (nvm_rd_ready) st <= S_LD_WAIT;
          S_LD_WAIT: begin
            if (nvm_rd_resp_valid) begin
              ld_blk <= nvm_rd_resp;
              if (nvm_rd_resp.valid) begin
                st <= S_LD_CHK;
              end else if (last_slot && lvl == 8'(L)) begin
                st <= S_UPD_BK;
              end else begin
                slot <= last_slot ? '0 : slot + 1'b1;
                lvl  <= last_slot ? lvl + 1'b1 : lvl;
                st   <= S_LD_REQ;
              end
            end
          end
          S_LD_CHK: begin
            if (ld_act == LD_DROP_STALE) events.stale_drop <= 1'b1;
            if ((ld_act == LD_INSERT || ld_act == LD_KEEP_BK) && !s_free_found) stash_ovf <= 1'b1;
            if (ld_act == LD_INSERT && ld_blk.bk) events.bk_restore <= 1'b1;
            if (ld_act == LD_KEEP_BK) events.bk_keep <= 1'b1;
            if (last_slot && lvl == 8'(L)) begin
              st <= S_UPD_BK;
            end else begin
              slot <= last_slot ? '0 : slot + 1'b1;
              lvl  <= last_slot ? lvl + 1'b1 : lvl;
              st   <= S_LD_REQ;
            end
          end
          S_UPD_BK: begin
            if (!s_free_found) stash_ovf <= 1'b1;
            if (s_lk_hit) begin
              events.backup <= 1'b1;
              st <= S_UPD;
            end else begin
              events.new_block <= 1'b1;
              resp_valid <= 1'b1;
              resp_hit   <= 1'b0;
              resp_rdata <= '0;
              st <= S_EV_BEGIN;
            end
          end
          S_UPD: begin
            resp_valid <= 1'b1;
            resp_hit   <= 1'b0;
            resp_rdata <= s_rd_ent.data;
            st <= S_EV_BEGIN;
          end
          S_EV_BEGIN: begin
            events.evict_round <= 1'b1;
            lvl  <= 8'(L);
            slot <= '0;
            st   <= S_EV;
          end
          S_EV: begin
            if (d_pm_valid) events.pm_persist <= 1'b1;
            if (last_slot && lvl == 8'd0) begin
              st <= S_IDLE;
            end else begin
              slot <= last_slot ? '0 : slot + 1'b1;
              lvl  <= last_slot ? lvl - 1'b1 : lvl;
            end
          end
          S_REC_REQ: if (pm_rd_ready) st <= S_REC_WAIT;
          S_REC_WAIT: begin
            if (pm_rd_resp_valid) begin
              if (rec_idx == addr_t'(NBLK - 1)) begin
                st <= S_IDLE;
              end else begin
                rec_idx <= rec_idx + 1'b1;
                st <= S_REC_REQ;
              end
            end
          end
          S_DEAD: ;
          default: st <= S_IDLE;
        endcase
      end
    end
  end

  assign busy           = (st != S_IDLE);
  assign recovering     = (st == S_REC_REQ) || (st == S_REC_WAIT);
  assign idle_persisted = (st == S_IDLE) && queues_idle;

  // an evicted regular block carries the path id parked for it
  a_tpos_matches_block: assert property (@(posedge clk) disable iff (!rst_n)
    (st == S_EV && s_ev_found && !s_rd_ent.bk && t_lk_hit) |-> (t_lk_path == s_rd_ent.leaf));
  // the drained PosMap entry never collides with a recovery write
  a_no_pm_write_clash: assert property (@(posedge clk) disable iff (!rst_n)
    !(pq_pop_valid && st == S_REC_WAIT));
  // a round of Z*(L+1) slots fits in each queue
  initial assert (DWPQ >= NSLOT && PWPQ >= NSLOT)
    else $error("WPQs must hold Z*(L+1) entries");

endmodule
