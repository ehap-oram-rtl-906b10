// ehap_pkg: widths and record types shared by the EHAP-ORAM controller blocks.
//
// A tree block is 64 bytes of data plus a header (program address, path id,
// and two flags). The 32-bit address and 24-bit path id follow the paper's
// sizing of a PosMap WPQ entry as 32 + 24 bits. The valid flag encodes the
// dummy address (a cleared valid bit marks a dummy block) and the bk flag marks
// a backup copy; both encodings are this design's own choice. The IV fields of
// the header belong to the encryption engine, which is outside this RTL.
package ehap_pkg;

  localparam int unsigned ADDR_W  = 32;   // program (block) address width
  localparam int unsigned PATH_W  = 24;   // path id (leaf label) width
  localparam int unsigned DATA_W  = 512;  // 64-byte data block
  localparam int unsigned NVM_AW  = 32;   // byte address on the NVM bus
  localparam int unsigned BLK_BYTES = 64;

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [PATH_W-1:0] path_t;
  typedef logic [DATA_W-1:0] data_t;
  typedef logic [NVM_AW-1:0] nvm_addr_t;

  // One block as kept in the stash and written to / read from a tree slot.
  typedef struct packed {
    logic  valid;   // 0 = dummy block
    logic  bk;      // backup copy of an accessed block
    addr_t addr;
    path_t leaf;
    data_t data;
  } blk_t;

  // One (address, path id) pair of the temporary PosMap and the PosMap WPQ.
  typedef struct packed {
    addr_t addr;
    path_t path;
  } pm_ent_t;

  // One data block WPQ entry: the tree slot it goes to and the block.
  typedef struct packed {
    nvm_addr_t nvm_addr;
    blk_t      blk;
  } wblk_t;

  // One-cycle event strobes of the controller, for statistics.
  typedef struct packed {
    logic stash_hit;     // step 1 served the request from the stash
    logic queue_stall;   // a miss waited for the WPQs of the previous round
    logic backup;        // step 4 created a backup copy
    logic new_block;     // first touch of a block: nothing found on the path
    logic stale_drop;    // path load discarded an outdated copy
    logic bk_restore;    // path load took a block from a backup copy
    logic bk_keep;       // path load kept a still-needed backup copy
    logic pm_persist;    // eviction moved a temporary PosMap entry to the WPQ
    logic evict_round;   // an eviction round started
  } ehap_events_t;

endpackage
