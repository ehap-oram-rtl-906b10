// addr_logic: physical address generation for the ORAM tree.
//
// The tree of levels 0..L is stored bucket by bucket in breadth-first order:
// the bucket on path `leaf` at level k has index (2^k - 1) + (leaf >> (L - k)),
// and holds Z block slots of 64 bytes each. The slot's byte address is
// BASE + (bucket * Z + slot) * 64. The paper names this block ("Address
// Logic", "generate physical addr.") and its job; the breadth-first layout is
// this design's choice. Purely combinational.
module addr_logic
  import ehap_pkg::*;
#(
  parameter int unsigned L    = 23,
  parameter int unsigned Z    = 4,
  parameter nvm_addr_t   BASE = '0
) (
  input  path_t       leaf,
  input  logic [7:0]  level,
  input  logic [7:0]  slot,
  output logic [31:0] bucket,
  output nvm_addr_t   nvm_addr
);

  logic [31:0] lvl_first, offs;
  always_comb begin
    lvl_first = (32'd1 << level) - 32'd1;
    offs      = 32'(leaf[L-1:0]) >> (L - int'(level));
    bucket    = lvl_first + offs;
    nvm_addr  = BASE + NVM_AW'((bucket * Z + 32'(slot)) * BLK_BYTES);
  end

endmodule
