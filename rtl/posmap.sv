// posmap: the on-chip position map (PosMap) of the ORAM controller.
//
// One path id per logical block, indexed by the low bits of the block address.
// The default NBLK = 2^26 entries of 24 bits is the paper's 192 MB map for a
// 4 GB ORAM of 64-byte blocks with Z = 4 (the paper notes such a map would in
// practice live in a trusted memory region rather than on the die). It is
// written as a plain single-read, single-write memory: a read issued with rd_en
// returns its path id on rd_path one cycle later (SRAM-like timing, this
// design's choice); a write with wr_en lands at the clock edge. A read and a
// write to the same entry in one cycle return the old value.
//
// There is deliberately no reset: the content at power-up is any path id per
// block, which is a valid random initial labelling for an empty tree. After a
// crash the controller reloads the map from its persistent copy.
module posmap
  import ehap_pkg::*;
#(
  parameter longint unsigned NBLK = 64'd67108864, // 2^26 logical blocks
  localparam int unsigned IW = $clog2(NBLK)
) (
  input  logic  clk,
  input  logic  rd_en,
  input  addr_t rd_addr,
  output path_t rd_path,
  input  logic  wr_en,
  input  addr_t wr_addr,
  input  path_t wr_path
);

  path_t mem [NBLK];

  always_ff @(posedge clk) begin
    if (rd_en) rd_path <= mem[rd_addr[IW-1:0]];
    if (wr_en) mem[wr_addr[IW-1:0]] <= wr_path;
  end

endmodule
