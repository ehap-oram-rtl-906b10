// leaf_rng: source of fresh random path ids for remapping.
//
// The paper only says the new path id is "randomly generated". This design
// uses a 32-bit Galois LFSR (polynomial x^32 + x^22 + x^2 + x + 1, maximal
// length) that advances one step on every `next` strobe; the path id is the
// low L bits of the state. It is a placeholder for a cryptographic generator
// and is not itself secure. Reset loads SEED, which must be non-zero.
module leaf_rng
  import ehap_pkg::*;
#(
  parameter int unsigned L    = 23,
  parameter logic [31:0] SEED = 32'hACE1_2468
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  next,
  output path_t leaf
);

  logic [31:0] st;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    st <= SEED;
    else if (next) st <= st[0] ? ((st >> 1) ^ 32'h8020_0003) : (st >> 1);
  end

  always_comb begin
    leaf = '0;
    leaf[L-1:0] = st[L-1:0];
  end

endmodule
