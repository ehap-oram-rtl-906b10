// tb_leaf_rng: self-checking test of the path id generator (L = 5).
// Compares the state sequence with a software model of the same Galois LFSR,
// checks that the output holds without `next`, that all 2^L path ids appear
// over a long run, and that the period is not short.
module tb_leaf_rng;
  import ehap_pkg::*;
  localparam int L = 5;
  logic clk = 0, rst_n = 0, next = 0;
  always #5 clk = ~clk;
  path_t leaf;
  int checks = 0, failures = 0;

  leaf_rng #(.L(L), .SEED(32'h1234_5678)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] m;
    bit seen [1 << L];
    int nseen;
    m = 32'h1234_5678;
    repeat (2) @(negedge clk); rst_n = 1;
    chk(leaf == path_t'(m[L-1:0]), "seed");
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk); next = 1;
      @(negedge clk); next = 0;
      m = m[0] ? ((m >> 1) ^ 32'h8020_0003) : (m >> 1);
      chk(leaf == path_t'(m[L-1:0]), "step");
      chk(leaf[23:L] == '0, "upper bits zero");
      seen[leaf[L-1:0]] = 1'b1;
      @(negedge clk);
      chk(leaf == path_t'(m[L-1:0]), "hold");
    end
    nseen = 0;
    foreach (seen[i]) nseen += seen[i];
    chk(nseen == (1 << L), "all path ids appear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
