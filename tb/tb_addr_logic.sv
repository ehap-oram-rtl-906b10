// tb_addr_logic: self-checking test of the tree slot address generator at the
// paper's size (L = 23, Z = 4). The reference walks down the tree from the
// root: the child index is 2*b+1 or 2*b+2 by the path id bit of that level.
module tb_addr_logic;
  import ehap_pkg::*;
  localparam int L = 23, Z = 4;
  int checks = 0, failures = 0;
  path_t leaf; logic [7:0] level, slot; logic [31:0] bucket; nvm_addr_t nvm_addr;

  addr_logic #(.L(L), .Z(Z)) dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      longint b;
      int k, s;
      leaf = path_t'($urandom_range(0, (1 << L) - 1));
      if (it < 8) leaf = (it[0]) ? path_t'((1 << L) - 1) : '0;
      k = (it < 8) ? ((it[1]) ? L : 0) : $urandom_range(0, L);
      s = $urandom_range(0, Z - 1);
      b = 0;
      for (int j = 1; j <= k; j++) b = 2 * b + 1 + ((leaf >> (L - j)) & 1);
      level = 8'(k); slot = 8'(s); #1;
      checks++;
      if (bucket != 32'(b) || nvm_addr != 32'((b * Z + s) * 64)) begin
        failures++;
        $display("FAIL leaf=%0d k=%0d s=%0d got %0d/%h want %0d", leaf, k, s, bucket, nvm_addr, b);
      end
    end
    // the last slot of a full-size tree sits just below 4 GB
    leaf = path_t'((1 << L) - 1); level = 8'(L); slot = 8'(Z - 1); #1;
    checks++;
    // bucket 2^24-2, slot 3: ((2^24-2)*4+3)*64 = 2^32 - 5*64
    if (nvm_addr != 32'hFFFF_FEC0) begin failures++; $display("FAIL last slot %h", nvm_addr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
