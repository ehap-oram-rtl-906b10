// tb_posmap: self-checking test of the position map (NBLK = 64).
// Writes every entry, then does random reads and writes, checking the
// one-cycle read latency and that a same-cycle read returns the old value.
module tb_posmap;
  import ehap_pkg::*;
  localparam longint N = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rd_en = 0, wr_en = 0;
  addr_t rd_addr = '0, wr_addr = '0;
  path_t rd_path, wr_path = '0;
  path_t ref_m [N];

  posmap #(.NBLK(N)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = addr_t'(i); wr_path = path_t'($urandom); ref_m[i] = wr_path;
    end
    @(negedge clk); wr_en = 0;
    for (int it = 0; it < 400; it++) begin
      int ra, wa;
      path_t expect_p;
      ra = $urandom_range(0, N - 1);
      wa = (it % 4 == 0) ? ra : $urandom_range(0, N - 1);
      @(negedge clk);
      rd_en = 1; rd_addr = addr_t'(ra) | 32'h0100_0000;   // upper bits ignored
      wr_en = $urandom_range(0, 1); wr_addr = addr_t'(wa); wr_path = path_t'($urandom);
      expect_p = ref_m[ra];
      if (wr_en) ref_m[wa] = wr_path;
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      chk(rd_path == expect_p, $sformatf("read %0d", ra));
      // rd_path holds while rd_en is low
      @(negedge clk);
      chk(rd_path == expect_p, "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
