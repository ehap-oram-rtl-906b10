// tb_temp_posmap: self-checking test of the temporary PosMap (T = 6).
// Random inserts, updates of an existing address, lookups and removals are
// checked against an associative-array reference; a full table must refuse a
// new address and raise ovf.
module tb_temp_posmap;
  import ehap_pkg::*;
  localparam int T = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ins_en = 0, rm_en = 0, lk_hit, full, ovf;
  addr_t ins_addr = '0, lk_addr = '0;
  path_t ins_path = '0, lk_path;
  logic [$clog2(T+1)-1:0] count;

  temp_posmap #(.T(T)) dut (.*);

  path_t ref_m [addr_t];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic verify();
    for (int a = 0; a < 12; a++) begin
      lk_addr = addr_t'(a); #1;
      chk(lk_hit == ref_m.exists(addr_t'(a)), $sformatf("hit a=%0d", a));
      if (ref_m.exists(addr_t'(a))) chk(lk_path == ref_m[addr_t'(a)], "path");
    end
    chk(int'(count) == ref_m.num(), "count");
    chk(full == (ref_m.num() == T), "full");
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    verify();
    for (int it = 0; it < 300; it++) begin
      int op;
      addr_t a;
      op = $urandom_range(0, 2);
      a  = addr_t'($urandom_range(0, 11));
      @(negedge clk);
      if (op != 0) begin
        bit expect_ovf;
        expect_ovf = !ref_m.exists(a) && ref_m.num() == T;
        ins_en = 1; ins_addr = a; ins_path = path_t'($urandom);
        @(negedge clk); ins_en = 0;
        #1 chk(ovf == expect_ovf, "ovf");
        if (!expect_ovf) ref_m[a] = ins_path;
      end else begin
        lk_addr = a; rm_en = 1;
        @(negedge clk); rm_en = 0;
        if (ref_m.exists(a)) ref_m.delete(a);
      end
      verify();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
