// nvm_model: behavioural model of the off-chip non-volatile memory seen by
// the controller: the ORAM tree (slot-addressed 64-byte blocks) and the
// persistent PosMap table. Not synthesizable; testbench use only.
//
// Storage is sparse (associative arrays), so a full 4 GB tree costs only the
// slots actually written. An unwritten slot reads as a dummy block. An
// unwritten PosMap entry reads as init_path(a), a fixed hash of the address,
// which stands for the labelling the table was created with. Tree reads and
// PosMap reads answer RD_LAT cycles after they are accepted, one at a time;
// writes are accepted when a random ready allows (about 3 in 4 cycles) and
// take effect at once. Counters record traffic for the testbench.
module nvm_model
  import ehap_pkg::*;
#(
  parameter int unsigned L      = 23,
  parameter int unsigned RD_LAT = 4
) (
  input  logic      clk,
  input  logic      nvm_rd_valid,
  output logic      nvm_rd_ready,
  input  nvm_addr_t nvm_rd_addr,
  output logic      nvm_rd_resp_valid,
  output blk_t      nvm_rd_resp,
  input  logic      nvm_wr_valid,
  output logic      nvm_wr_ready,
  input  nvm_addr_t nvm_wr_addr,
  input  blk_t      nvm_wr_blk,
  input  logic      pm_wr_valid,
  output logic      pm_wr_ready,
  input  addr_t     pm_wr_addr,
  input  path_t     pm_wr_path,
  input  logic      pm_rd_valid,
  output logic      pm_rd_ready,
  input  addr_t     pm_rd_addr,
  output logic      pm_rd_resp_valid,
  output path_t     pm_rd_resp
);

  blk_t  tree [nvm_addr_t];
  path_t pmt  [addr_t];
  int    n_rd = 0, n_wr = 0, n_pm_wr = 0, n_pm_rd = 0;

  function automatic path_t init_path(input addr_t a);
    logic [31:0] h;
    h = a * 32'h9E37_79B1;
    return path_t'(h[31:8]) & path_t'((1 << L) - 1);
  endfunction

  function automatic path_t pm_get(input addr_t a);
    return pmt.exists(a) ? pmt[a] : init_path(a);
  endfunction

  function automatic blk_t tree_get(input nvm_addr_t a);
    return tree.exists(a) ? tree[a] : '0;
  endfunction

  int rd_cnt = 0, pm_cnt = 0;
  nvm_addr_t rd_a;
  addr_t pm_a;

  initial begin
    nvm_rd_resp_valid = 0; nvm_rd_resp = '0; pm_rd_resp_valid = 0; pm_rd_resp = '0;
    nvm_wr_ready = 0; pm_wr_ready = 0; rd_a = '0; pm_a = '0;
  end

  assign nvm_rd_ready = (rd_cnt == 0);
  assign pm_rd_ready  = (pm_cnt == 0);

  always @(posedge clk) begin
    nvm_rd_resp_valid <= 1'b0;
    pm_rd_resp_valid  <= 1'b0;
    if (nvm_rd_valid && nvm_rd_ready) begin rd_cnt <= RD_LAT; rd_a <= nvm_rd_addr; n_rd++; end
    else if (rd_cnt > 1) rd_cnt <= rd_cnt - 1;
    else if (rd_cnt == 1) begin
      rd_cnt <= 0; nvm_rd_resp_valid <= 1'b1; nvm_rd_resp <= tree_get(rd_a);
    end
    if (pm_rd_valid && pm_rd_ready) begin pm_cnt <= RD_LAT; pm_a <= pm_rd_addr; n_pm_rd++; end
    else if (pm_cnt > 1) pm_cnt <= pm_cnt - 1;
    else if (pm_cnt == 1) begin
      pm_cnt <= 0; pm_rd_resp_valid <= 1'b1; pm_rd_resp <= pm_get(pm_a);
    end
    if (nvm_wr_valid && nvm_wr_ready) begin tree[nvm_wr_addr] = nvm_wr_blk; n_wr++; end
    if (pm_wr_valid && pm_wr_ready) begin pmt[pm_wr_addr] = pm_wr_path; n_pm_wr++; end
  end

  always @(negedge clk) begin
    nvm_wr_ready <= ($urandom_range(0, 3) != 0);
    pm_wr_ready  <= ($urandom_range(0, 3) != 0);
  end

endmodule
