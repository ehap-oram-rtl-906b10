// temp_posmap: the temporary PosMap of EHAP-ORAM.
//
// When an access remaps block a from path l to a fresh path l', the pair
// (a, l') is parked here instead of overwriting the main PosMap, so the
// persisted map keeps pointing at l until block a itself is evicted. During
// eviction the controller looks up each evicted block; on a hit the entry is
// handed to the PosMap WPQ and removed (rm_en). The paper sizes it like the
// stash (T = 200 entries) so it cannot overflow before the stash does.
//
// Interface: ins_en writes (ins_addr, ins_path), replacing an entry of the
// same address if one exists, else taking the first free entry. lk_addr is
// searched combinationally (lk_hit, lk_path); rm_en frees the entry that
// matches lk_addr at the clock edge. full/count report occupancy; an insert
// into a full table is refused and raises ovf for one cycle. The CAM search
// is this design's choice; the paper gives only the table's role and size.
module temp_posmap
  import ehap_pkg::*;
#(
  parameter int unsigned T = 200,
  localparam int unsigned IW = (T > 1) ? $clog2(T) : 1,
  localparam int unsigned CW = $clog2(T + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ins_en,
  input  addr_t         ins_addr,
  input  path_t         ins_path,
  input  addr_t         lk_addr,
  output logic          lk_hit,
  output path_t         lk_path,
  input  logic          rm_en,
  output logic          full,
  output logic          ovf,
  output logic [CW-1:0] count
);

  logic  vld [T];
  addr_t adr [T];
  path_t pth [T];

  logic          lk_any, ins_match, ins_free;
  logic [IW-1:0] lk_i, ins_mi, ins_fi;

  always_comb begin
    lk_any = 1'b0; lk_i = '0;
    ins_match = 1'b0; ins_mi = '0;
    ins_free = 1'b0; ins_fi = '0;
    for (int i = T - 1; i >= 0; i--) begin
      if (vld[i] && adr[i] == lk_addr)  begin lk_any = 1'b1;    lk_i = IW'(i);   end
      if (vld[i] && adr[i] == ins_addr) begin ins_match = 1'b1; ins_mi = IW'(i); end
      if (!vld[i])                      begin ins_free = 1'b1;  ins_fi = IW'(i); end
    end
  end

  assign lk_hit  = lk_any;
  assign lk_path = pth[lk_i];
  assign full    = !ins_free;

  always_comb begin
    count = '0;
    for (int i = 0; i < T; i++) count += CW'(vld[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < T; i++) begin
        vld[i] <= 1'b0; adr[i] <= '0; pth[i] <= '0;
      end
      ovf <= 1'b0;
    end else begin
      ovf <= 1'b0;
      if (rm_en && lk_any) vld[lk_i] <= 1'b0;
      if (ins_en) begin
        if (ins_match) begin
          pth[ins_mi] <= ins_path;
        end else if (ins_free) begin
          vld[ins_fi] <= 1'b1;
          adr[ins_fi] <= ins_addr;
          pth[ins_fi] <= ins_path;
        end else begin
          ovf <= 1'b1;
        end
      end
    end
  end

endmodule
