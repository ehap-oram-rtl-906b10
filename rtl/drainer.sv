// drainer: frames each eviction as one atomic round in the two WPQs.
//
// On ev_begin the drainer raises "start" to both queues in the same cycle and
// from the next cycle forwards every evicted block (blk_valid/blk) to the data
// block WPQ and every changed PosMap entry (pm_valid/pm) to the PosMap WPQ.
// It counts the blocks; once all Z*(L+1) slots of the path have arrived it
// raises "end" to both queues in the following cycle, which commits the round.
// A round that sees power_fail before its end is abandoned (the queues drop
// it). Blocks outside a round, or more than Z*(L+1) in one, raise err.
// The start/end protocol and the routing follow the paper; the one-cycle
// timing is this design's choice.
module drainer
  import ehap_pkg::*;
#(
  parameter int unsigned L = 23,
  parameter int unsigned Z = 4,
  localparam int unsigned NSLOT = Z * (L + 1),
  localparam int unsigned NW = $clog2(NSLOT + 1)
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    power_fail,
  input  logic    ev_begin,
  input  logic    blk_valid,
  input  wblk_t   blk,
  input  logic    pm_valid,
  input  pm_ent_t pm,
  output logic    start,
  output logic    end_o,
  output logic    dq_push,
  output wblk_t   dq_data,
  output logic    pq_push,
  output pm_ent_t pq_data,
  output logic    busy,
  output logic    err
);

  typedef enum logic [1:0] {D_IDLE, D_FILL, D_END} dstate_t;
  dstate_t        st;
  logic [NW-1:0]  nblk;

  assign start   = (st == D_IDLE) && ev_begin && !power_fail;
  assign end_o   = (st == D_END) && !power_fail;
  assign busy    = (st != D_IDLE);
  assign dq_push = (st == D_FILL) && blk_valid;
  assign dq_data = blk;
  assign pq_push = (st == D_FILL) && pm_valid;
  assign pq_data = pm;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= D_IDLE;
      nblk <= '0;
      err  <= 1'b0;
    end else begin
      err <= ((blk_valid || pm_valid) && st != D_FILL);
      if (power_fail) begin
        st <= D_IDLE;
        nblk <= '0;
      end else begin
        unique case (st)
          D_IDLE: if (ev_begin) begin st <= D_FILL; nblk <= '0; end
          D_FILL: if (blk_valid) begin
                    nblk <= nblk + 1'b1;
                    if (nblk == NW'(NSLOT - 1)) st <= D_END;
                  end
          D_END:  st <= D_IDLE;
          default: st <= D_IDLE;
        endcase
      end
    end
  end

endmodule
