// ldbp_trigger_queue: trigger-load request queue of LDBP.
//
// When a tracked branch retires, the BTT produces one trigger-load address per
// load of its chain (up to MAX_LOADS in one cycle).  This FIFO accepts them
// all at once (push_n addresses from push_addr[0..push_n-1]) and hands them
// to the data cache one per cycle with a valid/ready handshake.  Trigger
// loads are real loads, so an address, once accepted, is never dropped; the
// BTT only pushes when space shows room for all addresses of the branch.
//
// Interface and timing: push at the clock edge; req_valid/req_addr show the
// oldest entry and it leaves when req_ready is high at the clock edge.  space
// is the number of free entries.  clr empties the queue.
//
// Paper: trigger loads are generated when the branch retires and are actual
// loads, not prefetches.  Own choices: the queue itself, its depth.
module ldbp_trigger_queue
  import ldbp_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clr,
  input  nl_t                    push_n,
  input  xword_t [MAX_LOADS-1:0] push_addr,
  output logic [3:0]             space,
  output logic                   req_valid,
  output xword_t                 req_addr,
  input  logic                   req_ready
);

  localparam int unsigned AW = $clog2(DEPTH);

  xword_t          mem_q [DEPTH];
  logic [AW-1:0]   rd_q, wr_q;
  logic [AW:0]     cnt_q;
  logic            pop;

  assign req_valid = (cnt_q != '0);
  assign req_addr  = mem_q[rd_q];
  assign pop       = req_valid && req_ready;
  assign space     = 4'(DEPTH - int'(cnt_q));

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      for (int k = 0; k < MAX_LOADS; k++)
        if (k < int'(push_n)) mem_q[AW'(int'(wr_q) + k)] <= push_addr[k];
      wr_q  <= AW'(int'(wr_q) + int'(push_n));
      if (pop) rd_q <= rd_q + 1'b1;
      cnt_q <= cnt_q + (AW+1)'(push_n) - (AW+1)'(pop);
    end
  end

  // Pushing more than there is room for would drop a trigger load.
  assert property (@(posedge clk) disable iff (!rst_n) int'(push_n) <= int'(space))
    else $error("trigger queue overflow");

endmodule
