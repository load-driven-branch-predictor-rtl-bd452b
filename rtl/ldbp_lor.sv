// ldbp_lor: Load Outcome Registers (LOR) of the LDBP fetch block.
//
// One register per load of every tracked chain.  It describes the window of
// load addresses whose data may still be useful:
//     ldstart, ldstart + delta, ..., ldstart + (OQ_DEPTH-1)*delta
// where ldstart is the address of the next instance of the load still to be
// consumed by a retiring branch, and lot_pos the LOT queue slot that holds
// ldstart's data.  Fields: ldstart, delta, lot_pos, stride pointer (the
// paper's four, 64+16+6+6 bits) plus owner (BTT/BOT index of the branch) and
// slot (position of the load in the branch's load list).
//
// Operations (all at the clock edge):
//   * alloc:   the chain's loads take the lowest free registers, in list order;
//              ldstart = sp.lastaddr + sp.delta, lot_pos = 0, LOT entry cleared.
//   * dealloc: every register of the owner is freed.
//   * adv:     the owner's branch retired: its LOT slot lot_pos is released,
//              then ldstart += delta and lot_pos += 1.
//   * cmp:     a trigger load completed.  Every register whose window holds the
//              address (lot_id = (addr - ldstart)/delta, 0 <= lot_id < OQ_DEPTH,
//              zero remainder) writes its LOT entry at slot
//              (lot_pos + lot_id) mod OQ_DEPTH.  The quotient comes from a
//              6-step restoring division; a negative delta is handled by
//              negating both operands.
// tl_addr = ldstart + delta*TL_DIST is each register's next trigger address.
//
// Paper: fields, Eq. 2 and Eq. 3, window end ldstart + n*delta, 16 entries.
// Own choices: owner/slot fields, ldstart kept at the retire-side position
// (see the BTT), allocation order.
module ldbp_lor
  import ldbp_pkg::*;
#(
  parameter int unsigned ENTRIES = LOR_ENTRIES,
  parameter int unsigned DEPTH   = OQ_DEPTH,
  parameter int unsigned TL_DIST = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // allocation
  input  logic                    alloc_valid,
  input  btt_idx_t                alloc_owner,
  input  nl_t                     alloc_nl,
  input  sp_idx_t [MAX_LOADS-1:0] alloc_sptr,
  input  xword_t  [MAX_LOADS-1:0] alloc_lastaddr,
  input  delta_t  [MAX_LOADS-1:0] alloc_delta,
  output logic [$clog2(ENTRIES+1)-1:0] free_cnt,
  input  logic                    dealloc_valid,
  input  btt_idx_t                dealloc_owner,
  input  logic                    clr_all,
  // retire-side advance
  input  logic                    adv_valid,
  input  btt_idx_t                adv_owner,
  // trigger load completion
  input  logic                    cmp_valid,
  input  xword_t                  cmp_addr,
  // LOT control, one per entry
  output logic    [ENTRIES-1:0]   lot_we,
  output oq_idx_t [ENTRIES-1:0]   lot_wslot,
  output logic    [ENTRIES-1:0]   lot_rel,
  output oq_idx_t [ENTRIES-1:0]   lot_rel_slot,
  output logic    [ENTRIES-1:0]   lot_clr,
  // state
  output logic     [ENTRIES-1:0]  e_valid,
  output btt_idx_t [ENTRIES-1:0]  e_owner,
  output slot_t    [ENTRIES-1:0]  e_slot,
  output oq_idx_t  [ENTRIES-1:0]  e_lot_pos,
  output sp_idx_t  [ENTRIES-1:0]  e_sptr,
  output xword_t   [ENTRIES-1:0]  tl_addr
);

  localparam int unsigned QW = $clog2(DEPTH);

  logic     [ENTRIES-1:0] valid_q;
  btt_idx_t               owner_q [ENTRIES];
  slot_t                  slot_q  [ENTRIES];
  sp_idx_t                sptr_q  [ENTRIES];
  xword_t                 start_q [ENTRIES];
  delta_t                 delta_q [ENTRIES];
  oq_idx_t                pos_q   [ENTRIES];

  // allocation targets: k-th load goes to the k-th free register
  logic [ENTRIES-1:0]     alloc_hit;
  slot_t                  alloc_k [ENTRIES];

  // Window match.  Returns hit and lot_id.
  function automatic void win_match(input xword_t addr, input xword_t start, input delta_t d,
                                    output logic hit, output logic [QW-1:0] q);
    xword_t diff, dd;
    xword_t rem;
    diff = addr - start;
    if (d < 0) begin
      diff = -diff;
      dd   = -xword_t'(signed'(d));
    end else begin
      dd   = xword_t'(signed'(d));
    end
    rem = diff;
    q   = '0;
    for (int b = QW - 1; b >= 0; b--) begin
      if (rem >= (dd << b)) begin
        rem  = rem - (dd << b);
        q[b] = 1'b1;
      end
    end
    hit = (d != 0) && (rem == '0) && (diff < (dd << QW));
  endfunction

  always_comb begin
    int unsigned nfree;
    int unsigned k;
    nfree = 0;
    k     = 0;
    for (int e = 0; e < ENTRIES; e++) begin
      alloc_hit[e] = 1'b0;
      alloc_k[e]   = '0;
      if (!valid_q[e]) begin
        nfree = nfree + 1;
        if (alloc_valid && k < int'(alloc_nl)) begin
          alloc_hit[e] = 1'b1;
          alloc_k[e]   = slot_t'(k);
        end
        k = k + 1;
      end
    end
    free_cnt = ($clog2(ENTRIES+1))'(nfree);
  end

  always_comb begin
    for (int e = 0; e < ENTRIES; e++) begin
      logic          h;
      logic [QW-1:0] q;
      win_match(cmp_addr, start_q[e], delta_q[e], h, q);
      lot_we[e]       = cmp_valid && valid_q[e] && h;
      lot_wslot[e]    = oq_idx_t'(pos_q[e] + q);
      lot_rel[e]      = adv_valid && valid_q[e] && owner_q[e] == adv_owner;
      lot_rel_slot[e] = pos_q[e];
      lot_clr[e]      = alloc_hit[e];
      e_valid[e]      = valid_q[e];
      e_owner[e]      = owner_q[e];
      e_slot[e]       = slot_q[e];
      e_lot_pos[e]    = pos_q[e];
      e_sptr[e]       = sptr_q[e];
      tl_addr[e]      = start_q[e] + xword_t'(signed'(delta_q[e])) * xword_t'(TL_DIST);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_q <= '0;
      for (int e = 0; e < ENTRIES; e++) begin
        owner_q[e] <= '0;
        slot_q[e]  <= '0;
        sptr_q[e]  <= '0;
        start_q[e] <= '0;
        delta_q[e] <= '0;
        pos_q[e]   <= '0;
      end
    end else begin
      for (int e = 0; e < ENTRIES; e++) begin
        if (lot_rel[e]) begin
          start_q[e] <= start_q[e] + xword_t'(signed'(delta_q[e]));
          pos_q[e]   <= pos_q[e] + 1'b1;
        end
        if (dealloc_valid && valid_q[e] && owner_q[e] == dealloc_owner)
          valid_q[e] <= 1'b0;
        if (alloc_hit[e]) begin
          valid_q[e] <= 1'b1;
          owner_q[e] <= alloc_owner;
          slot_q[e]  <= alloc_k[e];
          sptr_q[e]  <= alloc_sptr[alloc_k[e]];
          start_q[e] <= alloc_lastaddr[alloc_k[e]] + xword_t'(signed'(alloc_delta[alloc_k[e]]));
          delta_q[e] <= alloc_delta[alloc_k[e]];
          pos_q[e]   <= '0;
        end
      end
      if (clr_all) valid_q <= '0;
    end
  end

endmodule
