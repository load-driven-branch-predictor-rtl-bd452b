// ldbp_sp: Stride Predictor (SP) of the LDBP retirement block.
//
// Each retiring load updates the entry selected by its PC.  An entry holds the
// five fields the paper lists: PC tag, last address, address delta, delta
// confidence and the tracking bit that marks loads belonging to a tracked
// load-branch chain.  A repeated delta raises the confidence by one; a new
// delta lowers it by CONF_DEC (saturating at zero) and replaces the stored
// delta, so confidence rises slowly and falls fast, as the paper recommends.
// A load is predictable when its confidence is saturated.
//
// Interface and timing: the ld_* outputs describe the retiring load in the
// same cycle (combinational read of the old entry); the entry is written at
// the clock edge.  rd_* are combinational read ports used at BTT allocation.
// set_track/clr_track/clr_all_track change tracking bits at the clock edge.
// ld_delta_changed flags a tracked entry whose delta changed or that is being
// evicted by another load, which the PLQ uses to stop the chain.
//
// Paper: fields, the asymmetric confidence update, predictable = saturated,
// 48 entries.  Own choices: direct mapping with index (pc>>1) mod SP_ENTRIES,
// the tag width, the counter width and decrement, full-width last address,
// deltas limited to DELTA_W signed bits and a zero delta never predictable.
module ldbp_sp
  import ldbp_pkg::*;
#(
  parameter int unsigned ENTRIES   = SP_ENTRIES,
  parameter int unsigned TAG_W     = 10,
  parameter int unsigned CONF_BITS = 3,
  parameter int unsigned CONF_DEC  = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // retiring load
  input  logic                    ld_valid,
  input  xword_t                  ld_pc,
  input  xword_t                  ld_addr,
  output sp_idx_t                 ld_idx,
  output logic                    ld_predictable,
  output logic                    ld_tracking,
  output logic                    ld_delta_changed,
  // read ports for allocation
  input  sp_idx_t [MAX_LOADS-1:0] rd_idx,
  output xword_t  [MAX_LOADS-1:0] rd_lastaddr,
  output delta_t  [MAX_LOADS-1:0] rd_delta,
  // tracking bit control
  input  logic    [MAX_LOADS-1:0] set_track,
  input  sp_idx_t [MAX_LOADS-1:0] set_idx,
  input  logic    [MAX_LOADS-1:0] clr_track,
  input  sp_idx_t [MAX_LOADS-1:0] clr_idx,
  input  logic                    clr_all_track
);

  localparam logic [CONF_BITS-1:0] CONF_MAX = '1;

  logic                 valid_q [ENTRIES];
  logic [TAG_W-1:0]     tag_q   [ENTRIES];
  xword_t               last_q  [ENTRIES];
  delta_t               delta_q [ENTRIES];
  logic [CONF_BITS-1:0] conf_q  [ENTRIES];
  logic                 track_q [ENTRIES];

  logic [TAG_W-1:0]     ld_tag;
  logic                 hit, fits, same;
  xword_t               diff;
  logic [CONF_BITS-1:0] conf_nx;

  always_comb begin
    ld_idx  = sp_idx_t'((ld_pc >> 1) % 64'(ENTRIES));
    ld_tag  = TAG_W'((ld_pc >> 1) / 64'(ENTRIES));
    hit     = valid_q[ld_idx] && (tag_q[ld_idx] == ld_tag);
    diff    = ld_addr - last_q[ld_idx];
    fits    = (diff[XLEN-1:DELTA_W-1] == '0) || (diff[XLEN-1:DELTA_W-1] == '1);
    same    = fits && (delta_q[ld_idx] == delta_t'(diff[DELTA_W-1:0]));
    if (!hit)
      conf_nx = '0;
    else if (same)
      conf_nx = (conf_q[ld_idx] == CONF_MAX) ? CONF_MAX : conf_q[ld_idx] + 1'b1;
    else
      conf_nx = (conf_q[ld_idx] > CONF_BITS'(CONF_DEC)) ? conf_q[ld_idx] - CONF_BITS'(CONF_DEC) : '0;
    ld_predictable   = hit && same && (conf_nx == CONF_MAX) && (delta_q[ld_idx] != '0);
    ld_tracking      = hit && track_q[ld_idx];
    ld_delta_changed = ld_valid && track_q[ld_idx] && valid_q[ld_idx] && (!hit || !same);
  end

  always_comb begin
    for (int k = 0; k < MAX_LOADS; k++) begin
      rd_lastaddr[k] = last_q[rd_idx[k]];
      rd_delta[k]    = delta_q[rd_idx[k]];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        valid_q[i] <= 1'b0;
        track_q[i] <= 1'b0;
        conf_q[i]  <= '0;
        delta_q[i] <= '0;
        tag_q[i]   <= '0;
        last_q[i]  <= '0;
      end
    end else begin
      if (ld_valid) begin
        last_q[ld_idx] <= ld_addr;
        conf_q[ld_idx] <= conf_nx;
        if (!hit) begin
          valid_q[ld_idx] <= 1'b1;
          tag_q[ld_idx]   <= ld_tag;
          delta_q[ld_idx] <= '0;
          track_q[ld_idx] <= 1'b0;
        end else if (!same) begin
          delta_q[ld_idx] <= fits ? delta_t'(diff[DELTA_W-1:0]) : '0;
        end
      end
      for (int k = 0; k < MAX_LOADS; k++)
        if (set_track[k]) track_q[set_idx[k]] <= 1'b1;
      for (int k = 0; k < MAX_LOADS; k++)
        if (clr_track[k]) track_q[clr_idx[k]] <= 1'b0;
      if (clr_all_track)
        for (int i = 0; i < ENTRIES; i++) track_q[i] <= 1'b0;
    end
  end

endmodule
