// ldbp_pkg: sizes, field types and helper functions shared by every LDBP module.
//
// The Load Driven Branch Predictor (LDBP) watches retiring instructions for a
// low-confidence branch whose operands come, through a few simple ALU
// operations, from loads with a stable address stride.  It then issues those
// loads ahead of time (trigger loads), runs the short backward slice on the
// returned data and keeps the precomputed branch outcomes in a queue that the
// fetch stage reads.
//
// Table sizes (48-entry SP and PLQ, 32-register RTT and CSB, 8-entry BTT, BOT
// and CST, 16-entry LOR/LOT, 64-deep data and outcome queues, 5 loads per
// chain, 4 operations per branch source, 8 per branch, 3-bit accuracy
// counter, 3-bit operation counter) are the paper's.  The 32-bit micro-op
// format, the operand-reference encoding, the PC hash and the tag widths are
// this design's own choices.
// OPIDX_W and some PC bits in btt_tag appear unused to lint in modules that
// import the package without needing them.
package ldbp_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned XLEN        = 64;
  localparam int unsigned NREGS       = 32;   // RTT and CSB entries
  localparam int unsigned SP_ENTRIES  = 48;
  localparam int unsigned PLQ_ENTRIES = 48;
  localparam int unsigned BTT_ENTRIES = 8;    // also BOT and CST entries
  localparam int unsigned LOR_ENTRIES = 16;   // also LOT entries
  localparam int unsigned OQ_DEPTH    = 64;   // LOT data queue and BOT outcome queue
  localparam int unsigned MAX_LOADS   = 5;    // loads per chain
  localparam int unsigned SRC_OPS     = 4;    // ALU ops per branch source (CSB sub-entries)
  localparam int unsigned CST_OPS     = 8;    // ALU ops per branch (CST sub-entries)
  localparam int unsigned NOPS_W      = 3;    // rtt.nops counter
  localparam int unsigned ACC_BITS    = 3;    // btt.accuracy counter
  localparam int unsigned DELTA_W     = 16;   // stored address delta (signed)

  localparam int unsigned SP_IDX_W   = $clog2(SP_ENTRIES);
  localparam int unsigned BTT_IDX_W  = $clog2(BTT_ENTRIES);
  localparam int unsigned LOR_IDX_W  = $clog2(LOR_ENTRIES);
  localparam int unsigned OQ_IDX_W   = $clog2(OQ_DEPTH);
  localparam int unsigned NL_W       = $clog2(MAX_LOADS + 1);
  localparam int unsigned SLOT_W     = $clog2(MAX_LOADS);
  localparam int unsigned OPIDX_W    = $clog2(CST_OPS);
  localparam int unsigned NOPS_SAT   = (1 << NOPS_W) - 1;  // saturated rtt.nops = invalid chain

  typedef logic [XLEN-1:0]      xword_t;
  typedef logic [4:0]           reg_t;
  typedef logic [SP_IDX_W-1:0]  sp_idx_t;
  typedef logic [BTT_IDX_W-1:0] btt_idx_t;
  typedef logic [LOR_IDX_W-1:0] lor_idx_t;
  typedef logic [OQ_IDX_W-1:0]  oq_idx_t;
  typedef logic [NL_W-1:0]      nl_t;
  typedef logic [SLOT_W-1:0]    slot_t;
  typedef logic signed [DELTA_W-1:0] delta_t;

  // ------------------------------------------------------------ micro-ops
  // Simple integer operations a chain may contain (RV64 names).
  typedef enum logic [3:0] {
    OP_ADD  = 4'd0,  OP_SUB  = 4'd1,  OP_AND  = 4'd2,  OP_OR   = 4'd3,
    OP_XOR  = 4'd4,  OP_SLL  = 4'd5,  OP_SRL  = 4'd6,  OP_SRA  = 4'd7,
    OP_SLT  = 4'd8,  OP_SLTU = 4'd9,  OP_ADDW = 4'd10, OP_SUBW = 4'd11,
    OP_SLLW = 4'd12, OP_SRLW = 4'd13, OP_SRAW = 4'd14, OP_NOP  = 4'd15
  } alu_op_e;

  typedef enum logic [2:0] {
    BR_EQ = 3'd0, BR_NE = 3'd1, BR_LT = 3'd2, BR_GE = 3'd3, BR_LTU = 3'd4, BR_GEU = 3'd5
  } br_cond_e;

  // Operand reference inside a snippet.
  typedef enum logic [1:0] {
    REF_ZERO = 2'd0,   // constant 0 (x0)
    REF_LOAD = 2'd1,   // load slot idx of the branch's load list
    REF_OP   = 2'd2,   // result of snippet op idx
    REF_IMM  = 2'd3    // the op's own immediate
  } ref_kind_e;

  typedef struct packed {
    ref_kind_e         kind;
    logic [2:0]        idx;
  } opref_t;

  // 32-bit snippet operation: 4 + 5 + 5 + 16 = 30 bits, 2 spare.
  typedef struct packed {
    logic [1:0]        spare;
    alu_op_e           op;
    opref_t            a;
    opref_t            b;
    logic [15:0]       imm;
  } uop_t;

  // Op list of one register (CSB entry).
  typedef struct packed {
    logic                       valid;
    logic [2:0]                 nops;      // 0..SRC_OPS
    opref_t                     res;       // reference that yields the register value
    uop_t [SRC_OPS-1:0]         ops;
  } csb_entry_t;

  // Backward slice of one branch (CST entry).
  typedef struct packed {
    logic [3:0]                 nops;      // 0..CST_OPS
    nl_t                        nloads;
    br_cond_e                   cond;
    opref_t                     res_a;
    opref_t                     res_b;
    uop_t [CST_OPS-1:0]         ops;
  } snippet_t;

  // RTT entry.
  typedef struct packed {
    logic [NOPS_W-1:0]          nops;      // NOPS_SAT = invalid
    nl_t                        nloads;
    sp_idx_t [MAX_LOADS-1:0]    sptr;
  } rtt_entry_t;

  // ------------------------------------------------------- retire port
  typedef enum logic [2:0] {
    RK_NONE    = 3'd0,  // writes no register (store, jump without link, ...)
    RK_LOAD    = 3'd1,  // integer load
    RK_ALU     = 3'd2,  // simple ALU op listed in alu_op_e
    RK_COMPLEX = 3'd3,  // any other register write (mul/div, FP, large constants, ...)
    RK_BRANCH  = 3'd4   // conditional branch
  } ret_kind_e;

  typedef struct packed {
    logic        valid;
    ret_kind_e   kind;
    xword_t      pc;
    reg_t        dst;
    reg_t        src1;
    reg_t        src2;
    alu_op_e     alu_op;
    logic        use_imm;      // ALU second operand is imm
    logic [15:0] imm;
    br_cond_e    cond;
    xword_t      ld_addr;      // load effective address
    logic        br_taken;     // resolved direction
    logic        imli_conf;    // default predictor was confident
    logic        imli_pred;    // default predictor's direction
    logic        ldbp_used;    // LDBP supplied the prediction at fetch
    logic        ldbp_pred;    // LDBP's direction
  } retire_t;

  // ------------------------------------------------------------ helpers
  function automatic btt_idx_t btt_index(input xword_t pc);
    return btt_idx_t'((pc >> 1) % 64'(BTT_ENTRIES));
  endfunction

  function automatic logic [11:0] btt_tag(input xword_t pc);
    return pc[1 + BTT_IDX_W +: 12];
  endfunction

  // ALU of the snippet FSM.
  function automatic xword_t alu(input alu_op_e op, input xword_t a, input xword_t b);
    logic [31:0] w;
    unique case (op)
      OP_ADD:  return a + b;
      OP_SUB:  return a - b;
      OP_AND:  return a & b;
      OP_OR:   return a | b;
      OP_XOR:  return a ^ b;
      OP_SLL:  return a << b[5:0];
      OP_SRL:  return a >> b[5:0];
      OP_SRA:  return xword_t'($signed(a) >>> b[5:0]);
      OP_SLT:  return xword_t'($signed(a) < $signed(b));
      OP_SLTU: return xword_t'(a < b);
      OP_ADDW: begin w = a[31:0] + b[31:0];  return {{32{w[31]}}, w}; end
      OP_SUBW: begin w = a[31:0] - b[31:0];  return {{32{w[31]}}, w}; end
      OP_SLLW: begin w = a[31:0] << b[4:0];  return {{32{w[31]}}, w}; end
      OP_SRLW: begin w = a[31:0] >> b[4:0];  return {{32{w[31]}}, w}; end
      OP_SRAW: begin w = $signed(a[31:0]) >>> b[4:0]; return {{32{w[31]}}, w}; end
      default: return a;
    endcase
  endfunction

  function automatic logic br_eval(input br_cond_e c, input xword_t a, input xword_t b);
    unique case (c)
      BR_EQ:   return a == b;
      BR_NE:   return a != b;
      BR_LT:   return $signed(a) <  $signed(b);
      BR_GE:   return $signed(a) >= $signed(b);
      BR_LTU:  return a <  b;
      BR_GEU:  return a >= b;
      default: return 1'b0;
    endcase
  endfunction

  // Concatenate the load lists of two RTT entries (a first).  valid is low when
  // either input is invalid or the joint list is longer than MAX_LOADS.
  function automatic void rtt_concat(input rtt_entry_t a, input rtt_entry_t b,
                                     output logic valid, output nl_t nl,
                                     output sp_idx_t [MAX_LOADS-1:0] sptr);
    int unsigned tot;
    tot   = int'(a.nloads) + int'(b.nloads);
    valid = (a.nops != NOPS_W'(NOPS_SAT)) && (b.nops != NOPS_W'(NOPS_SAT)) && (tot <= MAX_LOADS);
    nl    = nl_t'(tot);
    for (int k = 0; k < MAX_LOADS; k++) begin
      if (k < int'(a.nloads))
        sptr[k] = a.sptr[k];
      else if (k - int'(a.nloads) < MAX_LOADS)
        sptr[k] = b.sptr[k - int'(a.nloads)];
      else
        sptr[k] = '0;
    end
  endfunction

  localparam rtt_entry_t RTT_EMPTY   = '{nops: '0, nloads: '0, sptr: '0};
  localparam rtt_entry_t RTT_INVALID = '{nops: NOPS_W'(NOPS_SAT), nloads: '0, sptr: '0};

endpackage
