// dspe_pkg: types and constants shared by the DSPE blocks.
//
// The processor moves data in 512-bit words (64 bytes): one word holds a
// 64-element INT8 vector, 64 POSIT8 values, or one row of the Lite-MAC
// projection matrix. The word width, the command encoding and all threshold
// formats below are choices of this design; the paper fixes only the number of
// Attention Cores (4), the PE count per core (64), the 8-operand MBLM batch,
// the 0.8 redundancy-score switch point and the 8-bit, es=2 posit.
//
// Lint note: some constants (word bytes, posit width and es, MBLM group size,
// MIPS sizes, the default configuration) are documentation and test defaults
// that not every module reads.
package dspe_pkg;

  localparam int unsigned WORD_BITS  = 512;
  localparam int unsigned WORD_BYTES = WORD_BITS / 8;

  // DA-Posit format (n = 8, es = 2).
  localparam int unsigned POSIT_N  = 8;
  localparam int unsigned POSIT_ES = 2;

  // MBLM batch: 8 activations against one shared weight.
  localparam int unsigned MBLM_N = 8;

  // MIPS vector geometry.
  localparam int unsigned MIPS_DIM    = 64;  // INT8 elements per Q/K vector
  localparam int unsigned MIPS_LOW    = 8;   // Lite-MAC outputs = Merkle leaves
  localparam int unsigned MIPS_HW     = 16;  // hash width
  localparam int unsigned MIPS_LEVELS = 4;   // leaf level + 3 upper levels (8-4-2-1)
  localparam int unsigned MIPS_EXP    = 8;   // experts tracked
  localparam int unsigned IDX_W       = 10;  // vector / result index width
  localparam int unsigned DH_W        = MIPS_HW + 3; // delta-H: sum of up to 8 |diff|

  // Operation routed inside an Attention Core.
  typedef enum logic [1:0] {
    OP_MIPS  = 2'd0,
    OP_MBLM  = 2'd1,
    OP_POSIT = 2'd2
  } core_op_e;

  // MIPS decision.
  typedef enum logic [1:0] {
    DEC_NONE      = 2'd0,
    DEC_EARLY     = 2'd1,   // Early-Skip
    DEC_DIFF      = 2'd2,   // Diff-Reuse
    DEC_FULL      = 2'd3    // Full-Compute
  } mips_dec_e;

  // Run-time thresholds and Booth BN tables (static during a command).
  typedef struct packed {
    logic [7:0]        r_zero_act;   // |a| below this is skipped
    logic [7:0]        r_zero_wgt;   // |w| below this is skipped
    logic [3:0]        t_match;      // Booth-LUT "complete match" BV threshold
    logic [5:0]        bs_th;        // sum of (8-BV) over 7 pairs, "high similarity" bucket
    logic [3:0]        rl_th;        // repeat length for "long repeat" bucket
    logic [3:0][7:0]   bn_phigh;     // P(R=High | bs_hi, rl_hi), Q0.8, index {bs_hi, rl_hi}
    logic [7:0]        r_low;        // r_L, Q0.8
    logic [7:0]        r_high;       // r_H, Q0.8
    logic [DH_W-1:0]   t_zero;       // MIPS T_zero
    logic [DH_W-1:0]   s_th;         // MIPS S_th
  } dspe_cfg_t;

  // Reset values of the configuration registers (this design's defaults).
  localparam dspe_cfg_t CFG_DEFAULT = '{
    r_zero_act: 8'd2,
    r_zero_wgt: 8'd1,
    t_match:    4'd0,
    bs_th:      6'd40,
    rl_th:      4'd3,
    bn_phigh:   {8'd250, 8'd200, 8'd180, 8'd30},
    r_low:      8'd64,
    r_high:     8'd255,
    t_zero:     DH_W'(4),
    s_th:       DH_W'(64)
  };

  // Request entering an Attention Core through its iRouter.
  typedef struct packed {
    core_op_e                   op;
    logic [WORD_BITS-1:0]       data;    // activations / Q-K vector
    logic [WORD_BITS-1:0]       wgt;     // weights (POSIT: 64 values, MBLM: byte 0)
    logic [$clog2(MIPS_EXP)-1:0] expert; // MIPS: expert that owns the vector
    logic [IDX_W-1:0]           index;   // MIPS: vector index (Cos-SRAM address, result tag)
  } core_req_t;

  // Result leaving an Attention Core through its oRouter.
  typedef struct packed {
    core_op_e             op;
    logic [WORD_BITS-1:0] data;
  } core_rsp_t;

  // Top-level commands.
  typedef enum logic [2:0] {
    CMD_POSIT  = 3'd0,  // 64 POSIT8 products per selected core
    CMD_MBLM   = 3'd1,  // 8 INT8 products per selected core
    CMD_MIPS   = 3'd2,  // pruning decision for one Q/K vector per selected core
    CMD_COS_WR = 3'd3   // write a cosine score into the Cos-SRAM of the selected cores
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e                    op;
    logic [3:0]                 core_mask;
    logic                       qk_sel;   // MIPS: 0 = query SRAM, 1 = key SRAM
    logic [9:0]                 src_a;    // activation / vector word address
    logic [9:0]                 src_b;    // weight / parameter word address
    logic [9:0]                 dst;      // output-buffer word address
    logic [$clog2(MIPS_EXP)-1:0] expert;
    logic [IDX_W-1:0]           index;
    logic [15:0]                cos;      // CMD_COS_WR: score (Q1.15)
  } dspe_cmd_t;

  // Memories reachable from the host port.
  typedef enum logic [2:0] {
    MEM_INPUT  = 3'd0,
    MEM_WEIGHT = 3'd1,
    MEM_PARAM  = 3'd2,
    MEM_QUERY  = 3'd3,
    MEM_KEY    = 3'd4,
    MEM_VALUE  = 3'd5,
    MEM_OUTPUT = 3'd6
  } mem_sel_e;

endpackage
