// dspe_top: DeepSeek Processing Element (DSPE) processor.
//
// Four Attention Cores, each with an iRouter, a MIPS unit (Merkle-tree
// incremental pruning of Q/K vectors), an MBLM unit (Booth multiplication
// with redundancy-aware reordering and reuse) and 64 DA-Posit multiplier PE
// cores (DAPPM), plus an oRouter. Around them sit the Top Controller and the
// on-chip memories named in the paper: Query and Key SRAMs (48KB each),
// Value SRAM (48KB), Parameter Buffer (24KB), Weight Buffer (48KB), and the
// Input and Output Buffers (16KB each, size assumed).
//
// Interface: the host loads memories and reads results through the host_*
// port while cmd_ready is high (reads return on host_rdata one cycle later),
// and issues commands on cmd_* (see top_controller). cfg holds the run-time
// thresholds (R_zero, T_zero, S_th, Booth BN tables). Per-core statistics
// come out on the stat_* ports. All memories are 512 bits wide.
//
// Lint note: rst_n is both an asynchronous reset of the flops and the
// 'disable iff' condition of the router assertions, which the linter reports
// as a synchronous use. The assertions only watch the reset, so this stands.
module dspe_top
  import dspe_pkg::*;
#(
  parameter int unsigned NUM_CORES = 4,
  parameter int unsigned NUM_PE    = 64,
  parameter int unsigned QK_DEPTH  = 768,   // 48KB
  parameter int unsigned V_DEPTH   = 768,   // 48KB
  parameter int unsigned P_DEPTH   = 384,   // 24KB
  parameter int unsigned W_DEPTH   = 768,   // 48KB
  parameter int unsigned IO_DEPTH  = 256    // 16KB (assumed)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  dspe_cfg_t            cfg,
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  dspe_cmd_t            cmd,
  output logic                 cmd_done,
  input  logic                 host_en,
  input  logic                 host_we,
  input  mem_sel_e             host_sel,
  input  logic [9:0]           host_addr,
  input  logic [WORD_BITS-1:0] host_wdata,
  output logic [WORD_BITS-1:0] host_rdata,
  output logic [15:0]          stat_early  [NUM_CORES],
  output logic [15:0]          stat_diff   [NUM_CORES],
  output logic [15:0]          stat_full   [NUM_CORES],
  output logic [31:0]          stat_mode   [NUM_CORES][3],
  output logic [15:0]          stat_mblm_skip    [NUM_CORES],
  output logic [15:0]          stat_mblm_invalid [NUM_CORES],
  output logic [15:0]          stat_mblm_r8      [NUM_CORES]
);

  localparam int unsigned NUM_MEMS = 7;

  logic                 mem_en    [NUM_MEMS];
  logic                 mem_we    [NUM_MEMS];
  logic [9:0]           mem_addr  [NUM_MEMS];
  logic [WORD_BITS-1:0] mem_wdata;
  logic [WORD_BITS-1:0] mem_rdata [NUM_MEMS];

  logic                 req_valid [NUM_CORES];
  logic                 req_ready [NUM_CORES];
  core_req_t            req;
  logic                 row_valid [NUM_CORES];
  logic                 row_ready [NUM_CORES];
  logic [WORD_BITS-1:0] row_data;
  logic                 cos_we    [NUM_CORES];
  logic [7:0]           cos_addr;
  logic [15:0]          cos_wdata;
  logic                 rsp_valid [NUM_CORES];
  logic                 rsp_ready [NUM_CORES];
  core_rsp_t            rsp       [NUM_CORES];

  top_controller #(.NUM_CORES(NUM_CORES), .LOW(MIPS_LOW), .NUM_MEMS(NUM_MEMS)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd(cmd),
    .cmd_done(cmd_done), .host_en(host_en), .host_we(host_we), .host_sel(host_sel),
    .host_addr(host_addr), .host_wdata(host_wdata), .host_rdata(host_rdata),
    .mem_en(mem_en), .mem_we(mem_we), .mem_addr(mem_addr), .mem_wdata(mem_wdata),
    .mem_rdata(mem_rdata), .req_valid(req_valid), .req_ready(req_ready), .req(req),
    .row_valid(row_valid), .row_data(row_data), .row_ready(row_ready),
    .cos_we(cos_we), .cos_addr(cos_addr), .cos_wdata(cos_wdata),
    .rsp_valid(rsp_valid), .rsp_ready(rsp_ready), .rsp(rsp));

  // memories, in mem_sel_e order
  sram_sp #(.DEPTH(IO_DEPTH), .WIDTH(WORD_BITS)) u_input_buffer (
    .clk(clk), .en(mem_en[MEM_INPUT]), .we(mem_we[MEM_INPUT]),
    .addr(mem_addr[MEM_INPUT][$clog2(IO_DEPTH)-1:0]), .wdata(mem_wdata), .rdata(mem_rdata[MEM_INPUT]));
  sram_sp #(.DEPTH(W_DEPTH), .WIDTH(WORD_BITS)) u_weight_buffer (
    .clk(clk), .en(mem_en[MEM_WEIGHT]), .we(mem_we[MEM_WEIGHT]),
    .addr(mem_addr[MEM_WEIGHT][$clog2(W_DEPTH)-1:0]), .wdata(mem_wdata), .rdata(mem_rdata[MEM_WEIGHT]));
  sram_sp #(.DEPTH(P_DEPTH), .WIDTH(WORD_BITS)) u_param_buffer (
    .clk(clk), .en(mem_en[MEM_PARAM]), .we(mem_we[MEM_PARAM]),
    .addr(mem_addr[MEM_PARAM][$clog2(P_DEPTH)-1:0]), .wdata(mem_wdata), .rdata(mem_rdata[MEM_PARAM]));
  sram_sp #(.DEPTH(QK_DEPTH), .WIDTH(WORD_BITS)) u_query_sram (
    .clk(clk), .en(mem_en[MEM_QUERY]), .we(mem_we[MEM_QUERY]),
    .addr(mem_addr[MEM_QUERY][$clog2(QK_DEPTH)-1:0]), .wdata(mem_wdata), .rdata(mem_rdata[MEM_QUERY]));
  sram_sp #(.DEPTH(QK_DEPTH), .WIDTH(WORD_BITS)) u_key_sram (
    .clk(clk), .en(mem_en[MEM_KEY]), .we(mem_we[MEM_KEY]),
    .addr(mem_addr[MEM_KEY][$clog2(QK_DEPTH)-1:0]), .wdata(mem_wdata), .rdata(mem_rdata[MEM_KEY]));
  sram_sp #(.DEPTH(V_DEPTH), .WIDTH(WORD_BITS)) u_value_sram (
    .clk(clk), .en(mem_en[MEM_VALUE]), .we(mem_we[MEM_VALUE]),
    .addr(mem_addr[MEM_VALUE][$clog2(V_DEPTH)-1:0]), .wdata(mem_wdata), .rdata(mem_rdata[MEM_VALUE]));
  sram_sp #(.DEPTH(IO_DEPTH), .WIDTH(WORD_BITS)) u_output_buffer (
    .clk(clk), .en(mem_en[MEM_OUTPUT]), .we(mem_we[MEM_OUTPUT]),
    .addr(mem_addr[MEM_OUTPUT][$clog2(IO_DEPTH)-1:0]), .wdata(mem_wdata), .rdata(mem_rdata[MEM_OUTPUT]));

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    attention_core #(.NUM_PE(NUM_PE)) u_core (
      .clk(clk), .rst_n(rst_n), .cfg(cfg),
      .req_valid(req_valid[c]), .req_ready(req_ready[c]), .req(req),
      .row_valid(row_valid[c]), .row_data(row_data), .row_ready(row_ready[c]),
      .cos_we(cos_we[c]), .cos_addr(cos_addr), .cos_wdata(cos_wdata),
      .rsp_valid(rsp_valid[c]), .rsp_ready(rsp_ready[c]), .rsp(rsp[c]),
      .n_early(stat_early[c]), .n_diff(stat_diff[c]), .n_full(stat_full[c]),
      .n_mode(stat_mode[c]), .n_mblm_skip(stat_mblm_skip[c]),
      .n_mblm_invalid(stat_mblm_invalid[c]), .n_mblm_r8(stat_mblm_r8[c]));
  end

endmodule
