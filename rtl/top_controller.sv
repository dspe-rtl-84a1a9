// top_controller: Top Controller of the DSPE.
//
// Executes one command at a time and owns every memory port while it does;
// when idle (cmd_ready high) the memory ports belong to the host port instead.
// Commands (dspe_pkg::dspe_cmd_t), with c running over the cores in
// core_mask in ascending order:
//   CMD_POSIT : W = Weight[src_b] is read once and broadcast; core c gets
//               Input[src_a + c] and its 64 DA-Posit products go to
//               Output[dst + c].
//   CMD_MBLM  : as CMD_POSIT, but the core multiplies bytes 0..7 of
//               Input[src_a + c] by byte 0 of W with the MBLM; the products
//               go to Output[dst + c].
//   CMD_MIPS  : core c gets vector Query/Key[src_a + c] (qk_sel picks the
//               SRAM), expert and index + c, then the LOW projection rows
//               Param[src_b .. src_b + LOW - 1]. Its decision word goes to
//               Output[dst + 2c] and the Value SRAM row at the returned
//               result index (the reused or newly computed KV entry) to
//               Output[dst + 2c + 1].
//   CMD_COS_WR: writes cos into the Cos-SRAM entry index of every selected
//               core (the Sequential Incremental Sorter's scores).
// All requests of a command are issued before results are collected, so the
// cores work in parallel. cmd_done pulses when the command has finished.
// Memory reads take one cycle (sram_sp). The paper says the Top Controller
// schedules data flow and memory access, loads parameters per layer and
// broadcasts weights; this command set and FSM are this design's.
module top_controller
  import dspe_pkg::*;
#(
  parameter int unsigned NUM_CORES = 4,
  parameter int unsigned LOW       = 8,
  parameter int unsigned NUM_MEMS  = 7
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // commands
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  dspe_cmd_t            cmd,
  output logic                 cmd_done,
  // host memory port (used while idle)
  input  logic                 host_en,
  input  logic                 host_we,
  input  mem_sel_e             host_sel,
  input  logic [9:0]           host_addr,
  input  logic [WORD_BITS-1:0] host_wdata,
  output logic [WORD_BITS-1:0] host_rdata,
  // memories, indexed by mem_sel_e
  output logic                 mem_en    [NUM_MEMS],
  output logic                 mem_we    [NUM_MEMS],
  output logic [9:0]           mem_addr  [NUM_MEMS],
  output logic [WORD_BITS-1:0] mem_wdata,
  input  logic [WORD_BITS-1:0] mem_rdata [NUM_MEMS],
  // Attention Cores
  output logic                 req_valid [NUM_CORES],
  input  logic                 req_ready [NUM_CORES],
  output core_req_t            req,
  output logic                 row_valid [NUM_CORES],
  output logic [WORD_BITS-1:0] row_data,
  input  logic                 row_ready [NUM_CORES],
  output logic                 cos_we    [NUM_CORES],
  output logic [7:0]           cos_addr,
  output logic [15:0]          cos_wdata,
  input  logic                 rsp_valid [NUM_CORES],
  output logic                 rsp_ready [NUM_CORES],
  input  core_rsp_t            rsp       [NUM_CORES]
);

  typedef enum logic [3:0] {
    S_IDLE, S_WAIT_W, S_NEXT, S_WAIT_A, S_ISSUE, S_PRD, S_PWAIT, S_PSEND,
    S_COLLECT, S_VWAIT, S_VWRITE, S_COS
  } state_e;

  localparam int unsigned CW = $clog2(NUM_CORES);

  state_e               state;
  dspe_cmd_t            c_q;
  logic [CW:0]          cc;                 // current core
  logic [$clog2(LOW+1)-1:0] kk;             // parameter row
  logic [WORD_BITS-1:0] wgt_r, act_r, row_r;
  logic [9:0]           vidx;
  mem_sel_e             host_sel_q;

  // first selected core at or after cc
  logic [CW:0] nxt;
  logic        nxt_found;
  always_comb begin
    nxt       = (CW+1)'(NUM_CORES);
    nxt_found = 1'b0;
    for (int i = NUM_CORES - 1; i >= 0; i--)
      if (c_q.core_mask[i] && (i >= int'(cc))) begin
        nxt       = (CW+1)'(i);
        nxt_found = 1'b1;
      end
  end

  mem_sel_e vec_mem;
  assign vec_mem = c_q.qk_sel ? MEM_KEY : MEM_QUERY;

  assign cmd_ready = (state == S_IDLE);

  always_comb begin
    for (int m = 0; m < NUM_MEMS; m++) begin
      mem_en[m]   = 1'b0;
      mem_we[m]   = 1'b0;
      mem_addr[m] = '0;
    end
    mem_wdata = host_wdata;
    for (int i = 0; i < NUM_CORES; i++) begin
      req_valid[i] = 1'b0;
      row_valid[i] = 1'b0;
      rsp_ready[i] = 1'b0;
      cos_we[i]    = 1'b0;
    end
    req.op     = (c_q.op == CMD_POSIT) ? OP_POSIT : (c_q.op == CMD_MBLM) ? OP_MBLM : OP_MIPS;
    req.data   = act_r;
    req.wgt    = wgt_r;
    req.expert = c_q.expert;
    req.index  = c_q.index + IDX_W'(cc);
    row_data   = row_r;
    cos_addr   = c_q.index[7:0];
    cos_wdata  = c_q.cos;
    case (state)
      S_IDLE: begin
        if (host_en) begin
          mem_en[host_sel]   = 1'b1;
          mem_we[host_sel]   = host_we;
          mem_addr[host_sel] = host_addr;
        end
        if (cmd_valid && (cmd.op == CMD_POSIT || cmd.op == CMD_MBLM)) begin
          mem_en[MEM_WEIGHT]   = 1'b1;
          mem_addr[MEM_WEIGHT] = cmd.src_b;
        end
      end
      S_NEXT: if (nxt_found) begin
        if (c_q.op == CMD_MIPS) begin
          mem_en[vec_mem]   = 1'b1;
          mem_addr[vec_mem] = c_q.src_a + 10'(nxt);
        end else begin
          mem_en[MEM_INPUT]   = 1'b1;
          mem_addr[MEM_INPUT] = c_q.src_a + 10'(nxt);
        end
      end
      S_ISSUE: req_valid[cc[CW-1:0]] = 1'b1;
      S_PRD: begin
        mem_en[MEM_PARAM]   = 1'b1;
        mem_addr[MEM_PARAM] = c_q.src_b + 10'(kk);
      end
      S_PSEND: row_valid[cc[CW-1:0]] = 1'b1;
      S_COLLECT: if (nxt_found && nxt == cc) begin
        rsp_ready[cc[CW-1:0]] = 1'b1;
        if (rsp_valid[cc[CW-1:0]]) begin
          mem_en[MEM_OUTPUT]   = 1'b1;
          mem_we[MEM_OUTPUT]   = 1'b1;
          mem_addr[MEM_OUTPUT] = c_q.dst + ((c_q.op == CMD_MIPS) ? 10'(2 * cc) : 10'(cc));
          mem_wdata            = rsp[cc[CW-1:0]].data;
        end
      end
      S_VWAIT: begin
        mem_en[MEM_VALUE]   = 1'b1;
        mem_addr[MEM_VALUE] = vidx;
      end
      S_VWRITE: begin
        mem_en[MEM_OUTPUT]   = 1'b1;
        mem_we[MEM_OUTPUT]   = 1'b1;
        mem_addr[MEM_OUTPUT] = c_q.dst + 10'(2 * cc) + 10'd1;
        mem_wdata            = mem_rdata[MEM_VALUE];
      end
      S_COS: for (int i = 0; i < NUM_CORES; i++) cos_we[i] = c_q.core_mask[i];
      default: ;
    endcase
  end

  assign host_rdata = mem_rdata[host_sel_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      c_q        <= '0;
      cc         <= '0;
      kk         <= '0;
      wgt_r      <= '0;
      act_r      <= '0;
      row_r      <= '0;
      vidx       <= '0;
      cmd_done   <= 1'b0;
      host_sel_q <= MEM_INPUT;
    end else begin
      cmd_done <= 1'b0;
      if (state == S_IDLE && host_en) host_sel_q <= host_sel;
      case (state)
        S_IDLE: if (cmd_valid) begin
          c_q <= cmd;
          cc  <= '0;
          case (cmd.op)
            CMD_COS_WR: state <= S_COS;
            CMD_MIPS:   state <= S_NEXT;
            default:    state <= S_WAIT_W;
          endcase
        end
        S_WAIT_W: begin
          wgt_r <= mem_rdata[MEM_WEIGHT];
          state <= S_NEXT;
        end
        S_NEXT: begin
          if (nxt_found) begin
            cc    <= nxt;
            state <= S_WAIT_A;
          end else begin
            cc    <= '0;
            state <= S_COLLECT;
          end
        end
        S_WAIT_A: begin
          act_r <= mem_rdata[(c_q.op == CMD_MIPS) ? vec_mem : MEM_INPUT];
          state <= S_ISSUE;
        end
        S_ISSUE: if (req_ready[cc[CW-1:0]]) begin
          if (c_q.op == CMD_MIPS) begin
            kk    <= '0;
            state <= S_PRD;
          end else begin
            cc    <= cc + 1'b1;
            state <= S_NEXT;
          end
        end
        S_PRD:   state <= S_PWAIT;
        S_PWAIT: begin
          row_r <= mem_rdata[MEM_PARAM];
          state <= S_PSEND;
        end
        S_PSEND: if (row_ready[cc[CW-1:0]]) begin
          if (kk == ($clog2(LOW+1))'(LOW - 1)) begin
            cc    <= cc + 1'b1;
            state <= S_NEXT;
          end else begin
            kk    <= kk + 1'b1;
            state <= S_PRD;
          end
        end
        S_COLLECT: begin
          if (!nxt_found) begin
            cmd_done <= 1'b1;
            state    <= S_IDLE;
          end else if (nxt != cc) begin
            cc <= nxt;
          end else if (rsp_valid[cc[CW-1:0]]) begin
            if (c_q.op == CMD_MIPS) begin
              vidx  <= 10'(rsp[cc[CW-1:0]].data[13:4]);
              state <= S_VWAIT;
            end else begin
              cc <= cc + 1'b1;
            end
          end
        end
        S_VWAIT:  state <= S_VWRITE;
        S_VWRITE: begin
          cc    <= cc + 1'b1;
          state <= S_COLLECT;
        end
        default: begin                   // S_COS
          cmd_done <= 1'b1;
          state    <= S_IDLE;
        end
      endcase
    end
  end

endmodule
