// flexstep_unit -- the FlexStep functional units added to one core.
//
// Every core carries the same units so that any core can be made a main, checker or plain
// compute core at run time; the attribute comes from the global register. The unit contains
//   * flexstep_cpc  Checkpoint Control (instruction counter, privilege monitor, sequencing)
//   * flexstep_ass  Architectural State Snapshot (one register checkpoint)
//   * flexstep_mal  Memory Access Log
//   * flexstep_fifo Data Buffer FIFO (DEPTH entries)
//   * flexstep_decode and the execution of the nine custom instructions
// and is attached to the host core at four points:
//   commit   cm_valid/cm/cm_ready: the instruction at the commit stage; cm_ready low stalls it.
//            byp_rdata is the logged load data a checker core must use instead of memory.
//   regfile  one read port and one write port into the architectural register file
//            (combinational read), plus redir_valid/redir_pc to set the pc after a check.
//   custom   isa_valid/isa_instr/operands: a custom instruction in execute; isa_ready completes
//            it (C.record and C.apply take several cycles), isa_rd is its result.
//   channel  tx_* (head of this core's FIFO, read by the interconnect when the core is a main)
//            and rx_* (writes into this FIFO when the core is a checker).
// The FIFO is fed by the CPC and MAL when the core is a main core and by the interconnect when it
// is a checker; on a checker it is read by CPC and MAL. Custom-instruction results:
// G.IDs.contain returns the attribute (0 compute, 1 main, 2 checker) of core rs1 (0 for a core
// number not below NCORES), C.jal returns
// the pc of the applied SCP (the host core jumps there), C.result returns 1 if the last checked
// segment matched. The result encodings are this design's choice. M.associate and M.check
// issued on a core that is not a main core, and C.check_state on a core that is not a checker,
// complete without effect (the source only says which role each instruction is meant for).
// The decoder's register-field outputs are left unused: the host core reads the operands.
module flexstep_unit
  import flexstep_pkg::*;
#(
  parameter int unsigned NCORES   = 4,
  parameter int unsigned DEPTH    = 64,
  parameter int unsigned IC_LIMIT = IC_LIMIT_DEFAULT
) (
  input  logic              clk,
  input  logic              rst_n,
  // host core: commit stage
  input  logic              cm_valid,
  input  commit_t           cm,
  output logic              cm_ready,
  output logic [XLEN-1:0]   byp_rdata,
  // host core: register file and pc
  output logic [RIDX_W-1:0] rf_raddr,
  input  logic [XLEN-1:0]   rf_rdata,
  output logic              rf_we,
  output logic [RIDX_W-1:0] rf_waddr,
  output logic [XLEN-1:0]   rf_wdata,
  output logic              redir_valid,
  output logic [PC_W-1:0]   redir_pc,
  // host core: custom instructions
  input  logic              isa_valid,
  input  logic [31:0]       isa_instr,
  input  logic [XLEN-1:0]   isa_rs1,
  input  logic [XLEN-1:0]   isa_rs2,
  input  logic [PC_W-1:0]   isa_npc,
  output logic              isa_ready,
  output logic [XLEN-1:0]   isa_rd,
  // global register
  input  core_attr_e        attr,
  input  logic              check_en,
  input  logic              busy,
  input  core_mask_t        main_mask,
  input  core_mask_t        chk_mask,
  output gcfg_req_t         gcfg_req,
  // system interconnect
  output logic              tx_valid,
  output entry_t            tx_entry,
  input  logic              tx_pop,
  input  logic              rx_push,
  input  entry_t            rx_entry,
  output logic              rx_ready,
  // status
  output logic              seg_end_pulse,
  output logic              err_pulse,
  output logic              stall_fifo,
  output logic              seg_open,
  output logic [IC_W-1:0]   inst_count,
  output logic [$clog2(DEPTH+1)-1:0] fifo_count
);
  logic is_main, is_chk;
  assign is_main = (attr == ATTR_MAIN);
  assign is_chk  = (attr == ATTR_CHECKER);

  // ---------------- custom instructions ----------------
  fs_op_e     op;
  logic       g_op, m_op, c_op;
  logic [4:0] d_rd, d_rs1, d_rs2;
  flexstep_decode u_dec (
    .instr(isa_instr), .op(op), .is_global_op(g_op), .is_main_op(m_op), .is_chk_op(c_op),
    .rd(d_rd), .rs1(d_rs1), .rs2(d_rs2)
  );

  logic            rec_done, apply_done, result_ok;
  logic [PC_W-1:0] scp_npc;
  logic            rec_req, apply_req;
  assign rec_req   = isa_valid && op == FS_C_RECORD;
  assign apply_req = isa_valid && op == FS_C_APPLY;

  logic [4:0] qid;
  assign qid = isa_rs1[4:0];

  // M.* instructions only take effect on a main core and C.check_state only on a checker core;
  // on any other core they complete without changing the global register
  logic role_ok;
  assign role_ok = (!m_op || attr == ATTR_MAIN) && (!c_op || attr == ATTR_CHECKER);

  always_comb begin
    gcfg_req  = '0;
    isa_ready = 1'b1;
    isa_rd    = '0;
    unique case (op)
      FS_G_CONTAIN:   isa_rd = (32'(qid) >= NCORES) ? XLEN'(ATTR_COMPUTE) :
                               main_mask[qid] ? XLEN'(ATTR_MAIN) :
                               chk_mask[qid]  ? XLEN'(ATTR_CHECKER) : XLEN'(ATTR_COMPUTE);
      FS_G_CONFIGURE: begin
        gcfg_req.configure = isa_valid;
        gcfg_req.main_mask = core_mask_t'(isa_rs1);
        gcfg_req.chk_mask  = core_mask_t'(isa_rs2);
      end
      FS_M_ASSOCIATE: begin
        gcfg_req.assoc_we   = isa_valid && role_ok;
        gcfg_req.assoc_mask = core_mask_t'(isa_rs1);
      end
      FS_M_CHECK: begin
        gcfg_req.check_we  = isa_valid && role_ok;
        gcfg_req.check_val = isa_rs1[0];
      end
      FS_C_STATE: begin
        gcfg_req.state_we  = isa_valid && role_ok;
        gcfg_req.state_val = isa_rs1[0];
      end
      FS_C_RECORD:    isa_ready = rec_done;
      FS_C_APPLY:     isa_ready = apply_done;
      FS_C_JAL:       isa_rd = XLEN'(scp_npc);
      FS_C_RESULT:    isa_rd = XLEN'(result_ok);
      default:        isa_rd = '0;
    endcase
  end

  // ---------------- RCPM: CPC + ASS ----------------
  logic              ass_we, ass_npc_we;
  logic [RIDX_W-1:0] ass_widx, ass_ridx;
  logic [XLEN-1:0]   ass_wdata, ass_rdata;
  logic [PC_W-1:0]   ass_npc_d, ass_npc_q;
  entry_kind_e       ass_emit_kind;
  logic [5:0]        ass_emit_idx;
  entry_t            ass_emit_entry;

  logic            mal_rec_fire, mal_busy, mal_chk_req, mal_chk_ready, mal_chk_pop, mal_mismatch;
  logic            mal_push_valid;
  entry_t          mal_push_entry;
  logic            cpc_push_valid, cpc_pop;
  entry_t          cpc_push_entry;

  logic   f_push, f_pop, f_empty, f_full;
  entry_t f_din, f_dout;

  flexstep_ass u_ass (
    .clk, .we(ass_we), .widx(ass_widx), .wdata(ass_wdata), .npc_we(ass_npc_we),
    .npc_d(ass_npc_d), .ridx(ass_ridx), .rdata(ass_rdata), .npc_q(ass_npc_q),
    .emit_kind(ass_emit_kind), .emit_idx(ass_emit_idx), .emit_entry(ass_emit_entry)
  );

  flexstep_cpc #(.IC_LIMIT(IC_LIMIT)) u_cpc (
    .clk, .rst_n, .attr, .check_en, .busy,
    .cm_valid, .cm, .cm_ready,
    .rf_raddr, .rf_rdata, .rf_we, .rf_waddr, .rf_wdata, .redir_valid, .redir_pc,
    .ass_we, .ass_widx, .ass_wdata, .ass_npc_we, .ass_npc_d, .ass_ridx, .ass_rdata, .ass_npc_q,
    .ass_emit_kind, .ass_emit_idx, .ass_emit_entry,
    .mal_rec_fire, .mal_busy, .mal_chk_req, .mal_chk_ready, .mal_mismatch,
    .push_valid(cpc_push_valid), .push_entry(cpc_push_entry), .fifo_full(f_full),
    .head_valid(is_chk && !f_empty), .head(f_dout), .pop(cpc_pop),
    .rec_req, .rec_npc(isa_npc), .rec_done, .apply_req, .apply_done, .scp_npc, .result_ok,
    .seg_open, .inst_count, .seg_end_pulse, .err_pulse, .stall_fifo
  );

  // ---------------- MAL ----------------
  flexstep_mal u_mal (
    .clk, .rst_n,
    .rec_fire(mal_rec_fire), .cm, .busy(mal_busy), .push_valid(mal_push_valid),
    .push_entry(mal_push_entry), .push_ready(!f_full),
    .chk_req(mal_chk_req), .head(f_dout), .chk_ready(mal_chk_ready), .chk_pop(mal_chk_pop),
    .byp_rdata, .mismatch(mal_mismatch)
  );

  // ---------------- Data Buffer FIFO ----------------
  always_comb begin
    if (is_main) begin
      f_push = mal_push_valid || cpc_push_valid;
      f_din  = mal_push_valid ? mal_push_entry : cpc_push_entry;
      f_pop  = tx_pop;
    end else if (is_chk) begin
      f_push = rx_push;
      f_din  = rx_entry;
      f_pop  = cpc_pop || mal_chk_pop;
    end else begin
      f_push = 1'b0;
      f_din  = rx_entry;
      f_pop  = 1'b0;
    end
  end

  flexstep_fifo #(.DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .push(f_push), .din(f_din), .pop(f_pop), .dout(f_dout),
    .empty(f_empty), .full(f_full), .count(fifo_count)
  );

  assign tx_valid = is_main && !f_empty;
  assign tx_entry = f_dout;
  assign rx_ready = is_chk && !f_full;

`ifndef SYNTHESIS
  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n)
                                 !(mal_push_valid && cpc_push_valid));
  a_one_reader: assert property (@(posedge clk) disable iff (!rst_n) !(cpc_pop && mal_chk_pop));
`endif
endmodule
