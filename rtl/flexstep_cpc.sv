// flexstep_cpc -- Checkpoint Control (CPC) of one core, part of Register Checkpoint Management.
//
// CPC holds the user-mode instruction counter (Inst.Cnt) and the privilege monitor (Priv.Mntr)
// and sequences everything a checking segment needs. Its behaviour depends on the core's
// attribute from the global register.
//
// Main core (attr = ATTR_MAIN):
//   * A segment opens when checking is enabled and an instruction is about to commit in user
//     mode. Before it commits, the register file is copied into the ASS (one register per cycle,
//     NREGS cycles, core stalled) and sent as the SCP (NREGS/2 pair entries and a pc entry).
//   * While the segment is open, user-mode commits are counted and memory ones are logged by the
//     MAL. Kernel-mode instructions are not counted.
//   * The segment ends when the instruction count reaches IC_LIMIT (paper default 5000), when an
//     instruction is about to commit in kernel mode (privilege switch), or when checking is
//     disabled. CPC then sends IC and, after copying the register file, the ECP. After a count
//     limit the same snapshot is sent again as the SCP of the next segment.
//   * While a snapshot is being streamed out, the core may go on committing instructions that
//     neither touch the log nor end a segment; a commit that would has to wait. A full FIFO
//     stalls logged memory commits (back-pressure on the main core).
// Checker core (attr = ATTR_CHECKER), driven by the checker thread's custom instructions:
//   * C.record (rec_req): copy the register file and rec_npc (return pc) into the ASS.
//   * C.apply (apply_req): pop the SCP from the FIFO into the register file (two writes per
//     entry) and keep its pc for C.jal (scp_npc). Completes when the whole SCP is applied.
//   * Replay: user-mode commits while the core is busy are counted. The IC entry is taken from
//     the FIFO when it reaches the head. A counted commit may complete only when it is certain to
//     lie inside the segment: the head is an LDST entry (the main core made a later memory access
//     in this segment) or the IC is known and the count is below it. Memory commits are served by
//     the MAL. Kernel-mode commits and commits while the core is idle (preempted by another
//     task) are neither counted nor gated.
//   * When the count equals IC: the core is stalled, the ECP entries are compared with the
//     register file and the pc following the last counted instruction, then the recorded context
//     is written back from the ASS and the core is redirected to the recorded pc. result_ok
//     (C.result) is 1 if the segment matched.
//   * Divergence guard: a checker that reaches IC_LIMIT while LDST entries remain, or makes a
//     memory access the main core did not make, fails the segment; the rest of the segment's
//     entries are drained up to its ECP pc entry.
// Compute core: commits pass untouched.
// Which of these rules the paper states: the two boundary conditions, the default limit, the
// send order SCP/LD-ST/IC/ECP, user-mode-only counting, "check until the count equals the main
// core's, then verify the ECP", and the roles of record/apply/jal/result. The gating rule, the
// one-register-per-cycle copy, streaming during execution, reset of a checker's state and the
// divergence guard are this design's own choices.
// Timing: all outputs to the core are combinational from state and the FIFO head; cm_ready may
// depend on cm_valid/cm. Synchronous active-low reset.
module flexstep_cpc
  import flexstep_pkg::*;
#(
  parameter int unsigned IC_LIMIT = IC_LIMIT_DEFAULT
) (
  input  logic              clk,
  input  logic              rst_n,
  input  core_attr_e        attr,
  input  logic              check_en,
  input  logic              busy,
  // commit stage of the host core
  input  logic              cm_valid,
  input  commit_t           cm,
  output logic              cm_ready,
  // register file port
  output logic [RIDX_W-1:0] rf_raddr,
  input  logic [XLEN-1:0]   rf_rdata,
  output logic              rf_we,
  output logic [RIDX_W-1:0] rf_waddr,
  output logic [XLEN-1:0]   rf_wdata,
  output logic              redir_valid,
  output logic [PC_W-1:0]   redir_pc,
  // ASS
  output logic              ass_we,
  output logic [RIDX_W-1:0] ass_widx,
  output logic [XLEN-1:0]   ass_wdata,
  output logic              ass_npc_we,
  output logic [PC_W-1:0]   ass_npc_d,
  output logic [RIDX_W-1:0] ass_ridx,
  input  logic [XLEN-1:0]   ass_rdata,
  input  logic [PC_W-1:0]   ass_npc_q,
  output entry_kind_e       ass_emit_kind,
  output logic [5:0]        ass_emit_idx,
  input  entry_t            ass_emit_entry,
  // MAL
  output logic              mal_rec_fire,
  input  logic              mal_busy,
  output logic              mal_chk_req,
  input  logic              mal_chk_ready,
  input  logic              mal_mismatch,
  // Data Buffer FIFO of this core
  output logic              push_valid,
  output entry_t            push_entry,
  input  logic              fifo_full,
  input  logic              head_valid,
  input  entry_t            head,
  output logic              pop,
  // custom instruction requests
  input  logic              rec_req,
  input  logic [PC_W-1:0]   rec_npc,
  output logic              rec_done,
  input  logic              apply_req,
  output logic              apply_done,
  output logic [PC_W-1:0]   scp_npc,
  output logic              result_ok,
  // status
  output logic              seg_open,
  output logic [IC_W-1:0]   inst_count,
  output logic              seg_end_pulse,  // main: segment closed; checker: segment checked
  output logic              err_pulse,      // checker: checked segment did not match
  output logic              stall_fifo      // main: a logged commit waits for FIFO room
);
  typedef enum logic [3:0] {
    S_IDLE, S_CAPTURE, S_EMIT_IC, S_EMIT, S_REC, S_APPLY, S_CRUN, S_ECP, S_DRAIN,
    S_RESTORE, S_REDIR
  } state_e;

  localparam int unsigned NPAIRS = NREGS / 2;

  state_e            state_q;
  logic [RIDX_W-1:0] idx_q;       // register index (capture / record / restore)
  logic [5:0]        eidx_q;      // entry index (emit / apply / ECP)
  logic              ph_q;        // second register of a pair
  entry_kind_e       ekind_q;     // kind being emitted
  logic              plan_ic_q, plan_ecp_q, plan_scp_q;
  logic              open_q;
  logic [IC_W-1:0]   cnt_q, ic_q, target_q;
  logic              ic_known_q;
  logic [PC_W-1:0]   last_npc_q, scp_npc_q, cap_npc_q;
  logic              err_q, result_q;

  logic fire;
  assign fire = cm_valid && cm_ready;

  logic is_main, is_chk;
  assign is_main = (attr == ATTR_MAIN);
  assign is_chk  = (attr == ATTR_CHECKER);

  // ---------------- main-core boundary conditions (privilege monitor + counter) -------------
  logic trig_limit, trig_end, trig_start, any_trig, rec_mem;
  assign trig_limit = open_q && (cnt_q >= IC_W'(IC_LIMIT));
  assign trig_end   = open_q && ((cm_valid && !cm.user) || !check_en);
  assign trig_start = !open_q && check_en && cm_valid && cm.user;
  assign any_trig   = trig_limit || trig_end || trig_start;
  assign rec_mem    = open_q && cm.user && cm.is_mem;

  // ---------------- checker-core replay conditions ----------------
  logic head_ldst, head_ic, counting, below_ic, seg_done, diverged;
  assign head_ldst = head_valid && head.kind == ENT_LDST;
  assign head_ic   = head_valid && head.kind == ENT_IC;
  assign counting  = busy && cm.user;
  assign below_ic  = ic_known_q && (cnt_q < target_q);
  assign seg_done  = busy && ic_known_q && (cnt_q >= target_q);
  assign diverged  = !ic_known_q && head_ldst && (cnt_q >= IC_W'(IC_LIMIT));

  // ---------------- commit gating ----------------
  always_comb begin
    cm_ready    = 1'b1;
    mal_chk_req = 1'b0;
    if (is_main) begin
      unique case (state_q)
        S_IDLE:    cm_ready = !any_trig && (!rec_mem || (!mal_busy && !fifo_full));
        S_EMIT:    cm_ready = !any_trig && !rec_mem;
        default:   cm_ready = 1'b0;
      endcase
    end else if (is_chk) begin
      unique case (state_q)
        S_IDLE:    cm_ready = 1'b1;
        S_CRUN: begin
          if (seg_done || diverged)  cm_ready = 1'b0;
          else if (!counting)        cm_ready = 1'b1;
          else if (cm.is_mem) begin
            if (head_ldst) begin
              mal_chk_req = cm_valid;
              cm_ready    = mal_chk_ready;
            end else begin
              cm_ready = below_ic;          // access the main core did not make: fails
            end
          end else begin
            cm_ready = (head_ldst && cnt_q < IC_W'(IC_LIMIT)) || below_ic;
          end
        end
        default:   cm_ready = 1'b0;
      endcase
    end
  end

  assign mal_rec_fire = is_main && fire && rec_mem;

  // ---------------- register file / ASS / FIFO datapath ----------------
  always_comb begin
    rf_raddr      = idx_q;
    rf_we         = 1'b0;
    rf_waddr      = '0;
    rf_wdata      = '0;
    ass_we        = 1'b0;
    ass_widx      = idx_q;
    ass_wdata     = rf_rdata;
    ass_npc_we    = 1'b0;
    ass_npc_d     = cap_npc_q;
    ass_ridx      = idx_q;
    ass_emit_kind = ekind_q;
    ass_emit_idx  = eidx_q;
    push_valid    = 1'b0;
    push_entry    = ass_emit_entry;
    pop           = 1'b0;
    redir_valid   = 1'b0;
    redir_pc      = ass_npc_q;
    unique case (state_q)
      S_CAPTURE, S_REC: begin
        ass_we = 1'b1;
        if (idx_q == RIDX_W'(NREGS - 1)) ass_npc_we = 1'b1;
      end
      S_EMIT_IC: begin
        push_valid   = !fifo_full && !mal_busy;
        push_entry   = '0;
        push_entry.kind = ENT_IC;
        push_entry.a = XLEN'(ic_q);
      end
      S_EMIT: push_valid = !fifo_full && !mal_busy;
      S_APPLY: begin
        if (head_valid && head.kind == ENT_SCP) begin
          rf_we    = 1'b1;
          rf_waddr = RIDX_W'({head.tag, ph_q});
          rf_wdata = ph_q ? head.b : head.a;
          pop      = ph_q;
        end else if (head_valid) begin
          pop      = 1'b1;                 // SCP pc entry, or stale entries before an SCP
        end
      end
      S_CRUN: pop = head_ic && !ic_known_q;
      S_ECP: begin
        rf_raddr = RIDX_W'({eidx_q[4:0], ph_q});
        pop      = head_valid && (head.kind != ENT_ECP || ph_q);
      end
      S_DRAIN: pop = head_valid;
      S_RESTORE: begin
        rf_we    = 1'b1;
        rf_waddr = idx_q;
        rf_wdata = ass_rdata;
      end
      S_REDIR: redir_valid = 1'b1;
      default: ;
    endcase
  end

  // ---------------- state machine ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      idx_q      <= '0;
      eidx_q     <= '0;
      ph_q       <= 1'b0;
      ekind_q    <= ENT_SCP;
      plan_ic_q  <= 1'b0;
      plan_ecp_q <= 1'b0;
      plan_scp_q <= 1'b0;
      open_q     <= 1'b0;
      cnt_q      <= '0;
      ic_q       <= '0;
      target_q   <= '0;
      ic_known_q <= 1'b0;
      last_npc_q <= '0;
      scp_npc_q  <= '0;
      cap_npc_q  <= '0;
      err_q      <= 1'b0;
      result_q   <= 1'b1;
    end else begin
      // counter: user-mode commits inside a segment (main) or of a replay (checker)
      if (fire && cm.user && ((is_main && open_q) || (is_chk && state_q == S_CRUN && busy))) begin
        cnt_q      <= cnt_q + 1'b1;
        last_npc_q <= cm.npc;
      end
      if (is_chk && mal_mismatch) err_q <= 1'b1;

      unique case (state_q)
        S_IDLE: begin
          if (is_main && !mal_busy && (trig_limit || trig_end)) begin
            ic_q       <= cnt_q;
            plan_ic_q  <= 1'b1;
            plan_ecp_q <= 1'b1;
            plan_scp_q <= trig_limit && !trig_end && check_en;
            open_q     <= trig_limit && !trig_end && check_en;
            cnt_q      <= '0;
            cap_npc_q  <= last_npc_q;
            idx_q      <= '0;
            state_q    <= S_CAPTURE;
          end else if (is_main && !mal_busy && trig_start) begin
            plan_ic_q  <= 1'b0;
            plan_ecp_q <= 1'b0;
            plan_scp_q <= 1'b1;
            open_q     <= 1'b1;
            cnt_q      <= '0;
            cap_npc_q  <= cm.pc;
            idx_q      <= '0;
            state_q    <= S_CAPTURE;
          end else if (is_chk && rec_req) begin
            cap_npc_q  <= rec_npc;
            idx_q      <= '0;
            state_q    <= S_REC;
          end else if (is_chk && apply_req) begin
            ph_q       <= 1'b0;
            state_q    <= S_APPLY;
          end
        end
        S_CAPTURE: begin
          idx_q <= idx_q + 1'b1;
          if (idx_q == RIDX_W'(NREGS - 1)) begin
            eidx_q  <= '0;
            ekind_q <= plan_ecp_q ? ENT_ECP : ENT_SCP;
            state_q <= plan_ic_q ? S_EMIT_IC : S_EMIT;
          end
        end
        S_EMIT_IC: if (push_valid) state_q <= S_EMIT;
        S_EMIT: begin
          if (push_valid) begin
            if (eidx_q == 6'(NPAIRS)) begin
              eidx_q <= '0;
              if (ekind_q == ENT_ECP && plan_scp_q) ekind_q <= ENT_SCP;
              else state_q <= S_IDLE;
            end else begin
              eidx_q <= eidx_q + 1'b1;
            end
          end
        end
        S_REC: begin
          idx_q <= idx_q + 1'b1;
          if (idx_q == RIDX_W'(NREGS - 1)) state_q <= S_IDLE;
        end
        S_APPLY: begin
          if (head_valid && head.kind == ENT_SCP) begin
            ph_q <= !ph_q;
          end else if (head_valid && head.kind == ENT_SCP_PC) begin
            scp_npc_q  <= head.a[PC_W-1:0];
            cnt_q      <= '0;
            ic_known_q <= 1'b0;
            err_q      <= 1'b0;
            state_q    <= S_CRUN;
          end
        end
        S_CRUN: begin
          if (pop) begin
            target_q   <= head.a[IC_W-1:0];
            ic_known_q <= 1'b1;
          end
          if (fire && counting && cm.is_mem && !head_ldst) err_q <= 1'b1;
          if (diverged) begin
            err_q   <= 1'b1;
            state_q <= S_DRAIN;
          end else if (seg_done) begin
            eidx_q  <= '0;
            ph_q    <= 1'b0;
            state_q <= S_ECP;
          end
        end
        S_ECP: begin
          if (head_valid) begin
            if (head.kind == ENT_ECP) begin
              if (rf_rdata != (ph_q ? head.b : head.a) || head.tag != eidx_q[4:0]) err_q <= 1'b1;
              ph_q <= !ph_q;
              if (ph_q) eidx_q <= eidx_q + 1'b1;
            end else if (head.kind == ENT_ECP_PC) begin
              if (head.a[PC_W-1:0] != last_npc_q || eidx_q != 6'(NPAIRS)) err_q <= 1'b1;
              idx_q   <= '0;
              state_q <= S_RESTORE;
            end else begin
              err_q <= 1'b1;                 // entries the checker did not consume
            end
          end
        end
        S_DRAIN: begin
          if (head_valid && head.kind == ENT_ECP_PC) begin
            idx_q   <= '0;
            state_q <= S_RESTORE;
          end
        end
        S_RESTORE: begin
          idx_q <= idx_q + 1'b1;
          if (idx_q == RIDX_W'(NREGS - 1)) state_q <= S_REDIR;
        end
        S_REDIR: begin
          result_q <= !err_q;
          state_q  <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign rec_done      = is_chk && state_q == S_REC && idx_q == RIDX_W'(NREGS - 1);
  assign apply_done    = is_chk && state_q == S_APPLY && head_valid && head.kind == ENT_SCP_PC;
  assign scp_npc       = scp_npc_q;
  assign result_ok     = result_q;
  assign seg_open      = open_q;
  assign inst_count    = cnt_q;
  assign seg_end_pulse = (is_main && state_q == S_EMIT && push_valid && eidx_q == 6'(NPAIRS) &&
                          ekind_q == ENT_ECP) || (is_chk && state_q == S_REDIR);
  assign err_pulse     = is_chk && state_q == S_REDIR && err_q;
  assign stall_fifo    = is_main && state_q == S_IDLE && cm_valid && !any_trig && rec_mem &&
                         (mal_busy || fifo_full);
endmodule
