// flexstep_mal -- Memory Access Log (MAL) of one core.
//
// Main core: every memory instruction committed in user mode inside a checking segment is
// packaged into channel entries in commit order (rec_fire). LD and ST give one entry; LR, SC and
// AMO give two (uop 0, then uop 1 on a later cycle) so that an entry never needs more than one
// address and one data word, as the paper describes. Entry contents (tag = {uop, 0, op}):
//   LD  : addr, load data          ST  : addr, store data
//   LR  : uop0 addr, load data;    uop1 addr, 1 (reservation taken)
//   SC  : uop0 addr, store data;   uop1 addr, SC result
//   AMO : uop0 addr, old value;    uop1 addr, value written
// busy is high while a uop 1 entry waits for FIFO room; the caller must not record another
// instruction, nor push anything else, until it drops.
//
// Checker core: the checker core does not access memory for a replayed instruction. For each
// counted memory commit (chk_req, only raised while the FIFO head is an LDST entry) the log
// supplies the main core's load data (byp_rdata, the "data bypass") and compares the op, the
// address and, for writes, the data with the checker's own values; a difference pulses mismatch.
// Two-entry instructions take one extra cycle: the first entry is consumed with chk_ready low,
// the second with chk_ready high. The per-op entry contents and this two-cycle handling are this
// design's choices; the paper gives only the single/multiple entry rule.
// The paper records memory data in decode and pipelines it to commit inside the host pipeline;
// here the host core presents it at commit (commit_t).
module flexstep_mal
  import flexstep_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  // ---- main side
  input  logic            rec_fire,     // a recorded memory instruction commits this cycle
  input  commit_t         cm,
  output logic            busy,
  output logic            push_valid,
  output entry_t          push_entry,
  input  logic            push_ready,   // FIFO not full
  // ---- checker side
  input  logic            chk_req,      // counted memory commit waiting, head is an LDST entry
  input  entry_t          head,
  output logic            chk_ready,    // the commit completes this cycle
  output logic            chk_pop,      // head entry consumed
  output logic [XLEN-1:0] byp_rdata,
  output logic            mismatch
);
  // ---------------- main side ----------------
  logic   pend_q;
  entry_t pend_entry_q;

  function automatic entry_t mk_entry(commit_t c, logic uop);
    entry_t e;
    e.kind = ENT_LDST;
    e.tag  = {uop, 1'b0, c.op};
    e.a    = c.addr;
    unique case (c.op)
      MEM_LOAD:  e.b = c.rdata;
      MEM_STORE: e.b = c.wdata;
      MEM_LR:    e.b = uop ? XLEN'(1) : c.rdata;
      MEM_SC:    e.b = uop ? c.rdata : c.wdata;
      MEM_AMO:   e.b = uop ? c.wdata : c.rdata;
      default:   e.b = c.rdata;
    endcase
    return e;
  endfunction

  always_comb begin
    push_valid = 1'b0;
    push_entry = '0;
    if (pend_q) begin
      push_valid = 1'b1;
      push_entry = pend_entry_q;
    end else if (rec_fire) begin
      push_valid = 1'b1;
      push_entry = mk_entry(cm, 1'b0);
    end
  end
  assign busy = pend_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pend_q       <= 1'b0;
      pend_entry_q <= '0;
    end else if (pend_q) begin
      if (push_ready) pend_q <= 1'b0;
    end else if (rec_fire && is_multi_uop(cm.op)) begin
      pend_q       <= 1'b1;
      pend_entry_q <= mk_entry(cm, 1'b1);
    end
  end

`ifndef SYNTHESIS
  a_no_rec_while_busy: assert property (@(posedge clk) disable iff (!rst_n) !(rec_fire && pend_q));
  a_push_has_room:     assert property (@(posedge clk) disable iff (!rst_n)
                                        (rec_fire && !pend_q) |-> push_ready);
`endif

  // ---------------- checker side ----------------
  logic            phase_q;    // 1: first entry of a two-entry instruction consumed
  logic [XLEN-1:0] held_q;     // load data taken from the first entry
  logic            multi;
  logic [2:0]      exp_op;
  logic            exp_uop;
  logic [XLEN-1:0] exp_data;
  logic            cmp_data;

  assign multi = is_multi_uop(cm.op);

  always_comb begin
    chk_pop   = 1'b0;
    chk_ready = 1'b0;
    if (chk_req && head.kind == ENT_LDST) begin
      chk_pop   = 1'b1;
      chk_ready = !multi || phase_q;
    end
  end

  always_comb begin
    if (!phase_q)                byp_rdata = head.b;
    else if (cm.op == MEM_SC)    byp_rdata = head.b;
    else                         byp_rdata = held_q;
  end

  // what the checker expects to find in the entry it consumes now
  always_comb begin
    exp_op   = cm.op;
    exp_uop  = multi && phase_q;
    cmp_data = 1'b0;
    exp_data = cm.wdata;
    unique case (cm.op)
      MEM_STORE: cmp_data = 1'b1;
      MEM_SC:    cmp_data = !phase_q;
      MEM_AMO:   cmp_data = phase_q;
      MEM_LR:    begin cmp_data = phase_q; exp_data = XLEN'(1); end
      default:   cmp_data = 1'b0;
    endcase
  end

  assign mismatch = chk_pop && ((head.tag[2:0] != exp_op) || (head.tag[4] != exp_uop) ||
                                (head.a != cm.addr) || (cmp_data && head.b != exp_data));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase_q <= 1'b0;
      held_q  <= '0;
    end else if (chk_pop) begin
      if (multi && !phase_q) begin
        phase_q <= 1'b1;
        held_q  <= head.b;
      end else begin
        phase_q <= 1'b0;
      end
    end
  end
endmodule
