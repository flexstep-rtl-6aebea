// tb_flexstep_cpc -- Checkpoint Control with a real ASS, a queue standing in for the FIFO and a
// scripted core (register file in the testbench, non-memory instructions, MAL idle).
// Main role (IC_LIMIT = 10): a run of user instructions with a kernel excursion and a final
// disable. The testbench predicts the entry stream on its own (SCP when a user instruction
// follows with checking on, IC + ECP + SCP at every 10 instructions, IC + ECP before a kernel
// instruction and at disable) and compares it entry by entry; it also checks that a snapshot
// stalls the core for NREGS cycles.
// Checker role: the recorded stream is replayed: C.record, C.apply (registers must equal the
// SCP), replay of the same instructions (commits past the IC must be held off), ECP check,
// restore of the recorded context and redirect to the recorded pc. The first segment is replayed
// faithfully (result 1), the second with one wrong register update (result 0).
module tb_flexstep_cpc;
  import flexstep_pkg::*;
  localparam int unsigned LIMIT = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  core_attr_e attr;
  logic check_en, busy, cm_valid, cm_ready;
  commit_t cm;
  logic [RIDX_W-1:0] rf_raddr, rf_waddr;
  logic [XLEN-1:0] rf_rdata, rf_wdata;
  logic rf_we, redir_valid;
  logic [PC_W-1:0] redir_pc;
  logic ass_we, ass_npc_we;
  logic [RIDX_W-1:0] ass_widx, ass_ridx;
  logic [XLEN-1:0] ass_wdata, ass_rdata;
  logic [PC_W-1:0] ass_npc_d, ass_npc_q;
  entry_kind_e ass_emit_kind;
  logic [5:0] ass_emit_idx;
  entry_t ass_emit_entry;
  logic mal_rec_fire, mal_chk_req;
  logic push_valid, fifo_full, head_valid, pop;
  entry_t push_entry, head;
  logic rec_req, rec_done, apply_req, apply_done, result_ok, seg_open, seg_end_pulse, err_pulse;
  logic stall_fifo;
  logic [PC_W-1:0] rec_npc, scp_npc;
  logic [IC_W-1:0] inst_count;

  logic [XLEN-1:0] rf [NREGS];
  entry_t outq [$];
  entry_t expq [$];
  entry_t inq  [$];
  int checks = 0, failures = 0;

  flexstep_ass u_ass (.clk, .we(ass_we), .widx(ass_widx), .wdata(ass_wdata), .npc_we(ass_npc_we),
    .npc_d(ass_npc_d), .ridx(ass_ridx), .rdata(ass_rdata), .npc_q(ass_npc_q),
    .emit_kind(ass_emit_kind), .emit_idx(ass_emit_idx), .emit_entry(ass_emit_entry));

  flexstep_cpc #(.IC_LIMIT(LIMIT)) u_dut (
    .clk, .rst_n, .attr, .check_en, .busy, .cm_valid, .cm, .cm_ready,
    .rf_raddr, .rf_rdata, .rf_we, .rf_waddr, .rf_wdata, .redir_valid, .redir_pc,
    .ass_we, .ass_widx, .ass_wdata, .ass_npc_we, .ass_npc_d, .ass_ridx, .ass_rdata, .ass_npc_q,
    .ass_emit_kind, .ass_emit_idx, .ass_emit_entry,
    .mal_rec_fire, .mal_busy(1'b0), .mal_chk_req, .mal_chk_ready(1'b0), .mal_mismatch(1'b0),
    .push_valid, .push_entry, .fifo_full, .head_valid, .head, .pop,
    .rec_req, .rec_npc, .rec_done, .apply_req, .apply_done, .scp_npc, .result_ok,
    .seg_open, .inst_count, .seg_end_pulse, .err_pulse, .stall_fifo);

  assign rf_rdata   = rf[rf_raddr];
  assign fifo_full  = outq.size() >= 4096;
  assign head_valid = inq.size() > 0;
  assign head       = head_valid ? inq[0] : '0;

  always @(posedge clk) if (rst_n) begin
    if (push_valid && !fifo_full) outq.push_back(push_entry);
    if (pop && head_valid) void'(inq.pop_front());
    if (rf_we) rf[rf_waddr] <= rf_wdata;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [63:0] mix(int k);
    return {32'(k) * 32'h9e3779b9, 32'(k) ^ 32'h5bd1e995};
  endfunction

  task automatic expect_cp(entry_kind_e k, logic [PC_W-1:0] p);
    entry_t e;
    for (int i = 0; i < NREGS / 2; i++) begin
      e = '0; e.kind = k; e.tag = 5'(i); e.a = rf[2*i]; e.b = rf[2*i+1];
      expq.push_back(e);
    end
    e = '0; e.kind = (k == ENT_SCP) ? ENT_SCP_PC : ENT_ECP_PC; e.a = XLEN'(p);
    expq.push_back(e);
  endtask
  task automatic expect_ic(int n);
    entry_t e;
    e = '0; e.kind = ENT_IC; e.a = XLEN'(n);
    expq.push_back(e);
  endtask

  // model of the main-side segment rules
  bit m_open = 0;
  int m_cnt = 0;
  logic [PC_W-1:0] m_last;

  // offer one instruction; k >= 0: user instruction number k (rf[1 + k % 63] ^= mix(k))
  task automatic commit(int k, bit user, bit model, output int waited);
    logic [PC_W-1:0] p;
    p = PC_W'(32'h1000 + 4 * k);
    if (model && user && !m_open && check_en) begin
      expect_cp(ENT_SCP, p); m_open = 1; m_cnt = 0;
    end
    if (model && !user && m_open) begin
      expect_ic(m_cnt); expect_cp(ENT_ECP, m_last); m_open = 0;
    end
    @(negedge clk);
    cm = '0; cm.user = user; cm.pc = p; cm.npc = p + 4;
    cm_valid = 1;
    waited = 0;
    #1;
    while (!cm_ready) begin
      @(negedge clk);
      #1;
      waited++;
    end
    @(posedge clk);
    if (user) rf[1 + (k % 63)] = rf[1 + (k % 63)] ^ mix(k);
    @(negedge clk);
    cm_valid = 0;
    if (model && user && m_open) begin
      m_cnt++; m_last = p + 4;
      if (m_cnt == LIMIT) begin
        expect_ic(LIMIT); expect_cp(ENT_ECP, m_last); expect_cp(ENT_SCP, m_last); m_cnt = 0;
      end
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w, k, maxw;
    logic [XLEN-1:0] thread_rf [NREGS];
    attr = ATTR_MAIN; check_en = 0; busy = 0; cm_valid = 0; cm = '0;
    rec_req = 0; apply_req = 0; rec_npc = '0;
    for (int i = 0; i < NREGS; i++) rf[i] = {32'(i), 32'hcafe_0000 + 32'(i)};
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---------------- main role ----------------
    @(negedge clk);
    check_en = 1;
    k = 0; maxw = 0;
    for (int i = 0; i < 25; i++) begin commit(k, 1, 1, w); k++; if (w > maxw) maxw = w; end
    for (int i = 0; i < 3; i++)  commit(-1, 0, 1, w);                 // kernel excursion
    for (int i = 0; i < 4; i++)  begin commit(k, 1, 1, w); k++; end
    // disable checking (as the kernel does at a context switch)
    @(negedge clk);
    expect_ic(m_cnt); expect_cp(ENT_ECP, m_last); m_open = 0;
    check_en = 0;
    repeat (200) @(negedge clk);
    chk(maxw >= NREGS, "a snapshot stalls the core for at least NREGS cycles");
    chk(outq.size() == expq.size(), $sformatf("stream length %0d vs %0d", outq.size(), expq.size()));
    for (int i = 0; i < expq.size() && i < outq.size(); i++)
      chk(outq[i] == expq[i], $sformatf("stream entry %0d kind %0d/%0d", i, outq[i].kind, expq[i].kind));
    chk(!seg_open, "segment closed after disable");

    // ---------------- checker role ----------------
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    attr = ATTR_CHECKER; busy = 1;
    for (int i = 0; i < NREGS; i++) rf[i] = {32'hdead_0000 + 32'(i), 32'(i)};
    for (int i = 0; i < NREGS; i++) thread_rf[i] = rf[i];
    foreach (outq[i]) inq.push_back(outq[i]);
    for (int seg = 0; seg < 2; seg++) begin
      int held;
      @(negedge clk);
      rec_npc = 48'h7000 + 48'(seg); rec_req = 1;
      #1;
      while (!rec_done) begin @(negedge clk); #1; end
      @(posedge clk);
      @(negedge clk); rec_req = 0; apply_req = 1;
      #1;
      while (!apply_done) begin @(negedge clk); #1; end
      @(posedge clk);
      @(negedge clk); apply_req = 0;
      chk(scp_npc == PC_W'(32'h1000 + 4 * LIMIT * seg), "C.jal target is the SCP pc");
      for (int i = 0; i < NREGS; i++) chk(rf[i] == expq[seg * 67 + i / 2].a || i % 2 == 1, $sformatf("SCP applied (even) %0d %h %h", i, rf[i], expq[seg * 67 + i / 2].a));
      for (int i = 1; i < NREGS; i += 2) chk(rf[i] == expq[seg * 67 + i / 2].b, "SCP applied (odd)");
      for (int i = 0; i < LIMIT; i++) begin
        automatic int kk = seg * LIMIT + i;
        commit(kk, 1, 0, w);
        if (seg == 1 && i == 4) rf[9] = rf[9] ^ 64'h1;    // faulty replay
      end
      // an eleventh instruction must be held off until the segment has been checked
      @(negedge clk);
      cm = '0; cm.user = 1; cm.pc = 48'h7000; cm_valid = 1;
      held = 0;
      forever begin
        #1;
        if (redir_valid) break;
        if (cm_ready) held = -1000;
        held++;
        @(negedge clk);
      end
      @(posedge clk);
      @(negedge clk); cm_valid = 0;
      chk(held > NREGS, "commit held until the check finished");
      chk(redir_pc == 48'h7000 + 48'(seg), "redirect to the recorded pc");
      @(negedge clk);
      for (int i = 0; i < NREGS; i++) chk(rf[i] == thread_rf[i], "recorded context restored");
      chk(result_ok == (seg == 0), $sformatf("C.result of segment %0d", seg));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
