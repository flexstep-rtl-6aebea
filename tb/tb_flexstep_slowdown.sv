// tb_flexstep_slowdown -- main-core slowdown in dual-core and triple-core checking mode, on the
// 4-core top at its default parameters, with behavioural host cores (tb_core_model).
// The same user program (the model's program depends only on the pc) is run three times on
// core 0 for a fixed number of user-mode instructions:
//   base    checking off (core 0 is a main core, but M.check is never enabled)
//   dual    core 0 -> checker 1
//   triple  core 0 -> checkers 1 and 2 (every entry is broadcast to both)
// The checker threads run C.record / C.apply / C.jal / replay / C.result as the OS would.
// The cycles each run takes are measured and the slowdown against the base run is printed.
// Checks: every segment sent in dual and triple mode is checked by every associated checker and
// passes, the IC values add up to the user instructions committed, triple mode is not faster
// than dual mode, and the extra cycles stay within 12 x NREGS per segment (two register
// snapshots on the main core, the checker's record/apply/compare/restore, handshakes). The
// model's checker core runs no faster than its main core and its system calls (about one per
// 4096 instructions) keep segments short, so the slowdown printed here (about 30 %) is far above
// the 1-2 % the source reports for real programs, where a checker that takes its load data from
// the FIFO outruns a main core that waits for its caches. Only the bound is checked.
module tb_flexstep_slowdown;
  import flexstep_pkg::*;

  localparam int unsigned N = 4;
  localparam int unsigned N_USER = 30000;
  longint cyc_now = 0;
  always @(posedge clk) cyc_now++;
  localparam logic [PC_W-1:0] THREAD_PC = 48'h8000_0000;
  localparam logic [PC_W-1:0] OTHER_PC  = 48'h9000_0000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0] cm_valid, cm_ready, rf_we, redir_valid, isa_valid, isa_ready;
  logic [N-1:0] seg_end_pulse, err_pulse, stall_fifo, channel_blocked, seg_open;
  commit_t           cm        [N];
  logic [XLEN-1:0]   byp_rdata [N];
  logic [RIDX_W-1:0] rf_raddr  [N];
  logic [XLEN-1:0]   rf_rdata  [N];
  logic [RIDX_W-1:0] rf_waddr  [N];
  logic [XLEN-1:0]   rf_wdata  [N];
  logic [PC_W-1:0]   redir_pc  [N];
  logic [31:0]       isa_instr [N];
  logic [XLEN-1:0]   isa_rs1   [N];
  logic [XLEN-1:0]   isa_rs2   [N];
  logic [PC_W-1:0]   isa_npc   [N];
  logic [XLEN-1:0]   isa_rd    [N];
  core_attr_e        attr      [N];

  // per-core testbench controls, each driven by one process only
  logic            run_r    [N];
  logic            replay_r [N];
  logic            setpc_r  [N];
  logic [PC_W-1:0] setpcv_r [N];
  logic            isav_r   [N];
  logic            halted   [N];

  flexstep_soc u_dut (
    .clk, .rst_n, .cm_valid, .cm, .cm_ready, .byp_rdata, .rf_raddr, .rf_rdata, .rf_we,
    .rf_waddr, .rf_wdata, .redir_valid, .redir_pc, .isa_valid, .isa_instr, .isa_rs1, .isa_rs2,
    .isa_npc, .isa_ready, .isa_rd, .attr, .seg_end_pulse, .err_pulse, .stall_fifo,
    .channel_blocked, .seg_open
  );

  for (genvar i = 0; i < N; i++) begin : g_core
    assign isa_valid[i] = isav_r[i];
    tb_core_model u_core (
      .clk, .rst_n, .run(run_r[i]), .replay(replay_r[i]), .set_pc_valid(setpc_r[i]),
      .set_pc(setpcv_r[i]), .set_user(1'b1), .cm_valid(cm_valid[i]), .cm(cm[i]),
      .cm_ready(cm_ready[i]), .byp_rdata(byp_rdata[i]), .rf_raddr(rf_raddr[i]),
      .rf_rdata(rf_rdata[i]), .rf_we(rf_we[i]), .rf_waddr(rf_waddr[i]), .rf_wdata(rf_wdata[i]),
      .redir_valid(redir_valid[i]), .redir_pc(redir_pc[i]), .halted(halted[i])
    );
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- custom instruction issue ----------------
  task automatic isa(int c, fs_op_e op, logic [XLEN-1:0] rs1, logic [XLEN-1:0] rs2,
                     output logic [XLEN-1:0] rd);
    @(negedge clk);
    isa_instr[c] = {7'(op), 5'd2, 5'd1, 3'b000, 5'd3, FS_OPCODE};
    isa_rs1[c]   = rs1;
    isa_rs2[c]   = rs2;
    isa_npc[c]   = THREAD_PC;
    isav_r[c]    = 1'b1;
    forever begin
      @(posedge clk);
      if (isa_ready[c]) break;
    end
    rd = isa_rd[c];
    @(negedge clk);
    isav_r[c] = 1'b0;
  endtask

  task automatic set_pc(int c, logic [PC_W-1:0] p);
    @(negedge clk);
    setpc_r[c]  = 1'b1;
    setpcv_r[c] = p;
    @(negedge clk);
    setpc_r[c]  = 1'b0;
  endtask

  // ---------------- monitors ----------------
  int n_limit_end = 0, n_priv_end = 0, n_multi = 0, n_stall = 0, n_block = 0, n_preempt = 0;
  int n_disable_end = 0, n_kdetour = 0, n_err_pulse = 0, n_bcast = 0, n_segs_sent [N];
  longint ic_sum [N];
  longint user_commits [N];
  logic   check_on [N];

  logic [IC_W-1:0] inst_cnt  [N];
  logic [3:0]      cpc_state [N];
  logic [6:0]      fifo_cnt  [N];
  for (genvar i = 0; i < N; i++) begin : g_mon
    assign inst_cnt[i]  = u_dut.g_core[i].u_unit.inst_count;
    assign cpc_state[i] = u_dut.g_core[i].u_unit.u_cpc.state_q;
    assign fifo_cnt[i]  = u_dut.g_core[i].u_unit.fifo_count;
    always @(posedge clk) if (rst_n) begin
      if (u_dut.g_core[i].u_unit.u_fifo.push && attr[i] == ATTR_MAIN &&
          u_dut.g_core[i].u_unit.u_fifo.din.kind == ENT_IC) begin
        ic_sum[i] += u_dut.g_core[i].u_unit.u_fifo.din.a;
        n_segs_sent[i]++;
        if (u_dut.g_core[i].u_unit.u_fifo.din.a == 64'(IC_LIMIT_DEFAULT)) n_limit_end++;
        else if (u_dut.check_en[i]) n_priv_end++;
        else n_disable_end++;
      end
      if (attr[i] == ATTR_MAIN && cm_valid[i] && cm_ready[i] && cm[i].user && check_on[i])
        user_commits[i]++;
      if (attr[i] == ATTR_MAIN && cm_valid[i] && cm_ready[i] && cm[i].user && cm[i].is_mem &&
          is_multi_uop(cm[i].op) && u_dut.seg_open[i]) n_multi++;
      if (stall_fifo[i]) n_stall++;
      if (channel_blocked[i]) n_block++;
      if (err_pulse[i]) n_err_pulse++;
      if (attr[i] == ATTR_CHECKER && replay_r[i] && cm_valid[i] && cm_ready[i] && !cm[i].user)
        n_kdetour++;
    end
  end
  always @(posedge clk) if (rst_n && u_dut.rx_push[1] && u_dut.rx_push[2]) n_bcast++;


  // ---------------- checker thread ----------------
  int seg_ok [N], seg_bad [N];
  bit preempt_req [N];
  bit irq_req = 1'b0;
  bit running [N];

  task automatic checker_thread(int c);
    logic [XLEN-1:0] rd;
    isa(c, FS_C_STATE, 1, 0, rd);
    forever begin
      isa(c, FS_C_RECORD, 0, 0, rd);
      isa(c, FS_C_APPLY, 0, 0, rd);
      isa(c, FS_C_JAL, 0, 0, rd);
      replay_r[c] = 1'b1;
      set_pc(c, rd[PC_W-1:0]);
      run_r[c] = 1'b1;
      while (!halted[c]) begin
        @(negedge clk);
        if (c == 1 && irq_req && inst_cnt[1] > 500 && !halted[1] && g_core[1].u_core.priv_user) begin
          // timer interrupt on the checker: a kernel-mode detour inside the replay
          irq_req = 1'b0;
          g_core[1].u_core.upc       = g_core[1].u_core.pc;
          g_core[1].u_core.priv_user = 1'b0;
          g_core[1].u_core.kleft     = 8'd20;
          g_core[1].u_core.pc        = 48'hF000_1000;
        end
        if (c == 2 && preempt_req[c] && inst_cnt[c] > 1000 && !halted[c]) begin
          // OS preempts the checker thread with another task, then resumes it
          logic [XLEN-1:0] sregs [NREGS];
          logic [PC_W-1:0] spc, supc;
          logic suser;
          logic [7:0] skleft;
          preempt_req[c] = 1'b0;
          run_r[c] = 1'b0;
          isa(c, FS_C_STATE, 0, 0, rd);
          @(negedge clk);
          for (int r = 0; r < NREGS; r++) sregs[r] = g_core[2].u_core.regs[r];
          spc = g_core[2].u_core.pc; supc = g_core[2].u_core.upc;
          suser = g_core[2].u_core.priv_user; skleft = g_core[2].u_core.kleft;
          replay_r[c] = 1'b0;
          set_pc(c, OTHER_PC);
          run_r[c] = 1'b1;
          repeat (400) @(negedge clk);
          run_r[c] = 1'b0;
          @(negedge clk);
          for (int r = 0; r < NREGS; r++) g_core[2].u_core.regs[r] = sregs[r];
          g_core[2].u_core.pc = spc; g_core[2].u_core.upc = supc;
          g_core[2].u_core.priv_user = suser; g_core[2].u_core.kleft = skleft;
          replay_r[c] = 1'b1;
          isa(c, FS_C_STATE, 1, 0, rd);
          run_r[c] = 1'b1;
          n_preempt++;
        end
      end
      run_r[c] = 1'b0;
      isa(c, FS_C_RESULT, 0, 0, rd);
      if (rd == 1) seg_ok[c]++;
      else seg_bad[c]++;
    end
  endtask

  // ---------------- main core program ----------------
  task automatic main_run(int c, logic [XLEN-1:0] assoc_mask, int n_user, logic [PC_W-1:0] p);
    logic [XLEN-1:0] rd;
    isa(c, FS_M_ASSOCIATE, assoc_mask, 0, rd);
    isa(c, FS_M_CHECK, 1, 0, rd);
    check_on[c] = 1'b1;
    set_pc(c, p);
    run_r[c] = 1'b1;
    while (user_commits[c] < longint'(n_user)) begin
      @(negedge clk);
    end
    run_r[c] = 1'b0;             // context switch: kernel disables checking
    @(negedge clk);
    isa(c, FS_M_CHECK, 0, 0, rd);
    check_on[c] = 1'b0;
  endtask

  task automatic wait_drained();
    int quiet = 0;
    while (quiet < 300) begin
      @(negedge clk);
      if (cm_valid == '0 || 1'b1) begin
        if (u_dut.tx_valid == '0 && fifo_cnt[1] == 0 && fifo_cnt[2] == 0 &&
            !u_dut.seg_open[0] && (!running[1] || cpc_state[1] == 4'd5) &&
            (!running[2] || cpc_state[2] == 4'd5))
          quiet++;
        else quiet = 0;
      end
    end
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [XLEN-1:0] rd;
    int a_ok1, a_ok2, a_bad1, a_bad2, a_sent, b_sent0, b_sent3;
    for (int i = 0; i < N; i++) begin
      run_r[i] = 0; replay_r[i] = 0; setpc_r[i] = 0; setpcv_r[i] = '0; isav_r[i] = 0;
      isa_instr[i] = '0; isa_rs1[i] = '0; isa_rs2[i] = '0; isa_npc[i] = '0;
      n_segs_sent[i] = 0; ic_sum[i] = 0; user_commits[i] = 0; check_on[i] = 0;
      seg_ok[i] = 0; seg_bad[i] = 0; preempt_req[i] = 0;
    end
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    // OS: configure core attributes (main 0 and 3, checkers 1 and 2)
    isa(0, FS_G_CONFIGURE, 64'b0001, 64'b0110, rd);

    // ---- base, dual and triple runs of the same program
    begin
      longint t0, cyc [3];
      int sent_before, ok1_before, ok2_before, stall_before;
      real sd [3];
      int nseg [3];
      for (int mode = 0; mode < 3; mode++) begin
        sent_before = n_segs_sent[0]; stall_before = n_stall; ok1_before = seg_ok[1]; ok2_before = seg_ok[2];
        if (mode == 1) begin running[1] = 1'b1; fork checker_thread(1); join_none end
        if (mode == 2) begin running[2] = 1'b1; fork checker_thread(2); join_none end
        user_commits[0] = 0; ic_sum[0] = 0;
        if (mode > 0) begin
          isa(0, FS_M_ASSOCIATE, (mode == 1) ? 64'b0010 : 64'b0110, 0, rd);
          isa(0, FS_M_CHECK, 1, 0, rd);
        end
        check_on[0] = 1'b1;
        set_pc(0, 48'h1000);
        t0 = cyc_now;
        run_r[0] = 1'b1;
        while (user_commits[0] < longint'(N_USER)) @(negedge clk);
        run_r[0] = 1'b0;
        cyc[mode] = cyc_now - t0;
        @(negedge clk);
        if (mode > 0) isa(0, FS_M_CHECK, 0, 0, rd);
        check_on[0] = 1'b0;
        wait_drained();
        if (mode > 0) begin
          check(ic_sum[0] == user_commits[0], $sformatf("mode %0d: IC total equals user commits", mode));
          check(n_segs_sent[0] > sent_before, $sformatf("mode %0d: segments sent", mode));
          check(seg_ok[1] - ok1_before == n_segs_sent[0] - sent_before,
                $sformatf("mode %0d: checker 1 passed every segment", mode));
          if (mode == 2)
            check(seg_ok[2] - ok2_before == n_segs_sent[0] - sent_before,
                  "mode 2: checker 2 passed every segment");
        end else check(n_segs_sent[0] == 0, "base run sends nothing");
        nseg[mode] = n_segs_sent[0] - sent_before;
        sd[mode] = 100.0 * (real'(cyc[mode]) / real'(cyc[0]) - 1.0);
        $display("%s: %0d user instructions in %0d cycles, slowdown %f %%, segments %0d, FIFO-full stall cycles %0d",
                 (mode == 0) ? "base  " : (mode == 1) ? "dual  " : "triple", N_USER, cyc[mode], sd[mode],
                 n_segs_sent[0] - sent_before, n_stall - stall_before);
      end
      // cost bound per segment: two snapshots on the main core plus the checker's record,
      // apply, ECP compare and restore (NREGS cycles each), doubled for handshakes and FIFO
      // effects; the model's checker is no faster than its main core, so the main core absorbs it
      check(cyc[1] - cyc[0] <= longint'(nseg[1]) * 12 * NREGS, "dual-core overhead within 12 x NREGS cycles per segment");
      check(cyc[2] - cyc[0] <= longint'(nseg[2]) * 12 * NREGS, "triple-core overhead within 12 x NREGS cycles per segment");
      check(cyc[2] >= cyc[1], "triple-core mode is not faster than dual-core mode");
      check(n_bcast > 0, "triple mode broadcast entries");
      check(seg_bad[1] == 0 && seg_bad[2] == 0 && n_err_pulse == 0, "no false errors");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
