// tb_flexstep_soc -- end-to-end test of the FlexStep fabric with four behavioural host cores,
// at the design's default sizes (4 cores, 64-entry FIFOs, 5000-instruction segments).
//
// The testbench plays the operating system and the checker thread:
//   phase A (triple-core mode): core 0 is a main core associated with checkers 1 and 2, core 3
//            is a compute core. Checker 1 starts late, so core 0's FIFO fills and stalls it.
//            Checker 2 is preempted in the middle of a replay by another task and resumed;
//            checker 1 takes interrupts (kernel detours) during replay. Two faults are injected
//            into data core 0 forwards, written into its FIFO: one register of the ECP ending segment 1
//            and the data of one logged store in segment 4. Both checkers must report exactly
//            those two segments as failed.
//   phase B (conflict): cores 0 and 3 are both main cores associated with checker 1. Core 0 owns
//            the channel first; core 3 buffers until core 0 disables checking, then its segments
//            flow to the same checker.
// Independent checks: every segment a main core sends is checked once by each associated checker
// and passes (apart from the corrupted one); the IC values sent add up to the user-mode
// instructions the main core committed with checking on; G.IDs.contain returns the configured
// attributes. Every mechanism (count-limit end, privilege-switch end, disable end, two-entry
// memory ops, FIFO back-pressure, channel conflict, checker preemption, checker kernel detour,
// error detection, one-to-two broadcast) is counted and must occur at least once.
module tb_flexstep_soc;
  import flexstep_pkg::*;

  localparam int unsigned N = 4;
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

  // fault injection into data forwarded by main core 0 (as in the paper's latency experiment):
  // one bit of an ECP register entry (ASS data) ending the first segment, one bit of a store-data LDST
  // entry (MAL data) in the fourth segment. Each must make exactly that segment fail on each checker.
  bit inject_req = 1'b0;
  int n_inject = 0;
  always @(posedge clk) if (rst_n && inject_req && u_dut.g_core[0].u_unit.u_fifo.push) begin
    automatic entry_t e = u_dut.g_core[0].u_unit.u_fifo.din;
    automatic int w = int'(u_dut.g_core[0].u_unit.u_fifo.wptr);
    if ((n_inject == 0 && n_segs_sent[0] == 1 && e.kind == ENT_ECP && e.tag == 5'd7) ||
        (n_inject == 1 && n_segs_sent[0] == 3 && e.kind == ENT_LDST &&
         e.tag[2:0] == 3'(MEM_STORE))) begin
      @(negedge clk);
      if (e.kind == ENT_ECP) u_dut.g_core[0].u_unit.u_fifo.mem[w].a[3] ^= 1'b1;
      else                   u_dut.g_core[0].u_unit.u_fifo.mem[w].b[60] ^= 1'b1;
      n_inject++;
      if (n_inject == 2) inject_req = 1'b0;
    end
  end

  // ---------------- checker thread ----------------
  int seg_ok [N], seg_bad [N];
  bit preempt_req [N];
  bit irq_req = 1'b1;

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
            !u_dut.seg_open[0] && !u_dut.seg_open[3] && cpc_state[1] == 4'd5 &&
            (attr[2] != ATTR_CHECKER || cpc_state[2] == 4'd5))
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
    isa(0, FS_G_CONFIGURE, 64'b1001, 64'b0110, rd);
    for (int i = 0; i < N; i++) begin
      isa(3, FS_G_CONTAIN, i, 0, rd);
      check(rd == ((i == 0 || i == 3) ? 1 : (i == 1 || i == 2) ? 2 : 0), "G.IDs.contain");
    end

    // ---- phase A: 0 -> {1, 2}, checker 1 late, checker 2 preempted, one fault injected
    preempt_req[2] = 1'b1;
    inject_req     = 1'b1;
    fork
      checker_thread(2);
      begin
        repeat (20000) @(posedge clk);
        checker_thread(1);
      end
    join_none
    main_run(0, 64'b0110, 16000, 48'h1000);
    wait_drained();
    a_sent = n_segs_sent[0];
    a_ok1 = seg_ok[1]; a_bad1 = seg_bad[1]; a_ok2 = seg_ok[2]; a_bad2 = seg_bad[2];
    $display("phase A: sent %0d segments, checker1 ok %0d bad %0d, checker2 ok %0d bad %0d",
             a_sent, a_ok1, a_bad1, a_ok2, a_bad2);
    check(a_ok1 + a_bad1 == a_sent, "checker 1 checked every phase A segment");
    check(a_ok2 + a_bad2 == a_sent, "checker 2 checked every phase A segment");
    check(a_bad1 == 2 && a_bad2 == 2, "both injected faults detected by each checker");
    check(ic_sum[0] == user_commits[0], "phase A IC total equals main user commits");

    // ---- phase B: 0 -> 1 and 3 -> 1 compete for checker 1
    isa(0, FS_G_CONFIGURE, 64'b1001, 64'b0010, rd);    // core 2 becomes a compute core
    fork
      main_run(0, 64'b0010, 16000 + 7000, 48'h2_0000);
      begin
        repeat (200) @(posedge clk);
        main_run(3, 64'b0010, 7000, 48'h4_0000);
      end
    join
    wait_drained();
    b_sent0 = n_segs_sent[0] - a_sent;
    b_sent3 = n_segs_sent[3];
    $display("phase B: sent %0d + %0d segments, checker1 ok %0d bad %0d",
             b_sent0, b_sent3, seg_ok[1] - a_ok1, seg_bad[1] - a_bad1);
    check(seg_ok[1] - a_ok1 == b_sent0 + b_sent3, "checker 1 passed every phase B segment");
    check(seg_bad[1] == a_bad1, "no false error in phase B");
    check(ic_sum[0] == user_commits[0], "IC total equals main 0 user commits");
    check(ic_sum[3] == user_commits[3], "IC total equals main 3 user commits");
    check(n_err_pulse == 4, "error pulses match failed results");

    $display("mechanisms: disable_end=%0d limit_end=%0d priv_end=%0d multi_uop=%0d fifo_stall=%0d blocked=%0d",
             n_disable_end, n_limit_end, n_priv_end, n_multi, n_stall, n_block);
    $display("            preempt=%0d kernel_detour=%0d inject=%0d broadcast=%0d",
             n_preempt, n_kdetour, n_inject, n_bcast);
    check(n_limit_end > 0, "segment ended by instruction count limit");
    check(n_priv_end > 0, "segment ended by privilege switch");
    check(n_disable_end > 0, "segment ended by M.check disable");
    check(n_multi > 0, "LR/SC/AMO logged as two entries");
    check(n_stall > 0, "FIFO back-pressure stalled a main core");
    check(n_block > 0, "channel conflict buffered a main core");
    check(n_preempt > 0, "checker preempted and resumed");
    check(n_kdetour > 0, "checker replay took a kernel detour");
    check(n_inject == 2, "faults injected");
    check(n_bcast > 0, "one-to-two broadcast");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
