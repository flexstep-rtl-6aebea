// tb_flexstep_unit -- one FlexStep unit as a main core and one as a checker core, with a real
// global register and the main core's outgoing FIFO wired straight into the checker's incoming
// FIFO (the interconnect is tested on its own). IC_LIMIT is cut to 8 so that segments are short.
// Both cores are scripted by the testbench, each with its own register file.
//   * Set-up through the custom instructions: G.Configure (core 0 main, core 1 checker),
//     G.IDs.contain for both cores, M.associate, M.check(1), C.check_state(1); M.check on the
//     checker and C.check_state on the main core must have no effect.
//   * Main thread: user instructions 0..N-1, where instruction k is a load, a store, an AMO or an
//     ALU operation on register 1 + k % 63, with random load data; it then runs M.check(0).
//     Every committed instruction is logged so that the checker thread can replay it.
//   * Checker thread (runs at the same time, so the main core sees FIFO back-pressure): for each
//     segment C.record, C.apply, C.jal (gives the segment's first pc), replay from that pc using
//     byp_rdata for load values until the unit redirects the core to the recorded pc, then
//     C.result. The checker's own registers must come back unchanged after the redirect.
//   * Segment 1 is replayed with one wrong register update: its C.result must be 0 and
//     err_pulse must fire; all others must give 1.
module tb_flexstep_unit;
  import flexstep_pkg::*;
  localparam int unsigned LIMIT = 8;
  localparam int unsigned NSEG  = 3;
  localparam int unsigned N     = 2 * LIMIT + 5;    // two full segments and a short one

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // per-core signals, index 0 = main, 1 = checker
  logic              cm_valid [2], cm_ready [2];
  commit_t           cm       [2];
  logic [XLEN-1:0]   byp_rdata[2];
  logic [RIDX_W-1:0] rf_raddr [2], rf_waddr [2];
  logic [XLEN-1:0]   rf_rdata [2], rf_wdata [2];
  logic              rf_we    [2], redir_valid [2];
  logic [PC_W-1:0]   redir_pc [2];
  logic              isa_valid[2], isa_ready [2];
  logic [31:0]       isa_instr[2];
  logic [XLEN-1:0]   isa_rs1  [2], isa_rs2 [2], isa_rd [2];
  logic [PC_W-1:0]   isa_npc  [2];
  gcfg_req_t         gcfg_req [2];
  logic              tx_valid [2], tx_pop [2], rx_push [2], rx_ready [2];
  entry_t            tx_entry [2], rx_entry [2];
  logic              seg_end_pulse [2], err_pulse [2], stall_fifo [2], seg_open [2];
  logic [IC_W-1:0]   inst_count [2];
  logic [6:0]        fifo_count [2];

  core_mask_t main_mask, chk_mask;
  core_attr_e attr [2];
  core_mask_t assoc [2];
  logic [1:0] check_en, busy;

  logic [XLEN-1:0] rf [2][NREGS];

  flexstep_global_reg #(.NCORES(2)) u_greg (
    .clk, .rst_n, .req(gcfg_req), .main_mask, .chk_mask, .attr, .assoc, .check_en, .busy
  );

  for (genvar u = 0; u < 2; u++) begin : g_u
    flexstep_unit #(.NCORES(2), .IC_LIMIT(LIMIT)) u_unit (
      .clk, .rst_n,
      .cm_valid(cm_valid[u]), .cm(cm[u]), .cm_ready(cm_ready[u]), .byp_rdata(byp_rdata[u]),
      .rf_raddr(rf_raddr[u]), .rf_rdata(rf_rdata[u]), .rf_we(rf_we[u]), .rf_waddr(rf_waddr[u]),
      .rf_wdata(rf_wdata[u]), .redir_valid(redir_valid[u]), .redir_pc(redir_pc[u]),
      .isa_valid(isa_valid[u]), .isa_instr(isa_instr[u]), .isa_rs1(isa_rs1[u]),
      .isa_rs2(isa_rs2[u]), .isa_npc(isa_npc[u]), .isa_ready(isa_ready[u]), .isa_rd(isa_rd[u]),
      .attr(attr[u]), .check_en(check_en[u]), .busy(busy[u]), .main_mask, .chk_mask,
      .gcfg_req(gcfg_req[u]),
      .tx_valid(tx_valid[u]), .tx_entry(tx_entry[u]), .tx_pop(tx_pop[u]),
      .rx_push(rx_push[u]), .rx_entry(rx_entry[u]), .rx_ready(rx_ready[u]),
      .seg_end_pulse(seg_end_pulse[u]), .err_pulse(err_pulse[u]), .stall_fifo(stall_fifo[u]),
      .seg_open(seg_open[u]), .inst_count(inst_count[u]), .fifo_count(fifo_count[u])
    );
    assign rf_rdata[u] = rf[u][rf_raddr[u]];
    always @(posedge clk) if (rst_n && rf_we[u]) rf[u][rf_waddr[u]] <= rf_wdata[u];
  end

  // direct link main -> checker
  assign rx_push[1]  = tx_valid[0] && rx_ready[1];
  assign rx_entry[1] = tx_entry[0];
  assign tx_pop[0]   = rx_push[1];
  assign rx_push[0]  = 1'b0;
  assign rx_entry[0] = '0;
  assign tx_pop[1]   = 1'b0;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] fs_instr(fs_op_e op);
    return {7'(op), 5'd0, 5'd0, 3'b000, 5'd0, FS_OPCODE};
  endfunction

  task automatic isa(int u, fs_op_e op, logic [XLEN-1:0] a, logic [XLEN-1:0] b,
                     logic [PC_W-1:0] npc, output logic [XLEN-1:0] rd);
    @(negedge clk);
    isa_valid[u] = 1; isa_instr[u] = fs_instr(op); isa_rs1[u] = a; isa_rs2[u] = b;
    isa_npc[u] = npc;
    #1;
    while (!isa_ready[u]) begin @(negedge clk); #1; end
    rd = isa_rd[u];
    @(posedge clk);
    @(negedge clk);
    isa_valid[u] = 0;
  endtask

  // the instruction at program index k
  function automatic commit_t prog(int k, logic [XLEN-1:0] r);
    commit_t c;
    c = '0; c.user = 1; c.pc = PC_W'(32'h1000 + 4 * k); c.npc = c.pc + 4;
    c.addr = XLEN'(32'h8000 + 8 * k);
    case (k % 4)
      1: begin c.is_mem = 1; c.op = MEM_LOAD; end
      2: begin c.is_mem = 1; c.op = MEM_STORE; c.wdata = r; end
      3: begin c.is_mem = 1; c.op = MEM_AMO; c.wdata = r + 64'd1; end
      default: ;
    endcase
    return c;
  endfunction

  function automatic logic [XLEN-1:0] mix(int k);
    return {32'(k) * 32'h9e3779b9, 32'(k) ^ 32'h5bd1e995};
  endfunction

  // result register value of instruction k given its old value and the load data
  function automatic logic [XLEN-1:0] effect(int k, logic [XLEN-1:0] r, logic [XLEN-1:0] ld);
    case (k % 4)
      1, 3:    return ld;
      2:       return r;
      default: return r ^ mix(k);
    endcase
  endfunction

  logic [XLEN-1:0] log_rdata [N];
  int n_logged = 0;
  int n_stall = 0, n_multi = 0, n_ok = 0, n_bad = 0, n_err = 0, n_held = 0;

  always @(posedge clk) begin
    if (stall_fifo[0]) n_stall++;
    if (err_pulse[1])  n_err++;
  end

  initial begin
    logic [XLEN-1:0] rd;
    for (int u = 0; u < 2; u++) begin
      cm_valid[u] = 0; cm[u] = '0; isa_valid[u] = 0; isa_instr[u] = '0;
      isa_rs1[u] = '0; isa_rs2[u] = '0; isa_npc[u] = '0;
      for (int i = 0; i < NREGS; i++) rf[u][i] = {32'(u), 32'(i * 7 + 1)};
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ------------- configuration through the ISA -------------
    isa(0, FS_G_CONFIGURE, 64'h1, 64'h2, '0, rd);
    isa(1, FS_G_CONTAIN, 64'd0, '0, '0, rd);
    chk(rd == XLEN'(ATTR_MAIN), "G.IDs.contain(0) = main");
    isa(0, FS_G_CONTAIN, 64'd1, '0, '0, rd);
    chk(rd == XLEN'(ATTR_CHECKER), "G.IDs.contain(1) = checker");
    chk(attr[0] == ATTR_MAIN && attr[1] == ATTR_CHECKER, "attributes latched");
    isa(1, FS_M_CHECK, 64'd1, '0, '0, rd);
    chk(!check_en[1], "M.check on a checker core has no effect");
    isa(0, FS_C_STATE, 64'd1, '0, '0, rd);
    chk(!busy[0], "C.check_state on a main core has no effect");
    isa(0, FS_M_ASSOCIATE, 64'h2, '0, '0, rd);
    chk(assoc[0] == 32'h2, "M.associate");
    isa(1, FS_C_STATE, 64'd1, '0, '0, rd);
    chk(busy[1], "C.check_state busy");
    isa(0, FS_M_CHECK, 64'd1, '0, '0, rd);
    chk(check_en[0], "M.check(1)");

    fork
      // ------------- main core -------------
      begin
        for (int k = 0; k < N; k++) begin
          commit_t c;
          logic [XLEN-1:0] ld;
          int d;
          d  = 1 + k % 63;
          ld = {$urandom, $urandom};
          @(negedge clk);
          c = prog(k, rf[0][d]);
          c.rdata = ld;
          cm[0] = c; cm_valid[0] = 1;
          #1;
          while (!cm_ready[0]) begin @(negedge clk); #1; end
          @(posedge clk);
          rf[0][d] = effect(k, rf[0][d], ld);
          log_rdata[k] = ld;
          n_logged++;
          if (c.is_mem && c.op == MEM_AMO) n_multi++;
          @(negedge clk);
          cm_valid[0] = 0;
        end
        isa(0, FS_M_CHECK, 64'd0, '0, '0, rd);
        chk(!check_en[0], "M.check(0)");
      end
      // ------------- checker core -------------
      begin
        repeat (300) @(posedge clk);      // start late: the main core has to wait for room
        for (int s = 0; s < NSEG; s++) begin
          logic [XLEN-1:0] saved [NREGS];
          logic [PC_W-1:0] ret_pc;
          int k;
          bit redirected;
          ret_pc = PC_W'(32'h9000 + 16 * s);
          for (int i = 0; i < NREGS; i++) begin
            rf[1][i] = {32'hc0de_0000 + 32'(s), 32'(i)};
            saved[i] = rf[1][i];
          end
          isa(1, FS_C_RECORD, '0, '0, ret_pc, rd);
          isa(1, FS_C_APPLY, '0, '0, '0, rd);
          isa(1, FS_C_JAL, '0, '0, '0, rd);
          chk(rd == XLEN'(32'h1000 + 4 * LIMIT * s), $sformatf("C.jal of segment %0d", s));
          k = (int'(rd) - 32'h1000) / 4;
          redirected = 0;
          while (!redirected) begin
            commit_t c;
            int d;
            int w;
            d = 1 + k % 63;
            @(negedge clk);
            c = prog(k, rf[1][d]);
            c.rdata = {$urandom, $urandom};   // memory would return something else
            cm[1] = c; cm_valid[1] = 1;
            #1;
            w = 0;
            while (!cm_ready[1] && !redir_valid[1]) begin @(negedge clk); #1; w++; end
            if (redir_valid[1]) begin
              chk(redir_pc[1] == ret_pc, "redirect to the recorded pc");
              @(posedge clk);
              @(negedge clk);
              cm_valid[1] = 0;
              redirected = 1;
              chk(k == LIMIT * s + ((s == NSEG - 1) ? N - LIMIT * s : LIMIT),
                  $sformatf("segment %0d ended after the right count (k=%0d)", s, k));
              if (w > 2) n_held++;
            end else begin
              if (c.is_mem && (c.op == MEM_LOAD || c.op == MEM_AMO))
                chk(byp_rdata[1] == log_rdata[k], $sformatf("bypassed load data of %0d", k));
              @(posedge clk);
              rf[1][d] = effect(k, rf[1][d], byp_rdata[1]);
              if (s == 1 && k == LIMIT + 2) rf[1][d] = rf[1][d] ^ 64'h10;   // injected fault
              @(negedge clk);
              cm_valid[1] = 0;
              k++;
            end
          end
          repeat (2) @(negedge clk);
          for (int i = 0; i < NREGS; i++)
            chk(rf[1][i] == saved[i], $sformatf("context restored, reg %0d", i));
          isa(1, FS_C_RESULT, '0, '0, '0, rd);
          chk(rd[0] == (s != 1), $sformatf("C.result of segment %0d", s));
          if (rd[0]) n_ok++; else n_bad++;
        end
      end
    join

    repeat (20) @(posedge clk);
    chk(n_ok == NSEG - 1 && n_bad == 1, "one failed and the rest passed");
    chk(n_err >= 1, "err_pulse on the faulty segment");
    chk(n_stall > 0, "main core stalled by a full FIFO");
    chk(n_multi > 0, "two-entry instructions logged");
    chk(n_held == NSEG, "checker held at the end of every segment");
    chk(fifo_count[0] == 0 && fifo_count[1] == 0, "all entries consumed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
