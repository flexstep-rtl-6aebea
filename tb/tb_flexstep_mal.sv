// tb_flexstep_mal -- Memory Access Log, both roles.
// Main side: random committed memory instructions with random FIFO back-pressure; the entries
// pushed are compared with an independently written table of entry contents (one entry for
// LD/ST, two for LR/SC/AMO, uop 1 one or more cycles after uop 0, busy in between).
// Checker side: the logged entries are replayed against the same instructions: load data must be
// bypassed from the log, LD/ST complete in one cycle and two-entry ops in two, with no mismatch.
// Then corrupted entries (address, store data, AMO result) must each raise mismatch.
module tb_flexstep_mal;
  import flexstep_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rec_fire, busy, push_valid, push_ready, chk_req, chk_ready, chk_pop, mismatch;
  commit_t cm;
  entry_t push_entry, head;
  logic [XLEN-1:0] byp_rdata;
  int checks = 0, failures = 0;
  commit_t ops [$];
  entry_t  log_q [$];
  entry_t  exp_q [$];

  flexstep_mal u_dut (.clk, .rst_n, .rec_fire, .cm, .busy, .push_valid, .push_entry, .push_ready,
                      .chk_req, .head, .chk_ready, .chk_pop, .byp_rdata, .mismatch);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic entry_t ent(logic uop, mem_op_e op, logic [63:0] a, logic [63:0] b);
    entry_t e;
    e.kind = ENT_LDST; e.tag = {uop, 1'b0, op}; e.a = a; e.b = b;
    return e;
  endfunction

  function automatic commit_t rnd_op();
    commit_t c;
    c = '0;
    c.user = 1; c.is_mem = 1;
    c.op = mem_op_e'($urandom % 5);
    c.addr = {$urandom, $urandom} & ~64'h7;
    c.wdata = {$urandom, $urandom};
    c.rdata = {$urandom, $urandom};
    if (c.op == MEM_SC) c.rdata = 64'($urandom % 2);
    return c;
  endfunction

  always @(posedge clk) if (rst_n && push_valid && push_ready) log_q.push_back(push_entry);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rec_fire = 0; cm = '0; push_ready = 1; chk_req = 0; head = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---------------- main side ----------------
    for (int k = 0; k < 400; k++) begin
      commit_t c;
      c = rnd_op();
      ops.push_back(c);
      unique case (c.op)
        MEM_LOAD:  exp_q.push_back(ent(0, c.op, c.addr, c.rdata));
        MEM_STORE: exp_q.push_back(ent(0, c.op, c.addr, c.wdata));
        MEM_LR:    begin exp_q.push_back(ent(0, c.op, c.addr, c.rdata));
                         exp_q.push_back(ent(1, c.op, c.addr, 64'd1)); end
        MEM_SC:    begin exp_q.push_back(ent(0, c.op, c.addr, c.wdata));
                         exp_q.push_back(ent(1, c.op, c.addr, c.rdata)); end
        default:   begin exp_q.push_back(ent(0, c.op, c.addr, c.rdata));
                         exp_q.push_back(ent(1, c.op, c.addr, c.wdata)); end
      endcase
      // wait until the log can take it
      forever begin
        @(negedge clk);
        push_ready = ($urandom % 4) != 0;
        rec_fire = 0;
        if (!busy && push_ready) break;
      end
      cm = c;
      rec_fire = 1;
      @(negedge clk);
      rec_fire = 0;
      chk(busy == is_multi_uop(c.op), "busy after a two-entry op");
    end
    while (busy) begin
      @(negedge clk);
      push_ready = 1;
    end
    @(negedge clk);
    chk(log_q.size() == exp_q.size(), "number of entries");
    for (int i = 0; i < exp_q.size() && i < log_q.size(); i++) chk(log_q[i] == exp_q[i], "entry");

    // ---------------- checker side ----------------
    begin
      automatic int p = 0;
      foreach (ops[k]) begin
        automatic commit_t c = ops[k];
        automatic int cyc = 0;
        automatic logic [63:0] got;
        forever begin
          @(negedge clk);
          cm = c;
          head = log_q[p];
          chk_req = 1;
          #1;
          chk(!mismatch, "no mismatch on a correct replay");
          if (cyc == 0) got = byp_rdata;
          if (chk_pop) p++;
          cyc++;
          if (chk_ready) break;
        end
        @(negedge clk);
        chk_req = 0;
        chk(cyc == (is_multi_uop(c.op) ? 2 : 1), "checker cycles per op");
        if (c.op != MEM_STORE && c.op != MEM_SC) chk(got == c.rdata, "bypassed load data");
      end
      chk(p == log_q.size(), "all entries consumed");
    end
    // corrupted entries
    for (int t = 0; t < 3; t++) begin
      commit_t c;
      entry_t e;
      automatic bit seen = 0;
      c = rnd_op();
      c.op = (t == 0) ? MEM_LOAD : (t == 1) ? MEM_STORE : MEM_AMO;
      for (int u = 0; u < (t == 2 ? 2 : 1); u++) begin
        e = (u == 0) ? ent(0, c.op, c.addr, (c.op == MEM_STORE) ? c.wdata : c.rdata)
                     : ent(1, c.op, c.addr, c.wdata);
        if (t == 0) e.a ^= 64'h8;
        if (t == 1) e.b ^= 64'h1;
        if (t == 2 && u == 1) e.b ^= 64'h100;
        @(negedge clk);
        cm = c; head = e; chk_req = 1;
        #1;
        if (mismatch) seen = 1;
      end
      @(negedge clk);
      chk_req = 0;
      chk(seen, "corrupted entry detected");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
