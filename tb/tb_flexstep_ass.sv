// tb_flexstep_ass -- Architectural State Snapshot: writes a full checkpoint, reads it back through
// the restore port, and checks the formatted ECP/SCP entries (pair layout, pair index tag, pc
// entry kind) against a reference copy. Repeated for several random snapshots.
module tb_flexstep_ass;
  import flexstep_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, npc_we;
  logic [RIDX_W-1:0] widx, ridx;
  logic [XLEN-1:0] wdata, rdata;
  logic [PC_W-1:0] npc_d, npc_q;
  entry_kind_e emit_kind;
  logic [5:0] emit_idx;
  entry_t emit_entry;
  logic [XLEN-1:0] ref_regs [NREGS];
  logic [PC_W-1:0] ref_pc;
  int checks = 0, failures = 0;

  flexstep_ass u_dut (.clk, .we, .widx, .wdata, .npc_we, .npc_d, .ridx, .rdata, .npc_q,
                      .emit_kind, .emit_idx, .emit_entry);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; npc_we = 0; widx = 0; wdata = 0; npc_d = 0; ridx = 0; emit_kind = ENT_SCP; emit_idx = 0;
    for (int round = 0; round < 4; round++) begin
      for (int r = 0; r < NREGS; r++) begin
        @(negedge clk);
        we = 1; widx = RIDX_W'(r); wdata = {$urandom, $urandom};
        ref_regs[r] = wdata;
        npc_we = (r == NREGS - 1);
        npc_d  = PC_W'({$urandom, $urandom});
        if (npc_we) ref_pc = npc_d;
      end
      @(negedge clk);
      we = 0; npc_we = 0;
      for (int r = 0; r < NREGS; r++) begin
        ridx = RIDX_W'(r);
        #1 chk(rdata == ref_regs[r], "restore read");
      end
      chk(npc_q == ref_pc, "pc");
      emit_kind = (round % 2) ? ENT_ECP : ENT_SCP;
      for (int p = 0; p <= NREGS / 2; p++) begin
        emit_idx = 6'(p);
        #1;
        if (p < NREGS / 2) begin
          chk(emit_entry.kind == emit_kind && emit_entry.tag == 5'(p), "pair kind/tag");
          chk(emit_entry.a == ref_regs[2*p] && emit_entry.b == ref_regs[2*p+1], "pair data");
        end else begin
          chk(emit_entry.kind == ((round % 2) ? ENT_ECP_PC : ENT_SCP_PC), "pc entry kind");
          chk(emit_entry.a == XLEN'(ref_pc), "pc entry data");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
