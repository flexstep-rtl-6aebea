// flexstep_ass -- Architectural State Snapshot (ASS) of one core, part of RCPM.
//
// Holds one register checkpoint: the NREGS architectural registers (32 integer + 32 FP) and a
// PC_W-bit pc. With the defaults that is 64 x 8 + 6 = 518 bytes, the ASS size the paper reports;
// the split into registers and a 6-byte pc is this design's reading of that number.
// On a main core the Checkpoint Control (CPC) writes a snapshot read from the register file into
// it and then reads it out, already formatted as channel entries (emit port), to send an ECP or
// SCP. On a checker core C.record saves the checker thread's own context here and CPC writes it
// back into the register file after the segment's ECP has been checked (read port).
// Writes are synchronous; both read ports are combinational. No reset: every location is written
// before it is read.
module flexstep_ass
  import flexstep_pkg::*;
(
  input  logic              clk,
  // register write port (snapshot capture / record)
  input  logic              we,
  input  logic [RIDX_W-1:0] widx,
  input  logic [XLEN-1:0]   wdata,
  input  logic              npc_we,
  input  logic [PC_W-1:0]   npc_d,
  // register read port (restore)
  input  logic [RIDX_W-1:0] ridx,
  output logic [XLEN-1:0]   rdata,
  output logic [PC_W-1:0]   npc_q,
  // formatted read-out: emit_idx 0..NREGS/2-1 gives register pairs, NREGS/2 the pc entry
  input  entry_kind_e       emit_kind,   // ENT_SCP or ENT_ECP
  input  logic [5:0]        emit_idx,
  output entry_t            emit_entry
);
  logic [XLEN-1:0] regs [NREGS];
  logic [PC_W-1:0] npc;

  always_ff @(posedge clk) begin
    if (we)     regs[widx] <= wdata;
    if (npc_we) npc        <= npc_d;
  end

  assign rdata = regs[ridx];
  assign npc_q = npc;

  logic [RIDX_W-1:0] ia, ib;
  assign ia = RIDX_W'({emit_idx[4:0], 1'b0});
  assign ib = RIDX_W'({emit_idx[4:0], 1'b1});

  always_comb begin
    emit_entry = '0;
    if (emit_idx < 6'(NREGS / 2)) begin
      emit_entry.kind = emit_kind;
      emit_entry.tag  = emit_idx[4:0];
      emit_entry.a    = regs[ia];
      emit_entry.b    = regs[ib];
    end else begin
      emit_entry.kind = (emit_kind == ENT_ECP) ? ENT_ECP_PC : ENT_SCP_PC;
      emit_entry.tag  = '0;
      emit_entry.a    = XLEN'(npc);
    end
  end
endmodule
