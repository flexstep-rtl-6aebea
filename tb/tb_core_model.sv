// tb_core_model -- behavioural stand-in for a host core (not synthesizable, testbench only).
//
// Replaces the in-order Rocket core that the FlexStep units attach to. It executes a synthetic
// program that is a pure function of the pc: the instruction at pc is chosen by a 32-bit hash of
// the pc (ALU op, LD, ST, AMO, LR, SC or system call), so that a checker core replaying from an
// SCP executes exactly what the main core executed. 64 architectural registers (x0 reads zero),
// a private MEMW-word data memory, one instruction offered for commit per cycle.
// A system call (about one in SYS_DIV instructions) commits in user mode and then runs KLEN
// kernel-mode instructions that leave the user registers alone, then returns to the next user pc.
// With replay = 1 (checker replaying) loads, LR, SC results and AMO old values come from the
// FlexStep unit's byp_rdata and memory is not written. The unit's register file port and pc
// redirect act on the model; after a redirect the model halts until the testbench sets a pc.
// The testbench may reach into regs/pc/priv_user to save, restore or corrupt the context.
module tb_core_model
  import flexstep_pkg::*;
#(
  parameter int unsigned MEMW    = 256,
  parameter int unsigned SYS_DIV = 4096,   // power of two
  parameter int unsigned KLEN    = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  input  logic              replay,
  input  logic              set_pc_valid,
  input  logic [PC_W-1:0]   set_pc,
  input  logic              set_user,
  output logic              cm_valid,
  output commit_t           cm,
  input  logic              cm_ready,
  input  logic [XLEN-1:0]   byp_rdata,
  input  logic [RIDX_W-1:0] rf_raddr,
  output logic [XLEN-1:0]   rf_rdata,
  input  logic              rf_we,
  input  logic [RIDX_W-1:0] rf_waddr,
  input  logic [XLEN-1:0]   rf_wdata,
  input  logic              redir_valid,
  input  logic [PC_W-1:0]   redir_pc,
  output logic              halted
);
  typedef enum logic [2:0] {K_ALU, K_LD, K_ST, K_AMO, K_LR, K_SC, K_SYS} kind_e;

  logic [XLEN-1:0] regs [NREGS];
  logic [XLEN-1:0] mem  [MEMW];
  logic [PC_W-1:0] pc, upc;       // upc: user pc to return to after a system call
  logic            priv_user;
  logic [7:0]      kleft;
  logic            res_valid;
  logic [XLEN-1:0] res_addr;
  logic            halt_q;

  function automatic logic [31:0] hash(logic [PC_W-1:0] p);
    logic [31:0] x;
    x = p[31:0] ^ {16'h0, p[47:32]};
    x = x ^ (x >> 16); x = x * 32'h7feb352d;
    x = x ^ (x >> 15); x = x * 32'h846ca68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  logic [31:0]       h;
  kind_e             kind;
  logic [RIDX_W-1:0] rd, rs1, rs2;
  logic [XLEN-1:0]   addr, rdat, wdat, alu;
  int unsigned       widx;

  always_comb begin
    h    = hash(pc);
    rd   = RIDX_W'(1 + (h[9:4] % 63));
    rs1  = h[15:10];
    rs2  = h[21:16];
    unique case (h[3:0])
      4'd9, 4'd10: kind = K_LD;
      4'd11:       kind = K_ST;
      4'd12:       kind = K_AMO;
      4'd13:       kind = K_LR;
      4'd14:       kind = K_SC;
      4'd15:       kind = ((32'(h[31:4]) % (SYS_DIV / 16)) == 0) ? K_SYS : K_ALU;
      default:     kind = K_ALU;
    endcase
    widx = 32'((regs[rs1][31:0] ^ h) % MEMW);
    addr = XLEN'(widx) << 3;
    alu  = (regs[rs1] + regs[rs2]) ^ {h, ~h};
    if (replay) rdat = byp_rdata;
    else if (kind == K_SC) rdat = (res_valid && res_addr == addr) ? '0 : XLEN'(1);
    else rdat = mem[widx];
    wdat = (kind == K_AMO) ? rdat + regs[rs2] : regs[rs2];

    cm        = '0;
    cm.user   = priv_user;
    cm.pc     = pc;
    cm.npc    = pc + 4;
    cm_valid  = run && !halt_q;
    if (priv_user && kind != K_ALU && kind != K_SYS) begin
      cm.is_mem = 1'b1;
      cm.addr   = addr;
      cm.wdata  = wdat;
      cm.rdata  = rdat;
      unique case (kind)
        K_LD:    cm.op = MEM_LOAD;
        K_ST:    cm.op = MEM_STORE;
        K_AMO:   cm.op = MEM_AMO;
        K_LR:    cm.op = MEM_LR;
        default: cm.op = MEM_SC;
      endcase
    end
  end

  assign rf_rdata = (rf_raddr == '0) ? '0 : regs[rf_raddr];
  assign halted   = halt_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      halt_q    <= 1'b0;
      kleft     <= '0;
      res_valid <= 1'b0;
      res_addr  <= '0;
      pc        <= 48'h1000;
      upc       <= 48'h1000;
      priv_user <= 1'b0;
      for (int i = 0; i < NREGS; i++) regs[i] <= (i == 0) ? '0 : {32'h5eed_0000 + 32'(i), 32'(i * 977)};
      for (int i = 0; i < MEMW; i++)  mem[i]  <= {32'hd00d_0000 + 32'(i), 32'(i * 131)};
    end else begin
      if (rf_we && rf_waddr != '0) regs[rf_waddr] <= rf_wdata;
      if (redir_valid) begin
        pc     <= redir_pc;
        halt_q <= 1'b1;
      end else if (set_pc_valid) begin
        pc        <= set_pc;
        priv_user <= set_user;
        halt_q    <= 1'b0;
        kleft     <= '0;
      end else if (cm_valid && cm_ready) begin
        if (!priv_user) begin
          if (kleft <= 1) begin
            priv_user <= 1'b1;
            pc        <= upc;
            kleft     <= '0;
          end else begin
            kleft <= kleft - 1'b1;
            pc    <= pc + 4;
          end
        end else begin
          pc <= pc + 4;
          unique case (kind)
            K_ALU: regs[rd] <= alu;
            K_LD:  regs[rd] <= rdat;
            K_ST:  if (!replay) mem[widx] <= wdat;
            K_AMO: begin
              regs[rd] <= rdat;
              if (!replay) mem[widx] <= wdat;
            end
            K_LR: begin
              regs[rd]  <= rdat;
              res_valid <= 1'b1;
              res_addr  <= addr;
            end
            K_SC: begin
              regs[rd]  <= rdat;
              res_valid <= 1'b0;
              if (!replay && rdat == '0) mem[widx] <= wdat;
            end
            K_SYS: begin
              priv_user <= 1'b0;
              upc       <= pc + 4;
              kleft     <= 8'(KLEN);
              pc        <= 48'hF000_0000;
            end
            default: ;
          endcase
        end
      end
    end
  end

endmodule
