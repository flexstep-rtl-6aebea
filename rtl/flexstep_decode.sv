// flexstep_decode -- decoder for the FlexStep custom instructions.
//
// The nine instructions of the FlexStep ISA (G.IDs.contain, G.Configure, M.associate, M.check,
// C.check_state, C.record, C.apply, C.jal, C.result) are encoded as R-type instructions in the
// RISC-V custom-0 opcode space with funct3 = 0 and funct7 holding the operation number 1..9 (the
// numbering of fs_op_e). The names and their split into global (G), main-core (M) and checker-core
// (C) instructions follow the paper; the bit encoding is this design's choice, the paper gives none.
// Purely combinational: op is FS_NONE for any other instruction word. is_main_op / is_chk_op
// tell which core role the instruction is meant for.
module flexstep_decode
  import flexstep_pkg::*;
(
  input  logic [31:0] instr,
  output fs_op_e      op,
  output logic        is_global_op,
  output logic        is_main_op,
  output logic        is_chk_op,
  output logic [4:0]  rd,
  output logic [4:0]  rs1,
  output logic [4:0]  rs2
);
  logic [6:0] funct7;
  assign funct7 = instr[31:25];
  assign rd     = instr[11:7];
  assign rs1    = instr[19:15];
  assign rs2    = instr[24:20];

  always_comb begin
    op = FS_NONE;
    if (instr[6:0] == FS_OPCODE && instr[14:12] == 3'b000) begin
      unique case (funct7)
        7'd1: op = FS_G_CONTAIN;
        7'd2: op = FS_G_CONFIGURE;
        7'd3: op = FS_M_ASSOCIATE;
        7'd4: op = FS_M_CHECK;
        7'd5: op = FS_C_STATE;
        7'd6: op = FS_C_RECORD;
        7'd7: op = FS_C_APPLY;
        7'd8: op = FS_C_JAL;
        7'd9: op = FS_C_RESULT;
        default: op = FS_NONE;
      endcase
    end
  end

  assign is_global_op = (op == FS_G_CONTAIN) || (op == FS_G_CONFIGURE);
  assign is_main_op   = (op == FS_M_ASSOCIATE) || (op == FS_M_CHECK);
  assign is_chk_op    = (op == FS_C_STATE) || (op == FS_C_RECORD) || (op == FS_C_APPLY) ||
                        (op == FS_C_JAL) || (op == FS_C_RESULT);
endmodule
