// tb_flexstep_decode -- exhaustive check of the custom-instruction decoder: every funct7 value
// with the custom-0 opcode, other funct3 values, other opcodes, and the role flags.
module tb_flexstep_decode;
  import flexstep_pkg::*;
  logic [31:0] instr;
  fs_op_e      op;
  logic        g, m, c;
  logic [4:0]  rd, rs1, rs2;
  int checks = 0, failures = 0;

  flexstep_decode u_dut (.instr, .op, .is_global_op(g), .is_main_op(m), .is_chk_op(c),
                         .rd, .rs1, .rs2);

  task automatic expect_op(logic [31:0] w, int exp);
    instr = w;
    #1;
    checks++;
    if (int'(op) != exp) begin
      failures++;
      $display("FAIL: instr %h op %0d expected %0d", w, op, exp);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f7 = 0; f7 < 128; f7++) begin
      expect_op({7'(f7), 5'd9, 5'd17, 3'b000, 5'd4, 7'b0001011}, (f7 >= 1 && f7 <= 9) ? f7 : 0);
      if (f7 >= 1 && f7 <= 9) begin
        checks++;
        if (rd != 5'd4 || rs1 != 5'd17 || rs2 != 5'd9) failures++;
        checks++;
        if ({g, m, c} != ((f7 <= 2) ? 3'b100 : (f7 <= 4) ? 3'b010 : 3'b001)) begin
          failures++;
          $display("FAIL: role flags for funct7 %0d", f7);
        end
      end
    end
    for (int f3 = 1; f3 < 8; f3++) expect_op({7'd3, 5'd1, 5'd2, 3'(f3), 5'd3, 7'b0001011}, 0);
    expect_op({7'd3, 5'd1, 5'd2, 3'b000, 5'd3, 7'b0110011}, 0);   // plain R-type ADD space
    expect_op({7'd8, 5'd1, 5'd2, 3'b000, 5'd3, 7'b0101011}, 0);   // custom-1
    for (int k = 0; k < 200; k++) begin
      automatic logic [31:0] w = $urandom;
      automatic int e = (w[6:0] == 7'b0001011 && w[14:12] == 3'b000 && w[31:25] >= 1 &&
                         w[31:25] <= 9) ? int'(w[31:25]) : 0;
      expect_op(w, e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
