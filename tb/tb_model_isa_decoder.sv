// tb_model_isa_decoder -- encodes every instruction with random fields and checks the
// decoded opcode class, register indices, immediate, and illegal-opcode detection.
module tb_model_isa_decoder;
  import blime_pkg::*;

  logic [31:0] instr;
  decoded_t    d;

  model_isa_decoder dut (.*);

  int checks = 0, failures = 0;

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string s);
    failures++;
    $display("FAIL %s instr=%h", s, instr);
  endtask

  initial begin
    for (int r = 0; r < 600; r++) begin
      logic [3:0] op;
      logic [4:0] rd, rs1, rs2;
      logic [12:0] imm;
      op = 4'($urandom); rd = 5'($urandom); rs1 = 5'($urandom); rs2 = 5'($urandom); imm = 13'($urandom);
      instr = {op, rd, rs1, rs2, imm};
      #1;
      checks++;
      case (op)
        4'h0, 4'h1, 4'h2, 4'h3, 4'h4: begin
          if (!d.legal || !d.is_alu || !d.writes_rd || d.rd !== rd || d.rs1 !== rs1 || d.rs2 !== rs2 ||
              d.alu_op !== alu_op_e'(op[2:0]) || d.is_load || d.is_store || d.is_branch) fail("alu");
        end
        4'h5: if (!d.is_load || !d.writes_rd || d.byte_op !== imm[12] ||
                  d.imm !== {{52{imm[11]}}, imm[11:0]} || d.rs1 !== rs1) fail("load");
        4'h6: if (!d.is_store || d.writes_rd || d.byte_op !== imm[12] ||
                  d.imm !== {{52{imm[11]}}, imm[11:0]} || d.rs2 !== rs2) fail("store");
        4'h7: if (!d.is_branch || d.writes_rd || d.rs1 !== rs1 || d.rs2 !== rs2) fail("bz");
        4'h8: if (!d.is_blnd || d.is_rblnd || !d.reads_rd || d.imm !== {56'h0, imm[7:0]}) fail("blnd");
        4'h9: if (!d.is_rblnd || d.is_blnd || !d.reads_rd || d.imm !== {56'h0, imm[7:0]}) fail("rblnd");
        4'hB: if (!d.legal || !d.is_alu || !d.writes_rd || d.rd !== rd || d.rs1 !== rs1 || d.rs2 !== rs2 ||
                  d.alu_op !== ALU_SLT || d.is_load) fail("slt");
        4'hA: if (!d.is_li || !d.writes_rd || d.imm !== {{41{instr[22]}}, instr[22:0]}) fail("li");
        4'hF: if (!d.is_halt || !d.legal) fail("halt");
        default: if (d.legal) fail("illegal opcode accepted");
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
