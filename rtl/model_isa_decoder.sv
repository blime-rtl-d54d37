// model_isa_decoder -- turns a 32-bit instruction word into a decoded_t.
//
// Encoding (this design's own; the paper defines the instruction set, not its bits):
//   [31:28] opcode  [27:23] rd  [22:18] rs1  [17:13] rs2  [12:0] immediate
//   ADD/SUB/MUL/AND/XOR  rd <- rs1 op rs2
//   SLT    rd <- (signed rs1 < signed rs2) ? 1 : 0
//   LOAD   rd <- mem[rs1 + sext(imm[11:0])]   imm[12]=1: one byte, else a 64-bit word
//   STORE  mem[rs1 + sext(imm[11:0])] <- rs2  imm[12] as for LOAD
//   BZ     if rs1 == 0 then pc <- rs2 else pc <- pc + 1
//   BLND   decrypt-and-blind rs2 words at rs1, client tag imm[TAG_W-1:0], counter rd
//   RBLND  encrypt-and-unblind, same operands
//   LI     rd <- sext(instr[22:0]) (unblinded)
//   HALT   stop fetching
// Any other opcode is flagged illegal. Combinational. The decoder never sees blinded
// words: the fetch filter has already zeroed them.
module model_isa_decoder
  import blime_pkg::*;
(
  input  logic [31:0] instr,
  output decoded_t    d
);

  always_comb begin
    d          = '0;
    d.op       = opcode_e'(instr[31:28]);
    d.rd       = instr[27:23];
    d.rs1      = instr[22:18];
    d.rs2      = instr[17:13];
    d.legal    = 1'b1;
    d.imm      = {{(XLEN-12){instr[11]}}, instr[11:0]};
    d.byte_op  = instr[12];
    unique case (instr[31:28])
      OP_ADD, OP_SUB, OP_MUL, OP_AND, OP_XOR, OP_SLT: begin
        d.is_alu    = 1'b1;
        d.uses_rs1  = 1'b1;
        d.uses_rs2  = 1'b1;
        d.writes_rd = 1'b1;
        d.byte_op   = 1'b0;
        unique case (instr[31:28])
          OP_ADD:  d.alu_op = ALU_ADD;
          OP_SUB:  d.alu_op = ALU_SUB;
          OP_MUL:  d.alu_op = ALU_MUL;
          OP_AND:  d.alu_op = ALU_AND;
          OP_SLT:  d.alu_op = ALU_SLT;
          default: d.alu_op = ALU_XOR;
        endcase
      end
      OP_LOAD: begin
        d.is_load   = 1'b1;
        d.uses_rs1  = 1'b1;
        d.writes_rd = 1'b1;
      end
      OP_STORE: begin
        d.is_store  = 1'b1;
        d.uses_rs1  = 1'b1;
        d.uses_rs2  = 1'b1;
      end
      OP_BZ: begin
        d.is_branch = 1'b1;
        d.uses_rs1  = 1'b1;
        d.uses_rs2  = 1'b1;
        d.byte_op   = 1'b0;
      end
      OP_BLND, OP_RBLND: begin
        d.is_blnd   = (instr[31:28] == OP_BLND);
        d.is_rblnd  = (instr[31:28] == OP_RBLND);
        d.uses_rs1  = 1'b1;
        d.uses_rs2  = 1'b1;
        d.reads_rd  = 1'b1;
        d.byte_op   = 1'b0;
        d.imm       = {{(XLEN-TAG_W){1'b0}}, instr[TAG_W-1:0]};
      end
      OP_LI: begin
        d.is_li     = 1'b1;
        d.writes_rd = 1'b1;
        d.byte_op   = 1'b0;
        d.imm       = {{(XLEN-23){instr[22]}}, instr[22:0]};
      end
      OP_HALT: begin
        d.is_halt   = 1'b1;
        d.byte_op   = 1'b0;
      end
      default: begin
        d.legal     = 1'b0;
        d.byte_op   = 1'b0;
      end
    endcase
  end

endmodule
