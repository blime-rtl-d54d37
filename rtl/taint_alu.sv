// taint_alu -- integer ALU that computes the value and the blindedness tag of the result.
//
// Tag rule (Table I, arithmetic/logic rows): the result carries the tag of the blinded
// operand(s); two operands blinded by different clients raise a fault. Exceptions where
// the result provably does not depend on blinded input (model ISA):
//   SUB, XOR with both operands from the same register -> unblinded zero;
//   MUL, AND with one operand an unblinded zero           -> unblinded zero.
// SLT (signed set-less-than, needed for the compare in the FindMax example) follows the
// same tag rule. All six operations complete in one cycle regardless of the operand
// values, so no operation here has value-dependent timing and none needs the
// variable-latency fault.
// Purely combinational. On a fault the result is forced to unblinded zero and must be
// discarded by the caller. The operation set and rules are the paper's; the single-cycle
// multiplier is this design's choice.
module taint_alu
  import blime_pkg::*;
(
  input  alu_op_e  op,
  input  blinded_t a,
  input  blinded_t b,
  input  logic     same_src,   // both operands read from the same register
  output blinded_t y,
  output logic     fault
);

  tag_merge_t m;
  word_t      v;
  logic       a_clear_zero, b_clear_zero, force_zero;

  always_comb begin
    m = merge_tags(a.tag, b.tag);
    unique case (op)
      ALU_ADD: v = a.val + b.val;
      ALU_SUB: v = a.val - b.val;
      ALU_MUL: v = a.val * b.val;
      ALU_AND: v = a.val & b.val;
      ALU_XOR: v = a.val ^ b.val;
      ALU_SLT: v = XLEN'($signed(a.val) < $signed(b.val));
      default: v = '0;
    endcase

    a_clear_zero = (a.tag == TAG_CLEAR) && (a.val == '0);
    b_clear_zero = (b.tag == TAG_CLEAR) && (b.val == '0);
    force_zero   = ((op == ALU_SUB || op == ALU_XOR) && same_src) ||
                   ((op == ALU_MUL || op == ALU_AND) && (a_clear_zero || b_clear_zero));

    if (force_zero) begin
      y     = '0;
      fault = 1'b0;
    end else if (m.fault) begin
      y     = '0;
      fault = 1'b1;
    end else begin
      y.val = v;
      y.tag = m.tag;
      fault = 1'b0;
    end
  end

endmodule
