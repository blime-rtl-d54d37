// branch_unit -- branch-if-zero with the blinded-control-flow check.
//
// BZ jumps to the target held in a register when the condition register is zero.
// Table I (branching rows): the branch faults whenever the target address or the
// condition operand is blinded, whatever the outcome would have been, so neither the
// program counter nor the fault itself depends on a blinded value. Because the
// decision is made only on unblinded values, nothing derived from blinded data can
// reach branch prediction either. Combinational; next_pc is only meaningful without a
// fault (the core then sends the program counter to address 0). The rule is the
// paper's; the register-held target and word-indexed program counter are this design's.
module branch_unit
  import blime_pkg::*;
(
  input  word_t    pc,
  input  blinded_t cond,
  input  blinded_t target,
  output logic     taken,
  output word_t    next_pc,
  output logic     fault
);

  always_comb begin
    fault   = (cond.tag != TAG_CLEAR) || (target.tag != TAG_CLEAR);
    taken   = !fault && (cond.val == '0);
    next_pc = taken ? target.val : pc + word_t'(1);
  end

endmodule
