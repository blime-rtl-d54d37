// ifetch_filter -- keeps blinded words out of the instruction stream.
//
// Blinded values may never be executed, so when a word arrives for the instruction
// side with a non-zero tag it is replaced by zero and its valid-instruction bit is
// cleared; the word is then unusable and the instruction side needs no tags after this
// point. The core treats a fetch of such a word as a fault (program counter to 0).
// Combinational. Behaviour as described in the paper for the L1 instruction cache fill.
module ifetch_filter
  import blime_pkg::*;
(
  input  logic        in_valid,
  input  logic [31:0] in_instr,
  input  tag_t        in_tag,
  output logic [31:0] out_instr,
  output logic        out_valid_instr,
  output logic        out_blinded
);

  always_comb begin
    out_blinded     = in_valid && (in_tag != TAG_CLEAR);
    out_instr       = out_blinded ? 32'h0 : in_instr;
    out_valid_instr = in_valid && !out_blinded;
  end

endmodule
