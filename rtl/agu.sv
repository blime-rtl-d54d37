// agu -- address generation for loads, stores and the import/export instructions,
// with the memory-side policy checks.
//
// address = base + offset. Faults (Table I load/store rows; handling violations 3, 4):
//   * base or offset blinded                          -> FC_BLINDED_ADDR
//   * a store of blinded data to an address at or above UNBLINDABLE_BASE, the
//     region reserved for memory-mapped peripherals that may not see blinded data
//                                                     -> FC_UNBLINDABLE
// The fault decision uses only tags and unblinded values. Combinational. The checks are
// the paper's; placing all peripherals in one region above UNBLINDABLE_BASE is this
// design's choice.
module agu
  import blime_pkg::*;
#(
  parameter word_t UNBLINDABLE_BASE = 64'hFFFF_0000_0000_0000
) (
  input  blinded_t     base,
  input  blinded_t     offset,
  input  logic         is_store,
  input  tag_t         store_tag,
  output word_t        addr,
  output logic         unblindable,   // address falls in the peripheral region
  output logic         fault,
  output fault_cause_e cause
);

  always_comb begin
    addr        = base.val + offset.val;
    unblindable = (addr >= UNBLINDABLE_BASE);
    fault       = 1'b0;
    cause       = FC_NONE;
    if (base.tag != TAG_CLEAR || offset.tag != TAG_CLEAR) begin
      fault = 1'b1;
      cause = FC_BLINDED_ADDR;
    end else if (is_store && unblindable && store_tag != TAG_CLEAR) begin
      fault = 1'b1;
      cause = FC_UNBLINDABLE;
    end
  end

endmodule
