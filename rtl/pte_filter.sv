// pte_filter -- sits between the page-table walker and the TLB.
//
// A page-table entry read from memory with a non-zero blindedness tag is replaced by
// zero before it is written into the TLB. A zero entry has its valid bit clear, so the
// translation fails as an ordinary page fault that does not depend on the blinded value,
// and address translation can never be steered by blinded data. Unblinded entries pass
// unchanged. Combinational, one entry per cycle. The rule is the paper's; the design has
// no virtual memory of its own, so the ports are brought out of the top level.
module pte_filter
  import blime_pkg::*;
(
  input  logic     ptw_valid,
  input  blinded_t ptw_pte,
  output logic     tlb_fill_valid,
  output word_t    tlb_fill_pte,
  output logic     pte_was_blinded
);

  always_comb begin
    pte_was_blinded = ptw_valid && (ptw_pte.tag != TAG_CLEAR);
    tlb_fill_valid  = ptw_valid;
    tlb_fill_pte    = pte_was_blinded ? '0 : ptw_pte.val;
  end

endmodule
