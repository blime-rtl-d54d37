// tb_pte_filter -- a blinded page-table entry must reach the TLB as zero (invalid);
// an unblinded entry passes unchanged.
module tb_pte_filter;
  import blime_pkg::*;

  logic     ptw_valid, tlb_fill_valid, pte_was_blinded;
  blinded_t ptw_pte;
  word_t    tlb_fill_pte;

  pte_filter dut (.*);

  int checks = 0, failures = 0;

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 200; r++) begin
      logic bl;
      ptw_valid = ($urandom % 8) != 0;
      bl        = 1'($urandom);
      ptw_pte   = '{tag: bl ? tag_t'($urandom_range(1, 255)) : TAG_CLEAR,
                    val: {$urandom, $urandom} | 64'h1};
      #1;
      checks++;
      if (tlb_fill_valid !== ptw_valid || pte_was_blinded !== (ptw_valid && bl) ||
          tlb_fill_pte !== ((ptw_valid && bl) ? 64'h0 : ptw_pte.val)) begin
        failures++;
        $display("FAIL v=%b tag=%h pte=%h -> %h", ptw_valid, ptw_pte.tag, ptw_pte.val, tlb_fill_pte);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
