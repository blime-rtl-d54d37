// tb_agu -- checks address generation and the two memory-side policy faults.
//
// Random base/offset pairs with random tags and random store data tags, on both sides
// of the unblindable (peripheral) boundary, compared with Table I and the rule that
// blinded data may not be stored to an unblindable address.
module tb_agu;
  import blime_pkg::*;

  localparam word_t UB = 64'hFFFF_0000_0000_0000;

  blinded_t     base, offset;
  logic         is_store, unblindable, fault;
  tag_t         store_tag;
  word_t        addr;
  fault_cause_e cause;

  agu #(.UNBLINDABLE_BASE(UB)) dut (.*);

  int checks = 0, failures = 0;

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 400; r++) begin
      logic bt, ot, st, hi;
      word_t ea;
      logic ef, eu;
      fault_cause_e ec;
      bt = ($urandom % 4) == 0; ot = ($urandom % 4) == 0; st = 1'($urandom); hi = 1'($urandom);
      is_store  = 1'($urandom);
      base      = '{tag: bt ? 8'h11 : TAG_CLEAR,
                    val: hi ? (UB + {32'h0, $urandom}) : {1'b0, 31'($urandom), $urandom}};
      offset    = '{tag: ot ? 8'h22 : TAG_CLEAR, val: 64'($urandom_range(0, 4095))};
      store_tag = st ? 8'h33 : TAG_CLEAR;
      #1;
      ea = base.val + offset.val;
      eu = ea >= UB;
      ef = 1'b0; ec = FC_NONE;
      if (bt || ot) begin ef = 1; ec = FC_BLINDED_ADDR; end
      else if (is_store && eu && st) begin ef = 1; ec = FC_UNBLINDABLE; end
      checks++;
      if (addr !== ea || unblindable !== eu || fault !== ef || cause !== ec) begin
        failures++;
        $display("FAIL base=%h/%h off=%h/%h st=%b/%h -> %h u=%b f=%b c=%s",
                 base.tag, base.val, offset.tag, offset.val, is_store, store_tag, addr,
                 unblindable, fault, cause.name());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
