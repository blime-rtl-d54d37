// tb_branch_unit -- checks branch-if-zero and the blinded-control-flow fault.
//
// Every combination of {clear, blinded} condition and target, with zero and non-zero
// conditions, is compared with Table I: any blinded input faults, whatever the outcome.
module tb_branch_unit;
  import blime_pkg::*;

  word_t    pc, next_pc;
  blinded_t cond, target;
  logic     taken, fault;

  branch_unit dut (.*);

  int checks = 0, failures = 0;

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 200; r++) begin
      logic ct, tt, cz, ef, et;
      word_t en;
      ct = 1'($urandom); tt = 1'($urandom); cz = 1'($urandom);
      pc     = {$urandom, $urandom};
      cond   = '{tag: ct ? tag_t'($urandom_range(1, 255)) : TAG_CLEAR,
                 val: cz ? '0 : ({$urandom, $urandom} | 64'h100)};
      target = '{tag: tt ? tag_t'($urandom_range(1, 255)) : TAG_CLEAR, val: {$urandom, $urandom}};
      #1;
      ef = ct || tt;
      et = !ef && cz;
      en = et ? target.val : pc + 1;
      checks++;
      if (fault !== ef || taken !== et || (!ef && next_pc !== en)) begin
        failures++;
        $display("FAIL ct=%b tt=%b cz=%b -> fault=%b taken=%b next=%h", ct, tt, cz, fault, taken, next_pc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
