// tb_taint_alu -- exhaustive tag cases and random values for the tag-tracking ALU.
//
// For every operation and every combination of operand tags drawn from {0, a, b}
// (Table I), with random values, the result value, result tag and fault are compared
// with an independent model. The zero-result exceptions (SUB/XOR of a register with
// itself, MUL/AND with an unblinded zero) are exercised explicitly, including the case
// where a blinded zero must not trigger the exception.
module tb_taint_alu;
  import blime_pkg::*;

  alu_op_e  op;
  blinded_t a, b, y;
  logic     same_src, fault;

  taint_alu dut (.*);

  int checks = 0, failures = 0;

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_out(word_t ev, tag_t et, logic ef, string what);
    #1;
    checks++;
    if (fault !== ef || (!ef && (y.val !== ev || y.tag !== et))) begin
      failures++;
      $display("FAIL %s op=%s a=%h/%h b=%h/%h -> %h/%h f=%b, want %h/%h f=%b",
               what, op.name(), a.tag, a.val, b.tag, b.val, y.tag, y.val, fault, et, ev, ef);
    end
  endtask

  function automatic word_t model_val(alu_op_e o, word_t x, word_t z);
    case (o)
      ALU_ADD: return x + z;
      ALU_SUB: return x - z;
      ALU_MUL: return x * z;
      ALU_AND: return x & z;
      ALU_SLT: return ($signed(x) < $signed(z)) ? 64'd1 : 64'd0;
      default: return x ^ z;
    endcase
  endfunction

  tag_t tagset [3];
  initial begin
    tagset[0] = 8'h00; tagset[1] = 8'h05; tagset[2] = 8'hA3;
    same_src = 0;
    for (int o = 0; o < 6; o++)
      for (int ta = 0; ta < 3; ta++)
        for (int tb = 0; tb < 3; tb++)
          for (int r = 0; r < 20; r++) begin
            tag_t et;
            logic ef;
            op = alu_op_e'(o);
            a = '{tag: tagset[ta], val: {$urandom, $urandom} | 64'h1};
            b = '{tag: tagset[tb], val: {$urandom, $urandom} | 64'h1};
            ef = (ta != 0) && (tb != 0) && (ta != tb);
            et = (ta != 0) ? tagset[ta] : tagset[tb];
            expect_out(model_val(op, a.val, b.val), et, ef, "table");
          end
    // SUB / XOR of a register with itself: unblinded zero even when blinded
    foreach (tagset[i]) begin
      same_src = 1;
      a = '{tag: tagset[i], val: {$urandom, $urandom}};
      b = a;
      op = ALU_SUB; expect_out('0, TAG_CLEAR, 1'b0, "sub-self");
      op = ALU_XOR; expect_out('0, TAG_CLEAR, 1'b0, "xor-self");
      op = ALU_ADD;
      expect_out(a.val + a.val, tagset[i], 1'b0, "add-self keeps tag");
      same_src = 0;
    end
    // MUL / AND with an unblinded zero
    a = '{tag: 8'h05, val: 64'h1234_5678_9abc_def0};
    b = '{tag: TAG_CLEAR, val: '0};
    op = ALU_MUL; expect_out('0, TAG_CLEAR, 1'b0, "mul-zero");
    op = ALU_AND; expect_out('0, TAG_CLEAR, 1'b0, "and-zero");
    op = ALU_ADD; expect_out(a.val, 8'h05, 1'b0, "add-zero keeps tag");
    a = '{tag: TAG_CLEAR, val: '0};
    b = '{tag: 8'h33, val: 64'h77};
    op = ALU_MUL; expect_out('0, TAG_CLEAR, 1'b0, "zero-mul");
    // a blinded zero does not qualify
    a = '{tag: 8'h05, val: '0};
    b = '{tag: 8'h05, val: 64'h99};
    op = ALU_AND; expect_out('0, 8'h05, 1'b0, "blinded zero stays blinded");
    // a blinded zero times a foreign-client value is still a mix
    b = '{tag: 8'h06, val: 64'h99};
    op = ALU_MUL; expect_out('0, TAG_CLEAR, 1'b1, "blinded zero mix faults");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
