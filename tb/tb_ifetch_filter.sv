// tb_ifetch_filter -- a blinded word must reach the instruction side as an invalid
// zero; an unblinded word passes unchanged.
module tb_ifetch_filter;
  import blime_pkg::*;

  logic        in_valid, out_valid_instr, out_blinded;
  logic [31:0] in_instr, out_instr;
  tag_t        in_tag;

  ifetch_filter dut (.*);

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
      in_valid = ($urandom % 8) != 0;
      bl       = 1'($urandom);
      in_tag   = bl ? tag_t'($urandom_range(1, 255)) : TAG_CLEAR;
      in_instr = $urandom | 32'h1;
      #1;
      checks++;
      if (out_blinded !== (in_valid && bl) ||
          out_valid_instr !== (in_valid && !bl) ||
          out_instr !== ((in_valid && bl) ? 32'h0 : in_instr)) begin
        failures++;
        $display("FAIL v=%b tag=%h instr=%h -> %h valid=%b bl=%b", in_valid, in_tag, in_instr,
                 out_instr, out_valid_instr, out_blinded);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
