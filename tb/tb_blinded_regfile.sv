// tb_blinded_regfile -- random writes and reads against a shadow array; checks that
// reset clears every value and tag and that value and tag always travel together.
module tb_blinded_regfile;
  import blime_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [4:0] ra1, ra2, ra3, wa;
  blinded_t   rd1, rd2, rd3, wd;
  logic       we;

  blinded_regfile dut (.*);

  int checks = 0, failures = 0;
  blinded_t shadow [32];

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wa = 0; wd = '0; ra1 = 0; ra2 = 0; ra3 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 32; i++) shadow[i] = '0;
    for (int i = 0; i < 32; i++) begin
      ra1 = 5'(i); #1;
      checks++;
      if (rd1 !== '0) begin failures++; $display("FAIL reg %0d not cleared by reset", i); end
    end
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      ra1 = 5'($urandom); ra2 = 5'($urandom); ra3 = 5'($urandom);
      #1;
      checks++;
      if (rd1 !== shadow[ra1] || rd2 !== shadow[ra2] || rd3 !== shadow[ra3]) begin
        failures++;
        $display("FAIL read %0d/%0d/%0d", ra1, ra2, ra3);
      end
      we = 1'($urandom);
      wa = 5'($urandom);
      wd = '{tag: ($urandom % 3 == 0) ? tag_t'($urandom) : TAG_CLEAR, val: {$urandom, $urandom}};
      @(posedge clk);
      if (we) shadow[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
