// tb_tagged_icache -- random instruction fetches from a 1 KiB instruction cache over a
// 4 KiB code range, backed by a line-level memory model in which every 64-bit word has
// a random tag (blinded by client 5 one time in four). The expected result of each
// fetch is worked out from the backing store: an instruction in a blinded word must
// come back as zero with its valid bit clear, any other must come back unchanged and
// valid. Timing checked: a fetch of a resident line is answered in the cycle it is
// made (f_ready together with f_req). Refills and zeroed refills must both occur.
module tb_tagged_icache;
  import blime_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                         f_req, f_ready, f_valid_instr, miss, fill_blinded;
  word_t                        f_addr;
  logic [31:0]                  f_instr;
  logic                         l_req_valid, l_resp_valid;
  word_t                        l_req_addr;
  logic [LINE_WORDS*XLEN-1:0]   l_resp_rdata;
  logic [LINE_WORDS*WTAG_W-1:0] l_resp_rtags;

  tagged_icache #(.SIZE_BYTES(1024)) dut (.*);

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // backing store: 4 KiB of code, one tag per 64-bit word
  logic [63:0] code [512];
  tag_t        ctag [512];
  int          delay = -1, misses = 0, zeroed = 0;

  always @(posedge clk) begin
    l_resp_valid <= 1'b0;
    if (miss) misses++;
    if (fill_blinded) zeroed++;
    if (l_req_valid && !l_resp_valid) begin
      if (delay < 0) delay = $urandom_range(1, 8);
      else if (delay == 0) begin
        delay = -1;
        l_resp_valid <= 1'b1;
        for (int w = 0; w < LINE_WORDS; w++) begin
          l_resp_rdata[64*w +: 64]         <= code[(l_req_addr / 8) + w];
          l_resp_rtags[WTAG_W*w +: WTAG_W] <= WTAG_W'(ctag[(l_req_addr / 8) + w]);
        end
      end else delay--;
    end
  end

  int     cyc;
  word_t  a;
  logic [31:0] exp_i;
  logic        exp_v;

  initial begin
    for (int w = 0; w < 512; w++) begin
      code[w] = {$urandom, $urandom};
      ctag[w] = ($urandom_range(0, 3) == 0) ? tag_t'(5) : TAG_CLEAR;
    end
    f_req = 0; f_addr = '0; l_resp_rdata = '0; l_resp_rtags = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    for (int n = 0; n < 3000; n++) begin
      // mostly sequential fetches with jumps, like a program
      if ($urandom_range(0, 7) == 0) a = word_t'($urandom_range(0, 1023)) * 4;
      else a = (a + 4) % 4096;
      f_req  = 1'b1;
      f_addr = a;
      cyc = 0;
      #1;
      while (!f_ready) begin @(negedge clk); cyc++; end
      exp_v = (ctag[a / 8] == TAG_CLEAR);
      exp_i = exp_v ? code[a / 8][32 * ((a / 4) % 2) +: 32] : 32'h0;
      checks++;
      if (f_instr !== exp_i || f_valid_instr !== exp_v) begin
        failures++;
        if (failures < 10) $display("FAIL fetch %h: %h/%b want %h/%b", a, f_instr, f_valid_instr, exp_i, exp_v);
      end
      // fetch the same word again: it must now be answered at once
      @(negedge clk);
      checks++;
      if (!f_ready) begin failures++; $display("FAIL resident fetch %h not answered at once", a); end
      @(negedge clk);
    end
    f_req = 1'b0;

    checks++;
    if (misses == 0 || zeroed == 0) begin
      failures++; $display("FAIL misses=%0d zeroed refills=%0d", misses, zeroed);
    end
    $display("misses=%0d zeroed refills=%0d", misses, zeroed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
