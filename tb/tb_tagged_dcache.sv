// tb_tagged_dcache -- random loads and stores, word and byte, with tags from three
// clients (0 = unblinded, 5 and 9), against a reference memory that applies the tag
// rules independently: loads return the granule's tag, whole-granule stores set it,
// and a byte store of tag a into a granule of another non-zero tag b must fault and
// leave memory unchanged. A 1 KiB cache over a 4 KiB address range forces misses,
// dirty write-backs and refills through a line-level memory model with random delay;
// the test checks that data and tags survive eviction, that a hit answers in the
// cycle it is asked, and that misses occurred.
module tb_tagged_dcache;
  import blime_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                         req_valid, resp_valid, resp_fault, miss;
  dc_req_t                      req;
  blinded_t                     resp_rdata;
  logic                         l_req_valid, l_req_write, l_resp_valid;
  word_t                        l_req_addr;
  logic [LINE_WORDS*XLEN-1:0]   l_req_wdata, l_resp_rdata;
  logic [LINE_WORDS*WTAG_W-1:0] l_req_wtags, l_resp_rtags;

  tagged_dcache #(.SIZE_BYTES(1024)) dut (.*);

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // line-level backing store
  logic [511:0] line_data [word_t];
  logic [63:0]  line_tags [word_t];
  int           delay = -1;
  int           misses = 0, writebacks = 0;

  always @(posedge clk) begin
    l_resp_valid <= 1'b0;
    if (miss) misses++;
    if (l_req_valid && !l_resp_valid) begin
      if (delay < 0) delay = $urandom_range(1, 6);
      else if (delay == 0) begin
        delay = -1;
        l_resp_valid <= 1'b1;
        if (l_req_write) begin
          writebacks++;
          line_data[l_req_addr] = l_req_wdata;
          line_tags[l_req_addr] = l_req_wtags;
        end else begin
          l_resp_rdata <= line_data.exists(l_req_addr) ? line_data[l_req_addr] : '0;
          l_resp_rtags <= line_tags.exists(l_req_addr) ? line_tags[l_req_addr] : '0;
        end
      end else delay--;
    end
  end

  // reference
  word_t ref_val [512];
  tag_t  ref_tag [512];

  task automatic access(logic we, logic bop, word_t addr, blinded_t wd);
    int       wi, cyc;
    logic     ef;
    blinded_t er;
    bit       was_hit;
    wi = int'(addr >> 3);
    ef = 1'b0;
    er = '0;
    if (we) begin
      if (!bop) begin
        ref_val[wi] = wd.val;
        ref_tag[wi] = wd.tag;
      end else if (wd.tag != 0 && ref_tag[wi] != 0 && wd.tag != ref_tag[wi]) begin
        ef = 1'b1;
      end else begin
        ref_val[wi][8*addr[2:0] +: 8] = wd.val[7:0];
        if (wd.tag != 0) ref_tag[wi] = wd.tag;
      end
    end else begin
      er.tag = ref_tag[wi];
      er.val = bop ? {56'h0, ref_val[wi][8*addr[2:0] +: 8]} : ref_val[wi];
    end
    @(negedge clk);
    req_valid = 1; req.we = we; req.byte_op = bop; req.addr = addr; req.wdata = wd;
    #1;
    was_hit = resp_valid;
    cyc = 0;
    while (!resp_valid) begin
      @(negedge clk); #1; cyc++;
    end
    checks++;
    if (resp_fault !== ef || (!we && (resp_rdata !== er))) begin
      failures++;
      $display("FAIL we=%b byte=%b addr=%h wd=%h/%h -> %h/%h f=%b, want %h/%h f=%b",
               we, bop, addr, wd.tag, wd.val, resp_rdata.tag, resp_rdata.val, resp_fault,
               er.tag, er.val, ef);
    end
    @(posedge clk);
    @(negedge clk);
    req_valid = 0;
    // a repeated read of the same address now hits in the same cycle
    if (!we) begin
      req_valid = 1; req.we = 0; req.addr = addr; req.byte_op = bop;
      #1;
      checks++;
      if (!resp_valid || resp_rdata !== er) begin
        failures++;
        $display("FAIL second read of %h did not hit with the same result", addr);
      end
      @(negedge clk);
      req_valid = 0;
    end
  endtask

  initial begin
    tag_t tags [3];
    tags[0] = 8'h00; tags[1] = 8'h05; tags[2] = 8'h09;
    req_valid = 0; req = '0; l_resp_valid = 0; l_resp_rdata = '0; l_resp_rtags = '0;
    for (int i = 0; i < 512; i++) begin ref_val[i] = '0; ref_tag[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // directed partial-write rule cases
    access(1, 0, 64'h40, '{tag: 8'h05, val: 64'h1111_2222_3333_4444});
    access(1, 1, 64'h41, '{tag: 8'h09, val: 64'hAB});        // foreign tag: fault
    access(1, 1, 64'h42, '{tag: 8'h00, val: 64'hCD});        // unblinded byte: allowed
    access(0, 0, 64'h40, '0);                                // stays tagged 5
    access(1, 1, 64'h43, '{tag: 8'h05, val: 64'hEF});        // same client: allowed
    access(1, 1, 64'h80, '{tag: 8'h09, val: 64'h12});        // into clear granule: takes 9
    access(0, 1, 64'h80, '0);
    // random traffic
    for (int t = 0; t < 3000; t++) begin
      logic we, bop;
      word_t a;
      blinded_t wd;
      we  = 1'($urandom);
      bop = ($urandom % 3) == 0;
      a   = 64'($urandom_range(0, 511)) * 8 + (bop ? 64'($urandom_range(0, 7)) : 0);
      wd  = '{tag: tags[$urandom_range(0, 2)], val: {$urandom, $urandom}};
      access(we, bop, a, wd);
    end
    checks++;
    if (misses < 100 || writebacks < 50) begin
      failures++;
      $display("FAIL too few misses (%0d) or write-backs (%0d)", misses, writebacks);
    end
    $display("dcache: %0d misses, %0d write-backs", misses, writebacks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
