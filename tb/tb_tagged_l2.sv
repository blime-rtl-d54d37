// tb_tagged_l2 -- random whole-line reads and write-backs, each line carrying random
// data and random tags, sent to a 1 KiB L2 (16 lines) over 64 line addresses so that
// misses, clean evictions and dirty write-backs all happen. A reference memory written
// independently holds what every line must read as; every read compares data and tags.
// The lower side is a line-level memory model with random delay. It also counts the
// requests for the tag region that reach it: every one must, since such lines may
// never be cached (the memory controller below answers them with zeros).
// Timing checked: a read that hits answers in exactly 2 cycles.
module tb_tagged_l2;
  import blime_pkg::*;

  localparam word_t TB_TAG_BASE = 64'h0000_0000_0010_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                         u_req_valid, u_req_write, u_resp_valid, l2_miss, l2_writeback;
  word_t                        u_req_addr;
  logic [LINE_WORDS*XLEN-1:0]   u_req_wdata, u_resp_rdata;
  logic [LINE_WORDS*WTAG_W-1:0] u_req_wtags, u_resp_rtags;
  logic                         l_req_valid, l_req_write, l_resp_valid;
  word_t                        l_req_addr;
  logic [LINE_WORDS*XLEN-1:0]   l_req_wdata, l_resp_rdata;
  logic [LINE_WORDS*WTAG_W-1:0] l_req_wtags, l_resp_rtags;

  tagged_l2 #(.SIZE_BYTES(1024), .TAG_BASE(TB_TAG_BASE)) dut (.*);

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // line-level backing store
  logic [511:0] line_data [word_t];
  logic [63:0]  line_tags [word_t];
  int           delay = -1;
  int           misses = 0, writebacks = 0, lower_writes = 0, region_passes = 0;

  always @(posedge clk) begin
    l_resp_valid <= 1'b0;
    if (l2_miss) misses++;
    if (l2_writeback) writebacks++;
    if (l_req_valid && !l_resp_valid) begin
      if (delay < 0) delay = $urandom_range(1, 6);
      else if (delay == 0) begin
        delay = -1;
        l_resp_valid <= 1'b1;
        if (l_req_addr >= TB_TAG_BASE) begin
          region_passes++;               // the controller below answers with zeros
          l_resp_rdata <= '0;
          l_resp_rtags <= '0;
        end else if (l_req_write) begin
          lower_writes++;
          line_data[l_req_addr] = l_req_wdata;
          line_tags[l_req_addr] = l_req_wtags;
        end else begin
          l_resp_rdata <= line_data.exists(l_req_addr) ? line_data[l_req_addr] : '0;
          l_resp_rtags <= line_tags.exists(l_req_addr) ? line_tags[l_req_addr] : '0;
        end
      end else delay--;
    end
  end

  // reference: what each line must read as
  logic [511:0] ref_data [word_t];
  logic [63:0]  ref_tags [word_t];

  function automatic logic [511:0] rand_line();
    logic [511:0] v;
    for (int i = 0; i < 16; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  task automatic access(input logic wr, input word_t addr, output int cycles);
    u_req_valid = 1'b1;
    u_req_write = wr;
    u_req_addr  = addr;
    if (wr) begin
      u_req_wdata = rand_line();
      u_req_wtags = {$urandom, $urandom};
    end
    cycles = 0;
    do begin
      @(posedge clk);
      cycles++;
    end while (!u_resp_valid);
    if (wr) begin
      if (addr < TB_TAG_BASE) begin
        ref_data[addr] = u_req_wdata;
        ref_tags[addr] = u_req_wtags;
      end
    end else begin
      logic [511:0] ed;
      logic [63:0]  et;
      if (addr >= TB_TAG_BASE) begin ed = '0; et = '0; end
      else begin
        ed = ref_data.exists(addr) ? ref_data[addr] : '0;
        et = ref_tags.exists(addr) ? ref_tags[addr] : '0;
      end
      checks++;
      if (u_resp_rdata !== ed || u_resp_rtags !== et) begin
        failures++;
        if (failures < 10) $display("FAIL read %h: data/tags differ (tags %h exp %h)", addr, u_resp_rtags, et);
      end
    end
    #1;
    u_req_valid = 1'b0;
  endtask

  int cyc, n_region = 0, passes_before;
  word_t a;

  initial begin
    u_req_valid = 0; u_req_write = 0; u_req_addr = '0; u_req_wdata = '0; u_req_wtags = '0;
    l_resp_rdata = '0; l_resp_rtags = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    #1;

    for (int n = 0; n < 3000; n++) begin
      a = word_t'($urandom_range(0, 63)) * 64;
      access(1'($urandom_range(0, 1)), a, cyc);
      if ($urandom_range(0, 3) == 0) @(posedge clk);
      #1;
    end

    // a repeated read of one line hits and answers in the second cycle
    access(1'b0, 64'h40, cyc);
    #1;
    access(1'b0, 64'h40, cyc);
    checks++;
    if (cyc != 2) begin failures++; $display("FAIL hit latency %0d, expected 2", cyc); end

    // the tag region is passed through every time and never cached
    passes_before = region_passes;
    for (int n = 0; n < 4; n++) begin
      access(1'b1, TB_TAG_BASE + 64, cyc); #1;
      access(1'b0, TB_TAG_BASE + 64, cyc); #1;
    end
    checks++;
    if (region_passes - passes_before != 8) begin
      failures++; $display("FAIL tag-region requests reaching memory: %0d of 8", region_passes - passes_before);
    end

    // every line still reads back correctly after all the evictions
    for (int l = 0; l < 64; l++) begin access(1'b0, word_t'(l) * 64, cyc); #1; end

    checks++;
    if (misses == 0 || writebacks == 0) begin
      failures++; $display("FAIL misses=%0d writebacks=%0d", misses, writebacks);
    end
    checks++;
    if (lower_writes != writebacks) begin
      failures++; $display("FAIL lower writes %0d vs write-back pulses %0d", lower_writes, writebacks);
    end
    $display("misses=%0d writebacks=%0d", misses, writebacks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
