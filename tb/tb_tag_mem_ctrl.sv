// tb_tag_mem_ctrl -- line write-backs and fills through the tag-aware controller.
//
// Two controllers share the test: one with TAG_BEATS = 8 (unoptimised 1:1 tag traffic)
// and one with TAG_BEATS = 1 (optimised 1:8). Each writes back random lines with random
// tags and reads them back; the testbench checks the returned data and tags, the data
// word and the tag word in the memory model (tag word at TAG_BASE + 8 * line number,
// neighbouring tag words untouched), and that every transfer used exactly 8 data beats
// and TAG_BEATS tag beats. A request into the tag region must be refused.
module tb_tag_mem_ctrl;
  import blime_pkg::*;

  localparam word_t TB_TAG_BASE = 64'h0000_0000_C000_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- two instances
  logic                         l_req_valid [2];
  logic                         l_req_write [2];
  word_t                        l_req_addr  [2];
  logic [LINE_WORDS*XLEN-1:0]   l_req_wdata [2];
  logic [LINE_WORDS*WTAG_W-1:0] l_req_wtags [2];
  logic                         l_resp_valid [2];
  logic [LINE_WORDS*XLEN-1:0]   l_resp_rdata [2];
  logic [LINE_WORDS*WTAG_W-1:0] l_resp_rtags [2];
  logic                         trh [2], db [2], tbt [2];
  logic                         mrv [2], mrr [2], mpv [2];
  mem_req_t                     mrq [2];
  word_t                        mpd [2];

  tag_mem_ctrl #(.TAG_BASE(TB_TAG_BASE), .TAG_BEATS(8)) dut8 (
    .clk, .rst_n,
    .l_req_valid(l_req_valid[0]), .l_req_write(l_req_write[0]), .l_req_addr(l_req_addr[0]),
    .l_req_wdata(l_req_wdata[0]), .l_req_wtags(l_req_wtags[0]), .l_resp_valid(l_resp_valid[0]),
    .l_resp_rdata(l_resp_rdata[0]), .l_resp_rtags(l_resp_rtags[0]), .tag_region_hit(trh[0]),
    .mem_req_valid(mrv[0]), .mem_req_ready(mrr[0]), .mem_req(mrq[0]),
    .mem_resp_valid(mpv[0]), .mem_resp_rdata(mpd[0]), .data_beat(db[0]), .tag_beat(tbt[0]));
  main_mem_model #(.LATENCY(3), .STALL_PCT(20)) mem8 (
    .clk, .rst_n, .req_valid(mrv[0]), .req_ready(mrr[0]), .req(mrq[0]),
    .resp_valid(mpv[0]), .resp_rdata(mpd[0]));

  tag_mem_ctrl #(.TAG_BASE(TB_TAG_BASE), .TAG_BEATS(1)) dut1 (
    .clk, .rst_n,
    .l_req_valid(l_req_valid[1]), .l_req_write(l_req_write[1]), .l_req_addr(l_req_addr[1]),
    .l_req_wdata(l_req_wdata[1]), .l_req_wtags(l_req_wtags[1]), .l_resp_valid(l_resp_valid[1]),
    .l_resp_rdata(l_resp_rdata[1]), .l_resp_rtags(l_resp_rtags[1]), .tag_region_hit(trh[1]),
    .mem_req_valid(mrv[1]), .mem_req_ready(mrr[1]), .mem_req(mrq[1]),
    .mem_resp_valid(mpv[1]), .mem_resp_rdata(mpd[1]), .data_beat(db[1]), .tag_beat(tbt[1]));
  main_mem_model #(.LATENCY(3), .STALL_PCT(20)) mem1 (
    .clk, .rst_n, .req_valid(mrv[1]), .req_ready(mrr[1]), .req(mrq[1]),
    .resp_valid(mpv[1]), .resp_rdata(mpd[1]));

  int dbeats [2], tbeats [2], trhits [2];
  always @(posedge clk) for (int k = 0; k < 2; k++) begin
    if (db[k])  dbeats[k]++;
    if (tbt[k]) tbeats[k]++;
    if (trh[k]) trhits[k]++;
  end

  task automatic check(bit c, string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic xfer(int k, logic wr, word_t addr, logic [511:0] wd, logic [63:0] wt,
                      output logic [511:0] rd, output logic [63:0] rt);
    int d0, t0;
    d0 = dbeats[k]; t0 = tbeats[k];
    @(negedge clk);
    l_req_valid[k] = 1; l_req_write[k] = wr; l_req_addr[k] = addr;
    l_req_wdata[k] = wd; l_req_wtags[k] = wt;
    do @(posedge clk); while (!l_resp_valid[k]);
    rd = l_resp_rdata[k]; rt = l_resp_rtags[k];
    @(negedge clk);
    l_req_valid[k] = 0;
    check(dbeats[k] - d0 == 8, $sformatf("inst %0d data beats %0d", k, dbeats[k] - d0));
    check(tbeats[k] - t0 == (k == 0 ? 8 : 1),
          $sformatf("inst %0d tag beats %0d", k, tbeats[k] - t0));
  endtask

  initial begin
    logic [511:0] wd [4], rd;
    logic [63:0]  wt [4], rt;
    word_t        la [4];
    for (int k = 0; k < 2; k++) begin
      l_req_valid[k] = 0; l_req_write[k] = 0; l_req_addr[k] = '0;
      l_req_wdata[k] = '0; l_req_wtags[k] = '0; dbeats[k] = 0; tbeats[k] = 0; trhits[k] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 2; k++) begin
      // four neighbouring lines share one 64-byte block of the tag region
      for (int i = 0; i < 4; i++) begin
        la[i] = 64'h0001_0000 + 64'(i) * 64;
        for (int w = 0; w < 16; w++) wd[i][32*w +: 32] = $urandom;
        wt[i] = {$urandom, $urandom};
        xfer(k, 1, la[i], wd[i], wt[i], rd, rt);
      end
      for (int i = 0; i < 4; i++) begin
        word_t tw;
        tw = TB_TAG_BASE + (la[i] / 64) * 8;
        if (k == 0) begin
          check(mem8.peek(tw) == wt[i], $sformatf("inst 0 tag word line %0d", i));
          check(mem8.peek(la[i] + 8) == wd[i][127:64], "inst 0 data word");
        end else begin
          check(mem1.peek(tw) == wt[i], $sformatf("inst 1 tag word line %0d", i));
          check(mem1.peek(la[i] + 8) == wd[i][127:64], "inst 1 data word");
        end
      end
      for (int i = 3; i >= 0; i--) begin
        xfer(k, 0, la[i], '0, '0, rd, rt);
        check(rd == wd[i], $sformatf("inst %0d fill data line %0d", k, i));
        check(rt == wt[i], $sformatf("inst %0d fill tags line %0d", k, i));
      end
      // tag region refused: no beats, zero data
      @(negedge clk);
      l_req_valid[k] = 1; l_req_write[k] = 0; l_req_addr[k] = TB_TAG_BASE + 64;
      do @(posedge clk); while (!l_resp_valid[k]);
      check(l_resp_rdata[k] == '0 && l_resp_rtags[k] == '0, "tag region read returns zero");
      @(negedge clk);
      l_req_valid[k] = 0;
      check(trhits[k] == 1, "tag region hit flagged");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
