// tag_mem_ctrl -- splits every cache-line transfer into a data transfer and a tag
// transfer to main memory.
//
// Main memory holds data below TAG_BASE and, from TAG_BASE up, a tag region that
// software cannot reach: 64 tag bits (one 64-bit word) per 64-byte data line, stored
// at TAG_BASE + 8 * line_number. A line fill or write-back from the cache becomes
//   * LINE_WORDS data beats at the line address, then
//   * TAG_BEATS tag beats. With TAG_BEATS = 8 (default, the unoptimised 1:1 ratio of
//     the evaluated hardware, whose bus moves 8 words at a time) the whole aligned
//     64-byte block holding the line's tag word is transferred and seven of the beats
//     carry nothing needed (on a write their byte strobes are zero). With TAG_BEATS = 1
//     (the optimised 1:8 ratio) only the one tag word is transferred.
// A line request that itself falls in the tag region is not sent to memory: a fill
// returns zero data with clear tags, a write-back is dropped, and tag_region_hit pulses.
//
// Line port: l_req_valid and the request fields are held until l_resp_valid (one
// cycle). Memory port: one beat per mem_req_valid && mem_req_ready; every beat, read
// or write, is answered by one mem_resp_valid beat, in order (read data in
// mem_resp_rdata). Requests are issued back to back while responses are collected, so a
// transfer takes (LINE_WORDS + TAG_BEATS) bus beats plus the memory latency.
// The two-operation split and the 1:1 / 1:8 ratios are the paper's; the tag-region
// layout and the bus protocol are this design's.
module tag_mem_ctrl
  import blime_pkg::*;
#(
  parameter word_t TAG_BASE  = 64'h0000_0001_C000_0000,
  parameter int    TAG_BEATS = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // line port (from the cache)
  input  logic                          l_req_valid,
  input  logic                          l_req_write,
  input  word_t                         l_req_addr,
  input  logic [LINE_WORDS*XLEN-1:0]    l_req_wdata,
  input  logic [LINE_WORDS*WTAG_W-1:0]  l_req_wtags,
  output logic                          l_resp_valid,
  output logic [LINE_WORDS*XLEN-1:0]    l_resp_rdata,
  output logic [LINE_WORDS*WTAG_W-1:0]  l_resp_rtags,
  output logic                          tag_region_hit,
  // memory port
  output logic                          mem_req_valid,
  input  logic                          mem_req_ready,
  output mem_req_t                      mem_req,
  input  logic                          mem_resp_valid,
  input  word_t                         mem_resp_rdata,
  // activity, one pulse per beat accepted by memory
  output logic                          data_beat,
  output logic                          tag_beat
);

  localparam int TOTAL      = LINE_WORDS + TAG_BEATS;
  localparam int CNT_W      = $clog2(TOTAL + 1);
  localparam int LINE_BYTES = LINE_WORDS * WORD_BYTES;

  typedef enum logic {S_IDLE, S_XFER} state_e;

  state_e             state;
  logic [CNT_W-1:0]   issued, received;
  word_t              tag_word_addr, tag_blk_addr;
  int unsigned        tag_sel;
  logic               in_tag_region;

  initial assert (LINE_WORDS * WTAG_W == XLEN)
    else $error("tag_mem_ctrl needs exactly one tag word per line");

  assign in_tag_region = (l_req_addr >= TAG_BASE);
  assign tag_word_addr = TAG_BASE + (l_req_addr / word_t'(LINE_BYTES)) * word_t'(WORD_BYTES);
  assign tag_blk_addr  = tag_word_addr & ~word_t'(WORD_BYTES * TAG_BEATS - 1);
  assign tag_sel       = (TAG_BEATS == 1) ? 0
                       : int'((tag_word_addr / word_t'(WORD_BYTES)) % word_t'(TAG_BEATS));

  // beat being issued
  always_comb begin
    mem_req_valid = (state == S_XFER) && (int'(issued) < TOTAL);
    mem_req.we    = l_req_write;
    if (int'(issued) < LINE_WORDS) begin
      mem_req.addr  = l_req_addr + word_t'(issued) * word_t'(WORD_BYTES);
      mem_req.wdata = l_req_wdata[int'(issued)*XLEN +: XLEN];
      mem_req.wstrb = '1;
    end else begin
      mem_req.addr  = tag_blk_addr + word_t'(32'(int'(issued) - LINE_WORDS)) * word_t'(WORD_BYTES);
      mem_req.wdata = l_req_wtags;
      mem_req.wstrb = (int'(issued) - LINE_WORDS == int'(tag_sel)) ? '1 : '0;
    end
  end

  assign data_beat = mem_req_valid && mem_req_ready && (int'(issued) <  LINE_WORDS);
  assign tag_beat  = mem_req_valid && mem_req_ready && (int'(issued) >= LINE_WORDS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      issued         <= '0;
      received       <= '0;
      l_resp_valid   <= 1'b0;
      tag_region_hit <= 1'b0;
      l_resp_rdata   <= '0;
      l_resp_rtags   <= '0;
    end else begin
      l_resp_valid   <= 1'b0;
      tag_region_hit <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (l_req_valid && !l_resp_valid) begin
            issued   <= '0;
            received <= '0;
            if (in_tag_region) begin
              l_resp_rdata   <= '0;
              l_resp_rtags   <= '0;
              l_resp_valid   <= 1'b1;
              tag_region_hit <= 1'b1;
            end else begin
              state <= S_XFER;
            end
          end
        end
        S_XFER: begin
          if (mem_req_valid && mem_req_ready) issued <= issued + 1'b1;
          if (mem_resp_valid) begin
            if (int'(received) < LINE_WORDS)
              l_resp_rdata[int'(received)*XLEN +: XLEN] <= mem_resp_rdata;
            else if (int'(received) - LINE_WORDS == int'(tag_sel))
              l_resp_rtags <= mem_resp_rdata;
            received <= received + 1'b1;
            if (int'(received) == TOTAL - 1) begin
              l_resp_valid <= 1'b1;
              state        <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
