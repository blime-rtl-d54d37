// tagged_dcache -- L1 data cache that keeps a blindedness tag next to every granule.
//
// Direct-mapped, write-back, write-allocate, 64-byte lines, SIZE_BYTES of data
// (16 KiB by default, the L1D size of the evaluated system). Every word in the data
// array has WTAG_W tag bits beside it (one TAG_W tag per GRAN_BYTES granule); the
// address tags, valid and dirty bits are visible state and carry no blindedness tag.
//
// Tag rules applied here:
//   * loads return the value with the tag of the granule(s) read; a word covering
//     granules of two different clients is refused (resp_fault);
//   * a store that covers whole granules gives them the register's tag;
//   * a partial-granule store (a byte store when granules are larger than a byte) of
//     data tagged a into a granule tagged b, with a and b non-zero and different, is
//     refused and leaves the cache unchanged; otherwise the granule keeps its old tag
//     when the stored byte is unblinded and takes tag a when it is blinded.
// Miss handling does not look at any value or tag, only at addresses, so its timing
// reveals nothing about blinded data.
//
// Upper port: req_valid/req are held until resp_valid. A hit answers combinationally in
// the same cycle; a miss first writes back a dirty victim and refills the line through
// the line port, then answers as a hit. Line port: l_req_valid/l_req_* held until
// l_resp_valid; a write-back carries the line's data and its LINE_TAG_BITS of tags, a
// fill returns both. Tags in caches and the partial-write rule follow the paper; the
// organisation (direct-mapped, write-back) is this design's choice.
module tagged_dcache
  import blime_pkg::*;
#(
  parameter int SIZE_BYTES = 16384
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // core side
  input  logic                            req_valid,
  input  dc_req_t                         req,
  output logic                            resp_valid,
  output blinded_t                        resp_rdata,
  output logic                            resp_fault,
  output logic                            miss,          // cycle starting a miss
  // line side
  output logic                            l_req_valid,
  output logic                            l_req_write,
  output word_t                           l_req_addr,    // line-aligned byte address
  output logic [LINE_WORDS*XLEN-1:0]      l_req_wdata,
  output logic [LINE_WORDS*WTAG_W-1:0]    l_req_wtags,
  input  logic                            l_resp_valid,
  input  logic [LINE_WORDS*XLEN-1:0]      l_resp_rdata,
  input  logic [LINE_WORDS*WTAG_W-1:0]    l_resp_rtags
);

  localparam int LINE_BYTES = LINE_WORDS * WORD_BYTES;
  localparam int LINES      = SIZE_BYTES / LINE_BYTES;
  localparam int IDX_W      = $clog2(LINES);
  localparam int OFF_W      = $clog2(LINE_BYTES);
  localparam int WSEL_W     = $clog2(LINE_WORDS);
  localparam int BSEL_W     = $clog2(WORD_BYTES);
  localparam int ATAG_W     = XLEN - IDX_W - OFF_W;

  typedef enum logic [1:0] {S_LOOKUP, S_WB, S_FILL} state_e;

  word_t                data_q [LINES*LINE_WORDS];
  wtag_t                wtag_q [LINES*LINE_WORDS];
  logic [ATAG_W-1:0]    atag_q [LINES];
  logic                 valid_q [LINES];
  logic                 dirty_q [LINES];

  state_e               state;

  logic [IDX_W-1:0]     idx;
  logic [ATAG_W-1:0]    atag;
  logic [WSEL_W-1:0]    wsel;
  logic [BSEL_W-1:0]    bsel;
  int unsigned          gsel;
  logic                 hit;
  word_t                cur_word;
  wtag_t                cur_wtag;
  tag_t                 gran_tag;
  tag_merge_t           wmerge;
  logic                 partial_bad;
  word_t                new_word;
  wtag_t                new_wtag;

  assign idx  = req.addr[OFF_W +: IDX_W];
  assign atag = req.addr[XLEN-1 -: ATAG_W];
  assign wsel = req.addr[BSEL_W +: WSEL_W];
  assign bsel = req.addr[BSEL_W-1:0];
  assign gsel = int'(bsel) / GRAN_BYTES;

  assign hit      = valid_q[idx] && (atag_q[idx] == atag);
  assign cur_word = data_q[{idx, wsel}];
  assign cur_wtag = wtag_q[{idx, wsel}];
  assign gran_tag = cur_wtag[gsel*TAG_W +: TAG_W];
  assign wmerge   = merge_word_tags(cur_wtag);

  // store merge and the partial-granule rule
  always_comb begin
    new_word    = cur_word;
    new_wtag    = cur_wtag;
    partial_bad = 1'b0;
    if (!req.byte_op) begin
      new_word = req.wdata.val;
      new_wtag = {GRAN_PER_WORD{req.wdata.tag}};
    end else begin
      new_word[8*bsel +: 8] = req.wdata.val[7:0];
      if (GRAN_BYTES == 1) begin
        new_wtag[gsel*TAG_W +: TAG_W] = req.wdata.tag;
      end else begin
        partial_bad = (req.wdata.tag != TAG_CLEAR) && (gran_tag != TAG_CLEAR) &&
                      (req.wdata.tag != gran_tag);
        if (req.wdata.tag != TAG_CLEAR) new_wtag[gsel*TAG_W +: TAG_W] = req.wdata.tag;
      end
    end
  end

  // core-side response
  always_comb begin
    resp_valid = req_valid && (state == S_LOOKUP) && hit;
    resp_rdata = '0;
    resp_fault = 1'b0;
    if (req.we) begin
      resp_fault = partial_bad;
    end else if (req.byte_op) begin
      resp_rdata.val = {{(XLEN-8){1'b0}}, cur_word[8*bsel +: 8]};
      resp_rdata.tag = gran_tag;
    end else begin
      resp_fault     = wmerge.fault;
      resp_rdata.val = wmerge.fault ? '0 : cur_word;
      resp_rdata.tag = wmerge.fault ? TAG_CLEAR : wmerge.tag;
    end
  end

  assign miss = req_valid && (state == S_LOOKUP) && !hit;

  // line port
  always_comb begin
    l_req_valid = (state == S_WB) || (state == S_FILL);
    l_req_write = (state == S_WB);
    l_req_addr  = (state == S_WB) ? {atag_q[idx], idx, {OFF_W{1'b0}}}
                                  : {atag, idx, {OFF_W{1'b0}}};
    for (int w = 0; w < LINE_WORDS; w++) begin
      l_req_wdata[w*XLEN +: XLEN]     = data_q[{idx, WSEL_W'(w)}];
      l_req_wtags[w*WTAG_W +: WTAG_W] = wtag_q[{idx, WSEL_W'(w)}];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOOKUP;
      for (int i = 0; i < LINES; i++) begin
        valid_q[i] <= 1'b0;
        dirty_q[i] <= 1'b0;
      end
    end else begin
      unique case (state)
        S_LOOKUP: begin
          if (req_valid && hit && req.we && !partial_bad) dirty_q[idx] <= 1'b1;
          if (miss) state <= (valid_q[idx] && dirty_q[idx]) ? S_WB : S_FILL;
        end
        S_WB: if (l_resp_valid) state <= S_FILL;
        S_FILL: begin
          if (l_resp_valid) begin
            valid_q[idx] <= 1'b1;
            dirty_q[idx] <= 1'b0;
            state        <= S_LOOKUP;
          end
        end
        default: state <= S_LOOKUP;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_LOOKUP && req_valid && hit && req.we && !partial_bad) begin
      data_q[{idx, wsel}] <= new_word;
      wtag_q[{idx, wsel}] <= new_wtag;
    end
    if (state == S_FILL && l_resp_valid) begin
      atag_q[idx] <= atag;
      for (int w = 0; w < LINE_WORDS; w++) begin
        data_q[{idx, WSEL_W'(w)}] <= l_resp_rdata[w*XLEN +: XLEN];
        wtag_q[{idx, WSEL_W'(w)}] <= l_resp_rtags[w*WTAG_W +: WTAG_W];
      end
    end
  end

endmodule
