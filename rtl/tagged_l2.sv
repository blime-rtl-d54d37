// tagged_l2 -- second-level cache that stores the blindedness tags of every line next
// to its data, between the L1 data cache and the tag-splitting memory controller.
//
// Direct-mapped, write-back, write-allocate, 64-byte lines, SIZE_BYTES of data
// (256 KiB by default, the L2 size of the evaluated system). Both ports move whole
// lines: the data (LINE_WORDS words) and its LINE_WORDS*WTAG_W tag bits always travel
// together, so a line's tags can never be separated from, or outlive, its data. The
// cache never looks at the tags or values it holds; hit, miss and eviction depend on
// the address only, so its timing reveals nothing about blinded data.
//
// A request for an address in the tag region (at or above TAG_BASE) is not cached: it
// is passed straight down, where the memory controller answers it with zeros and drops
// writes. Caching it here would let software store into, and read back from, a copy of
// the region it must not reach.
//
// Upper port (from L1): u_req_valid and the request fields are held until u_resp_valid,
// a one-cycle pulse. The data and tag arrays are read one cycle after a request is seen,
// so a hit answers in the second cycle. A miss writes back a dirty victim, refills the
// line through the lower port, then handles the still-pending request as a hit. The
// lower port uses the same held-until-response handshake.
// Tags beside the data in the L2 follow the paper; the organisation (direct-mapped,
// write-back, registered array read, tag-region bypass) is this design's choice.
module tagged_l2
  import blime_pkg::*;
#(
  parameter int    SIZE_BYTES = 262144,
  parameter word_t TAG_BASE   = 64'h0000_0001_C000_0000
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // upper (L1) side
  input  logic                          u_req_valid,
  input  logic                          u_req_write,
  input  word_t                         u_req_addr,    // line-aligned byte address
  input  logic [LINE_WORDS*XLEN-1:0]    u_req_wdata,
  input  logic [LINE_WORDS*WTAG_W-1:0]  u_req_wtags,
  output logic                          u_resp_valid,
  output logic [LINE_WORDS*XLEN-1:0]    u_resp_rdata,
  output logic [LINE_WORDS*WTAG_W-1:0]  u_resp_rtags,
  output logic                          l2_miss,       // cycle a miss is detected
  output logic                          l2_writeback,  // cycle a dirty victim is written back
  // lower (memory controller) side
  output logic                          l_req_valid,
  output logic                          l_req_write,
  output word_t                         l_req_addr,
  output logic [LINE_WORDS*XLEN-1:0]    l_req_wdata,
  output logic [LINE_WORDS*WTAG_W-1:0]  l_req_wtags,
  input  logic                          l_resp_valid,
  input  logic [LINE_WORDS*XLEN-1:0]    l_resp_rdata,
  input  logic [LINE_WORDS*WTAG_W-1:0]  l_resp_rtags
);

  localparam int LINE_BYTES = LINE_WORDS * WORD_BYTES;
  localparam int LINES      = SIZE_BYTES / LINE_BYTES;
  localparam int IDX_W      = $clog2(LINES);
  localparam int OFF_W      = $clog2(LINE_BYTES);
  localparam int ATAG_W     = XLEN - IDX_W - OFF_W;

  typedef logic [LINE_WORDS*XLEN-1:0]   line_t;
  typedef logic [LINE_WORDS*WTAG_W-1:0] ltag_t;

  typedef enum logic [2:0] {S_IDLE, S_CHECK, S_WB, S_FILL, S_BYPASS} state_e;

  line_t              data_q [LINES];
  ltag_t              ltag_q [LINES];
  logic [ATAG_W-1:0]  atag_q [LINES];
  logic [LINES-1:0]   valid_q, dirty_q;

  state_e             state;
  line_t              rd_data_q;
  ltag_t              rd_ltag_q;
  logic [ATAG_W-1:0]  rd_atag_q;

  logic [IDX_W-1:0]   idx;
  logic [ATAG_W-1:0]  atag;
  logic               in_tag_region, hit;

  assign idx           = u_req_addr[OFF_W +: IDX_W];
  assign atag          = u_req_addr[XLEN-1 -: ATAG_W];
  assign in_tag_region = (u_req_addr >= TAG_BASE);
  assign hit           = valid_q[idx] && (rd_atag_q == atag);

  always_comb begin
    u_resp_valid = 1'b0;
    u_resp_rdata = rd_data_q;
    u_resp_rtags = rd_ltag_q;
    l_req_valid  = 1'b0;
    l_req_write  = 1'b0;
    l_req_addr   = {u_req_addr[XLEN-1:OFF_W], OFF_W'(0)};
    l_req_wdata  = u_req_wdata;
    l_req_wtags  = u_req_wtags;
    l2_miss      = 1'b0;
    l2_writeback = 1'b0;
    unique case (state)
      S_CHECK: begin
        u_resp_valid = hit;
        l2_miss      = !hit;
      end
      S_WB: begin
        l_req_valid  = 1'b1;
        l_req_write  = 1'b1;
        l_req_addr   = {rd_atag_q, idx, OFF_W'(0)};
        l_req_wdata  = rd_data_q;
        l_req_wtags  = rd_ltag_q;
        l2_writeback = l_resp_valid;
      end
      S_FILL: l_req_valid = 1'b1;
      S_BYPASS: begin
        l_req_valid  = 1'b1;
        l_req_write  = u_req_write;
        u_resp_valid = l_resp_valid;
        u_resp_rdata = l_resp_rdata;
        u_resp_rtags = l_resp_rtags;
      end
      default: ;
    endcase
  end

  // Control state and the small per-line status bits.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      valid_q <= '0;
      dirty_q <= '0;
    end else begin
      unique case (state)
        S_IDLE:
          if (u_req_valid) state <= in_tag_region ? S_BYPASS : S_CHECK;
        S_CHECK:
          if (hit) begin
            if (u_req_write) dirty_q[idx] <= 1'b1;
            state <= S_IDLE;
          end else begin
            state <= (valid_q[idx] && dirty_q[idx]) ? S_WB : S_FILL;
          end
        S_WB:
          if (l_resp_valid) state <= S_FILL;
        S_FILL:
          if (l_resp_valid) begin
            valid_q[idx] <= 1'b1;
            dirty_q[idx] <= 1'b0;
            state        <= S_IDLE;     // the held request now hits
          end
        S_BYPASS:
          if (l_resp_valid) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Data, tag and address-tag arrays: one registered read per request, one write on a
  // write hit or a refill.
  always_ff @(posedge clk) begin
    if (state == S_IDLE) begin
      rd_data_q <= data_q[idx];
      rd_ltag_q <= ltag_q[idx];
      rd_atag_q <= atag_q[idx];
    end
    if (state == S_CHECK && hit && u_req_write) begin
      data_q[idx] <= u_req_wdata;
      ltag_q[idx] <= u_req_wtags;
    end
    if (state == S_FILL && l_resp_valid) begin
      data_q[idx] <= l_resp_rdata;
      ltag_q[idx] <= l_resp_rtags;
      atag_q[idx] <= atag;
    end
  end

  // The upper port must hold its request steady while it waits.
  property p_req_held;
    @(posedge clk) disable iff (!rst_n)
      (u_req_valid && !u_resp_valid) |=> (u_req_valid && $stable(u_req_addr) && $stable(u_req_write));
  endproperty
  a_req_held: assert property (p_req_held);

endmodule
