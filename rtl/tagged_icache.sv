// tagged_icache -- L1 instruction cache that holds no blindedness tags, only a
// "valid instruction" bit per instruction, and never lets blinded memory become code.
//
// Direct-mapped, 64-byte lines of sixteen 32-bit instructions, SIZE_BYTES of
// instructions (16 KiB by default, the L1I size of the evaluated system). On a miss
// the whole line is read from the level below together with its tags. Each
// instruction passes through an ifetch_filter on its way into the array: if any
// granule it occupies is blinded, the word is stored as zero with its valid bit clear.
// The array therefore never holds a blinded value, and the tags need not be kept.
// Fetching an instruction whose valid bit is clear is reported on f_valid_instr = 0,
// and the core raises a fault for it.
//
// Fetch port: f_req with a 4-byte-aligned f_addr; when the line is present f_ready is
// raised in the same cycle with f_instr and f_valid_instr (a combinational hit). On a
// miss f_ready stays low until the refill has been written; the fetcher keeps f_addr
// steady meanwhile. Line port: read-only, l_req_valid and l_req_addr held until
// l_resp_valid. Zeroing blinded words and the valid-instruction bits follow the paper;
// the organisation and the handshake are this design's choices.
module tagged_icache
  import blime_pkg::*;
#(
  parameter int SIZE_BYTES = 16384
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // fetch side
  input  logic                          f_req,
  input  word_t                         f_addr,
  output logic                          f_ready,
  output logic [31:0]                   f_instr,
  output logic                          f_valid_instr,
  output logic                          miss,          // cycle a refill starts
  output logic                          fill_blinded,  // a refill zeroed a blinded word
  // line side (reads only)
  output logic                          l_req_valid,
  output word_t                         l_req_addr,
  input  logic                          l_resp_valid,
  input  logic [LINE_WORDS*XLEN-1:0]    l_resp_rdata,
  input  logic [LINE_WORDS*WTAG_W-1:0]  l_resp_rtags
);

  localparam int LINE_BYTES = LINE_WORDS * WORD_BYTES;
  localparam int IPL        = LINE_BYTES / 4;           // instructions per line
  localparam int LINES      = SIZE_BYTES / LINE_BYTES;
  localparam int IDX_W      = $clog2(LINES);
  localparam int OFF_W      = $clog2(LINE_BYTES);
  localparam int ISEL_W     = $clog2(IPL);
  localparam int ATAG_W     = XLEN - IDX_W - OFF_W;

  logic [31:0]        instr_q [LINES*IPL];
  logic               ivalid_q[LINES*IPL];
  logic [ATAG_W-1:0]  atag_q  [LINES];
  logic [LINES-1:0]   lvalid_q;
  logic               filling;

  logic [IDX_W-1:0]   idx;
  logic [ISEL_W-1:0]  isel;
  logic [ATAG_W-1:0]  atag;
  logic               hit;

  assign idx  = f_addr[OFF_W +: IDX_W];
  assign isel = f_addr[2 +: ISEL_W];
  assign atag = f_addr[XLEN-1 -: ATAG_W];
  assign hit  = lvalid_q[idx] && (atag_q[idx] == atag);

  assign f_ready       = f_req && hit && !filling;
  assign f_instr       = instr_q[{idx, isel}];
  assign f_valid_instr = ivalid_q[{idx, isel}];
  assign miss          = f_req && !hit && !filling;
  assign l_req_valid   = filling;
  assign l_req_addr    = {f_addr[XLEN-1:OFF_W], OFF_W'(0)};

  // Fill path: the tag of each instruction is the first non-zero tag among the granules
  // under its four bytes; the fetch filter zeroes and invalidates the blinded ones.
  logic [31:0] fill_instr [IPL];
  logic        fill_ok    [IPL];
  logic [IPL-1:0] fill_bl;

  for (genvar i = 0; i < IPL; i++) begin : g_fill
    tag_t itag;
    always_comb begin
      itag = TAG_CLEAR;
      for (int b = 0; b < 4; b++)
        if (itag == TAG_CLEAR) itag = l_resp_rtags[((4*i + b) / GRAN_BYTES) * TAG_W +: TAG_W];
    end
    ifetch_filter u_filter (
      .in_valid       (1'b1),
      .in_instr       (l_resp_rdata[32*i +: 32]),
      .in_tag         (itag),
      .out_instr      (fill_instr[i]),
      .out_valid_instr(fill_ok[i]),
      .out_blinded    (fill_bl[i])
    );
  end

  assign fill_blinded = filling && l_resp_valid && (|fill_bl);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      filling  <= 1'b0;
      lvalid_q <= '0;
    end else if (!filling) begin
      if (miss) filling <= 1'b1;
    end else if (l_resp_valid) begin
      filling       <= 1'b0;
      lvalid_q[idx] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (filling && l_resp_valid) begin
      atag_q[idx] <= atag;
      for (int i = 0; i < IPL; i++) begin
        instr_q [{idx, ISEL_W'(i)}] <= fill_instr[i];
        ivalid_q[{idx, ISEL_W'(i)}] <= fill_ok[i];
      end
    end
  end

  // The fetcher must hold its address while a refill is outstanding.
  property p_addr_held;
    @(posedge clk) disable iff (!rst_n) filling |-> $stable(f_addr);
  endproperty
  a_addr_held: assert property (p_addr_held);

endmodule
