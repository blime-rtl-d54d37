// blime_top -- a BliMe processor subsystem: core with taint tracking, tagged L1 data
// cache, L1 instruction cache with valid-instruction bits, tagged L2 cache, tag-aware
// memory controller, encryption engine and page-table-entry filter.
//
// Data flow. Client ciphertext is placed in memory as ordinary unblinded data. The
// blnd instruction has the encryption engine decrypt it in place with the client's
// session key and tag every resulting word with the client's tag. Software then
// computes on the blinded words; tags follow the data through registers, the cache
// and main memory, and the core faults on anything that would let a blinded value
// decide an address, a branch, a fault or a peripheral write. rblnd re-encrypts a
// result buffer under the key that matches its tag and clears the tag, so only
// ciphertext for the right client can leave.
//
// Structure:
//   core   --dc--+--> tagged_dcache --+
//   engine --dc--+                    +--> line_arbiter --> tagged_l2 --> tag_mem_ctrl --> memory
//   core   --fetch--> tagged_icache --+
//   (the engine owns the data-cache port while it runs)
//   pte_filter  sits on the path from an external page-table walker to an external TLB.
// Instructions are fetched from main memory through the L1 instruction cache, at byte
// address 4 * pc. External parts brought out as ports: main memory (beat bus, see
// tag_mem_ctrl), the HSM's key delivery channel, the peripheral region and the
// walker/TLB path.
// Defaults follow the evaluated configuration: 8-bit tags, one tag per 8-byte word,
// 16 KiB L1 data and instruction caches, 256 KiB L2, unoptimised (1:1) tag traffic
// with TAG_BEATS = 8.
module blime_top
  import blime_pkg::*;
#(
  parameter int    DCACHE_BYTES     = 16384,
  parameter int    ICACHE_BYTES     = 16384,
  parameter int    L2_BYTES         = 262144,
  parameter int    TAG_BEATS        = 8,
  parameter word_t TAG_BASE         = 64'h0000_0001_C000_0000,
  parameter word_t RESET_PC         = 64'd1,
  parameter word_t UNBLINDABLE_BASE = 64'hFFFF_0000_0000_0000,
  parameter logic [255:0] SEAL_KEY  = SEAL_KEY_DEFAULT
) (
  input  logic         clk,
  input  logic         rst_n,
  // main memory
  output logic         mem_req_valid,
  input  logic         mem_req_ready,
  output mem_req_t     mem_req,
  input  logic         mem_resp_valid,
  input  word_t        mem_resp_rdata,
  // HSM key channel
  input  logic         key_wr_valid,
  output logic         key_wr_ready,
  input  tag_t         key_wr_slot,
  input  session_key_t key_wr_data,        // sealed under SEAL_KEY
  input  logic [95:0]  key_wr_seal_nonce,
  // peripherals (unblindable region)
  output logic         periph_wr_valid,
  output logic         periph_rd_valid,
  output word_t        periph_addr,
  output word_t        periph_wdata,
  input  word_t        periph_rdata,
  // page-table walker to TLB
  input  logic         ptw_valid,
  input  blinded_t     ptw_pte,
  output logic         tlb_fill_valid,
  output word_t        tlb_fill_pte,
  output logic         pte_was_blinded,
  // status
  output word_t        pc,
  output logic         halted,
  output logic         retire,
  output logic         fault_valid,
  output fault_cause_e fault_cause,
  output word_t        fault_pc,
  output logic         dcache_miss,
  output logic         icache_miss,
  output logic         icache_zeroed,
  output logic         l2_miss,
  output logic         l2_writeback,
  output logic         tag_region_hit,
  output logic         data_beat,
  output logic         tag_beat
);

  // core <-> cache / engine
  logic         core_dc_valid, eng_dc_valid, dc_valid;
  dc_req_t      core_dc_req, eng_dc_req, dc_req;
  logic         dc_resp_valid, dc_resp_fault;
  blinded_t     dc_resp_rdata;

  logic         eng_cmd_valid, eng_cmd_ready, eng_cmd_blnd, eng_done_valid, eng_done_fault;
  word_t        eng_cmd_addr, eng_cmd_len;
  tag_t         eng_cmd_tag;
  logic [31:0]  eng_cmd_counter;
  logic         eng_active;

  // instruction fetch through the L1 instruction cache; a word whose valid-instruction
  // bit is clear reaches the core marked as blinded, so its fetch filter faults on it
  word_t        imem_addr;
  logic         ic_ready, ic_valid_instr;
  logic [31:0]  ic_instr;

  blime_core #(
    .RESET_PC        (RESET_PC),
    .UNBLINDABLE_BASE(UNBLINDABLE_BASE)
  ) u_core (
    .clk, .rst_n,
    .imem_addr      (imem_addr),
    .imem_instr     (ic_instr),
    .imem_tag       (ic_valid_instr ? TAG_CLEAR : ~TAG_CLEAR),
    .imem_ready     (ic_ready),
    .dc_req_valid   (core_dc_valid),
    .dc_req         (core_dc_req),
    .dc_resp_valid  (dc_resp_valid && !eng_active),
    .dc_resp_rdata  (dc_resp_rdata),
    .dc_resp_fault  (dc_resp_fault),
    .periph_wr_valid, .periph_rd_valid, .periph_addr, .periph_wdata, .periph_rdata,
    .eng_cmd_valid, .eng_cmd_ready, .eng_cmd_blnd, .eng_cmd_addr, .eng_cmd_len,
    .eng_cmd_tag, .eng_cmd_counter, .eng_done_valid, .eng_done_fault, .eng_active,
    .pc, .halted, .retire, .fault_valid, .fault_cause, .fault_pc
  );

  enc_engine #(.SEAL_KEY(SEAL_KEY)) u_engine (
    .clk, .rst_n,
    .key_wr_valid, .key_wr_ready, .key_wr_slot, .key_wr_data, .key_wr_seal_nonce,
    .cmd_valid     (eng_cmd_valid),
    .cmd_ready     (eng_cmd_ready),
    .cmd_blnd      (eng_cmd_blnd),
    .cmd_addr      (eng_cmd_addr),
    .cmd_len       (eng_cmd_len),
    .cmd_tag       (eng_cmd_tag),
    .cmd_counter   (eng_cmd_counter),
    .done_valid    (eng_done_valid),
    .done_fault    (eng_done_fault),
    .mem_req_valid (eng_dc_valid),
    .mem_req       (eng_dc_req),
    .mem_resp_valid(dc_resp_valid && eng_active),
    .mem_resp_rdata(dc_resp_rdata),
    .mem_resp_fault(dc_resp_fault)
  );

  assign dc_valid = eng_active ? eng_dc_valid : core_dc_valid;
  assign dc_req   = eng_active ? eng_dc_req   : core_dc_req;

  logic                           l_req_valid, l_req_write, l_resp_valid;
  word_t                          l_req_addr;
  logic [LINE_WORDS*XLEN-1:0]     l_req_wdata, l_resp_rdata;
  logic [LINE_WORDS*WTAG_W-1:0]   l_req_wtags, l_resp_rtags;

  tagged_dcache #(.SIZE_BYTES(DCACHE_BYTES)) u_dcache (
    .clk, .rst_n,
    .req_valid  (dc_valid),
    .req        (dc_req),
    .resp_valid (dc_resp_valid),
    .resp_rdata (dc_resp_rdata),
    .resp_fault (dc_resp_fault),
    .miss       (dcache_miss),
    .l_req_valid, .l_req_write, .l_req_addr, .l_req_wdata, .l_req_wtags,
    .l_resp_valid, .l_resp_rdata, .l_resp_rtags
  );

  logic                           m_req_valid, m_req_write, m_resp_valid;
  word_t                          m_req_addr;
  logic [LINE_WORDS*XLEN-1:0]     m_req_wdata, m_resp_rdata;
  logic [LINE_WORDS*WTAG_W-1:0]   m_req_wtags, m_resp_rtags;

  // shared upper port of the L2
  logic                           u_req_valid, u_req_write, u_resp_valid;
  word_t                          u_req_addr;
  logic [LINE_WORDS*XLEN-1:0]     u_req_wdata, u_resp_rdata;
  logic [LINE_WORDS*WTAG_W-1:0]   u_req_wtags, u_resp_rtags;

  // L1I: fetch address is the byte address of instruction pc
  logic   il_req_valid, il_resp_valid;
  word_t  il_req_addr;

  tagged_icache #(.SIZE_BYTES(ICACHE_BYTES)) u_icache (
    .clk, .rst_n,
    .f_req         (1'b1),
    .f_addr        ({imem_addr[XLEN-3:0], 2'b00}),
    .f_ready       (ic_ready),
    .f_instr       (ic_instr),
    .f_valid_instr (ic_valid_instr),
    .miss          (icache_miss),
    .fill_blinded  (icache_zeroed),
    .l_req_valid   (il_req_valid),
    .l_req_addr    (il_req_addr),
    .l_resp_valid  (il_resp_valid),
    .l_resp_rdata  (u_resp_rdata),
    .l_resp_rtags  (u_resp_rtags)
  );

  // L1D and L1I share the L2
  line_arbiter u_arb (
    .clk, .rst_n,
    .d_req_valid  (l_req_valid),
    .d_req_write  (l_req_write),
    .d_req_addr   (l_req_addr),
    .d_req_wdata  (l_req_wdata),
    .d_req_wtags  (l_req_wtags),
    .d_resp_valid (l_resp_valid),
    .i_req_valid  (il_req_valid),
    .i_req_addr   (il_req_addr),
    .i_resp_valid (il_resp_valid),
    .l_req_valid  (u_req_valid),
    .l_req_write  (u_req_write),
    .l_req_addr   (u_req_addr),
    .l_req_wdata  (u_req_wdata),
    .l_req_wtags  (u_req_wtags),
    .l_resp_valid (u_resp_valid)
  );
  assign l_resp_rdata = u_resp_rdata;
  assign l_resp_rtags = u_resp_rtags;

  tagged_l2 #(.SIZE_BYTES(L2_BYTES), .TAG_BASE(TAG_BASE)) u_l2 (
    .clk, .rst_n,
    .u_req_valid, .u_req_write, .u_req_addr, .u_req_wdata, .u_req_wtags,
    .u_resp_valid,
    .u_resp_rdata, .u_resp_rtags,
    .l2_miss, .l2_writeback,
    .l_req_valid  (m_req_valid),
    .l_req_write  (m_req_write),
    .l_req_addr   (m_req_addr),
    .l_req_wdata  (m_req_wdata),
    .l_req_wtags  (m_req_wtags),
    .l_resp_valid (m_resp_valid),
    .l_resp_rdata (m_resp_rdata),
    .l_resp_rtags (m_resp_rtags)
  );

  tag_mem_ctrl #(.TAG_BASE(TAG_BASE), .TAG_BEATS(TAG_BEATS)) u_memctrl (
    .clk, .rst_n,
    .l_req_valid  (m_req_valid),
    .l_req_write  (m_req_write),
    .l_req_addr   (m_req_addr),
    .l_req_wdata  (m_req_wdata),
    .l_req_wtags  (m_req_wtags),
    .l_resp_valid (m_resp_valid),
    .l_resp_rdata (m_resp_rdata),
    .l_resp_rtags (m_resp_rtags),
    .tag_region_hit,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid, .mem_resp_rdata,
    .data_beat, .tag_beat
  );

  pte_filter u_ptef (
    .ptw_valid, .ptw_pte, .tlb_fill_valid, .tlb_fill_pte, .pte_was_blinded
  );

endmodule
