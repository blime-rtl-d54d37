// blime_pkg -- types, constants and tag-combining rules shared by every block.
//
// A value that can hold client data ("blindable" state: registers, cache and memory
// contents, and the buses between them) travels as a blinded_t: the value plus an
// n-bit blindedness tag. Tag zero means "not blinded"; any other value names the
// client the data came from, so an n-bit tag distinguishes 2^n-1 clients.
//
// The default configuration is the 8-bit-tag, 8-byte-granule variant (one tag per
// 64-bit word). The single-bit, byte-granule variant is TAG_W = 1, GRAN_BYTES = 1.
// Both give 64 tag bits per 64-byte cache line, which the memory controller relies on.
//
// The instruction encoding (32-bit words, opcode in the top nibble) is this design's
// own; the instruction set follows the eight-instruction model ISA (ADD, SUB, MUL, AND,
// XOR, LOAD, STORE, BZ) plus the import/export instructions blnd and rblnd, an
// immediate load LI and a HALT used to end test programs.
package blime_pkg;

  parameter int XLEN        = 64;   // register and memory word width
  parameter int TAG_W       = 8;    // blindedness tag width (8 in the 8-bit variant)
  parameter int GRAN_BYTES  = 8;    // bytes sharing one tag (8 = one per word)
  parameter int NREGS       = 32;   // architectural registers
  parameter int LINE_WORDS  = 8;    // 64-byte cache lines / memory bursts

  localparam int WORD_BYTES     = XLEN / 8;
  localparam int GRAN_PER_WORD  = WORD_BYTES / GRAN_BYTES;
  localparam int WTAG_W         = GRAN_PER_WORD * TAG_W;     // tag bits per word
  localparam int LINE_TAG_BITS  = LINE_WORDS * WTAG_W;       // tag bits per line
  localparam int RIDX_W         = $clog2(NREGS);

  typedef logic [TAG_W-1:0]  tag_t;
  typedef logic [XLEN-1:0]   word_t;
  typedef logic [WTAG_W-1:0] wtag_t;     // all granule tags of one word

  localparam tag_t TAG_CLEAR = '0;

  // A value together with its blindedness tag.
  typedef struct packed {
    tag_t  tag;
    word_t val;
  } blinded_t;

  // Result of combining the tags of several inputs.
  typedef struct packed {
    logic fault;   // inputs blinded by two different clients
    tag_t tag;     // tag of the combined result
  } tag_merge_t;

  // Table I: clear+clear -> clear, a+clear -> a, a+a -> a, a+b -> fault.
  function automatic tag_merge_t merge_tags(tag_t a, tag_t b);
    tag_merge_t r;
    r.fault = (a != TAG_CLEAR) && (b != TAG_CLEAR) && (a != b);
    r.tag   = (a != TAG_CLEAR) ? a : b;
    return r;
  endfunction

  // Combined tag of a whole word read from memory (all its granules).
  function automatic tag_merge_t merge_word_tags(wtag_t wt);
    tag_merge_t r;
    r = '{fault: 1'b0, tag: TAG_CLEAR};
    for (int g = 0; g < GRAN_PER_WORD; g++) begin
      tag_merge_t m;
      m = merge_tags(r.tag, wt[g*TAG_W +: TAG_W]);
      r.fault = r.fault | m.fault;
      r.tag   = m.tag;
    end
    return r;
  endfunction

  // Opcodes of the 32-bit instruction word, bits [31:28].
  typedef enum logic [3:0] {
    OP_ADD   = 4'h0,
    OP_SUB   = 4'h1,
    OP_MUL   = 4'h2,
    OP_AND   = 4'h3,
    OP_XOR   = 4'h4,
    OP_LOAD  = 4'h5,
    OP_STORE = 4'h6,
    OP_BZ    = 4'h7,
    OP_BLND  = 4'h8,
    OP_RBLND = 4'h9,
    OP_LI    = 4'hA,
    OP_SLT   = 4'hB,
    OP_HALT  = 4'hF
  } opcode_e;

  typedef enum logic [2:0] {
    ALU_ADD, ALU_SUB, ALU_MUL, ALU_AND, ALU_XOR, ALU_SLT
  } alu_op_e;

  // Why an instruction faulted. Any fault sends the program counter to address 0.
  typedef enum logic [3:0] {
    FC_NONE          = 4'd0,
    FC_MIXED_TAGS    = 4'd1,   // inputs from two different clients
    FC_BLINDED_PC    = 4'd2,   // blinded branch condition or target
    FC_BLINDED_ADDR  = 4'd3,   // blinded address base or offset
    FC_UNBLINDABLE   = 4'd4,   // blinded store to an unblindable (peripheral) address
    FC_PARTIAL_WRITE = 4'd5,   // partial store of tag a into a granule of tag b
    FC_BLINDED_INSTR = 4'd6,   // fetched instruction word is blinded
    FC_ILLEGAL       = 4'd7,   // undefined opcode
    FC_ENGINE        = 4'd8    // import/export refused (bad key slot or foreign tag)
  } fault_cause_e;

  // Decoded instruction.
  typedef struct packed {
    opcode_e           op;
    logic              legal;
    logic [RIDX_W-1:0] rd;
    logic [RIDX_W-1:0] rs1;
    logic [RIDX_W-1:0] rs2;
    logic              uses_rs1;
    logic              uses_rs2;
    logic              writes_rd;
    logic              reads_rd;     // blnd/rblnd read rd as the keystream counter
    logic              is_alu;
    alu_op_e           alu_op;
    logic              is_load;
    logic              is_store;
    logic              byte_op;      // LOAD/STORE of one byte instead of a word
    logic              is_branch;
    logic              is_blnd;
    logic              is_rblnd;
    logic              is_li;
    logic              is_halt;
    word_t             imm;          // sign-extended immediate
  } decoded_t;

  // Request from the core (or the encryption engine) to the L1 data cache.
  typedef struct packed {
    logic     we;
    logic     byte_op;
    word_t    addr;       // byte address
    blinded_t wdata;      // byte stores use wdata.val[7:0]
  } dc_req_t;

  // One beat on the main-memory port (64-bit word, byte strobes on writes).
  typedef struct packed {
    logic                  we;
    word_t                 addr;   // byte address of the beat
    word_t                 wdata;
    logic [WORD_BYTES-1:0] wstrb;
  } mem_req_t;

  // Default sealing key shared by the HSM and the encryption engine (value not mentioned
  // in the paper; a system integrator embeds its own).
  localparam logic [255:0] SEAL_KEY_DEFAULT =
    256'h5EA1_5EA1_0000_0000_0000_0000_0000_0000_0000_0000_0000_0000_0000_0000_0000_0001;

  // A session key as delivered by the HSM (sealed on the wire, see enc_engine).
  typedef struct packed {
    logic [255:0] key;
    logic [95:0]  nonce;
  } session_key_t;

endpackage
