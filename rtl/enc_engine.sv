// enc_engine -- the encryption engine: session-key store plus the atomic data-import
// (blnd: decrypt-and-blind) and data-export (rblnd: encrypt-and-unblind) operations.
//
// Key store: one slot per client tag (1 .. 2^TAG_W-1). The HSM delivers a session key and
// nonce for the slot named by the client's tag over the key port; software never sees
// the keys. Slot 0 does not exist, since tag 0 means "not blinded". The delivery is
// sealed: key_wr_data is the key and nonce XOR the first 352 bits of ChaCha20 block 0
// under SEAL_KEY (a key shared with the HSM) and key_wr_seal_nonce. The engine takes one
// sealed key at a time (key_wr_valid/key_wr_ready), waits until no command is running,
// spends one 19-cycle keystream block opening it and then fills the slot; a waiting
// sealed key delays the next command.
//
// Operation on a buffer of cmd_len 64-bit words at cmd_addr, processed in place in
// 64-byte blocks, block k using ChaCha20 keystream block (cmd_counter + k):
//   1. start the keystream for the block in chacha20_core (19 cycles),
//   2. read the block's (up to 8) words through the data-cache port,
//   3. check their tags: blnd refuses any blinded input word; rblnd refuses a word
//      whose tag is neither zero nor the command's client tag, so blinded data can only
//      leave encrypted under the key of the client it came from,
//   4. if all words passed, write each word XOR keystream back, tagged with the client
//      tag (blnd) or with zero (rblnd).
// A refused block is not written, and the command ends with done_fault set; blocks
// before it stay converted. A command naming an empty key slot or tag 0 ends with a
// fault before touching memory. The core is stalled for the whole command, so no
// software ever observes a half-converted block.
//
// Interface: cmd_valid/cmd_ready handshake; done_valid pulses for one cycle at the end.
// The memory port follows the data-cache protocol: mem_req_valid and mem_req are held
// until mem_resp_valid (which may arrive in the same cycle). Timing per full block: 8
// read accesses, a wait until the 19-cycle keystream is ready, 8 write accesses.
// The operations, the tag checks and the 19-cycle ChaCha20 are the paper's; the
// per-block atomicity, in-place buffers, counter operand, per-slot nonce are this
// design's choices. Sealing with a key shared by the HSM and the engine follows the
// paper ("a sealing key shared by the two components"); using ChaCha20 for it, the
// seal nonce and the default SEAL_KEY value (not mentioned) are this design's choices.
module enc_engine
  import blime_pkg::*;
#(
  // sealing key shared with the HSM, embedded by the system integrator
  parameter logic [255:0] SEAL_KEY = SEAL_KEY_DEFAULT
) (
  input  logic         clk,
  input  logic         rst_n,
  // key delivery from the HSM
  input  logic         key_wr_valid,
  output logic         key_wr_ready,
  input  tag_t         key_wr_slot,
  input  session_key_t key_wr_data,        // sealed: key and nonce XOR sealing keystream
  input  logic [95:0]  key_wr_seal_nonce,
  // command from the core
  input  logic         cmd_valid,
  output logic         cmd_ready,
  input  logic         cmd_blnd,      // 1: blnd (import), 0: rblnd (export)
  input  word_t        cmd_addr,
  input  word_t        cmd_len,       // number of 64-bit words
  input  tag_t         cmd_tag,       // client tag / key slot
  input  logic [31:0]  cmd_counter,   // first keystream block counter
  output logic         done_valid,
  output logic         done_fault,
  // data-cache port
  output logic         mem_req_valid,
  output dc_req_t      mem_req,
  input  logic         mem_resp_valid,
  input  blinded_t     mem_resp_rdata,
  input  logic         mem_resp_fault
);

  localparam int NSLOTS = 1 << TAG_W;

  typedef enum logic [2:0] {S_IDLE, S_START, S_READ, S_WAIT, S_WRITE, S_DONE,
                            S_USTART, S_UWAIT} state_e;

  session_key_t keys      [NSLOTS];
  logic         key_valid [NSLOTS];

  state_e       state;
  logic         op_blnd;
  tag_t         op_tag;
  word_t        blk_addr, remaining;
  logic [31:0]  counter;
  logic [3:0]   idx, nwords;
  word_t        buf_q [LINE_WORDS];
  logic [511:0] ks_q;
  logic         ks_have;
  logic         bad;
  logic         fault_q;

  // a sealed key waiting to be opened
  logic         kp_valid;
  tag_t         kp_slot;
  session_key_t kp_sealed;
  logic [95:0]  kp_nonce;
  logic         unsealing;

  // keystream generator
  logic         cc_in_valid, cc_out_valid;
  logic [511:0] cc_ks;
  logic [0:0]   cc_meta_unused;

  chacha20_core #(.ROUNDS(20), .META_W(1)) u_chacha (
    .clk, .rst_n,
    .in_valid  (cc_in_valid),
    .in_key    (unsealing ? SEAL_KEY : keys[op_tag].key),
    .in_nonce  (unsealing ? kp_nonce : keys[op_tag].nonce),
    .in_counter(unsealing ? 32'd0    : counter),
    .in_meta   (1'b0),
    .out_valid (cc_out_valid),
    .out_ks    (cc_ks),
    .out_meta  (cc_meta_unused)
  );

  assign unsealing    = (state == S_USTART) || (state == S_UWAIT);
  assign cc_in_valid = (state == S_START) || (state == S_USTART);
  assign cmd_ready   = (state == S_IDLE) && !kp_valid;
  assign key_wr_ready = !kp_valid;

  // key store: a sealed key is held until the engine is idle, then opened with the
  // sealing keystream (block 0 under SEAL_KEY and the delivered nonce) and stored
  logic key_store;
  assign key_store = (state == S_UWAIT) && cc_out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NSLOTS; i++) key_valid[i] <= 1'b0;
      kp_valid  <= 1'b0;
      kp_slot   <= TAG_CLEAR;
      kp_sealed <= '0;
      kp_nonce  <= '0;
    end else begin
      if (key_wr_valid && key_wr_ready && key_wr_slot != TAG_CLEAR) begin
        kp_valid  <= 1'b1;
        kp_slot   <= key_wr_slot;
        kp_sealed <= key_wr_data;
        kp_nonce  <= key_wr_seal_nonce;
      end
      if (key_store) begin
        key_valid[kp_slot] <= 1'b1;
        kp_valid           <= 1'b0;
      end
    end
  end
  always_ff @(posedge clk) begin
    if (key_store) keys[kp_slot] <= kp_sealed ^ cc_ks[$bits(session_key_t)-1:0];
  end

  // memory requests
  always_comb begin
    mem_req_valid      = (state == S_READ) || (state == S_WRITE);
    mem_req.we         = (state == S_WRITE);
    mem_req.byte_op    = 1'b0;
    mem_req.addr       = blk_addr + word_t'({idx, 3'b000});
    mem_req.wdata.val  = buf_q[idx[2:0]] ^ ks_q[64*idx[2:0] +: 64];
    mem_req.wdata.tag  = op_blnd ? op_tag : TAG_CLEAR;
  end

  // a word read for this command is acceptable only if its tag passes the check
  always_comb begin
    if (op_blnd) bad = (mem_resp_rdata.tag != TAG_CLEAR);
    else         bad = (mem_resp_rdata.tag != TAG_CLEAR) && (mem_resp_rdata.tag != op_tag);
    bad = bad || mem_resp_fault;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      op_blnd   <= 1'b0;
      op_tag    <= TAG_CLEAR;
      blk_addr  <= '0;
      remaining <= '0;
      counter   <= '0;
      idx       <= '0;
      nwords    <= '0;
      ks_have   <= 1'b0;
      ks_q      <= '0;
      fault_q   <= 1'b0;
      for (int i = 0; i < LINE_WORDS; i++) buf_q[i] <= '0;
    end else begin
      if (cc_out_valid && !unsealing) begin
        ks_q    <= cc_ks;
        ks_have <= 1'b1;
      end
      unique case (state)
        S_IDLE: begin
          fault_q <= 1'b0;
          if (kp_valid) begin
            state <= S_USTART;
          end else if (cmd_valid) begin
            op_blnd   <= cmd_blnd;
            op_tag    <= cmd_tag;
            blk_addr  <= cmd_addr;
            remaining <= cmd_len;
            counter   <= cmd_counter;
            if (cmd_tag == TAG_CLEAR || !key_valid[cmd_tag]) begin
              fault_q <= 1'b1;
              state   <= S_DONE;
            end else if (cmd_len == '0) begin
              state <= S_DONE;
            end else begin
              state <= S_START;
            end
          end
        end
        S_START: begin
          idx     <= '0;
          nwords  <= (remaining >= word_t'(LINE_WORDS)) ? 4'(LINE_WORDS) : 4'(remaining);
          ks_have <= 1'b0;
          state   <= S_READ;
        end
        S_READ: begin
          if (mem_resp_valid) begin
            buf_q[idx[2:0]] <= mem_resp_rdata.val;
            if (bad) begin
              fault_q <= 1'b1;
              state   <= S_DONE;
            end else if (idx == nwords - 4'd1) begin
              idx   <= '0;
              state <= S_WAIT;
            end else begin
              idx <= idx + 4'd1;
            end
          end
        end
        S_WAIT: begin
          if (ks_have || cc_out_valid) state <= S_WRITE;
        end
        S_WRITE: begin
          if (mem_resp_valid) begin
            if (idx == nwords - 4'd1) begin
              remaining <= remaining - word_t'(nwords);
              blk_addr  <= blk_addr + word_t'(8 * LINE_WORDS);
              counter   <= counter + 32'd1;
              state     <= (remaining == word_t'(nwords)) ? S_DONE : S_START;
            end else begin
              idx <= idx + 4'd1;
            end
          end
        end
        S_DONE: state <= S_IDLE;
        S_USTART: state <= S_UWAIT;
        S_UWAIT: if (cc_out_valid) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign done_valid = (state == S_DONE);
  assign done_fault = fault_q;

endmodule
