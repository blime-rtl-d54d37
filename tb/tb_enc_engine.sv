// tb_enc_engine -- data import (blnd) and export (rblnd) through the encryption engine.
//
// Keys for clients 5 and 9 are delivered sealed over the key port; the slot contents
// must equal the unsealed keys, and a key sent unsealed must not arrive as sent.
// A plaintext buffer of 13 words (one full and one partial 64-byte block) is encrypted
// by the testbench with the reference ChaCha20 and placed in a tagged word memory as
// unblinded ciphertext.
//   * blnd must leave the plaintext there, every word tagged 5;
//   * rblnd with client 5 must leave plaintext XOR keystream(new counter), tag 0;
//   * blnd of blinded words, rblnd of another client's words, an empty key slot and
//     tag 0 must all fault without changing memory;
//   * the first write of a block must come no earlier than 19 cycles after the block's
//     keystream was requested (the ChaCha20 pipeline latency).
// The memory model answers each access after a random 0-2 cycle delay.
module tb_enc_engine;
  import blime_pkg::*;
  import chacha_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         key_wr_ready;
  logic [95:0]  key_wr_seal_nonce;
  logic         key_wr_valid, cmd_valid, cmd_ready, cmd_blnd, done_valid, done_fault;
  tag_t         key_wr_slot, cmd_tag;
  session_key_t key_wr_data;
  word_t        cmd_addr, cmd_len;
  logic [31:0]  cmd_counter;
  logic         mem_req_valid, mem_resp_valid, mem_resp_fault;
  dc_req_t      mem_req;
  blinded_t     mem_resp_rdata;

  enc_engine dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // tagged word memory, 64 words at byte address 0x1000
  blinded_t mem [64];
  int       wait_cnt;
  int       first_write_cycle;
  assign mem_resp_valid = mem_req_valid && (wait_cnt == 0);
  always_comb begin
    int i;
    i = int'((mem_req.addr - 64'h1000) >> 3);
    mem_resp_rdata = mem[i[5:0]];
  end
  assign mem_resp_fault = 1'b0;
  always @(posedge clk) begin
    if (mem_req_valid) begin
      if (wait_cnt == 0) begin
        wait_cnt <= $urandom_range(0, 2);
        if (mem_req.we) begin
          mem[(mem_req.addr - 64'h1000) >> 3] <= mem_req.wdata;
          if (first_write_cycle < 0) first_write_cycle <= cycle;
        end
      end else wait_cnt <= wait_cnt - 1;
    end
  end

  session_key_t k5, k9;

  // seal a session key for the key port: key and nonce XOR ChaCha20 block 0 under the
  // sealing key and a fresh seal nonce; wait until the engine accepts it
  task automatic deliver(tag_t slot, session_key_t k);
    logic [95:0]  sn;
    logic [511:0] blk;
    sn  = {$urandom, $urandom, $urandom};
    blk = ref_block(SEAL_KEY_DEFAULT, sn, 32'd0);
    key_wr_valid = 1; key_wr_slot = slot; key_wr_seal_nonce = sn;
    key_wr_data  = k ^ blk[$bits(session_key_t)-1:0];
    #1;
    while (!key_wr_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    key_wr_valid = 0;
  endtask

  task automatic run(logic blnd, word_t addr, word_t len, tag_t tag, logic [31:0] ctr,
                     logic exp_fault, string what);
    int start;
    @(negedge clk);
    cmd_valid = 1; cmd_blnd = blnd; cmd_addr = addr; cmd_len = len; cmd_tag = tag;
    cmd_counter = ctr;
    while (!cmd_ready) @(negedge clk);
    start = cycle;
    first_write_cycle = -1;
    @(negedge clk);
    cmd_valid = 0;
    while (!done_valid) @(negedge clk);
    checks++;
    if (done_fault !== exp_fault) begin
      failures++;
      $display("FAIL %s: fault=%b want %b", what, done_fault, exp_fault);
    end
    if (!exp_fault) begin
      checks++;
      if (first_write_cycle - start < 19) begin
        failures++;
        $display("FAIL %s: first write %0d cycles after start", what, first_write_cycle - start);
      end
    end
  endtask

  task automatic expect_mem(int n, logic [63:0] want [13], tag_t t, string what);
    for (int i = 0; i < n; i++) begin
      checks++;
      if (mem[i] !== '{tag: t, val: want[i]}) begin
        failures++;
        $display("FAIL %s word %0d: %h/%h want %h/%h", what, i, mem[i].tag, mem[i].val, t, want[i]);
      end
    end
  endtask

  initial begin
    logic [63:0] pt [13], ct [13], ex [13];
    key_wr_valid = 0; key_wr_slot = '0; key_wr_data = '0; key_wr_seal_nonce = '0; cmd_valid = 0; cmd_blnd = 0;
    cmd_addr = '0; cmd_len = '0; cmd_tag = '0; cmd_counter = '0; wait_cnt = 0;
    first_write_cycle = -1;
    k5 = '{key: {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom},
           nonce: {$urandom, $urandom, $urandom}};
    k9 = '{key: {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom},
           nonce: {$urandom, $urandom, $urandom}};
    for (int i = 0; i < 64; i++) mem[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    deliver(8'd5, k5);
    deliver(8'd9, k9);
    // a key sent without sealing is opened into something else
    key_wr_valid = 1; key_wr_slot = 8'd11; key_wr_data = k9; key_wr_seal_nonce = '0;
    @(negedge clk);
    key_wr_valid = 0;
    repeat (30) @(negedge clk);
    checks++;
    if (dut.keys[5] !== k5 || dut.keys[9] !== k9 || !dut.key_valid[5] || !dut.key_valid[9]) begin
      failures++; $display("FAIL sealed keys were not opened correctly");
    end
    checks++;
    if (dut.keys[11] === k9) begin failures++; $display("FAIL unsealed key stored as sent"); end

    // client encrypts with counter 7
    for (int i = 0; i < 13; i++) begin
      pt[i] = {$urandom, $urandom};
      ct[i] = pt[i] ^ ks_word(k5.key, k5.nonce, 32'd7, i);
      mem[i] = '{tag: TAG_CLEAR, val: ct[i]};
    end
    run(1, 64'h1000, 64'd13, 8'd5, 32'd7, 1'b0, "blnd");
    expect_mem(13, pt, 8'd5, "after blnd");
    checks++;
    if (mem[13] !== '0) begin failures++; $display("FAIL blnd wrote past the buffer"); end

    // refusals leave memory alone
    run(1, 64'h1000, 64'd13, 8'd5, 32'd7, 1'b1, "blnd of blinded data");
    expect_mem(13, pt, 8'd5, "after refused blnd");
    run(0, 64'h1000, 64'd13, 8'd9, 32'd1, 1'b1, "rblnd with foreign key");
    expect_mem(13, pt, 8'd5, "after refused rblnd");
    run(0, 64'h1000, 64'd13, 8'd7, 32'd1, 1'b1, "empty key slot");
    run(0, 64'h1000, 64'd13, 8'd0, 32'd1, 1'b1, "tag zero");
    expect_mem(13, pt, 8'd5, "after refused commands");

    // export with counter 100
    run(0, 64'h1000, 64'd13, 8'd5, 32'd100, 1'b0, "rblnd");
    for (int i = 0; i < 13; i++) ex[i] = pt[i] ^ ks_word(k5.key, k5.nonce, 32'd100, i);
    expect_mem(13, ex, TAG_CLEAR, "after rblnd");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
