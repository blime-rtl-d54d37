// tb_blime_top -- end-to-end run of the whole subsystem at its default parameters:
// the data-oblivious matrix multiplication C = A x B of two blinded N x N matrices.
//
// The testbench plays the client and the HSM: it delivers the sealed session key of client 5,
// encrypts A and B with ChaCha20 (block counters 0x100 and 0x200) and writes the
// ciphertext into main memory as ordinary unblinded data. The program then
//   1. imports A and B with blnd (they become blinded, tag 5),
//   2. multiplies them with three nested loops whose control flow and addresses depend
//      only on N (so the policy never fires), accumulating into C,
//   3. exports C with rblnd (counter 0x300) and writes the ciphertext words to the
//      peripheral port, where the testbench decrypts them and compares with its own
//      product of the plaintext matrices,
//   4. reads a word of the software-inaccessible tag region (must read as zero) and
//      computes XOR of a blinded register with itself (must give an unblinded zero).
// A second run imports A and then tries to store a blinded word to the peripheral
// port: it must fault with no peripheral write. A third run branches into a line of
// memory whose tags mark it blinded: the instruction cache must zero it on refill and
// the core must fault with the blinded-instruction cause. Two more runs take FindMax over the
// imported matrix A: the predicated form must leave the blinded maximum in a register,
// the form with an if must fault on its blinded branch condition. Programs are copied
// into main memory from address 0 before each run and fetched through the caches.
// The page-table-walker port is driven with a blinded and an unblinded entry.
// Each mechanism is counted and must occur at least once: data-cache misses (core
// stalls), dirty write-backs, L2 misses and L2 write-backs (C lies 256 KiB above A, so
// the two share L2 sets), tag beats on the memory bus, blnd, rblnd, a policy fault,
// a refused tag-region access, a zeroed PTE and the XOR-with-itself untainting.
module tb_blime_top;
  import blime_pkg::*;
  import isa_asm_pkg::*;
  import chacha_ref_pkg::*;

  localparam int    N     = 8;
  localparam word_t A_ADR = 64'h1_0000;
  localparam word_t B_ADR = 64'h1_4000;   // same cache index as A: conflict misses
  localparam word_t C_ADR = 64'h5_0000;   // 256 KiB above A: same L2 set, L2 write-backs

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  word_t        periph_addr, periph_wdata, periph_rdata, pc, fault_pc, tlb_fill_pte;
  tag_t         key_wr_slot;
  logic         mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t     mem_req;
  word_t        mem_resp_rdata;
  logic         key_wr_valid, key_wr_ready;
  logic [95:0]  key_wr_seal_nonce;
  session_key_t key_wr_data;
  logic         periph_wr_valid, periph_rd_valid;
  logic         ptw_valid, tlb_fill_valid, pte_was_blinded;
  blinded_t     ptw_pte;
  logic         halted, retire, fault_valid, dcache_miss, tag_region_hit, data_beat, tag_beat;
  logic         l2_miss, l2_writeback, icache_miss, icache_zeroed;
  fault_cause_e fault_cause;

  blime_top dut (.*);

  main_mem_model #(.LATENCY(6), .STALL_PCT(10)) mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .resp_valid(mem_resp_valid), .resp_rdata(mem_resp_rdata));

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // instruction memory
  // program image, copied into main memory from byte address 0 before each run
  logic [31:0] imem [256];
  task automatic load_program();
    for (int w = 0; w < 128; w++) mem.poke(word_t'(8 * w), {imem[2*w+1], imem[2*w]});
  endtask
  assign periph_rdata = '0;

  // mechanism counters
  int n_icmiss, n_iczero, n_l2miss, n_l2wb, n_memxfer, n_miss, n_wb, n_tagbeat, n_blnd, n_rblnd, n_fault, n_tagreg, n_pte0, n_pwr, n_cycles;
  word_t pout [$];
  always @(posedge clk) if (rst_n) begin
    n_cycles++;
    if (dcache_miss) n_miss++;
    if (l2_miss) n_l2miss++;
    if (icache_miss) n_icmiss++;
    if (icache_zeroed) n_iczero++;
    if (l2_writeback) n_l2wb++;
    if (dut.m_resp_valid) n_memxfer++;
    if (dut.u_dcache.l_req_valid && dut.u_dcache.l_req_write && dut.u_dcache.l_resp_valid) n_wb++;
    if (tag_beat) n_tagbeat++;
    if (dut.u_engine.cmd_valid && dut.u_engine.cmd_ready) begin
      if (dut.u_engine.cmd_blnd) n_blnd++; else n_rblnd++;
    end
    if (fault_valid) n_fault++;
    if (tag_region_hit) n_tagreg++;
    if (pte_was_blinded && tlb_fill_valid && tlb_fill_pte == '0) n_pte0++;
    if (periph_wr_valid) begin n_pwr++; pout.push_back(periph_wdata); end
  end

  task automatic check(bit c, string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  // ---- tiny assembler with patchable label loads
  int ep;
  task automatic emit(logic [31:0] w); imem[ep] = w; ep++; endtask

  // load an arbitrary 64-bit clear constant 16 bits at a time (MUL by 2^16, ADD);
  // rtmp and rp are scratch registers
  task automatic li64(int rd, int rtmp, int rp, word_t v);
    // v = ((v >> 32) * 2^32) + ((v >> 16) & 0xffff) * 2^16 + (v & 0xffff)
    emit(i_li(rd, int'(v[63:48])));   // top 16 bits (sign-extended if set)
    emit(i_li(rtmp, 65536));
    emit(i_mul(rd, rd, rtmp));
    emit(i_li(rp, int'({7'h0, v[47:32]})));
    emit(i_add(rd, rd, rp));
    emit(i_mul(rd, rd, rtmp));
    emit(i_li(rp, int'({7'h0, v[31:16]})));
    emit(i_add(rd, rd, rp));
    emit(i_mul(rd, rd, rtmp));
    emit(i_li(rp, int'({7'h0, v[15:0]})));
    emit(i_add(rd, rd, rp));
  endtask

  session_key_t k5;
  logic [63:0] A [N*N], B [N*N], Cref [N*N];

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

  task automatic do_reset();
    rst_n = 0;
    load_program();
    n_l2miss = 0; n_l2wb = 0; n_memxfer = 0; n_icmiss = 0; n_iczero = 0;
    n_miss = 0; n_wb = 0; n_tagbeat = 0; n_blnd = 0; n_rblnd = 0; n_fault = 0;
    n_tagreg = 0; n_pwr = 0; n_cycles = 0;
    pout.delete();
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    deliver(8'd5, k5);
  endtask

  task automatic run_to_halt(int limit);
    int n;
    n = 0;
    while (!halted && n < limit) begin @(negedge clk); n++; end
    check(halted, "program reached HALT");
  endtask

  int L_I, L_J, L_K, L_EK, L_EJ, L_EI, L_S, L_ES;
  int P_I, P_J, P_K, P_EK, P_EJ, P_EI, P_S, P_ES;
  int L_FL, L_FE, L_FS, P_FL, P_FE, P_FS;
  logic signed [63:0] mx;

  // FindMax over the N*N words of A, imported with blnd; the result stays in r2.
  // oblivious = 1: the predicated form, max = p*a[i] + (1-p)*max with p = (max < a[i]);
  // oblivious = 0: the form with an if, which must fault on its blinded branch.
  task automatic findmax_program(bit oblivious);
    for (int i = 0; i < 256; i++) imem[i] = i_halt();
    ep = 1;
    emit(i_li(1, int'(A_ADR))); emit(i_li(6, N*N)); emit(i_li(7, 'h100));
    emit(i_blnd(7, 1, 6, 5));
    emit(i_li(2, -1)); emit(i_li(3, 1)); emit(i_li(5, 8)); emit(i_li(28, -1));
    emit(i_add(10, 6, 0)); emit(i_add(11, 1, 0));
    P_FE = ep; emit(i_li(21, 0));
    P_FL = ep; emit(i_li(22, 0));
    P_FS = ep; emit(i_li(23, 0));
    L_FL = ep; emit(i_bz(10, 21));
    emit(i_ld(12, 11, 0));                       // a[i]
    emit(i_slt(13, 2, 12));                      // p = max < a[i]
    if (oblivious) begin
      emit(i_mul(14, 13, 12));                   // p * a[i]
      emit(i_sub(15, 3, 13));                    // !p
      emit(i_mul(16, 15, 2));                    // !p * max
      emit(i_add(2, 14, 16));                    // one of the two is zero: add = or
    end else begin
      emit(i_bz(13, 23));                        // if !(a[i] > max) skip
      emit(i_add(2, 12, 0));
    end
    L_FS = ep; emit(i_add(11, 11, 5)); emit(i_add(10, 10, 28));
    emit(i_bz(0, 22));
    L_FE = ep; emit(i_halt());
    imem[P_FE] = i_li(21, L_FE); imem[P_FL] = i_li(22, L_FL); imem[P_FS] = i_li(23, L_FS);
    for (int i = 0; i < N*N; i++) begin
      mem.poke(A_ADR + 8*i, A[i] ^ ks_word(k5.key, k5.nonce, 32'h100, i));
      mem.poke(64'h1_C000_0000 + ((A_ADR + 8*i) / 64) * 8, '0);
    end
  endtask

  initial begin
    key_wr_valid = 0; key_wr_slot = '0; key_wr_data = '0; key_wr_seal_nonce = '0; ptw_valid = 0; ptw_pte = '0;
    n_pte0 = 0;
    k5 = '{key: {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom},
           nonce: {$urandom, $urandom, $urandom}};
    for (int i = 0; i < N*N; i++) begin
      A[i] = 64'($urandom_range(0, 100000)) - 64'd50000;
      B[i] = 64'($urandom_range(0, 100000)) - 64'd50000;
    end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        Cref[i*N+j] = '0;
        for (int k = 0; k < N; k++) Cref[i*N+j] += A[i*N+k] * B[k*N+j];
      end
    for (int i = 0; i < N*N; i++) begin
      mem.poke(A_ADR + 8*i, A[i] ^ ks_word(k5.key, k5.nonce, 32'h100, i));
      mem.poke(B_ADR + 8*i, B[i] ^ ks_word(k5.key, k5.nonce, 32'h200, i));
      mem.poke(C_ADR + 8*i, '0);
    end

    // ---------------- program 1: matrix multiplication
    for (int i = 0; i < 256; i++) imem[i] = i_halt();
    ep = 1;
    emit(i_li(1, int'(A_ADR))); emit(i_li(2, int'(B_ADR))); emit(i_li(3, int'(C_ADR)));
    emit(i_li(4, N)); emit(i_li(5, 8)); emit(i_mul(6, 4, 4)); emit(i_li(28, -1));
    emit(i_mul(13, 4, 5));                       // row stride in bytes
    P_EI = ep; emit(i_li(21, 0));                // label registers, patched below
    P_EJ = ep; emit(i_li(22, 0));
    P_EK = ep; emit(i_li(23, 0));
    P_K  = ep; emit(i_li(27, 0));
    P_J  = ep; emit(i_li(29, 0));
    P_I  = ep; emit(i_li(30, 0));
    emit(i_li(7, 'h100)); emit(i_blnd(7, 1, 6, 5));
    emit(i_li(7, 'h200)); emit(i_blnd(7, 2, 6, 5));
    emit(i_add(10, 4, 0)); emit(i_add(11, 1, 0)); emit(i_add(12, 3, 0));
    L_I = ep; emit(i_bz(10, 21));
    emit(i_add(14, 4, 0)); emit(i_add(15, 2, 0)); emit(i_add(16, 12, 0));
    L_J = ep; emit(i_bz(14, 22));
    emit(i_ld(17, 16, 0));
    emit(i_add(18, 4, 0)); emit(i_add(19, 11, 0)); emit(i_add(20, 15, 0));
    L_K = ep; emit(i_bz(18, 23));
    emit(i_ld(24, 19, 0)); emit(i_ld(25, 20, 0));
    emit(i_mul(26, 24, 25)); emit(i_add(17, 17, 26));
    emit(i_add(19, 19, 5)); emit(i_add(20, 20, 13)); emit(i_add(18, 18, 28));
    emit(i_bz(0, 27));
    L_EK = ep; emit(i_st(16, 17, 0));
    emit(i_add(16, 16, 5)); emit(i_add(15, 15, 5)); emit(i_add(14, 14, 28));
    emit(i_bz(0, 29));
    L_EJ = ep; emit(i_add(11, 11, 13)); emit(i_add(12, 12, 13)); emit(i_add(10, 10, 28));
    emit(i_bz(0, 30));
    L_EI = ep;
    emit(i_xor(9, 24, 24));                      // blinded ^ itself -> clear zero
    emit(i_li(7, 'h300)); emit(i_rblnd(7, 3, 6, 5));
    li64(8, 31, 30, 64'hFFFF_0000_0000_0000);        // peripheral port address
    li64(9, 31, 30, 64'h0000_0001_C000_0040);        // a word in the tag region
    emit(i_ld(9, 9, 0));                         // reads as zero
    P_S  = ep; emit(i_li(21, 0));
    P_ES = ep; emit(i_li(22, 0));
    emit(i_add(10, 6, 0)); emit(i_add(11, 3, 0));
    L_S = ep; emit(i_bz(10, 22));
    emit(i_ld(12, 11, 0)); emit(i_st(8, 12, 0));
    emit(i_add(11, 11, 5)); emit(i_add(10, 10, 28));
    emit(i_bz(0, 21));
    L_ES = ep; emit(i_halt());
    imem[P_EI] = i_li(21, L_EI); imem[P_EJ] = i_li(22, L_EJ); imem[P_EK] = i_li(23, L_EK);
    imem[P_K]  = i_li(27, L_K);  imem[P_J]  = i_li(29, L_J);  imem[P_I]  = i_li(30, L_I);
    imem[P_S]  = i_li(21, L_S);  imem[P_ES] = i_li(22, L_ES);
    check(ep < 256, "program fits");

    do_reset();
    // page-table walker port: one blinded and one clear entry
    @(negedge clk);
    ptw_valid = 1; ptw_pte = '{tag: 8'd5, val: 64'h0000_0000_1234_5001};
    #1 check(tlb_fill_pte == '0 && pte_was_blinded, "blinded PTE zeroed");
    @(negedge clk);
    ptw_pte = '{tag: 8'd0, val: 64'h0000_0000_1234_5001};
    #1 check(tlb_fill_pte == 64'h0000_0000_1234_5001 && !pte_was_blinded, "clear PTE passes");
    @(negedge clk);
    ptw_valid = 0;

    run_to_halt(1500000);
    check(n_fault == 0, $sformatf("matrix program ran without fault (%0d)", n_fault));
    check(pc == word_t'(L_ES), "stopped at the final HALT");
    check(pout.size() == N*N, $sformatf("%0d result words sent", pout.size()));
    for (int i = 0; i < N*N && i < pout.size(); i++) begin
      logic [63:0] pt;
      pt = pout[i] ^ ks_word(k5.key, k5.nonce, 32'h300, i);
      check(pt == Cref[i], $sformatf("C[%0d] = %0d want %0d", i, $signed(pt), $signed(Cref[i])));
    end
    check(dut.u_core.u_rf.regs[9] == '0, "tag-region word reads as clear zero");
    check(dut.u_core.u_rf.regs[24].tag == 8'd5, "matrix elements were blinded");
    $display("matmul N=%0d: %0d cycles, L1 %0d misses %0d write-backs, L2 %0d misses %0d write-backs, %0d tag beats",
             N, n_cycles, n_miss, n_wb, n_l2miss, n_l2wb, n_tagbeat);
    check(n_miss > 0, "data-cache misses occurred");
    check(n_wb > 0, "dirty write-backs occurred");
    check(n_icmiss > 0, "instruction-cache misses occurred");
    check(n_l2miss > 0, "L2 misses occurred");
    check(n_l2wb > 0, "L2 dirty write-backs occurred");
    check(n_tagbeat == 8 * (n_memxfer - n_tagreg), "each L2 line transfer moved 8 tag beats");
    check(n_blnd == 2, "two blnd commands");
    check(n_rblnd == 1, "one rblnd command");
    check(n_tagreg > 0, "tag-region access refused");
    check(n_pte0 > 0, "blinded PTE zeroed");

    // ---------------- program 2: try to leak a blinded word to the peripheral
    for (int i = 0; i < 256; i++) imem[i] = i_halt();
    ep = 1;
    emit(i_li(1, int'(A_ADR))); emit(i_li(6, N*N)); emit(i_li(7, 'h100));
    emit(i_blnd(7, 1, 6, 5));
    emit(i_ld(2, 1, 0));
    li64(8, 31, 30, 64'hFFFF_0000_0000_0000);
    emit(i_st(8, 2, 0));
    emit(i_halt());
    for (int i = 0; i < N*N; i++) begin
      mem.poke(A_ADR + 8*i, A[i] ^ ks_word(k5.key, k5.nonce, 32'h100, i));
      mem.poke(64'h1_C000_0000 + ((A_ADR + 8*i) / 64) * 8, '0);   // clear its tags again
    end
    do_reset();
    run_to_halt(100000);
    check(n_fault == 1 && dut.u_core.fault_cause == FC_UNBLINDABLE,
          $sformatf("blinded peripheral store faulted (%0d, %s)", n_fault, dut.u_core.fault_cause.name()));
    check(n_pwr == 0, "nothing reached the peripheral");
    check(pc == 0, "fault handler at address 0 reached");

    // ---------------- program 3: jump into a blinded line of memory
    for (int i = 0; i < 256; i++) imem[i] = i_halt();
    ep = 1;
    emit(i_li(1, 64));                 // instruction 64 = byte address 256
    emit(i_bz(0, 1));                  // r0 is zero after reset
    emit(i_halt());
    mem.poke(64'h1_C000_0000 + (256 / 64) * 8, 64'h0505_0505_0505_0505);   // line tagged 5
    do_reset();
    run_to_halt(100000);
    check(n_fault == 1 && dut.u_core.fault_cause == FC_BLINDED_INSTR,
          $sformatf("fetch from blinded memory faulted (%0d, %s)", n_fault, dut.u_core.fault_cause.name()));
    check(n_iczero > 0, "instruction cache zeroed the blinded words on refill");
    check(dut.u_core.fault_pc == 64 && pc == 0, "fault at the blinded instruction, handler reached");
    mem.poke(64'h1_C000_0000 + (256 / 64) * 8, '0);

    // ---------------- programs 4 and 5: FindMax, data-oblivious and with a branch
    mx = -1;
    for (int i = 0; i < N*N; i++) if ($signed(A[i]) > mx) mx = A[i];
    findmax_program(1'b1);
    do_reset();
    run_to_halt(100000);
    check(n_fault == 0, "oblivious FindMax ran without a fault");
    check(dut.u_core.u_rf.regs[2].val == mx && dut.u_core.u_rf.regs[2].tag == 8'd5,
          $sformatf("oblivious FindMax result %0d (tag %0d), expected %0d, blinded",
                    $signed(dut.u_core.u_rf.regs[2].val), dut.u_core.u_rf.regs[2].tag, mx));
    findmax_program(1'b0);
    do_reset();
    run_to_halt(100000);
    check(n_fault == 1 && dut.u_core.fault_cause == FC_BLINDED_PC,
          $sformatf("branching FindMax faulted on its blinded branch (%0d, %s)", n_fault,
                    dut.u_core.fault_cause.name()));
    check(dut.u_core.fault_pc == 64'(L_FL + 3) && pc == 0, "fault at the if, handler reached");

    $display("mechanisms: miss=%0d writeback=%0d tagbeat=%0d blnd=%0d rblnd=%0d fault=%0d tagregion=%0d pte0=%0d",
             n_miss, n_wb, n_tagbeat, n_blnd, n_rblnd, n_fault, n_tagreg, n_pte0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
