// tb_blime_core -- the core's instruction semantics and every policy fault.
//
// Each scenario resets the core, loads a short program (address 0 holds HALT, the
// fault handler), preloads a tagged data memory and runs to HALT. The data memory
// model answers after a random 0-2 cycle delay and applies the partial-write rule on
// its own; a stub engine accepts blnd/rblnd commands and refuses client tag 3.
// Scenarios: tag propagation through LOAD/ADD/STORE, the zero-result exceptions, a
// counting loop with BZ, byte load/store; then one scenario per fault cause (blinded
// branch condition, blinded branch target, blinded load address, mixed clients in the
// ALU, blinded store to a peripheral, partial write into another client's granule,
// blinded instruction word, illegal opcode, blinded blnd operand, engine refusal),
// each checking the cause, the faulting pc, that pc went to 0, and that the faulting
// instruction wrote nothing. Instruction fetch is stalled at random one cycle in four.
module tb_blime_core;
  import blime_pkg::*;
  import isa_asm_pkg::*;

  localparam word_t UB = 64'hFFFF_0000_0000_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  word_t        imem_addr, periph_addr, periph_wdata, periph_rdata, pc, fault_pc;
  logic [31:0]  imem_instr;
  tag_t         imem_tag;
  logic         dc_req_valid, dc_resp_valid, dc_resp_fault;
  dc_req_t      dc_req;
  blinded_t     dc_resp_rdata;
  logic         periph_wr_valid, periph_rd_valid;
  logic         eng_cmd_valid, eng_cmd_ready, eng_cmd_blnd, eng_done_valid, eng_done_fault;
  word_t        eng_cmd_addr, eng_cmd_len;
  tag_t         eng_cmd_tag;
  logic [31:0]  eng_cmd_counter;
  logic         eng_active, halted, retire, fault_valid;
  fault_cause_e fault_cause;

  blime_core #(.RESET_PC(64'd1), .UNBLINDABLE_BASE(UB)) dut (.*);

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // instruction memory
  logic [31:0] imem [64];
  tag_t        itag [64];
  assign imem_instr = imem[imem_addr[5:0]];
  assign imem_tag   = itag[imem_addr[5:0]];

  // instruction fetch stalls one cycle in four, as on instruction-cache misses
  logic imem_ready = 1'b0;
  always @(negedge clk) imem_ready <= ($urandom_range(0, 3) != 0);

  // data memory: 64 words at 0x100, one tag per word, partial-write rule
  blinded_t dmem [64];
  int       dwait;
  int       di;
  assign di = int'((dc_req.addr - 64'h100) >> 3) & 63;
  always_comb begin
    dc_resp_valid = dc_req_valid && (dwait == 0);
    dc_resp_rdata = '0;
    dc_resp_fault = 1'b0;
    if (dc_req.we) begin
      dc_resp_fault = dc_req.byte_op && dc_req.wdata.tag != 0 && dmem[di].tag != 0 &&
                      dc_req.wdata.tag != dmem[di].tag;
    end else if (dc_req.byte_op) begin
      dc_resp_rdata = '{tag: dmem[di].tag, val: {56'h0, dmem[di].val[8*dc_req.addr[2:0] +: 8]}};
    end else begin
      dc_resp_rdata = dmem[di];
    end
  end
  always @(posedge clk) begin
    if (dc_req_valid) begin
      if (dwait == 0) begin
        dwait <= $urandom_range(0, 2);
        if (dc_req.we && !dc_resp_fault) begin
          if (dc_req.byte_op) begin
            dmem[di].val[8*dc_req.addr[2:0] +: 8] <= dc_req.wdata.val[7:0];
            if (dc_req.wdata.tag != 0) dmem[di].tag <= dc_req.wdata.tag;
          end else dmem[di] <= dc_req.wdata;
        end
      end else dwait <= dwait - 1;
    end
  end

  // peripheral and engine stubs
  int    pwrites;
  word_t plast;
  assign periph_rdata = 64'h0000_0000_0000_0042;
  always @(posedge clk) if (periph_wr_valid) begin pwrites++; plast = periph_wdata; end

  int          ecmds, ecount;
  logic        ebusy;
  tag_t        etag;
  word_t       eaddr, elen;
  logic [31:0] ectr;
  assign eng_cmd_ready = !ebusy;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ebusy <= 0; eng_done_valid <= 0; eng_done_fault <= 0; ecount <= 0;
    end else begin
      eng_done_valid <= 0;
      if (eng_cmd_valid && !ebusy) begin
        ebusy <= 1; ecount <= 5; ecmds++;
        etag <= eng_cmd_tag; eaddr <= eng_cmd_addr; elen <= eng_cmd_len; ectr <= eng_cmd_counter;
      end else if (ebusy) begin
        if (ecount == 0) begin
          ebusy <= 0; eng_done_valid <= 1; eng_done_fault <= (etag == 8'd3);
        end else ecount <= ecount - 1;
      end
    end
  end

  int nfaults;
  fault_cause_e last_cause;
  word_t last_fpc;
  always @(posedge clk) if (rst_n && fault_valid) begin nfaults++; last_cause = fault_cause; last_fpc = fault_pc; end

  task automatic check(bit c, string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic clear_mem();
    for (int i = 0; i < 64; i++) begin imem[i] = i_halt(); itag[i] = '0; dmem[i] = '0; end
  endtask

  task automatic run();
    int n;
    rst_n = 0; nfaults = 0; pwrites = 0; ecmds = 0; dwait = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    n = 0;
    while (!halted && n < 2000) begin @(negedge clk); n++; end
    check(halted, "program reached HALT");
  endtask

  function automatic blinded_t R(int i); return dut.u_rf.regs[i]; endfunction

  // run a one-fault program and check where it stopped
  task automatic expect_fault(fault_cause_e c, word_t fpc, int rd, string what);
    run();
    check(nfaults == 1, $sformatf("%s: one fault (saw %0d)", what, nfaults));
    check(last_cause == c, $sformatf("%s: cause %s want %s", what, last_cause.name(), c.name()));
    check(last_fpc == fpc, $sformatf("%s: fault pc %0d want %0d", what, last_fpc, fpc));
    check(pc == 0, $sformatf("%s: halted in the handler at 0", what));
    if (rd >= 0) check(R(rd) == '0, $sformatf("%s: destination not written", what));
  endtask

  initial begin
    pwrites = 0; ecmds = 0; nfaults = 0; dwait = 0;

    // 1. propagation, exceptions, loop
    clear_mem();
    dmem[0] = '{tag: 8'd5, val: 64'd1000};
    dmem[1] = '{tag: 8'd0, val: 64'd3};
    imem[1]  = i_li(1, 'h100);        // r1 = buffer
    imem[2]  = i_ld(2, 1, 0);         // r2 = blinded 1000 (tag 5)
    imem[3]  = i_ld(3, 1, 8);         // r3 = 3
    imem[4]  = i_add(4, 2, 3);        // r4 = 1003 tag 5
    imem[5]  = i_st(1, 4, 16);        // mem[0x110] = r4
    imem[6]  = i_xor(5, 2, 2);        // r5 = clear 0
    imem[7]  = i_mul(6, 2, 0);        // r0 is clear 0 -> r6 clear 0
    imem[8]  = i_li(7, 14);           // loop exit target
    imem[9]  = i_li(8, -1);           // r8 = -1
    imem[10] = i_li(20, 11);          // loop head
    imem[11] = i_bz(3, 7);            // loop: if r3 == 0 goto 14
    imem[12] = i_add(3, 3, 8);        // r3--
    imem[13] = i_bz(0, 20);           // r0 == 0: back to 11
    imem[14] = i_ld(9, 1, 17, 1);     // byte load of mem[0x111] (second byte of 1003)
    imem[15] = i_li(10, 'h7f);
    imem[16] = i_st(1, 10, 24, 1);    // byte store 0x7f to mem[0x118] (clear granule)
    imem[17] = i_mul(11, 2, 2);       // blinded * blinded (same client) -> tag 5
    imem[18] = i_halt();
    run();
    check(nfaults == 0, "scenario 1 without fault");
    check(R(4) == '{tag: 8'd5, val: 64'd1003}, "ADD propagates tag 5");
    check(dmem[2] == '{tag: 8'd5, val: 64'd1003}, "STORE writes value and tag");
    check(R(5) == '0, "XOR r,r gives clear zero");
    check(R(6) == '0, "MUL by clear zero gives clear zero");
    check(R(11) == '{tag: 8'd5, val: 64'd1000000}, "MUL keeps tag");
    check(R(9) == '{tag: 8'd5, val: 64'h03}, "byte load returns byte and granule tag");
    check(dmem[3] == '{tag: 8'd0, val: 64'h7f}, "byte store into clear granule");
    check(R(3) == '0, "loop counted r3 down to 0");
    check(pc == 18, $sformatf("stopped at HALT 18 (pc %0d)", pc));

    // 2. blinded branch condition
    clear_mem();
    dmem[0] = '{tag: 8'd5, val: 64'd0};
    imem[1] = i_li(1, 'h100); imem[2] = i_ld(2, 1, 0); imem[3] = i_li(3, 9);
    imem[4] = i_bz(2, 3);
    expect_fault(FC_BLINDED_PC, 4, -1, "blinded condition");

    // 3. blinded branch target
    clear_mem();
    dmem[0] = '{tag: 8'd5, val: 64'd9};
    imem[1] = i_li(1, 'h100); imem[2] = i_ld(2, 1, 0); imem[3] = i_bz(0, 2);
    expect_fault(FC_BLINDED_PC, 3, -1, "blinded target");

    // 4. blinded load address
    clear_mem();
    dmem[0] = '{tag: 8'd5, val: 64'h108};
    imem[1] = i_li(1, 'h100); imem[2] = i_ld(2, 1, 0); imem[3] = i_ld(4, 2, 0);
    expect_fault(FC_BLINDED_ADDR, 3, 4, "blinded address");

    // 5. two clients in one ALU op
    clear_mem();
    dmem[0] = '{tag: 8'd5, val: 64'd1}; dmem[1] = '{tag: 8'd9, val: 64'd2};
    imem[1] = i_li(1, 'h100); imem[2] = i_ld(2, 1, 0); imem[3] = i_ld(3, 1, 8);
    imem[4] = i_add(4, 2, 3);
    expect_fault(FC_MIXED_TAGS, 4, 4, "mixed clients");

    // 6. peripheral: clear store goes out, blinded store faults
    clear_mem();
    dmem[0] = '{tag: 8'd5, val: 64'd77};
    imem[1] = i_li(1, 'h100); imem[2] = i_ld(2, 1, 0);
    imem[3] = i_li(5, -65536);            // 0xFFFF...0000: sign-extends to the top region
    imem[4] = i_mul(6, 5, 5);             // 2^32, clear
    imem[5] = i_mul(5, 6, 5);             // -2^48 = 0xFFFF_0000_0000_0000
    imem[6] = i_li(7, 'h55);
    imem[7] = i_st(5, 7, 0);              // clear store: allowed
    imem[8] = i_ld(8, 5, 0);              // peripheral load: 0x42 clear
    imem[9] = i_st(5, 2, 0);              // blinded store: fault
    expect_fault(FC_UNBLINDABLE, 9, -1, "blinded peripheral store");
    check(pwrites == 1 && plast == 64'h55, "one clear peripheral write of 0x55");
    check(R(8) == '{tag: 8'd0, val: 64'h42}, "peripheral load is clear");

    // 7. partial write of another client's byte
    clear_mem();
    dmem[0] = '{tag: 8'd5, val: 64'd1}; dmem[1] = '{tag: 8'd9, val: 64'd2};
    imem[1] = i_li(1, 'h100); imem[2] = i_ld(3, 1, 8); imem[3] = i_st(1, 3, 2, 1);
    expect_fault(FC_PARTIAL_WRITE, 3, -1, "partial write");
    check(dmem[0] == '{tag: 8'd5, val: 64'd1}, "refused partial write left memory alone");

    // 8. blinded instruction word
    clear_mem();
    imem[1] = i_li(1, 5); itag[2] = 8'd5; imem[2] = i_li(2, 6);
    expect_fault(FC_BLINDED_INSTR, 2, 2, "blinded instruction");

    // 9. illegal opcode
    clear_mem();
    imem[1] = 32'hC000_0000;
    expect_fault(FC_ILLEGAL, 1, -1, "illegal opcode");

    // 10. blnd with a blinded length
    clear_mem();
    dmem[0] = '{tag: 8'd5, val: 64'd4};
    imem[1] = i_li(1, 'h100); imem[2] = i_ld(2, 1, 0); imem[3] = i_blnd(4, 1, 2, 5);
    expect_fault(FC_BLINDED_ADDR, 3, -1, "blinded blnd operand");
    check(ecmds == 0, "no engine command issued");

    // 11. blnd accepted, rblnd refused by the engine
    clear_mem();
    imem[1] = i_li(1, 'h100); imem[2] = i_li(2, 8); imem[3] = i_li(4, 77);
    imem[4] = i_blnd(4, 1, 2, 5);
    imem[5] = i_rblnd(4, 1, 2, 3);
    expect_fault(FC_ENGINE, 5, -1, "engine refusal");
    check(ecmds == 2, "two engine commands");
    check(eaddr == 64'h100 && elen == 64'd8 && ectr == 32'd77 && etag == 8'd3,
          "engine command operands");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
