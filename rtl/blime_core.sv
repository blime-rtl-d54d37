// blime_core -- in-order core that executes the model instruction set with the BliMe
// taint-tracking policy enforced on every instruction.
//
// One instruction is fetched, checked, decoded and executed per cycle, as in the
// paper's single-cycle fetch-execute model; data-cache misses and import/export
// commands stall the core until they finish. Every register carries a blindedness tag
// (blinded_regfile) and every functional unit either propagates tags (taint_alu, loads,
// stores) or faults when a blinded value would decide something observable:
//   fetch    a blinded instruction word                      (ifetch_filter)
//   ALU      operands of two different clients                (taint_alu)
//   BZ       blinded condition or target                      (branch_unit)
//   LOAD/STORE blinded base or offset; blinded data to the unblindable region (agu);
//            partial write of one client's data into another's granule, or a word
//            read that mixes clients                          (data cache)
//   BLND/RBLND blinded address, length or counter (agu rule); engine refusal
//   any      undefined opcode
// A faulting instruction writes nothing; the program counter goes to address 0, where
// the fault handler lives, and fault_valid pulses with the cause. Because the fault
// decisions use only tags and unblinded values, whether and when a fault happens never
// depends on a blinded value.
//
// Addresses at or above UNBLINDABLE_BASE go to the peripheral port instead of the
// cache: stores there must be unblinded, loads from there return unblinded data.
// Instruction fetch: imem_addr = pc, counted in 32-bit instructions; the core waits
// in place while imem_ready is low (an instruction-cache miss).
// Data-cache port: dc_req_valid/dc_req held until dc_resp_valid.
// Engine port: cmd_valid/cmd_ready, then the core waits for eng_done_valid while
// eng_active hands the data-cache port to the engine.
// The checks are the paper's; the encoding, the peripheral region and the multi-cycle
// organisation (no speculation, no branch prediction) are this design's.
module blime_core
  import blime_pkg::*;
#(
  parameter word_t RESET_PC         = 64'd1,
  parameter word_t UNBLINDABLE_BASE = 64'hFFFF_0000_0000_0000
) (
  input  logic         clk,
  input  logic         rst_n,
  // instruction memory
  output word_t        imem_addr,
  input  logic [31:0]  imem_instr,
  input  tag_t         imem_tag,
  input  logic         imem_ready,     // imem_instr/imem_tag hold the word at imem_addr
  // data cache
  output logic         dc_req_valid,
  output dc_req_t      dc_req,
  input  logic         dc_resp_valid,
  input  blinded_t     dc_resp_rdata,
  input  logic         dc_resp_fault,
  // unblindable peripheral region
  output logic         periph_wr_valid,
  output logic         periph_rd_valid,
  output word_t        periph_addr,
  output word_t        periph_wdata,
  input  word_t        periph_rdata,
  // encryption engine
  output logic         eng_cmd_valid,
  input  logic         eng_cmd_ready,
  output logic         eng_cmd_blnd,
  output word_t        eng_cmd_addr,
  output word_t        eng_cmd_len,
  output tag_t         eng_cmd_tag,
  output logic [31:0]  eng_cmd_counter,
  input  logic         eng_done_valid,
  input  logic         eng_done_fault,
  output logic         eng_active,
  // status
  output word_t        pc,
  output logic         halted,
  output logic         retire,
  output logic         fault_valid,
  output fault_cause_e fault_cause,
  output word_t        fault_pc
);

  typedef enum logic [1:0] {S_RUN, S_ENG_ISSUE, S_ENG_WAIT, S_HALT} state_e;

  state_e state;

  // fetch and decode
  logic [31:0] instr;
  logic        instr_ok, instr_blinded;
  decoded_t    d;

  assign imem_addr = pc;

  ifetch_filter u_ifilter (
    .in_valid       ((state == S_RUN) && imem_ready),
    .in_instr       (imem_instr),
    .in_tag         (imem_tag),
    .out_instr      (instr),
    .out_valid_instr(instr_ok),
    .out_blinded    (instr_blinded)
  );

  model_isa_decoder u_dec (.instr(instr), .d(d));

  // registers
  blinded_t rs1_v, rs2_v, rd_v;
  logic     rf_we;
  blinded_t rf_wd;

  blinded_regfile u_rf (
    .clk, .rst_n,
    .ra1(d.rs1), .ra2(d.rs2), .ra3(d.rd),
    .rd1(rs1_v), .rd2(rs2_v), .rd3(rd_v),
    .we (rf_we), .wa(d.rd), .wd(rf_wd)
  );

  // execute
  blinded_t alu_y;
  logic     alu_fault;
  taint_alu u_alu (
    .op(d.alu_op), .a(rs1_v), .b(rs2_v), .same_src(d.rs1 == d.rs2),
    .y(alu_y), .fault(alu_fault)
  );

  logic  br_taken, br_fault;
  word_t br_next;
  branch_unit u_br (
    .pc(pc), .cond(rs1_v), .target(rs2_v),
    .taken(br_taken), .next_pc(br_next), .fault(br_fault)
  );

  word_t        ag_addr;
  logic         ag_unblindable, ag_fault;
  fault_cause_e ag_cause;
  agu #(.UNBLINDABLE_BASE(UNBLINDABLE_BASE)) u_agu (
    .base(rs1_v), .offset('{tag: TAG_CLEAR, val: d.imm}),
    .is_store(d.is_store), .store_tag(rs2_v.tag),
    .addr(ag_addr), .unblindable(ag_unblindable), .fault(ag_fault), .cause(ag_cause)
  );

  // blnd/rblnd operands must all be unblinded: they choose addresses and timing
  logic eng_operands_blinded;
  assign eng_operands_blinded = (rs1_v.tag != TAG_CLEAR) || (rs2_v.tag != TAG_CLEAR) ||
                                (rd_v.tag != TAG_CLEAR);

  // outcome of the instruction in this cycle
  logic         done;        // instruction completes this cycle
  logic         flt;
  fault_cause_e cause;
  word_t        next_pc;

  assign dc_req_valid = (state == S_RUN) && instr_ok && d.legal &&
                        (d.is_load || d.is_store) && !ag_fault && !ag_unblindable;
  assign dc_req.we        = d.is_store;
  assign dc_req.byte_op   = d.byte_op;
  assign dc_req.addr      = ag_addr;
  assign dc_req.wdata     = rs2_v;

  assign periph_addr     = ag_addr;
  assign periph_wdata    = rs2_v.val;
  assign periph_wr_valid = (state == S_RUN) && instr_ok && d.legal && d.is_store &&
                           !ag_fault && ag_unblindable;
  assign periph_rd_valid = (state == S_RUN) && instr_ok && d.legal && d.is_load &&
                           !ag_fault && ag_unblindable;

  always_comb begin
    done    = 1'b0;
    flt     = 1'b0;
    cause   = FC_NONE;
    next_pc = pc + word_t'(1);
    rf_we   = 1'b0;
    rf_wd   = '0;
    if (state == S_RUN && imem_ready) begin
      if (instr_blinded) begin
        flt = 1'b1; cause = FC_BLINDED_INSTR;
      end else if (!d.legal) begin
        flt = 1'b1; cause = FC_ILLEGAL;
      end else if (d.is_alu) begin
        if (alu_fault) begin
          flt = 1'b1; cause = FC_MIXED_TAGS;
        end else begin
          done = 1'b1; rf_we = 1'b1; rf_wd = alu_y;
        end
      end else if (d.is_li) begin
        done = 1'b1; rf_we = 1'b1; rf_wd = '{tag: TAG_CLEAR, val: d.imm};
      end else if (d.is_branch) begin
        if (br_fault) begin
          flt = 1'b1; cause = FC_BLINDED_PC;
        end else begin
          done = 1'b1; next_pc = br_next;
        end
      end else if (d.is_load || d.is_store) begin
        if (ag_fault) begin
          flt = 1'b1; cause = ag_cause;
        end else if (ag_unblindable) begin
          done = 1'b1;
          if (d.is_load) begin
            rf_we = 1'b1; rf_wd = '{tag: TAG_CLEAR, val: periph_rdata};
          end
        end else if (dc_resp_valid) begin
          if (dc_resp_fault) begin
            flt = 1'b1; cause = d.is_store ? FC_PARTIAL_WRITE : FC_MIXED_TAGS;
          end else begin
            done = 1'b1;
            if (d.is_load) begin
              rf_we = 1'b1; rf_wd = dc_resp_rdata;
            end
          end
        end
      end else if (d.is_blnd || d.is_rblnd) begin
        if (eng_operands_blinded) begin
          flt = 1'b1; cause = FC_BLINDED_ADDR;
        end
      end
    end else if (state == S_ENG_WAIT && eng_done_valid) begin
      if (eng_done_fault) begin
        flt = 1'b1; cause = FC_ENGINE;
      end else begin
        done = 1'b1;
      end
    end
    if (flt) rf_we = 1'b0;
  end

  // engine command: operands are sampled when the command is accepted
  assign eng_cmd_valid   = (state == S_ENG_ISSUE);
  assign eng_cmd_blnd    = d.is_blnd;
  assign eng_cmd_addr    = rs1_v.val;
  assign eng_cmd_len     = rs2_v.val;
  assign eng_cmd_tag     = d.imm[TAG_W-1:0];
  assign eng_cmd_counter = rd_v.val[31:0];
  assign eng_active      = (state == S_ENG_ISSUE) || (state == S_ENG_WAIT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_RUN;
      pc          <= RESET_PC;
      fault_valid <= 1'b0;
      fault_cause <= FC_NONE;
      fault_pc    <= '0;
      retire      <= 1'b0;
    end else begin
      fault_valid <= 1'b0;
      retire      <= 1'b0;
      if (flt) begin
        pc          <= '0;
        fault_valid <= 1'b1;
        fault_cause <= cause;
        fault_pc    <= pc;
        state       <= S_RUN;
      end else if (done) begin
        pc     <= next_pc;
        retire <= 1'b1;
        state  <= S_RUN;
      end else begin
        unique case (state)
          S_RUN: begin
            if (instr_ok && d.legal && d.is_halt) state <= S_HALT;
            else if (instr_ok && d.legal && (d.is_blnd || d.is_rblnd)) state <= S_ENG_ISSUE;
          end
          S_ENG_ISSUE: if (eng_cmd_ready) state <= S_ENG_WAIT;
          default: ;
        endcase
      end
    end
  end

  assign halted = (state == S_HALT);

endmodule
