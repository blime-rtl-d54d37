// line_arbiter -- lets the L1 data cache and the L1 instruction cache share the line
// port of the L2.
//
// Port 0 (data cache) reads and writes lines; port 1 (instruction cache) only reads.
// When the arbiter is idle and a port requests, that port is granted for one whole
// transfer (port 0 wins a tie); the grant is kept until the L2 answers, so the L2 sees
// a request that stays steady, as its handshake requires. The granted port's request
// is passed straight down and the L2's answer is routed back to it alone; the other
// port keeps waiting. One idle cycle separates two transfers.
// This is this design's own glue: the paper's caches share the L2 through the
// processor's existing interconnect, which it does not describe.
module line_arbiter
  import blime_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  // port 0: data cache
  input  logic                          d_req_valid,
  input  logic                          d_req_write,
  input  word_t                         d_req_addr,
  input  logic [LINE_WORDS*XLEN-1:0]    d_req_wdata,
  input  logic [LINE_WORDS*WTAG_W-1:0]  d_req_wtags,
  output logic                          d_resp_valid,
  // port 1: instruction cache
  input  logic                          i_req_valid,
  input  word_t                         i_req_addr,
  output logic                          i_resp_valid,
  // shared lower port
  output logic                          l_req_valid,
  output logic                          l_req_write,
  output word_t                         l_req_addr,
  output logic [LINE_WORDS*XLEN-1:0]    l_req_wdata,
  output logic [LINE_WORDS*WTAG_W-1:0]  l_req_wtags,
  input  logic                          l_resp_valid
);

  typedef enum logic [1:0] {A_IDLE, A_DATA, A_INSTR} grant_e;
  grant_e grant;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) grant <= A_IDLE;
    else unique case (grant)
      A_IDLE:  if (d_req_valid) grant <= A_DATA;
               else if (i_req_valid) grant <= A_INSTR;
      default: if (l_resp_valid) grant <= A_IDLE;
    endcase
  end

  always_comb begin
    l_req_valid = 1'b0;
    l_req_write = 1'b0;
    l_req_addr  = d_req_addr;
    l_req_wdata = d_req_wdata;
    l_req_wtags = d_req_wtags;
    unique case (grant)
      A_DATA: begin
        l_req_valid = d_req_valid;
        l_req_write = d_req_write;
      end
      A_INSTR: begin
        l_req_valid = i_req_valid;
        l_req_addr  = i_req_addr;
      end
      default: ;
    endcase
  end

  assign d_resp_valid = (grant == A_DATA)  && l_resp_valid;
  assign i_resp_valid = (grant == A_INSTR) && l_resp_valid;

endmodule
