// main_mem_model -- behavioural model of main memory (DRAM) for simulation only.
//
// Sparse 64-bit word store behind the beat bus used by tag_mem_ctrl: a request beat is
// accepted when req_valid && req_ready (ready is randomly withheld when STALL_PCT > 0);
// each accepted beat is answered LATENCY cycles later by one resp_valid beat, in order.
// Writes honour the byte strobes. Unwritten words read as zero. Not synthesizable.
module main_mem_model
  import blime_pkg::*;
#(
  parameter int LATENCY   = 4,
  parameter int STALL_PCT = 0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     resp_valid,
  output word_t    resp_rdata
);

  word_t mem [word_t];
  int    beats = 0;

  typedef struct { int due; word_t data; } pend_t;
  pend_t q [$];
  int    now = 0;

  function automatic word_t peek(word_t byte_addr);
    word_t a;
    a = byte_addr >> 3;
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  function automatic void poke(word_t byte_addr, word_t v);
    mem[byte_addr >> 3] = v;
  endfunction

  always @(negedge clk) req_ready <= (STALL_PCT == 0) || ($urandom_range(0, 99) >= STALL_PCT);

  always @(posedge clk) begin
    now <= now + 1;
    resp_valid <= 1'b0;
    if (rst_n) begin
      if (req_valid && req_ready) begin
        word_t a, old;
        a   = req.addr >> 3;
        old = mem.exists(a) ? mem[a] : '0;
        beats++;
        if (req.we) begin
          for (int b = 0; b < 8; b++) if (req.wstrb[b]) old[8*b +: 8] = req.wdata[8*b +: 8];
          mem[a] = old;
        end
        q.push_back('{due: now + LATENCY, data: old});
      end
      if (q.size() > 0 && q[0].due <= now) begin
        pend_t p;
        p = q.pop_front();
        resp_valid <= 1'b1;
        resp_rdata <= p.data;
      end
    end
  end

  initial begin
    req_ready  = 1'b1;
    resp_valid = 1'b0;
    resp_rdata = '0;
  end
endmodule
