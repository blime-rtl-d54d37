// chacha20_core -- fully pipelined ChaCha20 block function (RFC 8439 state layout).
//
// Accepts one (key, nonce, block counter) triple per cycle and returns the 512-bit
// keystream block ROUNDS-1 cycles later, one block per cycle with no stalls. Round r
// (0-based) is a column round when r is even and a diagonal round when r is odd. Each
// of the first ROUNDS-1 rounds is followed by a pipeline register; the last round and
// the feed-forward addition of the input state are combinational after the last
// register. With ROUNDS = 20 the latency is 19 cycles, the figure the paper gives for
// its pipelined ChaCha20; how the rounds are split over the stages is this design's
// choice. META_W bits of caller data travel alongside each block.
//
// Word order: key word i is key[32*i +: 32], nonce word i is nonce[32*i +: 32], and
// keystream word i (state word i after the feed-forward) is ks[32*i +: 32]; each word
// is the little-endian reading of the corresponding four bytes, as in RFC 8439.
module chacha20_core #(
  parameter int ROUNDS = 20,
  parameter int META_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [255:0]      in_key,
  input  logic [95:0]       in_nonce,
  input  logic [31:0]       in_counter,
  input  logic [META_W-1:0] in_meta,
  output logic              out_valid,
  output logic [511:0]      out_ks,
  output logic [META_W-1:0] out_meta
);

  localparam int STAGES = ROUNDS - 1;

  typedef logic [15:0][31:0] state_t;

  function automatic logic [31:0] rotl(logic [31:0] x, int n);
    return (x << n) | (x >> (32 - n));
  endfunction

  function automatic state_t quarter(state_t s, int a, int b, int c, int d);
    state_t t = s;
    t[a] = t[a] + t[b]; t[d] = rotl(t[d] ^ t[a], 16);
    t[c] = t[c] + t[d]; t[b] = rotl(t[b] ^ t[c], 12);
    t[a] = t[a] + t[b]; t[d] = rotl(t[d] ^ t[a], 8);
    t[c] = t[c] + t[d]; t[b] = rotl(t[b] ^ t[c], 7);
    return t;
  endfunction

  function automatic state_t one_round(state_t s, logic diagonal);
    state_t t = s;
    if (!diagonal) begin
      t = quarter(t, 0, 4,  8, 12);
      t = quarter(t, 1, 5,  9, 13);
      t = quarter(t, 2, 6, 10, 14);
      t = quarter(t, 3, 7, 11, 15);
    end else begin
      t = quarter(t, 0, 5, 10, 15);
      t = quarter(t, 1, 6, 11, 12);
      t = quarter(t, 2, 7,  8, 13);
      t = quarter(t, 3, 4,  9, 14);
    end
    return t;
  endfunction

  state_t init_state;
  always_comb begin
    init_state[0]  = 32'h61707865;
    init_state[1]  = 32'h3320646e;
    init_state[2]  = 32'h79622d32;
    init_state[3]  = 32'h6b206574;
    for (int i = 0; i < 8; i++) init_state[4+i] = in_key[32*i +: 32];
    init_state[12] = in_counter;
    for (int i = 0; i < 3; i++) init_state[13+i] = in_nonce[32*i +: 32];
  end

  state_t              st_q   [STAGES];
  state_t              init_q [STAGES];
  logic                vld_q  [STAGES];
  logic [META_W-1:0]   meta_q [STAGES];

  for (genvar k = 0; k < STAGES; k++) begin : g_stage
    state_t round_in, init_in;
    logic   vld_in;
    logic [META_W-1:0] meta_in;
    if (k == 0) begin : g_first
      assign round_in = init_state;
      assign init_in  = init_state;
      assign vld_in   = in_valid;
      assign meta_in  = in_meta;
    end else begin : g_next
      assign round_in = st_q[k-1];
      assign init_in  = init_q[k-1];
      assign vld_in   = vld_q[k-1];
      assign meta_in  = meta_q[k-1];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld_q[k] <= 1'b0;
      else        vld_q[k] <= vld_in;
    end

    always_ff @(posedge clk) begin
      st_q[k]   <= one_round(round_in, 1'((k % 2) != 0));
      init_q[k] <= init_in;
      meta_q[k] <= meta_in;
    end
  end

  state_t last;
  always_comb begin
    last = one_round(st_q[STAGES-1], 1'(((ROUNDS - 1) % 2) != 0));
    for (int i = 0; i < 16; i++) out_ks[32*i +: 32] = last[i] + init_q[STAGES-1][i];
  end

  assign out_valid = vld_q[STAGES-1];
  assign out_meta  = meta_q[STAGES-1];

endmodule
