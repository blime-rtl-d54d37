// tb_chacha20_core -- checks the pipelined ChaCha20 block function.
//
// 1. The RFC 8439 section 2.3.2 test vector (key 00..1f, nonce 00:00:00:09:00:00:00:4a:
//    00:00:00:00, counter 1) must come out exactly 19 cycles after it goes in.
// 2. Thirty random (key, nonce, counter) triples are issued back to back, one per
//    cycle; each output is compared with a straightforward reference written as ten
//    double rounds on an array, and its metadata and arrival cycle are checked.
module tb_chacha20_core;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         in_valid;
  logic [255:0] in_key;
  logic [95:0]  in_nonce;
  logic [31:0]  in_counter;
  logic [7:0]   in_meta;
  logic         out_valid;
  logic [511:0] out_ks;
  logic [7:0]   out_meta;

  chacha20_core dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic logic [31:0] rl(logic [31:0] x, int n);
    return (x << n) | (x >> (32 - n));
  endfunction

  function automatic logic [511:0] ref_block(logic [255:0] k, logic [95:0] n, logic [31:0] c);
    logic [31:0] x [16];
    logic [31:0] s [16];
    int q [8][4] = '{'{0,4,8,12}, '{1,5,9,13}, '{2,6,10,14}, '{3,7,11,15},
                     '{0,5,10,15}, '{1,6,11,12}, '{2,7,8,13}, '{3,4,9,14}};
    logic [511:0] r;
    s[0] = 32'h61707865; s[1] = 32'h3320646e; s[2] = 32'h79622d32; s[3] = 32'h6b206574;
    for (int i = 0; i < 8; i++) s[4+i] = k[32*i +: 32];
    s[12] = c;
    for (int i = 0; i < 3; i++) s[13+i] = n[32*i +: 32];
    x = s;
    for (int dr = 0; dr < 10; dr++)
      for (int j = 0; j < 8; j++) begin
        int a = q[j][0], b = q[j][1], cc = q[j][2], d = q[j][3];
        x[a] += x[b]; x[d] = rl(x[d] ^ x[a], 16);
        x[cc] += x[d]; x[b] = rl(x[b] ^ x[cc], 12);
        x[a] += x[b]; x[d] = rl(x[d] ^ x[a], 8);
        x[cc] += x[d]; x[b] = rl(x[b] ^ x[cc], 7);
      end
    for (int i = 0; i < 16; i++) r[32*i +: 32] = x[i] + s[i];
    return r;
  endfunction

  // expected results, filled when issued
  logic [511:0] exp_ks [256];
  int           exp_cyc [256];

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker: every output is compared against what was issued with that metadata
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (out_ks !== exp_ks[out_meta]) begin
        failures++;
        $display("FAIL meta %0d keystream mismatch", out_meta);
      end
      checks++;
      if (cycle - exp_cyc[out_meta] != 19) begin
        failures++;
        $display("FAIL meta %0d latency %0d", out_meta, cycle - exp_cyc[out_meta]);
      end
    end
  end

  logic [511:0] rfc;
  initial begin
    in_valid = 0; in_key = '0; in_nonce = '0; in_counter = '0; in_meta = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // RFC 8439 2.3.2
    for (int i = 0; i < 32; i++) in_key[8*i +: 8] = 8'(i);
    in_nonce   = {32'h00000000, 32'h4a000000, 32'h09000000};
    in_counter = 32'd1;
    rfc = {32'h4e3c50a2, 32'he883d0cb, 32'hb94e16de, 32'hd19c12b5,
           32'ha2028bd9, 32'h05d7c214, 32'h09aa9f07, 32'h466482d2,
           32'h4e6cd4c3, 32'h9aaa2204, 32'h0368c033, 32'hc7f4d1c7,
           32'hc47120a3, 32'h1fdd0f50, 32'h15593bd1, 32'he4e7f110};
    checks++;
    if (ref_block(in_key, in_nonce, in_counter) !== rfc) begin
      failures++;
      $display("FAIL reference model disagrees with RFC 8439 vector");
    end
    in_meta = 8'd200;
    exp_ks[200] = rfc;
    @(negedge clk);
    in_valid = 1;
    exp_cyc[200] = cycle;
    @(negedge clk);
    in_valid = 0;
    repeat (25) @(negedge clk);
    // back-to-back random blocks
    for (int t = 0; t < 30; t++) begin
      in_key     = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      in_nonce   = {$urandom, $urandom, $urandom};
      in_counter = $urandom;
      in_meta    = 8'(t);
      exp_ks[t]  = ref_block(in_key, in_nonce, in_counter);
      exp_cyc[t] = cycle;
      in_valid   = 1;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (30) @(negedge clk);
    checks++;
    if (checks != 2 + 2 * 31) begin
      failures++;
      $display("FAIL expected 31 outputs, saw %0d", (checks - 2) / 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
