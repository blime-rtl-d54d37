// blinded_regfile -- architectural register file in which every register carries a
// blindedness tag alongside its 64-bit value.
//
// Three combinational read ports (rs1, rs2 and a third one used by blnd/rblnd, which
// read their keystream counter from rd) and one synchronous write port. Value and tag
// are always read and written together as one blinded_t, so no path can separate them.
// Reset clears every value and every tag, so all registers start unblinded zero.
// Storing the tag next to each register follows the paper; the port count, reset
// behaviour and the absence of a hard-wired zero register are this design's choices.
module blinded_regfile
  import blime_pkg::*;
#(
  parameter int N = NREGS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [$clog2(N)-1:0] ra1,
  input  logic [$clog2(N)-1:0] ra2,
  input  logic [$clog2(N)-1:0] ra3,
  output blinded_t             rd1,
  output blinded_t             rd2,
  output blinded_t             rd3,
  input  logic                 we,
  input  logic [$clog2(N)-1:0] wa,
  input  blinded_t             wd
);

  blinded_t regs [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) regs[i] <= '0;
    end else if (we) begin
      regs[wa] <= wd;
    end
  end

  assign rd1 = regs[ra1];
  assign rd2 = regs[ra2];
  assign rd3 = regs[ra3];

endmodule
