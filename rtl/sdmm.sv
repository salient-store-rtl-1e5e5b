// sdmm: Signed Double Modular Multiplier.
//
// Computes two modular products that share one operand, d0 = a*b0 mod q and
// d1 = a*b1 mod q, with a single multiplier. The small operands b0 and b1 are
// signed-magnitude (bit BW-1 is the sign). Their magnitudes are packed into
// one multiplier operand, |b1| at bit PW and |b0| at bit 0, so the low PW bits
// of the product hold a*|b0| and the next PW bits hold a*|b1| (with a < 2^13
// and |b| < 32 each product fits in 18 bits and the halves never overlap).
// Each half goes through its own mod_reduce. A negative term is produced as
// q - r (zero stays zero), following a*(-|b|) = -(a*|b|) mod q.
//
// The sign of each lane is its b sign bit combined by exclusive-or with the
// matching bit of s, so a caller can negate a term (the polynomial multiplier
// uses this for the x^n = -1 wrap-around). The sign bits travel through two
// registers alongside the data.
//
// Timing: fully pipelined, one pair of products per cycle, results two
// cycles after the inputs (multiplier register, then the MR register).
//
// Packing, two MR units, sign delay registers and the two-cycle latency follow
// the design's SDMM description; the 2-bit width of s (one bit per lane) is
// this design's choice.
module sdmm #(
  parameter int unsigned Q  = 7681,
  parameter int unsigned QW = 13,
  parameter int unsigned BW = 6,
  parameter int unsigned PW = 18
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [QW-1:0] a,
  input  logic [BW-1:0] b0,
  input  logic [BW-1:0] b1,
  input  logic [1:0]    s,
  output logic          out_valid,
  output logic [QW-1:0] d0,
  output logic [QW-1:0] d1
);
  localparam int unsigned MW = PW + BW - 1;        // multiplier operand B width
  localparam int unsigned RW = QW + MW;            // full product width

  logic [MW-1:0]   bpack;
  logic [RW-1:0]   prod_q;
  logic [1:0]      sgn_q1, sgn_q2;
  logic [1:0]      vld_q;
  logic [QW-1:0]   r0, r1;

  assign bpack = (MW'(b1[BW-2:0]) << PW) | MW'(b0[BW-2:0]);

  // stage 1: the DSP multiply, registered
  always_ff @(posedge clk) prod_q <= RW'(a) * RW'(bpack);

  // stage 2: modular reduction of both halves (register inside mod_reduce)
  mod_reduce #(.Q(Q), .QW(QW), .PW(PW)) u_mr0 (.clk, .x(prod_q[PW-1:0]),    .r(r0));
  mod_reduce #(.Q(Q), .QW(QW), .PW(PW)) u_mr1 (.clk, .x(prod_q[2*PW-1:PW]), .r(r1));

  // sign path: two registers, matching the data latency
  always_ff @(posedge clk) begin
    sgn_q1 <= {b1[BW-1] ^ s[1], b0[BW-1] ^ s[0]};
    sgn_q2 <= sgn_q1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld_q <= '0;
    else        vld_q <= {vld_q[0], in_valid};
  end

  assign out_valid = vld_q[1];
  assign d0 = (sgn_q2[0] && r0 != '0) ? QW'(Q - r0) : r0;
  assign d1 = (sgn_q2[1] && r1 != '0) ? QW'(Q - r1) : r1;
endmodule
