// mod_reduce: constant-time reduction of a product modulo q (the "MR logic").
//
// For a modulus of the form q = 2^QW - 2^SH + 1 (7681 = 2^13 - 2^9 + 1), the
// bits of x above bit QW-1 are a quotient estimate t, and
//     x - t*q = x[QW-1:0] + (t << SH) - t
// which is one shift, one subtractor and one adder. That folded value is
// registered. After the register a single correction stage compares it with
// k*q and subtracts the largest multiple that fits, so the result lies in
// [0, q) after a fixed number of gates whatever the input.
//
// The shift/subtract/add fold and the register position follow the design's
// MR circuit. The design describes its correction as one subtraction of q;
// with 6-bit signed operands the fold can reach 3q, so the correction stage
// here chooses among 0, q, 2q and 3q (NSUB = 3) in one step. That is a
// choice of this implementation made for correctness.
//
// Interface: x is sampled every cycle; r = x mod q appears one cycle later.
module mod_reduce #(
  parameter int unsigned Q  = 7681,
  parameter int unsigned QW = 13,
  parameter int unsigned PW = 18
) (
  input  logic          clk,
  input  logic [PW-1:0] x,
  output logic [QW-1:0] r
);
  localparam int unsigned C    = (1 << QW) - Q;         // 2^QW - q
  localparam int unsigned SH   = $clog2(C + 1);         // C = 2^SH - 1
  localparam int unsigned TW   = PW - QW;               // quotient estimate width
  localparam int unsigned FMAX = ((1 << QW) - 1) + (((1 << PW) - 1) >> QW) * C;
  localparam int unsigned FW   = $clog2(FMAX + 1);      // folded width
  localparam int unsigned NSUB = FMAX / Q;              // multiples to remove

  if (C != (1 << SH) - 1) begin : g_bad_q
    $error("mod_reduce: Q must be 2^QW - 2^SH + 1");
  end

  logic [TW-1:0] t;
  logic [FW-1:0] fold, fold_q;

  always_comb begin
    t    = x[PW-1:QW];
    fold = FW'(x[QW-1:0]) + (FW'(t) << SH) - FW'(t);
  end

  always_ff @(posedge clk) fold_q <= fold;

  // constant-time correction: remove the largest k*q not above fold_q
  always_comb begin
    r = fold_q[QW-1:0];
    for (int k = 1; k <= NSUB; k++) begin
      if (fold_q >= FW'(k * Q)) r = QW'(fold_q - FW'(k * Q));
    end
  end
endmodule
