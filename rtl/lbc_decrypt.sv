// lbc_decrypt: ring-LWE decryption of one ciphertext block (c1, c2).
//
//     v = c1*r2 + c2,   m_i = 1 when q/4 < v_i < 3q/4, else 0
//
// With c1 = a*e1 + e2, c2 = p*e1 + e3 + encode(m) and p = r1 - a*r2, v equals
// e1*r1 + e2*r2 + e3 + encode(m): small noise around 0 or floor(q/2), so each
// coefficient rounds back to its message bit. The product c1*r2 + c2 has the
// hspm's form a*b + c with a = c1, b = r2 (the small secret) and c = c2, so
// one hspm pass does the work: the secret is loaded from the local key store
// as b, c1 streams in as a, and c2 streams in as c during the read-out.
//
// Interface:
//   key_*  write port for the secret r2, 6-bit sign-magnitude coefficients.
//   ct_*   ciphertext coefficients, c1[0..N-1] then c2[0..N-1] (valid/ready);
//          a block starts on its first coefficient.
//   msg_*  msg_valid pulses for one cycle when all N bits are decoded;
//          msg_data holds them until the next block completes.
// Timing: N cycles to load the secret, then N + 2 for c1 and N for c2, about
// 3N + 6 cycles per block when the ciphertext arrives every cycle.
//
// Using the polynomial multiplier with c1 and r2 as operands and c2 as the
// added term follows the design's description of the multiplier's operands;
// the rounding rule, key store and interfaces are this implementation's
// choices.
module lbc_decrypt #(
  parameter int unsigned N  = 256,
  parameter int unsigned Q  = 7681,
  localparam int unsigned QW = 13,
  localparam int unsigned BW = 6,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  // secret key write port
  input  logic          key_we,
  input  logic [AW-1:0] key_addr,
  input  logic [BW-1:0] key_data,
  // ciphertext in
  input  logic          ct_valid,
  output logic          ct_ready,
  input  logic [QW-1:0] ct_data,
  // message out
  output logic          msg_valid,
  output logic [N-1:0]  msg_data,
  output logic          busy
);
  localparam logic [QW-1:0] Q_LO = QW'(Q / 4);
  localparam logic [QW-1:0] Q_HI = QW'((3 * Q) / 4);

  logic [BW-1:0] key_r2 [N];
  logic [AW:0]   bcnt;
  logic          active, started;

  logic          h_start, h_done;
  logic          h_b_valid, h_b_ready, h_a_valid, h_a_ready, h_c_valid, h_c_ready;
  logic          h_d_valid;
  logic [AW-1:0] h_d_addr;
  logic [QW-1:0] h_d_data;

  hspm #(.N(N), .Q(Q), .QW(QW), .BW(BW)) u_hspm (
    .clk, .rst_n,
    .start(h_start), .busy(),
    .b_valid(h_b_valid), .b_ready(h_b_ready), .b_data(key_r2[bcnt[AW-1:0]]),
    .a_valid(h_a_valid), .a_ready(h_a_ready), .a_data(ct_data),
    .c_valid(h_c_valid), .c_ready(h_c_ready), .c_data(ct_data),
    .d_valid(h_d_valid), .d_addr(h_d_addr), .d_data(h_d_data),
    .done(h_done)
  );

  // a block begins when its first ciphertext coefficient is offered
  assign h_start   = active && !started;
  assign h_b_valid = active;
  assign h_a_valid = ct_valid;
  assign h_c_valid = ct_valid;
  assign ct_ready  = h_a_ready || h_c_ready;
  assign busy      = active;

  always_ff @(posedge clk) begin
    if (key_we) key_r2[key_addr] <= key_data;
    if (h_d_valid) msg_data[h_d_addr] <= (h_d_data > Q_LO) && (h_d_data < Q_HI);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active    <= 1'b0;
      started   <= 1'b0;
      bcnt      <= '0;
      msg_valid <= 1'b0;
    end else begin
      msg_valid <= 1'b0;
      if (h_start) started <= 1'b1;
      if (h_b_valid && h_b_ready) bcnt <= bcnt + 1'b1;
      if (!active && ct_valid) begin
        active  <= 1'b1;
        started <= 1'b0;
        bcnt    <= '0;
      end
      if (active && h_done) begin
        active    <= 1'b0;
        msg_valid <= 1'b1;
      end
    end
  end

  a_key_stable: assert property (@(posedge clk) disable iff (!rst_n) active |-> !key_we);
endmodule
