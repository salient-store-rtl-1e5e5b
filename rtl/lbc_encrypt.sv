// lbc_encrypt: ring-LWE public-key encryption of one N-bit message block.
//
// With public key (a, p) and three small error polynomials e1, e2, e3 drawn
// from the error sampler, the ciphertext is
//     c1 = a*e1 + e2
//     c2 = p*e1 + e3 + encode(m),   encode(m)_i = m_i * floor(q/2)
// Both products have the form d = a*b + c, so one hspm computes them in two
// passes. Pass 1 loads e1 straight from the sample stream into the hspm and
// also keeps a copy in a local N x 6-bit buffer; pass 2 reloads e1 from that
// buffer. e2 and e3 are converted from signed magnitude to Z_q as they are
// consumed in the read-out phase, where e3 also receives the message term.
//
// Interface:
//   key_*  write port for the public key, one coefficient per cycle
//          (key_sel 0 = a, 1 = p); the key can be changed between blocks.
//   msg_*  one N-bit message block (valid/ready); accepted only when idle.
//   err_*  signed-magnitude samples in the order e1[0..N-1], e2[...], e3[...]
//          (valid/ready).
//   ct_*   ciphertext coefficients: c1[0..N-1] then c2[0..N-1], one per
//          valid cycle, tagged with ct_sel and ct_idx.
// Timing: each pass takes the hspm's 3N + 4 cycles when samples arrive
// every cycle, so one block takes about 6N + 10 cycles.
//
// The use of the polynomial multiplier for a*e1 + e2 and p*e1 + e3 follows
// the design; the message encoding, the sample order, the e1 buffer and the
// key port are this implementation's choices.
module lbc_encrypt
  import salt_pkg::*;
#(
  parameter int unsigned N  = 256,
  parameter int unsigned Q  = 7681,
  localparam int unsigned QW = 13,
  localparam int unsigned BW = 6,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  // public key write port
  input  logic          key_we,
  input  logic          key_sel,
  input  logic [AW-1:0] key_addr,
  input  logic [QW-1:0] key_data,
  // message block
  input  logic          msg_valid,
  output logic          msg_ready,
  input  logic [N-1:0]  msg_data,
  // error samples
  input  logic          err_valid,
  output logic          err_ready,
  input  logic [BW-1:0] err_data,
  // ciphertext
  output logic          ct_valid,
  output ct_sel_e       ct_sel,
  output logic [AW-1:0] ct_idx,
  output logic [QW-1:0] ct_data,
  output logic          busy
);
  localparam logic [QW-1:0] HALF_Q = QW'(Q / 2);

  typedef enum logic [1:0] {E_IDLE, E_PASS1, E_PASS2} estate_e;
  estate_e state;

  logic [QW-1:0] key_a [N];
  logic [QW-1:0] key_p [N];
  logic [BW-1:0] e1buf [N];
  logic [N-1:0]  msg_q;
  logic [AW:0]   bcnt, acnt, ccnt;

  // hspm connections
  logic          h_start, h_done;
  logic          h_b_valid, h_b_ready, h_a_valid, h_a_ready, h_c_valid, h_c_ready;
  logic [BW-1:0] h_b_data;
  logic [QW-1:0] h_a_data, h_c_data;
  logic          h_d_valid;
  logic [AW-1:0] h_d_addr;
  logic [QW-1:0] h_d_data;
  logic          started;   // hspm started for the current pass

  hspm #(.N(N), .Q(Q), .QW(QW), .BW(BW)) u_hspm (
    .clk, .rst_n,
    .start(h_start), .busy(),
    .b_valid(h_b_valid), .b_ready(h_b_ready), .b_data(h_b_data),
    .a_valid(h_a_valid), .a_ready(h_a_ready), .a_data(h_a_data),
    .c_valid(h_c_valid), .c_ready(h_c_ready), .c_data(h_c_data),
    .d_valid(h_d_valid), .d_addr(h_d_addr), .d_data(h_d_data),
    .done(h_done)
  );

  // signed magnitude sample to Z_q
  function automatic logic [QW-1:0] to_zq(input logic [BW-1:0] s);
    logic [QW-1:0] m;
    m = QW'(s[BW-2:0]);
    return (s[BW-1] && m != '0) ? QW'(Q - m) : m;
  endfunction

  function automatic logic [QW-1:0] add_mod(input logic [QW-1:0] x, input logic [QW-1:0] y);
    logic [QW:0] sum;
    sum = {1'b0, x} + {1'b0, y};
    return (sum >= (QW+1)'(Q)) ? QW'(sum - (QW+1)'(Q)) : QW'(sum);
  endfunction

  wire in_pass = (state != E_IDLE);
  wire pass2   = (state == E_PASS2);

  assign msg_ready = (state == E_IDLE);
  assign busy      = in_pass;
  assign h_start   = in_pass && !started;

  // b: pass 1 from the sampler (e1), pass 2 from the e1 buffer
  assign h_b_valid = pass2 ? 1'b1 : (in_pass && err_valid);
  assign h_b_data  = pass2 ? e1buf[bcnt[AW-1:0]] : err_data;
  // a: public key polynomial a (pass 1) or p (pass 2)
  assign h_a_valid = in_pass;
  assign h_a_data  = pass2 ? key_p[acnt[AW-1:0]] : key_a[acnt[AW-1:0]];
  // c: e2 (pass 1) or e3 + encode(m) (pass 2)
  assign h_c_valid = in_pass && err_valid;
  assign h_c_data  = pass2 ? add_mod(to_zq(err_data), msg_q[ccnt[AW-1:0]] ? HALF_Q : '0)
                           : to_zq(err_data);
  assign err_ready = (h_b_ready && !pass2) || h_c_ready;

  assign ct_valid = h_d_valid;
  assign ct_sel   = pass2 ? CT_C2 : CT_C1;
  assign ct_idx   = h_d_addr;
  assign ct_data  = h_d_data;

  always_ff @(posedge clk) begin
    if (key_we) begin
      if (key_sel) key_p[key_addr] <= key_data;
      else         key_a[key_addr] <= key_data;
    end
    if (state == E_PASS1 && h_b_valid && h_b_ready) e1buf[bcnt[AW-1:0]] <= err_data;
    if (state == E_IDLE && msg_valid) msg_q <= msg_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= E_IDLE;
      started <= 1'b0;
      bcnt    <= '0;
      acnt    <= '0;
      ccnt    <= '0;
    end else begin
      if (h_start) started <= 1'b1;
      if (h_b_valid && h_b_ready) bcnt <= bcnt + 1'b1;
      if (h_a_valid && h_a_ready) acnt <= acnt + 1'b1;
      if (h_c_valid && h_c_ready) ccnt <= ccnt + 1'b1;
      unique case (state)
        E_IDLE: if (msg_valid) begin
          state <= E_PASS1;
          started <= 1'b0;
          bcnt <= '0; acnt <= '0; ccnt <= '0;
        end
        E_PASS1: if (h_done) begin
          state <= E_PASS2;
          started <= 1'b0;
          bcnt <= '0; acnt <= '0; ccnt <= '0;
        end
        E_PASS2: if (h_done) state <= E_IDLE;
        default: state <= E_IDLE;
      endcase
    end
  end

  // ciphertext leaves in coefficient order within each pass
  a_ct_order: assert property (@(posedge clk) disable iff (!rst_n)
      ct_valid |-> ct_idx == AW'(ccnt - 1'b1));
endmodule
