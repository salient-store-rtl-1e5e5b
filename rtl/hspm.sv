// hspm: High-Speed Schoolbook Polynomial Multiplier, d = a*b + c in
// Z_q[x]/(x^N + 1).
//
// N/2 sdmm units work in parallel; unit k owns accumulators 2k and 2k+1.
// An operation has three phases:
//   1. load   - the N small coefficients of b (6-bit signed magnitude) are
//               shifted serially into the b shift register, b_0 first, so
//               that afterwards position j holds b_j (N accepted beats).
//   2. multiply - coefficient a_i is broadcast to every sdmm, one per
//               accepted beat. Unit k multiplies it by shift-register
//               positions 2k and 2k+1, and the register then rotates by one
//               place (the top element re-enters at the bottom), so at step i
//               position j holds b_{(j-i) mod N}. Terms whose b index has
//               wrapped (j < i) belong to x^{i+j-N} = -x^{i+j} and are negated
//               through the sdmm s inputs. Products arrive two cycles later
//               and are added modulo q into the 13-bit accumulators.
//   3. read-out - the accumulators are read in order by the address addr_ab;
//               each c_j accepted gives d_j = acc_j + c_j mod q one cycle later.
//
// Timing with no stalls: N + (N + 2) + N cycles plus one cycle per phase
// change; every stream may stall through its valid/ready pair.
//
// The parallel structure (N/2 double multipliers, serial b loading into a
// 6-bit shift register, a_i broadcast, 13-bit accumulation registers,
// addressed serial read-out with c added) follows the design's HSPM. The
// negacyclic ring, the pairing of accumulators, the handshakes and clearing
// the accumulators at start are this implementation's choices.
module hspm #(
  parameter int unsigned N  = 256,
  parameter int unsigned Q  = 7681,
  parameter int unsigned QW = 13,
  parameter int unsigned BW = 6,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  // b, loaded first
  input  logic          b_valid,
  output logic          b_ready,
  input  logic [BW-1:0] b_data,
  // a, one coefficient per multiply step
  input  logic          a_valid,
  output logic          a_ready,
  input  logic [QW-1:0] a_data,
  // c in, d out
  input  logic          c_valid,
  output logic          c_ready,
  input  logic [QW-1:0] c_data,
  output logic          d_valid,
  output logic [AW-1:0] d_addr,
  output logic [QW-1:0] d_data,
  output logic          done
);
  localparam int unsigned NSDMM = N / 2;

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_MUL, S_DRAIN, S_OUT} state_e;
  state_e state;

  logic [BW-1:0] sr  [N];
  logic [QW-1:0] acc [N];
  logic [AW:0]   cnt;          // beats accepted in the current phase
  logic [AW:0]   acc_cnt;      // product pairs accumulated
  logic [AW-1:0] step;         // index i of the a coefficient being issued

  logic          mul_fire;
  logic [QW-1:0] pd0 [NSDMM];
  logic [QW-1:0] pd1 [NSDMM];
  logic          pvalid [NSDMM];

  assign b_ready  = (state == S_LOAD);
  assign a_ready  = (state == S_MUL);
  assign c_ready  = (state == S_OUT);
  assign busy     = (state != S_IDLE);
  assign mul_fire = a_valid && a_ready;
  assign step     = cnt[AW-1:0];

  // the SDMM array
  for (genvar k = 0; k < NSDMM; k++) begin : g_sdmm
    logic [1:0] wrap;
    // lane 0 holds b_{(2k-i) mod N}: wrapped when 2k < i, likewise lane 1
    assign wrap = {(2*k+1) < int'(step), (2*k) < int'(step)};
    sdmm #(.Q(Q), .QW(QW), .BW(BW)) u_sdmm (
      .clk, .rst_n,
      .in_valid (mul_fire),
      .a        (a_data),
      .b0       (sr[2*k]),
      .b1       (sr[2*k+1]),
      .s        (wrap),
      .out_valid(pvalid[k]),
      .d0       (pd0[k]),
      .d1       (pd1[k])
    );
  end

  function automatic logic [QW-1:0] add_mod(input logic [QW-1:0] x, input logic [QW-1:0] y);
    logic [QW:0] sum;
    sum = {1'b0, x} + {1'b0, y};
    return (sum >= (QW+1)'(Q)) ? QW'(sum - (QW+1)'(Q)) : QW'(sum);
  endfunction

  // control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cnt     <= '0;
      done    <= 1'b0;
      d_valid <= 1'b0;
      d_addr  <= '0;
      d_data  <= '0;
    end else begin
      done    <= 1'b0;
      d_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_LOAD;
          cnt   <= '0;
        end
        S_LOAD: if (b_valid) begin
          cnt <= cnt + 1'b1;
          if (cnt == (AW+1)'(N - 1)) begin
            state <= S_MUL;
            cnt   <= '0;
          end
        end
        S_MUL: if (a_valid) begin
          cnt <= cnt + 1'b1;
          if (cnt == (AW+1)'(N - 1)) state <= S_DRAIN;
        end
        S_DRAIN: if (acc_cnt == (AW+1)'(N)) begin
          state <= S_OUT;
          cnt   <= '0;
        end
        S_OUT: if (c_valid) begin
          d_valid <= 1'b1;
          d_addr  <= cnt[AW-1:0];
          d_data  <= add_mod(acc[cnt[AW-1:0]], c_data);
          cnt     <= cnt + 1'b1;
          if (cnt == (AW+1)'(N - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // b shift register: serial load, then one rotation per multiply step
  always_ff @(posedge clk) begin
    if (state == S_LOAD && b_valid) begin
      sr[N-1] <= b_data;
      for (int j = 0; j < N - 1; j++) sr[j] <= sr[j+1];
    end else if (mul_fire) begin
      sr[0] <= sr[N-1];
      for (int j = 1; j < N; j++) sr[j] <= sr[j-1];
    end
  end

  // accumulation registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_cnt <= '0;
      for (int j = 0; j < N; j++) acc[j] <= '0;
    end else if (state == S_IDLE && start) begin
      acc_cnt <= '0;
      for (int j = 0; j < N; j++) acc[j] <= '0;
    end else if (pvalid[0]) begin
      acc_cnt <= acc_cnt + 1'b1;
      for (int k = 0; k < NSDMM; k++) begin
        acc[2*k]   <= add_mod(acc[2*k],   pd0[k]);
        acc[2*k+1] <= add_mod(acc[2*k+1], pd1[k]);
      end
    end
  end

  // every sdmm is fed the same valid, so their outputs stay aligned
  a_aligned: assert property (@(posedge clk) disable iff (!rst_n) pvalid[0] == pvalid[NSDMM-1]);
endmodule
