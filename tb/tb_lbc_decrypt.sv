// tb_lbc_decrypt: builds a ring-LWE key pair and encrypts random 256-bit
// messages here, writes the secret r2 through the key port, streams c1 then
// c2 into the decryptor and compares the decoded block with the message and
// with the rounding of c1*r2 + c2 computed here. One block also carries
// hand-placed coefficients next to the q/4 and 3q/4 decision points. Eight
// blocks are sent; every odd one stalls the ciphertext stream at random, and
// the first checks the block time against 3N plus a few control cycles.
module tb_lbc_decrypt;
  localparam int N = 256, Q = 7681;
  logic clk = 0, rst_n = 0;
  logic key_we; logic [7:0] key_addr; logic [5:0] key_data;
  logic ct_valid, ct_ready; logic [12:0] ct_data;
  logic msg_valid; logic [N-1:0] msg_data;
  logic busy;
  int checks = 0, failures = 0;

  lbc_decrypt dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef int poly_t [N];
  poly_t pa, pp, r1, r2, c1, c2;
  logic [N-1:0] m, mexp;

  function automatic int md(longint v);
    longint r = v % Q;
    if (r < 0) r += Q;
    return int'(r);
  endfunction
  function automatic poly_t pmul(poly_t x, poly_t y);
    poly_t z;
    for (int k = 0; k < N; k++) begin
      longint acc = 0;
      for (int i = 0; i < N; i++) begin
        int j = k - i;
        if (j >= 0) acc += longint'(x[i]) * y[j];
        else        acc -= longint'(x[i]) * y[j + N];
      end
      z[k] = md(acc);
    end
    return z;
  endfunction

  task automatic make_block(input bit edges);
    poly_t e1, e2, e3, t1, t2, v;
    for (int i = 0; i < N; i++) begin
      e1[i] = int'($urandom % 5) - 2;
      e2[i] = int'($urandom % 5) - 2;
      e3[i] = int'($urandom % 5) - 2;
      m[i] = 1'($urandom);
    end
    t1 = pmul(pa, e1);
    t2 = pmul(pp, e1);
    for (int i = 0; i < N; i++) begin
      c1[i] = md(t1[i] + e2[i]);
      c2[i] = md(t2[i] + e3[i] + (m[i] ? Q/2 : 0));
    end
    if (edges) begin
      // move c2 so that v lands exactly on and next to the decision points
      v = pmul(c1, r2);
      c2[0] = md(Q/4 - v[0]);           // v = q/4      -> 0
      c2[1] = md(Q/4 + 1 - v[1]);       // v = q/4 + 1  -> 1
      c2[2] = md((3*Q)/4 - 1 - v[2]);   // v = 3q/4 - 1 -> 1
      c2[3] = md((3*Q)/4 - v[3]);       // v = 3q/4     -> 0
    end
    v = pmul(c1, r2);
    for (int i = 0; i < N; i++) begin
      int x;
      x = md(v[i] + c2[i]);
      mexp[i] = (x > Q/4) && (x < (3*Q)/4);
    end
  endtask

  task automatic send(input bit stalls, output int cycles);
    int idx;
    bit got;
    idx = 0; cycles = 0; got = 0;
    while (!got) begin
      ct_valid = (idx < 2*N) && (stalls ? ($urandom % 3 != 0) : 1'b1);
      ct_data  = 13'(idx < N ? c1[idx] : idx < 2*N ? c2[idx - N] : 0);
      @(posedge clk); cycles++;
      if (ct_valid && ct_ready) idx++;
      if (msg_valid) got = 1;
      @(negedge clk);
    end
    ct_valid = 0;
  endtask

  int cyc;
  initial begin
    key_we = 0; key_addr = 0; key_data = 0; ct_valid = 0; ct_data = 0;
    for (int i = 0; i < N; i++) begin
      pa[i] = $urandom % Q;
      r1[i] = int'($urandom % 5) - 2;
      r2[i] = int'($urandom % 5) - 2;
    end
    begin
      poly_t ar2;
      ar2 = pmul(pa, r2);
      for (int i = 0; i < N; i++) pp[i] = md(r1[i] - ar2[i]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      key_we = 1; key_addr = 8'(i);
      key_data = r2[i] < 0 ? {1'b1, 5'(-r2[i])} : {1'b0, 5'(r2[i])};
    end
    @(negedge clk); key_we = 0;

    for (int b = 0; b < 8; b++) begin
      make_block(b == 2);
      send(b % 2 == 1, cyc);
      @(negedge clk);
      checks += 2;
      if (msg_data != mexp) begin failures++; $display("FAIL block %0d: decoded bits differ from rounding", b); end
      if (b != 2 && msg_data != m) begin failures++; $display("FAIL block %0d: message not recovered", b); end
      if (b == 2) begin
        checks++;
        if (msg_data[3:0] != 4'b0110) begin failures++; $display("FAIL decision points %b", msg_data[3:0]); end
      end
      if (b == 0) begin
        $display("lbc_decrypt: one block took %0d cycles", cyc);
        checks++;
        if (cyc > 3*N + 8) begin failures++; $display("FAIL block took %0d cycles", cyc); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
