// tb_lbc_encrypt: generates a ring-LWE key pair here (p = r1 - a*r2), writes
// the public key through the key port, encrypts two random 256-bit blocks
// and compares every ciphertext coefficient with c1 = a*e1 + e2 and
// c2 = p*e1 + e3 + m*floor(q/2) computed here. Block 1 uses small errors and
// is also decrypted here (c1*r2 + c2, bit = value near q/2) to show the
// message comes back. Block 2 uses the full 6-bit error range and random
// stalls on the sample stream. The cycle count of an unstalled block is
// checked against 2 x (3N + 4) plus a few control cycles.
module tb_lbc_encrypt;
  import salt_pkg::*;
  localparam int N = 256, Q = 7681;
  logic clk = 0, rst_n = 0;
  logic key_we, key_sel; logic [7:0] key_addr; logic [12:0] key_data;
  logic msg_valid, msg_ready; logic [N-1:0] msg_data;
  logic err_valid, err_ready; logic [5:0] err_data;
  logic ct_valid; ct_sel_e ct_sel; logic [7:0] ct_idx; logic [12:0] ct_data;
  logic busy;
  int checks = 0, failures = 0;

  lbc_encrypt dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef int poly_t [N];
  poly_t pa, pp, r1, r2, e1, e2, e3, c1e, c2e, c1g, c2g;
  logic [5:0] e1r [N], e2r [N], e3r [N];
  int nct;

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

  function automatic logic [5:0] sm(int v);
    return v < 0 ? {1'b1, 5'(-v)} : {1'b0, 5'(v)};
  endfunction

  always @(posedge clk) if (ct_valid) begin
    if (ct_sel == CT_C1) c1g[ct_idx] = int'(ct_data);
    else                 c2g[ct_idx] = int'(ct_data);
    nct++;
  end

  task automatic encrypt_block(input int emax, input bit stalls, output int cycles);
    poly_t t1, t2;
    int idx;
    for (int i = 0; i < N; i++) begin
      e1[i] = int'($urandom % (2*emax + 1)) - emax;
      e2[i] = int'($urandom % (2*emax + 1)) - emax;
      e3[i] = int'($urandom % (2*emax + 1)) - emax;
      e1r[i] = sm(e1[i]); e2r[i] = sm(e2[i]); e3r[i] = sm(e3[i]);
      msg_data[i] = 1'($urandom);
    end
    t1 = pmul(pa, e1);
    t2 = pmul(pp, e1);
    for (int i = 0; i < N; i++) begin
      c1e[i] = md(t1[i] + e2[i]);
      c2e[i] = md(t2[i] + e3[i] + (msg_data[i] ? Q / 2 : 0));
    end
    nct = 0;
    @(negedge clk); msg_valid = 1;
    @(negedge clk); msg_valid = 0;
    cycles = 1;
    idx = 0;
    while (idx < 3 * N) begin
      err_valid = stalls ? ($urandom % 4 != 0) : 1'b1;
      err_data  = idx < N ? e1r[idx] : idx < 2*N ? e2r[idx - N] : e3r[idx - 2*N];
      @(posedge clk); cycles++;
      if (err_valid && err_ready) idx++;
      @(negedge clk);
    end
    err_valid = 0;
    while (busy) begin @(posedge clk); cycles++; end
    @(negedge clk);
    checks++;
    if (nct != 2 * N) begin failures++; $display("FAIL %0d ciphertext coefficients", nct); end
    for (int i = 0; i < N; i++) begin
      checks += 2;
      if (c1g[i] != c1e[i]) begin failures++; if (failures < 10) $display("FAIL c1[%0d]=%0d exp %0d", i, c1g[i], c1e[i]); end
      if (c2g[i] != c2e[i]) begin failures++; if (failures < 10) $display("FAIL c2[%0d]=%0d exp %0d", i, c2g[i], c2e[i]); end
    end
  endtask

  int cyc;
  poly_t dec;
  initial begin
    key_we = 0; key_sel = 0; key_addr = 0; key_data = 0;
    msg_valid = 0; msg_data = '0; err_valid = 0; err_data = 0;
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
    for (int i = 0; i < 2 * N; i++) begin
      @(negedge clk);
      key_we = 1; key_sel = i >= N; key_addr = 8'(i % N);
      key_data = 13'(i < N ? pa[i] : pp[i - N]);
    end
    @(negedge clk); key_we = 0;

    encrypt_block(2, 0, cyc);
    $display("lbc_encrypt: one block took %0d cycles", cyc);
    checks++;
    if (cyc > 2 * (3*N + 4) + 8) begin failures++; $display("FAIL cycle count %0d", cyc); end
    // decrypt here: m_i = 1 when (c1*r2 + c2)_i is nearer q/2 than 0
    dec = pmul(c1g, r2);
    for (int i = 0; i < N; i++) begin
      int v;
      bit bitv;
      v = md(dec[i] + c2g[i]);
      bitv = (v > Q / 4) && (v < 3 * Q / 4);
      checks++;
      if (bitv != msg_data[i]) begin failures++; if (failures < 10) $display("FAIL decrypted bit %0d", i); end
    end
    encrypt_block(31, 1, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
