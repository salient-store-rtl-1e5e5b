// tb_salient_store_csd: end-to-end run of the archival logic at its default
// size (1920x1080 frames, n = 256, q = 7681).
//
// The frame store is the behavioural model with random stalls. The layered
// neural encoder is outside the design, so this bench stands in for it: it
// turns the residual of each macroblock into bytes (low byte of every
// residual of the block's first three rows) and sends them on the compressed
// stream. A ring-LWE key pair is generated here, the public key is written
// through the key port, and each 256-bit block is encrypted; every ciphertext
// coefficient is compared with the reference, and the block is decrypted
// here with the secret key to show the compressed bytes come back. Each
// stored ciphertext is then read back through the design's decryptor, which
// must return the same 256-bit block.
//
// Mechanisms that must each happen at least once: inter macroblock with
// motion search, intra macroblock (mode switch), frame-store stall, residual
// back-pressure, compressed-stream back-pressure from a busy encryptor,
// stalls on the error-sample stream, negacyclic wrap in the multiplier.
module tb_salient_store_csd;
  import salt_pkg::*;
  import tb_video_pkg::*;
  localparam int W = 1920, H = 1080, BLK = 16, SR = 8, N = 256, Q = 7681;
  localparam int GDX = 3, GDY = -2;

  logic clk = 0, rst_n = 0;
  logic mb_start, mb_intra, mb_busy, mb_done;
  logic [6:0] mb_x, mb_y;
  logic mem_req, mem_ready, mem_frame, mem_rvalid;
  logic [20:0] mem_addr;
  logic [7:0] mem_rdata;
  logic mv_valid;
  logic signed [4:0] mv_x, mv_y;
  logic [15:0] mv_sad;
  logic res_valid, res_ready;
  logic signed [8:0] res_row [BLK];
  logic [3:0] res_idx;
  logic cmp_valid, cmp_ready;
  logic [7:0] cmp_data;
  logic key_we, key_sel;
  logic [7:0] key_addr;
  logic [12:0] key_data;
  logic err_valid, err_ready;
  logic [5:0] err_data;
  logic ct_valid;
  ct_sel_e ct_sel;
  logic [7:0] ct_idx;
  logic [12:0] ct_data;
  logic enc_busy;
  logic dkey_we; logic [7:0] dkey_addr; logic [5:0] dkey_data;
  logic dct_valid, dct_ready; logic [12:0] dct_data;
  logic dmsg_valid; logic [N-1:0] dmsg_data; logic dec_busy;
  int checks = 0, failures = 0;

  salient_store_csd dut (.*);
  frame_store_model #(.GDX(GDX), .GDY(GDY)) u_mem (
    .clk, .mem_req, .mem_ready, .mem_frame, .mem_addr, .mem_rvalid, .mem_rdata);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference arithmetic ----------------
  typedef int poly_t [N];
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

  // ---------------- mechanism counters ----------------
  int n_inter = 0, n_intra = 0, n_res_stall = 0, n_cmp_stall = 0, n_err_stall = 0;
  int n_wrap = 0, n_blocks = 0;

  always @(posedge clk) if (rst_n) begin
    if (res_valid && !res_ready) n_res_stall++;
    if (cmp_valid && !cmp_ready) n_cmp_stall++;
    if (err_ready && !err_valid) n_err_stall++;
    // a wrapped lane is negated inside the multiplier
    if (dut.u_enc.u_hspm.g_sdmm[0].u_sdmm.in_valid && dut.u_enc.u_hspm.g_sdmm[0].u_sdmm.s != 2'b00) n_wrap++;
  end

  // ---------------- stand-in encoder: residual bytes -> compressed stream ----------------
  byte unsigned bytes_q [$];
  always @(posedge clk) if (rst_n && res_valid && res_ready && res_idx < 3)
    for (int c = 0; c < BLK; c++) bytes_q.push_back(8'(res_row[c]));

  initial begin
    cmp_valid = 0; cmp_data = 0;
    forever begin
      @(negedge clk);
      if (cmp_fire) void'(bytes_q.pop_front());
      cmp_valid = bytes_q.size() > 0;
      cmp_data  = bytes_q.size() > 0 ? bytes_q[0] : 8'h00;
    end
  end
  // the byte sent is popped on the next negedge only if it was accepted at
  // the posedge between: sample the handshake at the posedge
  bit cmp_fire;
  always @(posedge clk) cmp_fire <= cmp_valid && cmp_ready;

  // ---------------- ciphertext capture ----------------
  poly_t c1g, c2g;
  int nct = 0;
  always @(posedge clk) if (ct_valid) begin
    if (ct_sel == CT_C1) c1g[ct_idx] = int'(ct_data); else c2g[ct_idx] = int'(ct_data);
    nct++;
  end

  // ---------------- keys and error samples ----------------
  poly_t pa, pp, r1, r2;
  int esamp [$];             // e values in the order sent
  initial begin
    err_valid = 0; err_data = 0;
    forever begin
      int v;
      @(negedge clk);
      if ($urandom % 4 == 0) begin err_valid = 0; continue; end
      v = int'($urandom % 5) - 2;
      err_valid = 1;
      err_data  = v < 0 ? {1'b1, 5'(-v)} : {1'b0, 5'(v)};
      @(posedge clk);
      if (err_ready) esamp.push_back(v);
    end
  end

  // ---------------- macroblock commands ----------------
  task automatic macroblock(input int bx, input int by, input bit intra);
    @(negedge clk); mb_start = 1; mb_intra = intra; mb_x = 7'(bx); mb_y = 7'(by);
    @(negedge clk); mb_start = 0;
    while (!mb_done) begin
      if (mv_valid) begin
        checks++;
        if (intra && (mv_x != 0 || mv_y != 0)) begin failures++; $display("FAIL intra mv"); end
        if (!intra && (int'(mv_x) != GDX || int'(mv_y) != GDY)) begin
          failures++; $display("FAIL mv (%0d,%0d)", mv_x, mv_y);
        end
      end
      res_ready = $urandom % 3 != 0;
      @(negedge clk);
    end
    res_ready = 1;
    if (intra) n_intra++; else n_inter++;
  endtask

  // check one encrypted block against the reference built from the samples
  task automatic check_block(input int first_sample, input logic [N-1:0] m);
    poly_t e1, e2, e3, t1, t2, dec;
    for (int i = 0; i < N; i++) begin
      e1[i] = esamp[first_sample + i];
      e2[i] = esamp[first_sample + N + i];
      e3[i] = esamp[first_sample + 2*N + i];
    end
    t1 = pmul(pa, e1);
    t2 = pmul(pp, e1);
    for (int i = 0; i < N; i++) begin
      checks += 2;
      if (c1g[i] != md(t1[i] + e2[i])) begin failures++; if (failures < 10) $display("FAIL c1[%0d]", i); end
      if (c2g[i] != md(t2[i] + e3[i] + (m[i] ? Q/2 : 0))) begin failures++; if (failures < 10) $display("FAIL c2[%0d]", i); end
    end
    dec = pmul(c1g, r2);
    for (int i = 0; i < N; i++) begin
      int v;
      v = md(dec[i] + c2g[i]);
      checks++;
      if (((v > Q/4) && (v < 3*Q/4)) != m[i]) begin failures++; if (failures < 10) $display("FAIL decrypt bit %0d", i); end
    end
  endtask

  logic [N-1:0] expect_msg [$];
  logic [N-1:0] cur_blk;
  int nbytes = 0;
  always @(posedge clk) if (rst_n && cmp_valid && cmp_ready) begin
    cur_blk[8*(nbytes % 32) +: 8] = cmp_data;
    nbytes++;
    if (nbytes % 32 == 0) expect_msg.push_back(cur_blk);
  end

  // retrieval: each stored block is read back into the decryptor
  poly_t c1s [3], c2s [3];
  int n_dec = 0;
  initial begin
    dct_valid = 0; dct_data = 0;
    forever begin
      int idx;
      bit got;
      while (n_dec >= n_blocks) @(negedge clk);
      idx = 0; got = 0;
      while (!got) begin
        dct_valid = idx < 2*N && ($urandom % 4 != 0);
        dct_data  = 13'(idx < N ? c1s[n_dec][idx] : idx < 2*N ? c2s[n_dec][idx - N] : 0);
        @(posedge clk);
        if (dct_valid && dct_ready) idx++;
        if (dmsg_valid) got = 1;
        @(negedge clk);
      end
      dct_valid = 0;
      checks++;
      if (dmsg_data != expect_msg[n_dec]) begin failures++; $display("FAIL block %0d not recovered by the decryptor", n_dec); end
      n_dec++;
    end
  end

  // checker: one encrypted block per busy period of the encryptor
  initial begin
    int first_sample;
    forever begin
      @(posedge enc_busy);
      first_sample = esamp.size();
      nct = 0;
      @(negedge enc_busy);
      @(negedge clk);
      checks++;
      if (nct != 2 * N) begin failures++; $display("FAIL block %0d: %0d coefficients", n_blocks, nct); end
      check_block(first_sample, expect_msg[n_blocks]);
      c1s[n_blocks] = c1g;
      c2s[n_blocks] = c2g;
      n_blocks++;
    end
  end

  initial begin
    mb_start = 0; mb_intra = 0; mb_x = 0; mb_y = 0; res_ready = 1;
    key_we = 0; key_sel = 0; key_addr = 0; key_data = 0;
    dkey_we = 0; dkey_addr = 0; dkey_data = 0;
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
    // hold reset until the frame-store pipeline has drained
    repeat (6) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2 * N; i++) begin
      @(negedge clk);
      key_we = 1; key_sel = i >= N; key_addr = 8'(i % N);
      key_data = 13'(i < N ? pa[i] : pp[i - N]);
    end
    @(negedge clk); key_we = 0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      dkey_we = 1; dkey_addr = 8'(i);
      dkey_data = r2[i] < 0 ? {1'b1, 5'(-r2[i])} : {1'b0, 5'(r2[i])};
    end
    @(negedge clk); dkey_we = 0;

    // two macroblocks produce 2 x 48 bytes = three message blocks
    macroblock(40, 30, 0);
    macroblock(41, 30, 1);
    // the checker process below verifies each block as it completes
    while (n_blocks < 3 || n_dec < 3) @(negedge clk);

    $display("inter=%0d intra=%0d mem_stalls=%0d res_stalls=%0d cmp_stalls=%0d err_stalls=%0d wraps=%0d blocks=%0d decrypted=%0d",
             n_inter, n_intra, u_mem.stalls, n_res_stall, n_cmp_stall, n_err_stall, n_wrap, n_blocks, n_dec);
    checks += 9;
    if (n_inter == 0)     begin failures++; $display("FAIL no inter macroblock"); end
    if (n_intra == 0)     begin failures++; $display("FAIL no intra macroblock"); end
    if (u_mem.stalls == 0) begin failures++; $display("FAIL no frame-store stall"); end
    if (n_res_stall == 0) begin failures++; $display("FAIL no residual back-pressure"); end
    if (n_cmp_stall == 0) begin failures++; $display("FAIL no compressed-stream back-pressure"); end
    if (n_err_stall == 0) begin failures++; $display("FAIL no sample-stream stall"); end
    if (n_wrap == 0)      begin failures++; $display("FAIL no negacyclic wrap"); end
    if (n_blocks != 3)    begin failures++; $display("FAIL %0d blocks", n_blocks); end
    if (n_dec != 3)       begin failures++; $display("FAIL %0d blocks decrypted", n_dec); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
