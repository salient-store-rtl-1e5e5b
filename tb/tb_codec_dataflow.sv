// tb_codec_dataflow: runs macroblocks of a 1920x1080 synthetic video through
// the codec front end with a stalling frame-store model. For each block the
// expected motion vector is found here by exhaustive SAD search over the
// edge-clamped window, and every residual pixel is compared with
// cur - prediction. Covers an inner block (true motion found), a corner block
// (window clamped at the frame edge), an intra block (mode switch, zero
// prediction) and back-pressure on the residual stream.
module tb_codec_dataflow;
  import tb_video_pkg::*;
  localparam int W = 1920, H = 1080, BLK = 16, SR = 8, WIN = BLK + 2 * SR;
  localparam int GDX = 3, GDY = -2;
  logic clk = 0, rst_n = 0;
  logic start, intra, busy, done;
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
  int checks = 0, failures = 0;

  codec_dataflow dut (.*);
  frame_store_model #(.GDX(GDX), .GDY(GDY)) u_mem (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int clampi(int v, int lo, int hi);
    return v < lo ? lo : v > hi ? hi : v;
  endfunction
  function automatic int curpix(int bx, int by, int r, int c);
    return int'(pixel(0, clampi(bx*BLK + c, 0, W-1), clampi(by*BLK + r, 0, H-1), GDX, GDY));
  endfunction
  function automatic int winpix(int bx, int by, int r, int c);
    return int'(pixel(1, clampi(bx*BLK - SR + c, 0, W-1), clampi(by*BLK - SR + r, 0, H-1), GDX, GDY));
  endfunction

  int ex, ey, rows;
  bit cur_intra;
  int cbx, cby;

  always @(posedge clk) if (rst_n && res_valid && res_ready) begin
    for (int c = 0; c < BLK; c++) begin
      int e;
      e = curpix(cbx, cby, int'(res_idx), c) -
          (cur_intra ? 0 : winpix(cbx, cby, int'(res_idx) + SR + ey, c + SR + ex));
      checks++;
      if (int'(res_row[c]) != e) begin failures++; if (failures < 10) $display("FAIL residual r%0d c%0d", res_idx, c); end
    end
    rows++;
  end

  task automatic macroblock(input int bx, input int by, input bit intra_m);
    int bs;
    bs = -1; ex = 0; ey = 0;
    if (!intra_m)
      for (int oy = -SR; oy <= SR; oy++)
        for (int ox = -SR; ox <= SR; ox++) begin
          int s;
          s = 0;
          for (int r = 0; r < BLK; r++)
            for (int c = 0; c < BLK; c++) begin
              int d;
              d = curpix(bx, by, r, c) - winpix(bx, by, r + SR + oy, c + SR + ox);
              s += d < 0 ? -d : d;
            end
          if (bs < 0 || s < bs) begin bs = s; ex = ox; ey = oy; end
        end
    cbx = bx; cby = by; cur_intra = intra_m; rows = 0;
    @(negedge clk); start = 1; intra = intra_m; mb_x = 7'(bx); mb_y = 7'(by);
    @(negedge clk); start = 0;
    while (!done) begin
      if (mv_valid) begin
        checks++;
        if (int'(mv_x) != ex || int'(mv_y) != ey) begin
          failures++; $display("FAIL mv (%0d,%0d) exp (%0d,%0d)", mv_x, mv_y, ex, ey);
        end
      end
      res_ready = $urandom % 3 != 0;
      @(negedge clk);
    end
    checks++;
    if (rows != BLK) begin failures++; $display("FAIL %0d residual rows", rows); end
  endtask

  initial begin
    start = 0; intra = 0; mb_x = 0; mb_y = 0; res_ready = 1;
    // hold reset until the frame-store pipeline has drained
    repeat (6) @(posedge clk);
    rst_n = 1;
    macroblock(40, 30, 0);
    checks++;
    if (ex != GDX || ey != GDY) begin failures++; $display("FAIL inner block motion not the global motion"); end
    macroblock(0, 0, 0);
    macroblock(119, 67, 0);
    macroblock(5, 5, 1);
    $display("memory stalls: %0d", u_mem.stalls);
    checks++;
    if (u_mem.stalls == 0) begin failures++; $display("FAIL no memory stall happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
