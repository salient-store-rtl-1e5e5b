// tb_motion_estimation: fills the anchor window with random pixels, plants a
// noisy copy of the current block at a random displacement, and compares the
// motion vector and SAD with an exhaustive search done here (same raster
// order, first minimum wins). Also checks the search time of
// (2*SR+1)^2 * BLK cycles. One trial uses a flat block so that every
// candidate ties and the tie rule is exercised.
module tb_motion_estimation;
  localparam int BLK = 16, SR = 8, WIN = BLK + 2 * SR;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  logic [7:0] cur [BLK][BLK];
  logic [7:0] win [WIN][WIN];
  logic signed [4:0] mv_x, mv_y;
  logic [15:0] best_sad;
  int checks = 0, failures = 0;

  motion_estimation dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic trial(input bit flat);
    int dx, dy, bx, by, bs, cyc;
    dx = int'($urandom % (2*SR + 1)) - SR;
    dy = int'($urandom % (2*SR + 1)) - SR;
    for (int r = 0; r < WIN; r++)
      for (int c = 0; c < WIN; c++) win[r][c] = flat ? 8'd50 : 8'($urandom);
    for (int r = 0; r < BLK; r++)
      for (int c = 0; c < BLK; c++) begin
        cur[r][c] = flat ? 8'd60 : 8'($urandom);
        if (!flat) win[r + SR + dy][c + SR + dx] = 8'(int'(cur[r][c]) ^ int'($urandom % 4));
      end
    // reference search
    bs = -1; bx = 0; by = 0;
    for (int oy = -SR; oy <= SR; oy++)
      for (int ox = -SR; ox <= SR; ox++) begin
        int s;
        s = 0;
        for (int r = 0; r < BLK; r++)
          for (int c = 0; c < BLK; c++) begin
            int d;
            d = int'(cur[r][c]) - int'(win[r + SR + oy][c + SR + ox]);
            s += d < 0 ? -d : d;
          end
        if (bs < 0 || s < bs) begin bs = s; bx = ox; by = oy; end
      end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 4;
    if (int'(mv_x) != bx || int'(mv_y) != by) begin
      failures++; $display("FAIL mv (%0d,%0d) exp (%0d,%0d)", mv_x, mv_y, bx, by);
    end
    if (int'(best_sad) != bs) begin failures++; $display("FAIL sad %0d exp %0d", best_sad, bs); end
    if (!flat && (bx != dx || by != dy)) begin failures++; $display("FAIL planted (%0d,%0d) not found", dx, dy); end
    if (cyc != (2*SR + 1) * (2*SR + 1) * BLK + 1) begin failures++; $display("FAIL search took %0d cycles", cyc); end
  endtask

  initial begin
    start = 0;
    for (int r = 0; r < BLK; r++) for (int c = 0; c < BLK; c++) cur[r][c] = 0;
    for (int r = 0; r < WIN; r++) for (int c = 0; c < WIN; c++) win[r][c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4; t++) trial(0);
    trial(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
