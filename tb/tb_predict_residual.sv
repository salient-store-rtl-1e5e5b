// tb_predict_residual: random block, window and motion vector; compares each
// residual row with cur - window(translated) computed here, in inter and
// intra mode, with and without back-pressure on the row stream, and checks
// that an unstalled block takes BLK cycles.
module tb_predict_residual;
  localparam int BLK = 16, SR = 8, WIN = BLK + 2 * SR;
  logic clk = 0, rst_n = 0;
  logic start, intra, busy, res_valid, res_ready, done;
  logic [7:0] cur [BLK][BLK];
  logic [7:0] win [WIN][WIN];
  logic signed [4:0] mv_x, mv_y;
  logic signed [8:0] res_row [BLK];
  logic [3:0] res_idx;
  int checks = 0, failures = 0;
  int rows_seen;
  int cycles;

  predict_residual dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && res_valid && res_ready) begin
    for (int c = 0; c < BLK; c++) begin
      int e;
      e = int'(cur[res_idx][c]) -
          (intra ? 0 : int'(win[int'(res_idx) + SR + int'(mv_y)][c + SR + int'(mv_x)]));
      checks++;
      if (int'(res_row[c]) != e) begin
        failures++;
        if (failures < 10) $display("FAIL row %0d col %0d: %0d exp %0d", res_idx, c, res_row[c], e);
      end
    end
    checks++;
    if (int'(res_idx) != rows_seen) begin failures++; $display("FAIL row order"); end
    rows_seen++;
  end

  task automatic block(input bit intra_m, input bit stall);
    for (int r = 0; r < WIN; r++) for (int c = 0; c < WIN; c++) win[r][c] = 8'($urandom);
    for (int r = 0; r < BLK; r++) for (int c = 0; c < BLK; c++) cur[r][c] = 8'($urandom);
    mv_x = 5'(int'($urandom % (2*SR + 1)) - SR);
    mv_y = 5'(int'($urandom % (2*SR + 1)) - SR);
    intra = intra_m;
    rows_seen = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin
      res_ready = stall ? ($urandom % 2 == 0) : 1'b1;
      @(negedge clk); cycles++;
    end
    res_ready = 1;
    checks++;
    if (rows_seen != BLK) begin failures++; $display("FAIL %0d rows", rows_seen); end
  endtask

  initial begin
    start = 0; intra = 0; res_ready = 1; mv_x = 0; mv_y = 0;
    for (int r = 0; r < BLK; r++) for (int c = 0; c < BLK; c++) cur[r][c] = 0;
    for (int r = 0; r < WIN; r++) for (int c = 0; c < WIN; c++) win[r][c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    block(0, 0);
    checks++;
    // start, BLK rows, done one cycle after the last row
    if (cycles != BLK + 2) begin failures++; $display("FAIL block took %0d cycles", cycles); end
    block(0, 1);
    block(1, 0);
    block(1, 1);
    for (int t = 0; t < 4; t++) block(0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
