// tb_workload_1080p_frame: a whole 1920x1080 frame (120 x 68 = 8160
// macroblocks) through the codec front end at its default size, with a
// frame-store model that answers every cycle. The synthetic current frame is
// the anchor frame moved by a global motion of (+3, -2) pixels, so every
// block away from the frame border must report exactly that motion vector,
// a SAD of zero and an all-zero residual. The bench reports the cycles per
// macroblock and per frame. It simulates about 48 million cycles.
module tb_workload_1080p_frame;
  localparam int BLK = 16, MBS = 120, ROWS = 68;
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
  frame_store_model #(.GDX(3), .GDY(-2), .STALL(0)) u_mem (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (60000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cur_mb, cur_row, nonzero;
  bit inner;
  always @(posedge clk) if (rst_n && res_valid && res_ready && inner)
    for (int c = 0; c < BLK; c++) if (res_row[c] != 0) nonzero++;

  initial begin
    longint total;
    int cyc;
    start = 0; intra = 0; mb_x = 0; mb_y = 0; res_ready = 1;
    // hold reset until the frame-store pipeline has drained
    repeat (6) @(posedge clk);
    rst_n = 1;
    total = 0;
    for (int mb = 0; mb < MBS * ROWS; mb++) begin
      int b;
      b = mb % MBS;
      cur_mb = b; cur_row = mb / MBS; nonzero = 0;
      inner = b > 0 && b < MBS - 1 && cur_row > 0 && cur_row < ROWS - 1;
      @(negedge clk); start = 1; mb_x = 7'(b); mb_y = 7'(cur_row);
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin
        if (mv_valid && inner) begin
          checks++;
          if (mv_x != 3 || mv_y != -2 || mv_sad != 0) begin
            failures++; if (failures < 10) $display("FAIL mb %0d: mv (%0d,%0d) sad %0d", b, mv_x, mv_y, mv_sad);
          end
        end
        @(negedge clk); cyc++;
      end
      total += cyc;
      if (inner) begin
        checks++;
        if (nonzero != 0) begin failures++; if (failures < 10) $display("FAIL mb %0d: %0d nonzero residuals", b, nonzero); end
      end
    end
    $display("1080p frame: %0d macroblocks, %0d cycles, %0d cycles per macroblock",
             MBS * ROWS, total, total / (MBS * ROWS));
    checks++;
    // load 256 + 1024 pixels, search 17*17*16 + 1, residual 16, a few control cycles
    if (total / (MBS * ROWS) > 1280 + 4625 + 16 + 20) begin failures++; $display("FAIL slower than the schedule"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
