// predict_residual: motion-compensated prediction and residual of one block,
//     R_t = F_t - predict(F_{t-1}, M_t).
//
// The prediction of block row r is the anchor-frame window row r + SR + mv_y,
// starting at column SR + mv_x, i.e. the block of F_{t-1} translated by the
// motion vector. The residual row cur[r] - pred[r] (BLK signed PIXW+1-bit
// values) is computed and registered in one pipeline stage, so a whole block
// streams out in BLK cycles when the consumer is always ready. In intra mode
// (no anchor frame, as for the first frame of a sequence) the prediction is
// zero and the residual is the block itself.
//
// Interface: pulse start with cur, win, mv_x/mv_y and intra stable until done.
// Rows leave on res_valid/res_ready with their row number res_idx; done
// pulses when the last row is accepted.
//
// The residual equation, the translation of anchor-frame blocks by the
// motion vector, and pipelining follow the design. The row-wide stream, the
// handshake, and the intra mode taken from the design's first-frame rule are
// this implementation's choices.
module predict_residual #(
  parameter int unsigned BLK  = 16,
  parameter int unsigned SR   = 8,
  parameter int unsigned PIXW = 8,
  localparam int unsigned WIN = BLK + 2 * SR,
  localparam int unsigned MVW = $clog2(SR + 1) + 1,
  localparam int unsigned RW  = $clog2(BLK)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic                   intra,
  input  logic [PIXW-1:0]        cur [BLK][BLK],
  input  logic [PIXW-1:0]        win [WIN][WIN],
  input  logic signed [MVW-1:0]  mv_x,
  input  logic signed [MVW-1:0]  mv_y,
  output logic                   busy,
  output logic                   res_valid,
  input  logic                   res_ready,
  output logic signed [PIXW:0]   res_row [BLK],
  output logic [RW-1:0]          res_idx,
  output logic                   done
);
  localparam logic signed [MVW-1:0] MV_MAX = MVW'(SR);

  logic [RW-1:0]          row;       // next row to compute
  logic                   issuing;   // rows left to compute
  logic signed [PIXW:0]   diff [BLK];
  logic                   advance;

  // prediction and residual of row `row`
  always_comb begin
    for (int c = 0; c < BLK; c++) begin
      logic [PIXW-1:0] pred;
      int              wy, wx;
      wy   = int'(row) + int'(SR) + int'(mv_y);
      wx   = c + int'(SR) + int'(mv_x);
      pred = intra ? '0 : win[wy][wx];
      diff[c] = signed'({1'b0, cur[row][c]}) - signed'({1'b0, pred});
    end
  end

  // the output register may load when it is empty or being emptied
  assign advance = issuing && (!res_valid || res_ready);
  assign busy    = issuing || res_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row       <= '0;
      issuing   <= 1'b0;
      res_valid <= 1'b0;
      res_idx   <= '0;
      done      <= 1'b0;
      for (int c = 0; c < BLK; c++) res_row[c] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        issuing <= 1'b1;
        row     <= '0;
      end
      if (res_valid && res_ready) begin
        res_valid <= 1'b0;
        if (res_idx == RW'(BLK - 1)) done <= 1'b1;
      end
      if (advance) begin
        res_valid <= 1'b1;
        res_idx   <= row;
        for (int c = 0; c < BLK; c++) res_row[c] <= diff[c];
        row <= row + 1'b1;
        if (row == RW'(BLK - 1)) issuing <= 1'b0;
      end
    end
  end

  a_mv_in_range: assert property (@(posedge clk) disable iff (!rst_n)
      issuing && !intra |-> (mv_x >= -MV_MAX && mv_x <= MV_MAX &&
                             mv_y >= -MV_MAX && mv_y <= MV_MAX));
endmodule
