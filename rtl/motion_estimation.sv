// motion_estimation: full-search block matching between a BLK x BLK block of
// the current frame F_t and a (BLK+2*SR)^2 window of the anchor frame F_{t-1}.
//
// Every displacement (dx, dy) in [-SR, SR]^2 is scored by the sum of absolute
// differences (SAD) between the block and the window region at that offset.
// The datapath evaluates one block row per cycle (BLK absolute differences
// and an adder tree), so a search takes (2*SR+1)^2 * BLK cycles plus one.
// Candidates are visited in raster order, dy outer and dx inner, both from
// -SR; a candidate replaces the best only with a strictly smaller SAD, so
// ties go to the first one visited.
//
// Interface: pulse start with cur and win stable until done. done pulses for
// one cycle with mv_x, mv_y (two's complement) and best_sad valid and held
// until the next start. win[0][0] is the pixel at offset (-SR, -SR) from the
// block's top-left pixel.
//
// Block matching by SAD on a dedicated datapath follows the design's motion
// estimation step; block size, search range, SAD metric, row-per-cycle
// schedule and tie rule are this implementation's choices.
module motion_estimation #(
  parameter int unsigned BLK  = 16,
  parameter int unsigned SR   = 8,
  parameter int unsigned PIXW = 8,
  localparam int unsigned WIN  = BLK + 2 * SR,
  localparam int unsigned MVW  = $clog2(SR + 1) + 1,
  localparam int unsigned SADW = $clog2(BLK * BLK * ((1 << PIXW) - 1) + 1),
  localparam int unsigned OW   = $clog2(2 * SR + 1),
  localparam int unsigned RW   = $clog2(BLK)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [PIXW-1:0]        cur [BLK][BLK],
  input  logic [PIXW-1:0]        win [WIN][WIN],
  output logic                   busy,
  output logic                   done,
  output logic signed [MVW-1:0]  mv_x,
  output logic signed [MVW-1:0]  mv_y,
  output logic [SADW-1:0]        best_sad
);
  logic [OW-1:0]   ox, oy;     // candidate offset, 0 .. 2*SR
  logic [RW-1:0]   row;
  logic [SADW-1:0] acc, row_sad, cand_sad;
  logic            first;      // no candidate scored yet

  // SAD of one block row against the window at the current candidate
  always_comb begin
    row_sad = '0;
    for (int c = 0; c < BLK; c++) begin
      logic [PIXW-1:0] p, q, ad;
      p  = cur[row][c];
      q  = win[32'(row) + 32'(oy)][c + 32'(ox)];
      ad = (p > q) ? p - q : q - p;
      row_sad = row_sad + SADW'(ad);
    end
    cand_sad = acc + row_sad;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      ox       <= '0;
      oy       <= '0;
      row      <= '0;
      acc      <= '0;
      first    <= 1'b1;
      mv_x     <= '0;
      mv_y     <= '0;
      best_sad <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          ox    <= '0;
          oy    <= '0;
          row   <= '0;
          acc   <= '0;
          first <= 1'b1;
        end
      end else if (row != RW'(BLK - 1)) begin
        row <= row + 1'b1;
        acc <= cand_sad;
      end else begin
        // last row of this candidate: compare and move on
        row <= '0;
        acc <= '0;
        if (first || cand_sad < best_sad) begin
          best_sad <= cand_sad;
          mv_x     <= MVW'(signed'({1'b0, ox}) - signed'(SR));
          mv_y     <= MVW'(signed'({1'b0, oy}) - signed'(SR));
          first    <= 1'b0;
        end
        if (ox != OW'(2 * SR)) begin
          ox <= ox + 1'b1;
        end else begin
          ox <= '0;
          if (oy != OW'(2 * SR)) oy <= oy + 1'b1;
          else begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end
endmodule
