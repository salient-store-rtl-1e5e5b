// codec_dataflow: moves one macroblock through the codec front end.
//
// For a command (mb_x, mb_y, intra) it
//   1. reads the BLK x BLK block of the current frame F_t and, unless intra,
//      the (BLK+2*SR)^2 search window of the anchor frame F_{t-1} from the
//      frame store into on-chip block buffers. Window pixels that fall
//      outside the frame repeat the nearest edge pixel (coordinate clamp);
//   2. runs motion_estimation on the buffers (skipped in intra mode, where
//      the motion vector is zero);
//   3. reports the motion vector on mv_* and runs predict_residual, whose
//      residual rows leave on res_*.
// The motion vector and the residual are what the layered neural encoder
// consumes; the frame store is an external memory.
//
// Frame-store port: one read request per cycle while mem_req && mem_ready,
// address y*FRAME_W + x within the frame chosen by mem_frame (0 = F_t,
// 1 = anchor). Read data returns in request order on mem_rvalid, with any
// latency. Loading takes BLK^2 (+ (BLK+2*SR)^2 inter) requests, motion
// estimation (2*SR+1)^2 * BLK cycles, and the residual BLK cycles.
//
// The split into motion estimation, prediction/residual and buffered data
// movement follows the design's codec components; buffering, edge clamping,
// the memory protocol and the command interface are this design's choices.
module codec_dataflow #(
  parameter int unsigned FRAME_W = 1920,
  parameter int unsigned FRAME_H = 1080,
  parameter int unsigned BLK     = 16,
  parameter int unsigned SR      = 8,
  parameter int unsigned PIXW    = 8,
  localparam int unsigned WIN  = BLK + 2 * SR,
  localparam int unsigned MVW  = $clog2(SR + 1) + 1,
  localparam int unsigned SADW = $clog2(BLK * BLK * ((1 << PIXW) - 1) + 1),
  localparam int unsigned RW   = $clog2(BLK),
  localparam int unsigned MAW  = $clog2(FRAME_W * FRAME_H),
  localparam int unsigned MBXW = $clog2((FRAME_W + BLK - 1) / BLK),
  localparam int unsigned MBYW = $clog2((FRAME_H + BLK - 1) / BLK)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // command
  input  logic                  start,
  input  logic                  intra,
  input  logic [MBXW-1:0]       mb_x,
  input  logic [MBYW-1:0]       mb_y,
  output logic                  busy,
  output logic                  done,
  // frame store
  output logic                  mem_req,
  input  logic                  mem_ready,
  output logic                  mem_frame,
  output logic [MAW-1:0]        mem_addr,
  input  logic                  mem_rvalid,
  input  logic [PIXW-1:0]       mem_rdata,
  // motion vector
  output logic                  mv_valid,
  output logic signed [MVW-1:0] mv_x,
  output logic signed [MVW-1:0] mv_y,
  output logic [SADW-1:0]       mv_sad,
  // residual
  output logic                  res_valid,
  input  logic                  res_ready,
  output logic signed [PIXW:0]  res_row [BLK],
  output logic [RW-1:0]         res_idx
);
  localparam int unsigned NCUR = BLK * BLK;
  localparam int unsigned NWIN = WIN * WIN;
  localparam int unsigned CW   = $clog2(NCUR + NWIN + 1);

  typedef enum logic [2:0] {D_IDLE, D_LOAD, D_ME, D_RES} dstate_e;
  dstate_e state;

  logic [PIXW-1:0] cur_buf [BLK][BLK];
  logic [PIXW-1:0] win_buf [WIN][WIN];
  logic            intra_q;
  logic [MBXW-1:0] mbx_q;
  logic [MBYW-1:0] mby_q;
  logic [CW-1:0]   req_cnt, rsp_cnt, total;

  logic                  me_start, me_done;
  logic signed [MVW-1:0] me_mv_x, me_mv_y;
  logic [SADW-1:0]       me_sad;
  logic                  pr_start, pr_done;

  assign total = intra_q ? CW'(NCUR) : CW'(NCUR + NWIN);

  // address of request number req_cnt
  always_comb begin
    int x, y, k;
    k = int'(req_cnt);
    if (k < int'(NCUR)) begin
      mem_frame = 1'b0;
      y = int'(mby_q) * int'(BLK) + k / int'(BLK);
      x = int'(mbx_q) * int'(BLK) + k % int'(BLK);
    end else begin
      mem_frame = 1'b1;
      k = k - int'(NCUR);
      y = int'(mby_q) * int'(BLK) - int'(SR) + k / int'(WIN);
      x = int'(mbx_q) * int'(BLK) - int'(SR) + k % int'(WIN);
    end
    if (y < 0) y = 0;
    if (y > int'(FRAME_H) - 1) y = int'(FRAME_H) - 1;
    if (x < 0) x = 0;
    if (x > int'(FRAME_W) - 1) x = int'(FRAME_W) - 1;
    mem_addr = MAW'(y * int'(FRAME_W) + x);
  end

  assign mem_req = (state == D_LOAD) && (req_cnt < total);
  assign busy    = (state != D_IDLE);

  // responses into the block buffers
  always_ff @(posedge clk) begin
    if (mem_rvalid) begin
      if (int'(rsp_cnt) < int'(NCUR))
        cur_buf[int'(rsp_cnt) / int'(BLK)][int'(rsp_cnt) % int'(BLK)] <= mem_rdata;
      else
        win_buf[(int'(rsp_cnt) - int'(NCUR)) / int'(WIN)][(int'(rsp_cnt) - int'(NCUR)) % int'(WIN)] <= mem_rdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= D_IDLE;
      intra_q  <= 1'b0;
      mbx_q    <= '0;
      mby_q    <= '0;
      req_cnt  <= '0;
      rsp_cnt  <= '0;
      me_start <= 1'b0;
      pr_start <= 1'b0;
      mv_valid <= 1'b0;
      mv_x     <= '0;
      mv_y     <= '0;
      mv_sad   <= '0;
      done     <= 1'b0;
    end else begin
      me_start <= 1'b0;
      pr_start <= 1'b0;
      mv_valid <= 1'b0;
      done     <= 1'b0;
      if (mem_req && mem_ready) req_cnt <= req_cnt + 1'b1;
      if (mem_rvalid)           rsp_cnt <= rsp_cnt + 1'b1;
      unique case (state)
        D_IDLE: if (start) begin
          state   <= D_LOAD;
          intra_q <= intra;
          mbx_q   <= mb_x;
          mby_q   <= mb_y;
          req_cnt <= '0;
          rsp_cnt <= '0;
        end
        D_LOAD: if (rsp_cnt == total) begin
          if (intra_q) begin
            // no anchor frame: zero motion, straight to the residual
            state    <= D_RES;
            mv_valid <= 1'b1;
            mv_x     <= '0;
            mv_y     <= '0;
            mv_sad   <= '0;
            pr_start <= 1'b1;
          end else begin
            state    <= D_ME;
            me_start <= 1'b1;
          end
        end
        D_ME: if (me_done) begin
          state    <= D_RES;
          mv_valid <= 1'b1;
          mv_x     <= me_mv_x;
          mv_y     <= me_mv_y;
          mv_sad   <= me_sad;
          pr_start <= 1'b1;
        end
        D_RES: if (pr_done) begin
          state <= D_IDLE;
          done  <= 1'b1;
        end
        default: state <= D_IDLE;
      endcase
    end
  end

  motion_estimation #(.BLK(BLK), .SR(SR), .PIXW(PIXW)) u_me (
    .clk, .rst_n,
    .start(me_start), .cur(cur_buf), .win(win_buf),
    .busy(), .done(me_done),
    .mv_x(me_mv_x), .mv_y(me_mv_y), .best_sad(me_sad)
  );

  predict_residual #(.BLK(BLK), .SR(SR), .PIXW(PIXW)) u_pr (
    .clk, .rst_n,
    .start(pr_start), .intra(intra_q), .cur(cur_buf), .win(win_buf),
    .mv_x, .mv_y,
    .busy(),
    .res_valid, .res_ready, .res_row, .res_idx,
    .done(pr_done)
  );

  a_no_extra_rsp: assert property (@(posedge clk) disable iff (!rst_n)
      mem_rvalid |-> rsp_cnt < req_cnt);
endmodule
