// frame_store_model: behavioural model of the external frame store (the
// DRAM/flash holding the current and anchor frames). It answers every
// accepted read request after LAT cycles, in order, with a pixel of the
// synthetic video of tb_video_pkg. With STALL set, mem_ready drops at random.
module frame_store_model #(
  parameter int FRAME_W = 1920,
  parameter int FRAME_H = 1080,
  parameter int LAT     = 3,
  parameter int GDX     = 3,
  parameter int GDY     = -2,
  parameter bit STALL   = 1,
  localparam int MAW    = $clog2(FRAME_W * FRAME_H)
) (
  input  logic           clk,
  input  logic           mem_req,
  output logic           mem_ready,
  input  logic           mem_frame,
  input  logic [MAW-1:0] mem_addr,
  output logic           mem_rvalid,
  output logic [7:0]     mem_rdata
);
  import tb_video_pkg::*;
  logic       v_pipe [LAT];
  logic [7:0] d_pipe [LAT];
  int         stalls = 0;

  initial begin
    mem_ready = 1;
    for (int i = 0; i < LAT; i++) begin v_pipe[i] = 0; d_pipe[i] = 0; end
  end

  assign mem_rvalid = v_pipe[LAT-1];
  assign mem_rdata  = d_pipe[LAT-1];

  always @(posedge clk) begin
    for (int i = LAT - 1; i > 0; i--) begin v_pipe[i] <= v_pipe[i-1]; d_pipe[i] <= d_pipe[i-1]; end
    v_pipe[0] <= mem_req && mem_ready;
    d_pipe[0] <= pixel(mem_frame, int'(mem_addr) % FRAME_W, int'(mem_addr) / FRAME_W, GDX, GDY);
    if (mem_req && !mem_ready) stalls++;
    mem_ready <= STALL ? ($urandom % 5 != 0) : 1'b1;
  end
endmodule
