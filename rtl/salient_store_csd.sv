// salient_store_csd: the archival logic of the computational storage
// device's FPGA.
//
// Two pipelines share the device:
//   * codec front end (codec_dataflow): for each macroblock command it reads
//     the current frame and the anchor frame from the frame store, estimates
//     motion, and emits the motion vector and the residual block - the inputs
//     of the layered neural encoder, which sits outside this module;
//   * quantum-safe encryption: the encoder's compressed bytes come back in on
//     cmp_*, are packed into 256-bit blocks (msg_packer) and encrypted with
//     ring-LWE (lbc_encrypt on the hspm polynomial multiplier). Ciphertext
//     coefficients leave on ct_* towards the storage write path.
// The error sampler is external as well and feeds err_*. The public key is
// written through key_* and can be changed between blocks.
//   * retrieval: ciphertext read back from storage enters on dct_* (c1 then
//     c2) and lbc_decrypt, with its own hspm and the secret key written
//     through dkey_*, returns the 256-bit block on dmsg_*.
//
// All ports are plain signals; the two pipelines run concurrently and only
// share the clock and reset. Widths: frame-store addresses 21 bits for
// 1920x1080, macroblock indices 7 bits, coefficients 13 bits.
//
// The division into codec kernels and an encryption engine on the CSD FPGA
// follows the design; placing the neural encoder and sampler outside, and the
// byte interface between them, are this implementation's choices.
module salient_store_csd
  import salt_pkg::*;
#(
  parameter int unsigned FRAME_W = 1920,
  parameter int unsigned FRAME_H = 1080,
  parameter int unsigned N       = 256,
  parameter int unsigned Q       = 7681,
  localparam int unsigned BLK  = MB_BLK,
  localparam int unsigned SR   = MB_SR,
  localparam int unsigned MVW  = $clog2(SR + 1) + 1,
  localparam int unsigned SADW = $clog2(BLK * BLK * ((1 << PIX_W) - 1) + 1),
  localparam int unsigned MAW  = $clog2(FRAME_W * FRAME_H),
  localparam int unsigned MBXW = $clog2((FRAME_W + BLK - 1) / BLK),
  localparam int unsigned MBYW = $clog2((FRAME_H + BLK - 1) / BLK),
  localparam int unsigned AW   = $clog2(N)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // macroblock command
  input  logic                   mb_start,
  input  logic                   mb_intra,
  input  logic [MBXW-1:0]        mb_x,
  input  logic [MBYW-1:0]        mb_y,
  output logic                   mb_busy,
  output logic                   mb_done,
  // frame store
  output logic                   mem_req,
  input  logic                   mem_ready,
  output logic                   mem_frame,
  output logic [MAW-1:0]         mem_addr,
  input  logic                   mem_rvalid,
  input  logic [PIX_W-1:0]       mem_rdata,
  // to the layered neural encoder
  output logic                   mv_valid,
  output logic signed [MVW-1:0]  mv_x,
  output logic signed [MVW-1:0]  mv_y,
  output logic [SADW-1:0]        mv_sad,
  output logic                   res_valid,
  input  logic                   res_ready,
  output logic signed [PIX_W:0]  res_row [BLK],
  output logic [$clog2(BLK)-1:0] res_idx,
  // from the layered neural encoder
  input  logic                   cmp_valid,
  output logic                   cmp_ready,
  input  logic [7:0]             cmp_data,
  // public key
  input  logic                   key_we,
  input  logic                   key_sel,
  input  logic [AW-1:0]          key_addr,
  input  logic [LBC_QW-1:0]      key_data,
  // error sampler
  input  logic                   err_valid,
  output logic                   err_ready,
  input  logic [LBC_BW-1:0]      err_data,
  // ciphertext to storage
  output logic                   ct_valid,
  output ct_sel_e                ct_sel,
  output logic [AW-1:0]          ct_idx,
  output logic [LBC_QW-1:0]      ct_data,
  output logic                   enc_busy,
  // retrieval: secret key and ciphertext read back from storage
  input  logic                   dkey_we,
  input  logic [AW-1:0]          dkey_addr,
  input  logic [LBC_BW-1:0]      dkey_data,
  input  logic                   dct_valid,
  output logic                   dct_ready,
  input  logic [LBC_QW-1:0]      dct_data,
  output logic                   dmsg_valid,
  output logic [N-1:0]           dmsg_data,
  output logic                   dec_busy
);
  logic         msg_valid, msg_ready;
  logic [N-1:0] msg_data;

  codec_dataflow #(.FRAME_W(FRAME_W), .FRAME_H(FRAME_H), .BLK(BLK), .SR(SR), .PIXW(PIX_W)) u_codec (
    .clk, .rst_n,
    .start(mb_start), .intra(mb_intra), .mb_x, .mb_y,
    .busy(mb_busy), .done(mb_done),
    .mem_req, .mem_ready, .mem_frame, .mem_addr, .mem_rvalid, .mem_rdata,
    .mv_valid, .mv_x, .mv_y, .mv_sad,
    .res_valid, .res_ready, .res_row, .res_idx
  );

  msg_packer #(.N(N)) u_pack (
    .clk, .rst_n,
    .byte_valid(cmp_valid), .byte_ready(cmp_ready), .byte_data(cmp_data),
    .blk_valid(msg_valid), .blk_ready(msg_ready), .blk_data(msg_data)
  );

  lbc_encrypt #(.N(N), .Q(Q)) u_enc (
    .clk, .rst_n,
    .key_we, .key_sel, .key_addr, .key_data,
    .msg_valid, .msg_ready, .msg_data,
    .err_valid, .err_ready, .err_data,
    .ct_valid, .ct_sel, .ct_idx, .ct_data,
    .busy(enc_busy)
  );

  lbc_decrypt #(.N(N), .Q(Q)) u_dec (
    .clk, .rst_n,
    .key_we(dkey_we), .key_addr(dkey_addr), .key_data(dkey_data),
    .ct_valid(dct_valid), .ct_ready(dct_ready), .ct_data(dct_data),
    .msg_valid(dmsg_valid), .msg_data(dmsg_data),
    .busy(dec_busy)
  );
endmodule
