// msg_packer: gathers the compressed byte stream into N-bit message blocks
// for the encryptor. Byte k of a block fills bits 8k+7..8k, so bit i of the
// block is bit i%8 of byte i/8. A full block waits on blk_valid/blk_ready
// while the next bytes are held off (byte_ready low), which is how
// back-pressure from a busy encryptor reaches the compressed stream.
// Timing: one byte per cycle; a full block is offered the cycle after its
// last byte and the packer accepts bytes again the cycle after it is taken.
// How compressed data reaches the encryptor is not specified by the design;
// this byte packer is this implementation's own choice.
module msg_packer #(
  parameter int unsigned N = 256,
  localparam int unsigned NB = N / 8,
  localparam int unsigned KW = $clog2(NB + 1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         byte_valid,
  output logic         byte_ready,
  input  logic [7:0]   byte_data,
  output logic         blk_valid,
  input  logic         blk_ready,
  output logic [N-1:0] blk_data
);
  logic [KW-1:0] fill;

  assign blk_valid  = (fill == KW'(NB));
  assign byte_ready = !blk_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill     <= '0;
      blk_data <= '0;
    end else if (blk_valid) begin
      if (blk_ready) fill <= '0;
    end else if (byte_valid) begin
      blk_data[8*fill +: 8] <= byte_data;
      fill <= fill + 1'b1;
    end
  end
endmodule
