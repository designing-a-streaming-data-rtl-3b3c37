// Detector data path from the encoder outputs to the link: coalescing logic
// and block FIFO.
//
// The pixel array and the parallel encoders sit in front of this module and
// the serializer/transmitter behind it; neither is part of it. Every cycle
// in which enc_valid is high the NUM_ENC encoder outputs (metadata, data
// words, word counts) are coalesced; each completed BLOCK_W-bit block is
// written into the FIFO, which the transmitter drains through
// tx_valid/tx_ready/tx_data (show-ahead). The front end never stalls: a
// block that finds the FIFO full, with no read in the same cycle, is lost,
// flagged on overflow for that cycle and counted in drop_count (saturating).
// buf_fill is the number of words waiting in the packer's buffer.
// HDR_WORDS > 0 turns on the optional per-block header (see packer); the
// default, no header, matches the architecture's main configuration.
// This follows the reduction -> packing -> FIFO -> transmitter chain of the
// architecture; the drop policy, the handshake and the counters are this
// design's choices. rst_n is active low and synchronous.
module detector_daq #(
  parameter  int unsigned NUM_ENC    = coalesce_pkg::NUM_ENC,
  parameter  int unsigned MAX_WORDS  = coalesce_pkg::MAX_WORDS,
  parameter  int unsigned WORD_W     = coalesce_pkg::WORD_W,
  parameter  int unsigned META_W     = coalesce_pkg::META_W,
  parameter  int unsigned BLOCK_W    = coalesce_pkg::BLOCK_W,
  parameter  int unsigned FIFO_DEPTH = coalesce_pkg::FIFO_DEPTH,
  parameter  int unsigned HDR_WORDS  = 0,   // optional per-block header words (see packer)
  localparam int unsigned LW         = $clog2(MAX_WORDS + 1),
  localparam int unsigned CW         = $clog2(FIFO_DEPTH + 1),
  localparam int unsigned FLW        = $clog2(BLOCK_W / WORD_W + 1)
) (
  input  logic                                          clk,
  input  logic                                          rst_n,
  // from the parallel encoders
  input  logic                                          enc_valid,
  input  logic [NUM_ENC-1:0][MAX_WORDS-1:0][WORD_W-1:0] enc_data,
  input  logic [NUM_ENC-1:0][LW-1:0]                    enc_len,
  input  logic [NUM_ENC-1:0][META_W-1:0]                enc_meta,
  // to the serializer and transmitter
  output logic                                          tx_valid,
  input  logic                                          tx_ready,
  output logic [BLOCK_W-1:0]                            tx_data,
  // status
  output logic [CW-1:0]                                 fifo_count,
  output logic [FLW-1:0]                                buf_fill,
  output logic                                          overflow,
  output logic [15:0]                                   drop_count
);

  logic               blk_valid;
  logic [BLOCK_W-1:0] blk_data;

  coalescing #(
    .NUM_ENC(NUM_ENC), .MAX_WORDS(MAX_WORDS), .WORD_W(WORD_W),
    .META_W(META_W), .BLOCK_W(BLOCK_W), .HDR_WORDS(HDR_WORDS)
  ) u_coalescing (
    .clk      (clk),
    .rst_n    (rst_n),
    .enc_valid(enc_valid),
    .enc_data (enc_data),
    .enc_len  (enc_len),
    .enc_meta (enc_meta),
    .blk_valid(blk_valid),
    .blk_data (blk_data),
    .fill     (buf_fill)
  );

  block_fifo #(.WIDTH(BLOCK_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk     (clk),
    .rst_n   (rst_n),
    .wr_en   (blk_valid),
    .wr_data (blk_data),
    .wr_drop (overflow),
    .full    (),
    .rd_valid(tx_valid),
    .rd_ready(tx_ready),
    .rd_data (tx_data),
    .count   (fifo_count)
  );

  always_ff @(posedge clk) begin
    if (!rst_n)                          drop_count <= '0;
    else if (overflow && ~&drop_count)   drop_count <= drop_count + 1'b1;
  end

endmodule
