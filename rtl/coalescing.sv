// Coalescing logic: parallel encoder outputs in, fixed-size blocks out.
//
// Chains the reduction tree and the packer. Each valid cycle the NUM_ENC
// encoder outputs are reduced to one dense vector (concatenated metadata
// followed by every encoder's data words in encoder order) and appended to
// the packer's buffer; whenever BLOCK_W bits have accumulated, a block is
// emitted on blk_valid/blk_data in that same cycle. Apart from the packer's
// buffer the path is combinational, so it runs in the clock domain of the
// encoders and takes new data every cycle without back-pressure.
//
// blk_data bit 0 is bit 0 of stream word 0; the stream word k occupies bits
// [k*WORD_W +: WORD_W]. The metadata/data order inside a block follows the
// architecture; the bit and word order is this design's choice. With
// HDR_WORDS > 0 each block starts with that many header words giving the
// offset of the first reduction output starting in it (off by default, as
// in the architecture's main configuration).
module coalescing #(
  parameter  int unsigned NUM_ENC   = coalesce_pkg::NUM_ENC,
  parameter  int unsigned MAX_WORDS = coalesce_pkg::MAX_WORDS,
  parameter  int unsigned WORD_W    = coalesce_pkg::WORD_W,
  parameter  int unsigned META_W    = coalesce_pkg::META_W,
  parameter  int unsigned BLOCK_W   = coalesce_pkg::BLOCK_W,
  parameter  int unsigned HDR_WORDS = 0,   // optional per-block header words (see packer)
  localparam int unsigned LW        = $clog2(MAX_WORDS + 1),
  localparam int unsigned BLK_WORDS = BLOCK_W / WORD_W,
  localparam int unsigned FLW       = $clog2(BLK_WORDS + 1)
) (
  input  logic                                          clk,
  input  logic                                          rst_n,
  input  logic                                          enc_valid,
  input  logic [NUM_ENC-1:0][MAX_WORDS-1:0][WORD_W-1:0] enc_data,
  input  logic [NUM_ENC-1:0][LW-1:0]                    enc_len,
  input  logic [NUM_ENC-1:0][META_W-1:0]                enc_meta,
  output logic                                          blk_valid,
  output logic [BLOCK_W-1:0]                            blk_data,
  output logic [FLW-1:0]                                fill
);

  localparam int unsigned RED_WORDS = coalesce_pkg::red_words(NUM_ENC, MAX_WORDS, META_W, WORD_W);
  localparam int unsigned RLW       = $clog2(RED_WORDS + 1);

  if (BLK_WORDS * WORD_W != BLOCK_W) begin : g_bad_block
    $error("coalescing: BLOCK_W (%0d) must be a multiple of WORD_W (%0d)", BLOCK_W, WORD_W);
  end

  logic [RED_WORDS-1:0][WORD_W-1:0] red_data;
  logic [RLW-1:0]                   red_len;
  logic [BLK_WORDS-1:0][WORD_W-1:0] pk_data;

  reduction #(
    .NUM_ENC(NUM_ENC), .MAX_WORDS(MAX_WORDS), .WORD_W(WORD_W), .META_W(META_W)
  ) u_reduction (
    .enc_data(enc_data),
    .enc_len (enc_len),
    .enc_meta(enc_meta),
    .out     (red_data),
    .out_len (red_len)
  );

  packer #(
    .WORD_W(WORD_W), .IN_WORDS(RED_WORDS), .BLOCK_WORDS(BLK_WORDS), .HDR_WORDS(HDR_WORDS)
  ) u_packer (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (enc_valid),
    .in_data  (red_data),
    .in_len   (red_len),
    .blk_valid(blk_valid),
    .blk_data (pk_data),
    .fill     (fill)
  );

  assign blk_data = pk_data;

  // No encoder may report more words than it has.
  for (genvar e = 0; e < NUM_ENC; e++) begin : g_chk
    always_ff @(posedge clk)
      if (rst_n && enc_valid)
        assert (enc_len[e] <= LW'(MAX_WORDS))
          else $error("coalescing: encoder %0d length %0d > %0d", e, enc_len[e], MAX_WORDS);
  end

endmodule
