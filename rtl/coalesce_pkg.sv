// Shared constants of the streaming coalescer.
//
// The coalescer takes NUM_ENC parallel encoder outputs per clock, each a
// fixed META_W-bit metadata field plus 0..MAX_WORDS data words of WORD_W
// bits, and packs them into BLOCK_W-bit blocks for a fixed-width link.
// Eight encoders and a 512-bit output block are the figures of the
// architecture this follows; the word width, the maximum encoder length and
// the metadata width are this design's choices, picked so that a worst-case
// cycle (all encoders full) still fits in one block, which is what keeps the
// packer stall-free. FIFO_DEPTH is also a choice of this design.
package coalesce_pkg;

  localparam int unsigned NUM_ENC    = 8;    // parallel encoders
  localparam int unsigned MAX_WORDS  = 5;    // max data words per encoder per cycle
  localparam int unsigned WORD_W     = 8;    // bits per variable-length data word
  localparam int unsigned META_W     = 4;    // metadata bits per encoder
  localparam int unsigned BLOCK_W    = 512;  // bits per output block
  localparam int unsigned FIFO_DEPTH = 16;   // blocks held between packer and link

  // Number of words the metadata of all encoders occupies once concatenated.
  function automatic int unsigned meta_words(int unsigned n_enc, int unsigned meta_w,
                                             int unsigned word_w);
    return (n_enc * meta_w + word_w - 1) / word_w;
  endfunction

  // Maximum number of words one reduction output (metadata + data) can hold.
  function automatic int unsigned red_words(int unsigned n_enc, int unsigned max_words,
                                            int unsigned meta_w, int unsigned word_w);
    return meta_words(n_enc, meta_w, word_w) + n_enc * max_words;
  endfunction

endpackage
