// Reduction stage: many variable-length encoder outputs to one dense vector.
//
// NUM_ENC encoders each deliver up to MAX_WORDS data words with a length and
// a fixed META_W-bit metadata field. The data words are merged pairwise in a
// binary tree of log2(NUM_ENC) levels of merger instances: level l joins
// neighbouring vectors of capacity MAX_WORDS*2**l, so encoder 0's words come
// first, then encoder 1's, and so on, with no gaps. The metadata fields are
// simply concatenated (encoder 0 in the lowest bits), cut into WORD_W-bit
// words and placed in front of the merged data, as the architecture this
// follows prescribes; keeping the fixed-size part out of the tree keeps the
// mergers small.
//
// Purely combinational. out word 0 is the first word of the stream; out_len
// counts metadata words plus data words. Words at out_len and above are
// don't-care. NUM_ENC must be a power of two (this design's restriction).
module reduction #(
  parameter  int unsigned NUM_ENC   = coalesce_pkg::NUM_ENC,
  parameter  int unsigned MAX_WORDS = coalesce_pkg::MAX_WORDS,
  parameter  int unsigned WORD_W    = coalesce_pkg::WORD_W,
  parameter  int unsigned META_W    = coalesce_pkg::META_W,
  localparam int unsigned LW        = $clog2(MAX_WORDS + 1),
  localparam int unsigned MWORDS    = coalesce_pkg::meta_words(NUM_ENC, META_W, WORD_W),
  localparam int unsigned OUT_WORDS = MWORDS + NUM_ENC * MAX_WORDS,
  localparam int unsigned OLW       = $clog2(OUT_WORDS + 1)
) (
  input  logic [NUM_ENC-1:0][MAX_WORDS-1:0][WORD_W-1:0] enc_data,
  input  logic [NUM_ENC-1:0][LW-1:0]                    enc_len,
  input  logic [NUM_ENC-1:0][META_W-1:0]                enc_meta,
  output logic [OUT_WORDS-1:0][WORD_W-1:0]              out,
  output logic [OLW-1:0]                                out_len
);

  localparam int unsigned LEVELS = $clog2(NUM_ENC);
  localparam int unsigned TOT    = NUM_ENC * MAX_WORDS;
  localparam int unsigned TLW    = $clog2(TOT + 1);

  if ((1 << LEVELS) != NUM_ENC) begin : g_bad_num_enc
    $error("reduction: NUM_ENC (%0d) must be a power of two", NUM_ENC);
  end

  // Level l holds NUM_ENC>>l vectors of MAX_WORDS<<l words, back to back.
  logic [TOT-1:0][WORD_W-1:0] lv_data [LEVELS+1];
  logic [NUM_ENC-1:0][TLW-1:0] lv_len [LEVELS+1];

  assign lv_data[0] = enc_data;
  for (genvar e = 0; e < NUM_ENC; e++) begin : g_len0
    assign lv_len[0][e] = TLW'(enc_len[e]);
  end

  for (genvar l = 0; l < LEVELS; l++) begin : g_level
    localparam int unsigned S   = MAX_WORDS << l;       // capacity of one input
    localparam int unsigned SLW = $clog2(S + 1);
    localparam int unsigned OW  = $clog2(2 * S + 1);
    for (genvar j = 0; j < (NUM_ENC >> (l + 1)); j++) begin : g_node
      logic [2*S-1:0][WORD_W-1:0] m_out;
      logic [OW-1:0]              m_len;
      merger #(.W(WORD_W), .N1(S), .N2(S)) u_merge (
        .in1 (lv_data[l][2*j*S +: S]),
        .len1(lv_len[l][2*j][SLW-1:0]),
        .in2 (lv_data[l][(2*j+1)*S +: S]),
        .len2(lv_len[l][2*j+1][SLW-1:0]),
        .out (m_out),
        .len (m_len)
      );
      assign lv_data[l+1][j*2*S +: 2*S] = m_out;
      assign lv_len[l+1][j]             = TLW'(m_len);
    end
    // Length slots of level l+1 that no node drives
    for (genvar j = (NUM_ENC >> (l + 1)); j < NUM_ENC; j++) begin : g_unused
      assign lv_len[l+1][j] = '0;
    end
  end

  // Concatenated metadata, cut into whole words (zero-padded at the top).
  logic [MWORDS*WORD_W-1:0] meta_flat;
  assign meta_flat = (MWORDS * WORD_W)'(enc_meta);

  assign out     = {lv_data[LEVELS], meta_flat};
  assign out_len = OLW'(MWORDS) + OLW'(lv_len[LEVELS][0]);

endmodule
