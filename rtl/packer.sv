// Packing stage: variable-length reduction outputs to fixed-size blocks.
//
// A block is BLOCK_WORDS words: HDR_WORDS header words (none by default)
// followed by PAY = BLOCK_WORDS - HDR_WORDS payload words. A buffer register
// holds up to PAY-1 payload words not yet sent, with its fill count. Every
// valid cycle a merger appends the reduction output to the buffer contents,
// giving up to PAY + IN_WORDS words. If fewer than PAY words are then held,
// the first PAY words of the merge go back into the buffer. Otherwise the
// first half (words 0..PAY-1) is a full payload, presented to the FIFO in
// the same cycle, and the second half (the leftover words) is written to the
// start of the buffer. A mux picks which half is stored, as drawn in the
// architecture this follows.
//
// Optional header (HDR_WORDS > 0): the architecture suggests metadata at the
// start of each block so that a receiver can find the start of a reduction
// output after a transmission error, without giving a format. Here the
// header holds the payload offset, in words, of the first reduction output
// that starts in this block. Since a reduction output is never longer than
// the payload, the leftover carried into a block is always shorter than
// the block, so every block contains such a start. The packer tracks the
// offset alongside the buffer. The format is this design's own.
//
// IN_WORDS may not exceed PAY: then at most one block is produced per
// cycle and the leftover always fits, so the packer never needs to stall
// its input. The packer does not look at FIFO space; the caller decides
// what to do with a block it cannot store.
//
// Timing: blk_valid/blk_data are combinational from the buffer and the
// current input; the buffer updates on the rising edge of clk.
// rst_n (active low, synchronous) empties the buffer: reset is this design's
// choice. in_valid low means no reduction output this cycle (this design's
// addition; the architecture assumes data every cycle).
module packer #(
  parameter  int unsigned WORD_W      = coalesce_pkg::WORD_W,
  parameter  int unsigned IN_WORDS    = coalesce_pkg::red_words(coalesce_pkg::NUM_ENC,
                                          coalesce_pkg::MAX_WORDS, coalesce_pkg::META_W,
                                          coalesce_pkg::WORD_W),
  parameter  int unsigned BLOCK_WORDS = coalesce_pkg::BLOCK_W / coalesce_pkg::WORD_W,
  parameter  int unsigned HDR_WORDS   = 0,
  localparam int unsigned ILW         = $clog2(IN_WORDS + 1),
  localparam int unsigned FLW         = $clog2(BLOCK_WORDS + 1)
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                in_valid,
  input  logic [IN_WORDS-1:0][WORD_W-1:0]     in_data,
  input  logic [ILW-1:0]                      in_len,
  output logic                                blk_valid,
  output logic [BLOCK_WORDS-1:0][WORD_W-1:0]  blk_data,
  output logic [FLW-1:0]                      fill
);

  localparam int unsigned PAY = BLOCK_WORDS - HDR_WORDS;
  localparam int unsigned MW  = PAY + IN_WORDS;
  localparam int unsigned MLW = $clog2(MW + 1);

  if (HDR_WORDS >= BLOCK_WORDS) begin : g_bad_hdr
    $error("packer: HDR_WORDS (%0d) must be below BLOCK_WORDS (%0d)", HDR_WORDS, BLOCK_WORDS);
  end
  if (IN_WORDS > PAY) begin : g_bad_size
    $error("packer: IN_WORDS (%0d) must not exceed the payload (%0d words)", IN_WORDS, PAY);
  end
  if (HDR_WORDS > 0 && (HDR_WORDS * WORD_W) < $clog2(PAY + 1)) begin : g_bad_hdr_w
    $error("packer: a %0d-bit header cannot hold offsets up to %0d", HDR_WORDS * WORD_W, PAY);
  end

  logic [PAY-1:0][WORD_W-1:0] buf_q;
  logic [FLW-1:0]             fill_q;
  logic [MW-1:0][WORD_W-1:0]  m_out;
  logic [MLW-1:0]             m_len;
  logic [ILW-1:0]             add_len;
  logic [PAY-1:0][WORD_W-1:0] first_half, second_half;

  assign add_len = in_valid ? in_len : '0;

  merger #(.W(WORD_W), .N1(PAY), .N2(IN_WORDS)) u_merge (
    .in1 (buf_q),
    .len1(fill_q),
    .in2 (in_data),
    .len2(add_len),
    .out (m_out),
    .len (m_len)
  );

  assign first_half  = m_out[PAY-1:0];
  assign second_half = (PAY * WORD_W)'(m_out[MW-1:PAY]);
  assign blk_valid   = m_len >= MLW'(PAY);
  assign fill        = fill_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      buf_q  <= '0;
      fill_q <= '0;
    end else if (blk_valid) begin
      buf_q  <= second_half;
      fill_q <= FLW'(m_len - MLW'(PAY));
    end else begin
      buf_q  <= first_half;
      fill_q <= FLW'(m_len);
    end
  end

  if (HDR_WORDS == 0) begin : g_no_hdr
    assign blk_data = first_half;
  end else begin : g_hdr
    localparam int unsigned HW = HDR_WORDS * WORD_W;
    logic [FLW-1:0] start_q, cur_start;
    logic           start_vld_q, cur_vld;

    // A reduction output that arrives now starts at position fill_q, which
    // is always inside the payload being assembled.
    assign cur_vld   = start_vld_q || (in_valid && in_len != '0);
    assign cur_start = start_vld_q ? start_q : fill_q;
    assign blk_data  = {first_half, HW'(cur_start)};

    always_ff @(posedge clk) begin
      if (!rst_n || blk_valid) begin
        // After a block the buffer holds only the tail of the current output.
        start_vld_q <= 1'b0;
        start_q     <= '0;
      end else begin
        start_vld_q <= cur_vld;
        start_q     <= cur_start;
      end
    end

    always_ff @(posedge clk)
      if (rst_n && blk_valid)
        assert (cur_vld) else $error("packer: block without a reduction-output start");
  end

  // The buffer never holds a whole payload after a clock edge, and an input
  // never claims more words than its width.
  always_ff @(posedge clk)
    if (rst_n) begin
      assert (fill_q < FLW'(PAY)) else $error("packer: fill %0d overflow", fill_q);
      assert (!in_valid || in_len <= ILW'(IN_WORDS)) else $error("packer: in_len %0d > %0d", in_len, IN_WORDS);
    end

endmodule
