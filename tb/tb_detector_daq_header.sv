// End-to-end test of detector_daq with the optional one-word block header
// (HDR_WORDS = 1) and all other parameters at their defaults: 8 encoders x
// 5 words x 8 bits + 4-bit metadata, 512-bit blocks (1 header word + 63
// payload words), 16-deep FIFO. Every block on the link must carry in its
// first word the payload offset of the first reduction output starting in
// it; otherwise this is the same test as tb_detector_daq.
//
// The encoders are modelled as a source whose compression changes every
// 250 cycles: good (0..1 words per encoder), typical (0..5), a burst of
// worst-case data (5 words each), and idle stretches. The link takes a
// block at most every second cycle (tx_ready on alternate cycles, 256
// bits per cycle on average), so typical data drains, while a burst
// (352 bits per cycle) fills the FIFO and then loses blocks.
//
// The reference model keeps the word stream, cuts 64-word blocks from it,
// and models the FIFO with the same drop-when-full rule; every block read
// on the link, tx_valid, fifo_count, overflow and drop_count are compared
// each cycle. Mechanisms counted, each required at least once: block
// written, block with leftover carried over, block ending on a cycle
// boundary, idle encoder cycle, worst-case cycle, FIFO full, block dropped,
// read and write in one cycle, FIFO drained empty with the link ready.
module tb_detector_daq_header;

  import coalesce_pkg::*;

  localparam int unsigned LW     = $clog2(MAX_WORDS + 1);
  localparam int unsigned MWORDS = meta_words(NUM_ENC, META_W, WORD_W);
  localparam int unsigned BLKW   = BLOCK_W / WORD_W - 1;   // payload words
  localparam int unsigned CYCLES = 4000;

  logic clk = 0, rst_n = 0, enc_valid = 0, tx_ready = 0;
  logic [NUM_ENC-1:0][MAX_WORDS-1:0][WORD_W-1:0] enc_data = '0;
  logic [NUM_ENC-1:0][LW-1:0]                    enc_len  = '0;
  logic [NUM_ENC-1:0][META_W-1:0]                enc_meta = '0;
  logic                                          tx_valid;
  logic [BLOCK_W-1:0]                            tx_data;
  logic [$clog2(FIFO_DEPTH+1)-1:0]               fifo_count;
  logic [$clog2(BLKW+2)-1:0]                     buf_fill;
  logic                                          overflow;
  logic [15:0]                                   drop_count;

  detector_daq #(.HDR_WORDS(1)) dut (.clk, .rst_n, .enc_valid, .enc_data, .enc_len, .enc_meta,
                    .tx_valid, .tx_ready, .tx_data, .fifo_count, .buf_fill,
                    .overflow, .drop_count);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0;
  int n_blocks = 0, n_carry = 0, n_exact = 0, n_idle = 0, n_worst = 0;
  int n_full = 0, n_drop = 0, n_rw = 0, n_drained = 0, n_sent = 0;
  logic [WORD_W-1:0]  stream [$];
  bit                 starts [$];
  int n_off0 = 0, n_offn = 0;
  logic [BLOCK_W-1:0] fifo_m [$];

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL cycle %0d: %s", cycle, msg);
    end
  endtask

  task automatic require(int n, string what);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never happened: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (CYCLES + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (cycle = 0; cycle < CYCLES; cycle++) begin
      automatic int phase = (cycle / 250) % 5;   // 0 good, 1 typical, 2 burst, 3 typical, 4 idle
      automatic int tot = 0;
      automatic logic [MWORDS*WORD_W-1:0] mflat = '0;
      automatic bit blk, do_rd, full_m, drop;
      automatic logic [BLOCK_W-1:0] blk_m = '0;
      @(negedge clk);
      check(int'(buf_fill) == stream.size(), $sformatf("buf_fill %0d exp %0d", buf_fill, stream.size()));
      check(int'(fifo_count) == fifo_m.size(), $sformatf("fifo_count %0d exp %0d", fifo_count, fifo_m.size()));
      check(int'(drop_count) == n_drop, $sformatf("drop_count %0d exp %0d", drop_count, n_drop));
      tx_ready  = cycle[0];
      enc_valid = (phase == 4) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 31) != 0);
      for (int e = 0; e < NUM_ENC; e++) begin
        enc_len[e] = (phase == 0) ? LW'($urandom_range(0, 1)) :
                     (phase == 2) ? LW'(MAX_WORDS) : LW'($urandom_range(0, MAX_WORDS));
        for (int w = 0; w < MAX_WORDS; w++) enc_data[e][w] = WORD_W'($urandom);
        enc_meta[e] = META_W'($urandom);
        mflat[e*META_W +: META_W] = enc_meta[e];
        tot += int'(enc_len[e]);
      end
      if (enc_valid) begin
        for (int m = 0; m < MWORDS; m++) begin
          stream.push_back(mflat[m*WORD_W +: WORD_W]);
          starts.push_back(m == 0);
        end
        for (int e = 0; e < NUM_ENC; e++)
          for (int w = 0; w < int'(enc_len[e]); w++) begin
            stream.push_back(enc_data[e][w]);
            starts.push_back(0);
          end
        if (tot == NUM_ENC * MAX_WORDS) n_worst++;
      end else n_idle++;
      #1;
      // link side
      check(tx_valid == (fifo_m.size() != 0), "tx_valid");
      do_rd = tx_ready && fifo_m.size() != 0;
      if (do_rd) begin
        check(tx_data === fifo_m[0], $sformatf("block %0d on link differs", n_sent));
        n_sent++;
      end
      // packer side
      blk = stream.size() >= BLKW;
      if (blk) begin
        automatic int off = -1;
        for (int i = 0; i < BLKW; i++) begin
          blk_m[(i+1)*WORD_W +: WORD_W] = stream.pop_front();
          if (starts.pop_front() && off < 0) off = i;
        end
        check(off >= 0, "model: block without a start");
        blk_m[WORD_W-1:0] = WORD_W'(off);
        if (off == 0) n_off0++; else n_offn++;
        n_blocks++;
        if (stream.size() == 0) n_exact++; else n_carry++;
      end
      full_m = fifo_m.size() == FIFO_DEPTH;
      drop   = blk && full_m && !do_rd;
      check(overflow == drop, $sformatf("overflow %0d exp %0d", overflow, drop));
      if (full_m) n_full++;
      if (blk && do_rd) n_rw++;
      if (do_rd) void'(fifo_m.pop_front());
      if (drop) n_drop++;
      else if (blk) fifo_m.push_back(blk_m);
      if (tx_ready && fifo_m.size() == 0 && !blk && cycle > 10) n_drained++;
    end
    require(n_blocks,  "block written");
    require(n_carry,   "leftover carried into buffer");
    require(n_exact,   "block ending on a cycle boundary");
    require(n_idle,    "idle encoder cycle");
    require(n_worst,   "worst-case encoder cycle");
    require(n_full,    "FIFO full");
    require(n_drop,    "block dropped on overflow");
    require(n_rw,      "FIFO read and write in one cycle");
    require(n_drained, "FIFO drained with link ready");
    require(n_sent,    "block sent on link");
    require(n_off0,    "header offset 0");
    require(n_offn,    "header offset after a carried tail");
    $display("header offsets: %0d zero, %0d non-zero", n_off0, n_offn);
    $display("daq: %0d blocks, %0d sent, %0d dropped, %0d carry, %0d exact, %0d idle, %0d worst, %0d full, %0d r+w, %0d drained",
             n_blocks, n_sent, n_drop, n_carry, n_exact, n_idle, n_worst, n_full, n_rw, n_drained);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
