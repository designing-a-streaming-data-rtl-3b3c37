// Self-checking test of coalescing at its default size: 8 encoders of up
// to 5 eight-bit words, 4-bit metadata each, 512-bit blocks.
//
// Each cycle every encoder gets a random length and random data and
// metadata; the length distribution changes every 300 cycles between a
// well-compressing phase (0..1 words), a typical phase (0..5) and a burst
// of poor compression (all 5 words). The model turns each valid cycle into
// its stream of words (4 metadata words, then each encoder's words in
// order), appends it to a queue, and whenever 64 words are held expects
// the oldest 64 as a block in that same cycle, word k in bits
// [8k +: 8]. Counts blocks, blocks that end exactly at the end of a cycle's
// output (so that the next block starts with metadata), idle cycles and
// worst-case cycles; each must have happened.
module tb_coalescing;

  import coalesce_pkg::*;

  localparam int unsigned LW     = $clog2(MAX_WORDS + 1);
  localparam int unsigned MWORDS = meta_words(NUM_ENC, META_W, WORD_W);
  localparam int unsigned BLKW   = BLOCK_W / WORD_W;

  logic clk = 0, rst_n = 0, enc_valid = 0;
  logic [NUM_ENC-1:0][MAX_WORDS-1:0][WORD_W-1:0] enc_data = '0;
  logic [NUM_ENC-1:0][LW-1:0]                    enc_len  = '0;
  logic [NUM_ENC-1:0][META_W-1:0]                enc_meta = '0;
  logic                                          blk_valid;
  logic [BLOCK_W-1:0]                            blk_data;
  logic [6:0]                                    fill;

  coalescing dut (.clk, .rst_n, .enc_valid, .enc_data, .enc_len, .enc_meta,
                  .blk_valid, .blk_data, .fill);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0;
  int n_blocks = 0, n_aligned = 0, n_idle = 0, n_worst = 0;
  logic [WORD_W-1:0] model [$];

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL cycle %0d: %s", cycle, msg);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (cycle = 0; cycle < 3000; cycle++) begin
      automatic int phase = (cycle / 300) % 3;
      automatic int tot = 0;
      automatic logic [MWORDS*WORD_W-1:0] mflat = '0;
      @(negedge clk);
      check(int'(fill) == model.size(), $sformatf("fill %0d exp %0d", fill, model.size()));
      enc_valid = $urandom_range(0, 19) != 0;
      for (int e = 0; e < NUM_ENC; e++) begin
        enc_len[e] = (phase == 0) ? LW'($urandom_range(0, 1)) :
                     (phase == 1) ? LW'($urandom_range(0, MAX_WORDS)) : LW'(MAX_WORDS);
        for (int w = 0; w < MAX_WORDS; w++) enc_data[e][w] = WORD_W'($urandom);
        enc_meta[e] = META_W'($urandom);
        mflat[e*META_W +: META_W] = enc_meta[e];
        tot += int'(enc_len[e]);
      end
      if (enc_valid) begin
        for (int m = 0; m < MWORDS; m++) model.push_back(mflat[m*WORD_W +: WORD_W]);
        for (int e = 0; e < NUM_ENC; e++)
          for (int w = 0; w < int'(enc_len[e]); w++) model.push_back(enc_data[e][w]);
        if (tot == NUM_ENC * MAX_WORDS) n_worst++;
      end else n_idle++;
      #1;
      check(blk_valid == (model.size() >= BLKW), "blk_valid");
      if (model.size() >= BLKW) begin
        for (int i = 0; i < BLKW; i++) begin
          automatic logic [WORD_W-1:0] w = model.pop_front();
          check(blk_data[i*WORD_W +: WORD_W] === w,
                $sformatf("block word %0d got %h exp %h", i, blk_data[i*WORD_W +: WORD_W], w));
        end
        n_blocks++;
        if (model.size() == 0) n_aligned++;
      end
    end
    check(n_blocks > 0,  "no block");
    check(n_aligned > 0, "no block ending on a cycle boundary");
    check(n_idle > 0,    "no idle cycle");
    check(n_worst > 0,   "no worst-case cycle");
    $display("coalescing: %0d blocks, %0d end on a cycle boundary, %0d idle, %0d worst-case",
             n_blocks, n_aligned, n_idle, n_worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
