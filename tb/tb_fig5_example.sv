// Four-encoder worked example of the coalescing logic, followed by a random
// run in the same configuration.
//
// Configuration: 4 encoders of up to 4 eight-bit words, 2-bit metadata each
// (one metadata word per cycle), 17-word (136-bit) blocks, so a worst-case
// cycle (1 + 16 words) exactly fills a block. The example: 13 words are
// already waiting in the buffer; the encoders then deliver 2, 1, 3 and 0
// words. Buffer plus new data make 20 words, so the 13 old words, the
// metadata word, encoder 1's two words and encoder 2's word leave as one
// block in that cycle, and encoder 3's three words are what the buffer
// holds in the next cycle (they lead the next block). After the example,
// 2000 random cycles are checked against a word-queue model.
module tb_fig5_example;

  localparam int unsigned NE = 4, MW = 4, W = 8, MTW = 2, BW = 136, BLKW = BW / W;

  logic clk = 0, rst_n = 0, enc_valid = 0;
  logic [NE-1:0][MW-1:0][W-1:0] enc_data = '0;
  logic [NE-1:0][2:0]           enc_len  = '0;
  logic [NE-1:0][MTW-1:0]       enc_meta = '0;
  logic                         blk_valid;
  logic [BW-1:0]                blk_data;
  logic [4:0]                   fill;

  coalescing #(.NUM_ENC(NE), .MAX_WORDS(MW), .WORD_W(W), .META_W(MTW), .BLOCK_W(BW)) dut (
    .clk, .rst_n, .enc_valid, .enc_data, .enc_len, .enc_meta, .blk_valid, .blk_data, .fill);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0, n_blocks = 0;
  logic [W-1:0] model [$];

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL cycle %0d: %s", cycle, msg);
    end
  endtask

  // Apply one encoder cycle (lengths given, data/metadata random), update the
  // model and check blk_valid/blk_data in that cycle.
  task automatic step(int l0, int l1, int l2, int l3);
    int lens [4] = '{l0, l1, l2, l3};
    logic [W-1:0] mword = '0;
    @(negedge clk);
    check(int'(fill) == model.size(), $sformatf("fill %0d exp %0d", fill, model.size()));
    enc_valid = 1;
    for (int e = 0; e < NE; e++) begin
      enc_len[e]  = 3'(lens[e]);
      enc_meta[e] = MTW'($urandom);
      mword[e*MTW +: MTW] = enc_meta[e];
      for (int w = 0; w < MW; w++) enc_data[e][w] = W'($urandom);
    end
    model.push_back(mword);
    for (int e = 0; e < NE; e++)
      for (int w = 0; w < lens[e]; w++) model.push_back(enc_data[e][w]);
    #1;
    check(blk_valid == (model.size() >= BLKW), "blk_valid");
    if (model.size() >= BLKW) begin
      for (int i = 0; i < BLKW; i++) begin
        automatic logic [W-1:0] wd = model.pop_front();
        check(blk_data[i*W +: W] === wd, $sformatf("block word %0d", i));
      end
      n_blocks++;
    end
    cycle++;
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] green [3];
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Fill the buffer with 13 old words: 1 + 11, then 1 + 0.
    step(4, 4, 3, 0);
    step(0, 0, 0, 0);
    @(posedge clk); #1;
    check(fill == 5'd13, $sformatf("buffer holds %0d words before the example, exp 13", fill));
    // The example cycle: 2, 1, 3, 0 words; a block must leave now.
    step(2, 1, 3, 0);
    for (int i = 0; i < 3; i++) green[i] = enc_data[2][i];
    check(n_blocks == 1, "no block in the example cycle");
    @(posedge clk); #1;
    check(fill == 5'd3, $sformatf("buffer holds %0d words after the example, exp 3", fill));
    check(model.size() == 3 && model[0] == green[0] && model[1] == green[1] && model[2] == green[2],
          "leftover is not encoder 3's data");
    // Random run in this configuration.
    for (int r = 0; r < 2000; r++) begin
      automatic int ls [4];
      foreach (ls[e]) ls[e] = ($urandom_range(0, 7) == 0) ? MW : $urandom_range(0, MW);
      step(ls[0], ls[1], ls[2], ls[3]);
    end
    step(4, 4, 4, 4);     // worst case: 17 words, exactly one block
    check(n_blocks > 100, "too few blocks in the random run");
    $display("fig5 example: %0d blocks", n_blocks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
