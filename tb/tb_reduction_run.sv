// Stimulus and checker for one reduction instance (used by tb_reduction).
//
// Drives ROUNDS random encoder cycles: every encoder gets a random length
// (with extra weight on 0 and on MAX_WORDS), random data in all words and
// random metadata. The expected stream is built independently: metadata
// bits of encoder 0..NUM_ENC-1 concatenated and cut into WORD_W-bit words,
// then the first len words of encoder 0, of encoder 1, and so on. Counts
// cycles with all encoders empty and with all encoders full.
module tb_reduction_run #(
  parameter int unsigned NUM_ENC   = 8,
  parameter int unsigned MAX_WORDS = 5,
  parameter int unsigned WORD_W    = 8,
  parameter int unsigned META_W    = 4,
  parameter int unsigned ROUNDS    = 500
) (
  output int checks,
  output int failures,
  output bit done
);

  localparam int unsigned LW     = $clog2(MAX_WORDS + 1);
  localparam int unsigned MWORDS = coalesce_pkg::meta_words(NUM_ENC, META_W, WORD_W);
  localparam int unsigned OUTW   = MWORDS + NUM_ENC * MAX_WORDS;
  localparam int unsigned OLW    = $clog2(OUTW + 1);

  logic [NUM_ENC-1:0][MAX_WORDS-1:0][WORD_W-1:0] enc_data = '0;
  logic [NUM_ENC-1:0][LW-1:0]                    enc_len  = '0;
  logic [NUM_ENC-1:0][META_W-1:0]                enc_meta = '0;
  logic [OUTW-1:0][WORD_W-1:0]                   out;
  logic [OLW-1:0]                                out_len;

  reduction #(.NUM_ENC(NUM_ENC), .MAX_WORDS(MAX_WORDS), .WORD_W(WORD_W), .META_W(META_W)) dut (
    .enc_data(enc_data), .enc_len(enc_len), .enc_meta(enc_meta), .out(out), .out_len(out_len));

  int n_empty = 0, n_full = 0;

  initial begin
    checks = 0; failures = 0; done = 0;
    for (int r = 0; r < ROUNDS; r++) begin
      automatic logic [WORD_W-1:0] exp [$];
      automatic logic [MWORDS*WORD_W-1:0] mflat;
      automatic int tot;
      tot = 0;
      mflat = '0;
      for (int e = 0; e < NUM_ENC; e++) begin
        automatic int unsigned sel;
        sel = $urandom_range(0, 9);
        if (r == 0)      enc_len[e] = '0;
        else if (r == 1) enc_len[e] = LW'(MAX_WORDS);
        else if (sel == 0) enc_len[e] = '0;
        else if (sel == 1) enc_len[e] = LW'(MAX_WORDS);
        else enc_len[e] = LW'($urandom_range(0, MAX_WORDS));
        for (int w = 0; w < MAX_WORDS; w++) enc_data[e][w] = WORD_W'($urandom);
        enc_meta[e] = META_W'($urandom);
        for (int b = 0; b < META_W; b++) mflat[e*META_W + b] = enc_meta[e][b];
        tot += int'(enc_len[e]);
      end
      for (int m = 0; m < MWORDS; m++) exp.push_back(mflat[m*WORD_W +: WORD_W]);
      for (int e = 0; e < NUM_ENC; e++)
        for (int w = 0; w < int'(enc_len[e]); w++) exp.push_back(enc_data[e][w]);
      if (tot == 0) n_empty++;
      if (tot == NUM_ENC * MAX_WORDS) n_full++;
      #1;
      checks++;
      if (int'(out_len) != exp.size()) begin
        failures++;
        $display("FAIL reduction[%0d enc] round %0d: len %0d exp %0d", NUM_ENC, r, out_len, exp.size());
      end
      foreach (exp[i]) begin
        checks++;
        if (out[i] !== exp[i]) begin
          failures++;
          if (failures < 20)
            $display("FAIL reduction[%0d enc] round %0d word %0d: got %h exp %h", NUM_ENC, r, i, out[i], exp[i]);
        end
      end
    end
    checks += 2;
    if (n_empty == 0) begin failures++; $display("FAIL no all-empty cycle"); end
    if (n_full == 0)  begin failures++; $display("FAIL no all-full cycle"); end
    $display("reduction[%0d enc x %0d words]: %0d rounds, %0d all-empty, %0d all-full",
             NUM_ENC, MAX_WORDS, ROUNDS, n_empty, n_full);
    done = 1;
  end

endmodule
