// Self-checking test of merger.
//
// Instance A is the 5+5-word merge of the worked example (input 1 holds
// three words, input 2 four, so input 2 moves by 5-3 = 2 words); it is
// checked on that example and then on every pair of lengths with random
// contents. Instance B is asymmetric (9 + 4 words, four shift stages) and
// is checked with random lengths and contents. The expected output is
// built word by word: the first len1 words of input 1, then the first len2
// words of input 2; only those len1+len2 words and the length are compared.
module tb_merger;

  localparam int unsigned W = 8;

  int checks = 0, failures = 0;

  // ---- instance A: 5 + 5 words
  logic [4:0][W-1:0] a_in1 = '0, a_in2 = '0;
  logic [2:0]        a_len1 = '0, a_len2 = '0;
  logic [9:0][W-1:0] a_out;
  logic [3:0]        a_len;

  merger #(.W(W), .N1(5), .N2(5)) dut_a (
    .in1(a_in1), .len1(a_len1), .in2(a_in2), .len2(a_len2), .out(a_out), .len(a_len));

  // ---- instance B: 9 + 4 words
  logic [8:0][W-1:0]  b_in1 = '0;
  logic [3:0][W-1:0]  b_in2 = '0;
  logic [3:0]         b_len1 = '0;
  logic [2:0]         b_len2 = '0;
  logic [12:0][W-1:0] b_out;
  logic [3:0]         b_len;

  merger #(.W(W), .N1(9), .N2(4)) dut_b (
    .in1(b_in1), .len1(b_len1), .in2(b_in2), .len2(b_len2), .out(b_out), .len(b_len));

  task automatic check_a();
    logic [W-1:0] exp [$];
    for (int i = 0; i < a_len1; i++) exp.push_back(a_in1[i]);
    for (int i = 0; i < a_len2; i++) exp.push_back(a_in2[i]);
    checks++;
    if (a_len != 4'(exp.size())) begin
      failures++;
      $display("FAIL A len: got %0d exp %0d", a_len, exp.size());
    end
    foreach (exp[i]) begin
      checks++;
      if (a_out[i] !== exp[i]) begin
        failures++;
        $display("FAIL A word %0d (len1=%0d len2=%0d): got %h exp %h", i, a_len1, a_len2, a_out[i], exp[i]);
      end
    end
  endtask

  task automatic check_b();
    logic [W-1:0] exp [$];
    for (int i = 0; i < b_len1; i++) exp.push_back(b_in1[i]);
    for (int i = 0; i < b_len2; i++) exp.push_back(b_in2[i]);
    checks++;
    if (b_len != 4'(exp.size())) begin
      failures++;
      $display("FAIL B len: got %0d exp %0d", b_len, exp.size());
    end
    foreach (exp[i]) begin
      checks++;
      if (b_out[i] !== exp[i]) begin
        failures++;
        $display("FAIL B word %0d (len1=%0d len2=%0d): got %h exp %h", i, b_len1, b_len2, b_out[i], exp[i]);
      end
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Worked example: input 1 = 3 words (A1..A3), input 2 = 4 words (B1..B4),
    // unused words hold junk. Expected: A1 A2 A3 B1 B2 B3 B4.
    a_in1 = {8'hEE, 8'hEE, 8'hA3, 8'hA2, 8'hA1};
    a_in2 = {8'hDD, 8'hB4, 8'hB3, 8'hB2, 8'hB1};
    a_len1 = 3; a_len2 = 4;
    #1;
    checks++;
    if (a_out[6:0] !== {8'hB4, 8'hB3, 8'hB2, 8'hB1, 8'hA3, 8'hA2, 8'hA1} || a_len != 7) begin
      failures++;
      $display("FAIL worked example: got %h len %0d", a_out, a_len);
    end

    // All length pairs, random contents (padding words random too).
    for (int l1 = 0; l1 <= 5; l1++)
      for (int l2 = 0; l2 <= 5; l2++)
        for (int r = 0; r < 4; r++) begin
          for (int i = 0; i < 5; i++) begin
            a_in1[i] = W'($urandom);
            a_in2[i] = W'($urandom);
          end
          a_len1 = 3'(l1); a_len2 = 3'(l2);
          #1 check_a();
        end

    // Instance B: random lengths.
    for (int r = 0; r < 400; r++) begin
      for (int i = 0; i < 9; i++) b_in1[i] = W'($urandom);
      for (int i = 0; i < 4; i++) b_in2[i] = W'($urandom);
      b_len1 = 4'($urandom_range(0, 9));
      b_len2 = 3'($urandom_range(0, 4));
      #1 check_b();
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
