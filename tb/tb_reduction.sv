// Self-checking test of reduction: the default eight-encoder tree
// (5 words of 8 bits, 4-bit metadata each) and a four-encoder tree with
// 4-word encoders, each against an independently built expected stream.
module tb_reduction;

  int c8, f8, c4, f4;
  bit d8, d4;

  tb_reduction_run #(.NUM_ENC(8), .MAX_WORDS(5), .WORD_W(8), .META_W(4), .ROUNDS(600))
    run8 (.checks(c8), .failures(f8), .done(d8));
  tb_reduction_run #(.NUM_ENC(4), .MAX_WORDS(4), .WORD_W(8), .META_W(4), .ROUNDS(400))
    run4 (.checks(c4), .failures(f4), .done(d4));

  initial begin : watchdog
    #100000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c4, f8 + f4 + 1);
    $finish;
  end

  initial begin
    wait (d8 && d4);
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c4, f8 + f4);
    $finish;
  end

endmodule
