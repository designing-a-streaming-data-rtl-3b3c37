// Variable-length merge of two word vectors.
//
// Joins input 1 (len1 valid words out of N1) and input 2 (len2 valid words
// out of N2) into one vector in which the valid words of input 2 directly
// follow those of input 1; word 0 is the first word of the stream. Input 2 is
// first placed behind N1 padding words and then moved toward word 0 by
// (N1 - len1) words through a cascade of log2 stages, stage k shifting by
// 2**k words when bit k of the shift amount is set. The words of input 1 are
// then laid over the low end: output word i is in1[i] for i < len1 and the
// shifted input 2 otherwise. This is the barrel-shifter merge of the
// architecture it follows; using a per-word select instead of an OR means
// the padding words of either input may hold anything.
//
// Purely combinational. Words at positions len and above are don't-care.
// Interface: in1/len1, in2/len2 in; out/len out (len = len1 + len2).
// len1 <= N1 and len2 <= N2 are required; the clocked modules that use it
// check this on their own inputs.
module merger #(
  parameter  int unsigned W  = 8,   // bits per word
  parameter  int unsigned N1 = 5,   // capacity of input 1 in words
  parameter  int unsigned N2 = 5,   // capacity of input 2 in words
  localparam int unsigned L1W = $clog2(N1 + 1),
  localparam int unsigned L2W = $clog2(N2 + 1),
  localparam int unsigned LOW = $clog2(N1 + N2 + 1)
) (
  input  logic [N1-1:0][W-1:0]    in1,
  input  logic [L1W-1:0]          len1,
  input  logic [N2-1:0][W-1:0]    in2,
  input  logic [L2W-1:0]          len2,
  output logic [N1+N2-1:0][W-1:0] out,
  output logic [LOW-1:0]          len
);

  localparam int unsigned NO = N1 + N2;

  logic [L1W-1:0] shamt;
  // stage[0] is input 2 behind N1 padding words, stage[k+1] after shift stage k
  logic [NO-1:0][W-1:0] stage [L1W+1];

  assign shamt    = L1W'(N1) - len1;
  assign stage[0] = {in2, {(N1 * W){1'b0}}};

  for (genvar k = 0; k < L1W; k++) begin : g_shift
    assign stage[k+1] = shamt[k] ? (stage[k] >> ((2 ** k) * W)) : stage[k];
  end

  always_comb begin
    out = stage[L1W];
    for (int unsigned i = 0; i < N1; i++)
      if (i < len1) out[i] = in1[i];
  end

  assign len = LOW'(len1) + LOW'(len2);

endmodule
