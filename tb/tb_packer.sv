// Self-checking test of packer at its default size (44-word inputs,
// 64-word blocks of 8-bit words).
//
// Each cycle a random reduction output (random valid, random length with
// extra weight on 0 and on the maximum, random words) is offered. A model
// keeps the stream of words not yet emitted as a queue: words are appended
// in order, and whenever 64 or more are held, the oldest 64 form the block
// that must appear on blk_valid/blk_data in that same cycle (zero latency,
// since the path from input to block is combinational). fill must equal the
// number of held words after every edge. Also counted: blocks emitted with
// leftover words carried over, blocks that consumed the input exactly,
// idle cycles and maximum-length inputs; each must have happened.
//
// A second instance with a one-word block header (63 payload words) gets the
// same inputs. Its model also remembers which words begin a reduction
// output; the header of each block must be the payload offset of the first
// such word (every block has one, since no input is longer than the
// payload).
module tb_packer;

  localparam int unsigned W   = 8;
  localparam int unsigned IN  = 44;
  localparam int unsigned BLK = 64;

  logic                   clk = 0, rst_n = 0;
  logic                   in_valid = 0;
  logic [IN-1:0][W-1:0]   in_data = '0;
  logic [5:0]             in_len = '0;
  logic                   blk_valid;
  logic [BLK-1:0][W-1:0]  blk_data;
  logic [6:0]             fill;

  packer dut (.clk, .rst_n, .in_valid, .in_data, .in_len, .blk_valid, .blk_data, .fill);

  localparam int unsigned PAY = BLK - 1;
  logic                   h_valid;
  logic [BLK-1:0][W-1:0]  h_data;
  logic [6:0]             h_fill;

  packer #(.WORD_W(W), .IN_WORDS(IN), .BLOCK_WORDS(BLK), .HDR_WORDS(1)) dut_h (
    .clk, .rst_n, .in_valid, .in_data, .in_len,
    .blk_valid(h_valid), .blk_data(h_data), .fill(h_fill));

  logic [W-1:0] hmodel [$];
  bit           hstart [$];
  int n_hstart = 0, n_hnone = 0;

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_blocks = 0, n_carry = 0, n_exact = 0, n_idle = 0, n_max = 0;
  logic [W-1:0] model [$];
  int cycle = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL cycle %0d: %s", cycle, msg);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (cycle = 0; cycle < 3000; cycle++) begin
      automatic int unsigned sel = $urandom_range(0, 9);
      automatic bit exp_blk;
      @(negedge clk);
      check(int'(fill) == model.size(), $sformatf("fill %0d exp %0d", fill, model.size()));
      check(int'(h_fill) == hmodel.size(), $sformatf("header fill %0d exp %0d", h_fill, hmodel.size()));
      in_valid = (sel != 0);
      if (sel == 1)      in_len = 6'(IN);
      else if (sel == 2) in_len = 6'd0;
      else               in_len = 6'($urandom_range(0, IN));
      for (int i = 0; i < IN; i++) in_data[i] = W'($urandom);
      if (in_valid) begin
        for (int i = 0; i < int'(in_len); i++) model.push_back(in_data[i]);
        for (int i = 0; i < int'(in_len); i++) begin
          hmodel.push_back(in_data[i]);
          hstart.push_back(i == 0);
        end
        if (in_len == 6'(IN)) n_max++;
      end else n_idle++;
      #1;
      exp_blk = model.size() >= BLK;
      check(blk_valid == exp_blk, $sformatf("blk_valid %0d exp %0d (held %0d)", blk_valid, exp_blk, model.size()));
      if (exp_blk) begin
        for (int i = 0; i < BLK; i++) begin
          automatic logic [W-1:0] w = model.pop_front();
          check(blk_data[i] === w, $sformatf("block word %0d got %h exp %h", i, blk_data[i], w));
        end
        n_blocks++;
        if (model.size() > 0) n_carry++; else n_exact++;
      end
      check(h_valid == (hmodel.size() >= PAY), "header instance blk_valid");
      if (hmodel.size() >= PAY) begin
        automatic logic [W-1:0] hdr = 8'hFF;
        for (int i = 0; i < PAY; i++) begin
          automatic logic [W-1:0] w = hmodel.pop_front();
          automatic bit st = hstart.pop_front();
          if (st && hdr == 8'hFF) hdr = W'(i);
          check(h_data[i+1] === w, $sformatf("header block word %0d got %h exp %h", i, h_data[i+1], w));
        end
        check(hdr != 8'hFF, "model: block without a start");
        check(h_data[0] === hdr, $sformatf("header got %h exp %h", h_data[0], hdr));
        if (hdr == 0) n_hnone++; else n_hstart++;
      end
    end
    check(n_blocks > 0, "no block emitted");
    check(n_carry > 0,  "no block with leftover carried over");
    check(n_exact > 0,  "no block that used the input exactly");
    check(n_idle > 0,   "no idle cycle");
    check(n_max > 0,    "no maximum-length input");
    check(n_hstart > 0, "no header block starting with a carried tail");
    check(n_hnone > 0,  "no header block starting with a new output");
    $display("packer: %0d blocks, %0d with carry, %0d exact, %0d idle, %0d max-length; header: %0d after a carried tail, %0d at offset 0",
             n_blocks, n_carry, n_exact, n_idle, n_max, n_hstart, n_hnone);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
