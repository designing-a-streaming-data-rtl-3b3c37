// Self-checking test of block_fifo at its default size (16 x 512 bits).
//
// Random write and read requests with a bias that changes every 400 cycles
// (write-heavy, read-heavy, balanced), so that the FIFO fills, drains and
// sits at both ends. A queue model gives the expected head, count, full,
// rd_valid and wr_drop each cycle. Counts writes refused while full,
// simultaneous read+write while full, and reads while empty requested;
// each must have happened.
module tb_block_fifo;

  localparam int unsigned WIDTH = 512;
  localparam int unsigned DEPTH = 16;

  logic             clk = 0, rst_n = 0;
  logic             wr_en = 0, rd_ready = 0;
  logic [WIDTH-1:0] wr_data = '0;
  logic             wr_drop, full, rd_valid;
  logic [WIDTH-1:0] rd_data;
  logic [4:0]       count;

  block_fifo dut (.clk, .rst_n, .wr_en, .wr_data, .wr_drop, .full, .rd_valid, .rd_ready,
                  .rd_data, .count);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0;
  int n_drop = 0, n_full_rw = 0, n_empty_rd = 0;
  logic [WIDTH-1:0] model [$];

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL cycle %0d: %s", cycle, msg);
    end
  endtask

  function automatic logic [WIDTH-1:0] rand_block();
    logic [WIDTH-1:0] v;
    for (int i = 0; i < WIDTH / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (cycle = 0; cycle < 4000; cycle++) begin
      automatic int phase = (cycle / 400) % 3;
      automatic int pw = (phase == 0) ? 9 : (phase == 1) ? 2 : 5;
      automatic int pr = (phase == 0) ? 2 : (phase == 1) ? 9 : 5;
      automatic bit exp_full, exp_valid, exp_drop, do_rd;
      @(negedge clk);
      wr_en    = $urandom_range(0, 9) < pw;
      rd_ready = $urandom_range(0, 9) < pr;
      wr_data  = rand_block();
      #1;
      exp_full  = model.size() == DEPTH;
      exp_valid = model.size() != 0;
      do_rd     = exp_valid && rd_ready;
      exp_drop  = wr_en && exp_full && !do_rd;
      check(int'(count) == model.size(), $sformatf("count %0d exp %0d", count, model.size()));
      check(full == exp_full, "full");
      check(rd_valid == exp_valid, "rd_valid");
      check(wr_drop == exp_drop, "wr_drop");
      if (exp_valid) check(rd_data === model[0], "rd_data head");
      if (exp_drop) n_drop++;
      if (exp_full && wr_en && do_rd) n_full_rw++;
      if (!exp_valid && rd_ready) n_empty_rd++;
      if (do_rd) void'(model.pop_front());
      if (wr_en && !exp_drop) model.push_back(wr_data);
    end
    check(n_drop > 0, "no write refused while full");
    check(n_full_rw > 0, "no read+write while full");
    check(n_empty_rd > 0, "no read request while empty");
    $display("fifo: %0d refused writes, %0d read+write when full, %0d reads when empty",
             n_drop, n_full_rw, n_empty_rd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
