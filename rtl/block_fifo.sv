// Block FIFO between the packer and the serial transmitter.
//
// Synchronous first-in first-out store of DEPTH blocks of WIDTH bits, one
// clock. A block is written when wr_en is high and the FIFO is not full; a
// write while full is refused and reported on wr_drop for that cycle, since
// the stall-free data path in front of it cannot wait. The read side is
// show-ahead: rd_data is the oldest block whenever rd_valid is high, and
// rd_ready high in such a cycle removes it. A read and a write may happen in
// the same cycle, also when full (the read frees the slot).
// The FIFO's role, absorbing bursts so that only the average compressed rate
// must stay below the link rate, follows the architecture; its depth, its
// handshake and dropping on overflow are choices of this design.
// rst_n: active-low synchronous reset, empties the FIFO.
module block_fifo #(
  parameter  int unsigned WIDTH = coalesce_pkg::BLOCK_W,
  parameter  int unsigned DEPTH = coalesce_pkg::FIFO_DEPTH,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW    = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             wr_drop,
  output logic             full,
  output logic             rd_valid,
  input  logic             rd_ready,
  output logic [WIDTH-1:0] rd_data,
  output logic [CW-1:0]    count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic [CW-1:0]    cnt;
  logic             do_wr, do_rd;

  assign rd_valid = cnt != '0;
  assign full     = cnt == CW'(DEPTH);
  assign do_rd    = rd_valid && rd_ready;
  assign do_wr    = wr_en && (!full || do_rd);
  assign wr_drop  = wr_en && !do_wr;
  assign rd_data  = mem[rptr];
  assign count    = cnt;

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
      cnt  <= '0;
    end else begin
      if (do_wr) wptr <= next_ptr(wptr);
      if (do_rd) rptr <= next_ptr(rptr);
      cnt <= cnt + CW'(do_wr) - CW'(do_rd);
    end
  end

  always_ff @(posedge clk)
    if (do_wr) mem[wptr] <= wr_data;

endmodule
