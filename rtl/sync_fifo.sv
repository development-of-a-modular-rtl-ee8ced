// sync_fifo: single-clock first-in first-out buffer.
//
// Storage is a plain array of DEPTH words (DEPTH a power of two) addressed by
// wrapping read and write pointers one bit wider than the index, so that full
// and empty are told apart. Show-ahead: dout is the oldest word whenever
// empty is low; a pop (rd_en) advances to the next word on the clock edge.
// Writes while full and reads while empty are ignored. level gives the number
// of words held. Used as the data buffer of both readout paths.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [W-1:0]             din,
  input  logic                     rd_en,
  output logic [W-1:0]             dout,
  output logic                     full,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   level
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wptr, rptr;
  logic          do_wr, do_rd;

  assign level = wptr - rptr;
  assign full  = (level == (AW+1)'(DEPTH));
  assign empty = (wptr == rptr);
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;
  assign dout  = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AW-1:0]] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
    end
  end

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("sync_fifo: DEPTH must be a power of two");
endmodule
