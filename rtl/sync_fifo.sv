// Stream FIFO between processing stages: the input and output FIFOs of the
// controller and the DMA / peer-to-peer stream buffers between the cards.
//
// A circular buffer of DEPTH words (DEPTH a power of two) with read and
// write pointers one bit wider than the address, so full and empty are told
// apart by the extra bit. rd_data shows the oldest word whenever empty is
// low (first-word fall-through); rd_en pops it. A write while full and a
// read while empty are ignored, and assertions flag them, since the writer
// is expected to check full and the reader empty. The paper gives the
// FIFOs' role; depth, width and the fall-through interface are this
// design's. A PCI Express transport between two physical cards is outside
// this block.
//
// Timing: a word written in cycle t can be read from cycle t+1.
module sync_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic [W-1:0]               wr_data,
  output logic                       full,
  input  logic                       rd_en,
  output logic [W-1:0]               rd_data,
  output logic                       empty,
  output logic [$clog2(DEPTH):0]     count
);
  localparam int AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wptr, rptr;
  logic          do_wr, do_rd;

  assign count   = wptr - rptr;
  assign full    = (count == (AW+1)'(DEPTH));
  assign empty   = (wptr == rptr);
  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && !empty;
  assign rd_data = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AW-1:0]] <= wr_data;
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

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full))
    else $error("sync_fifo: write while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty))
    else $error("sync_fifo: read while empty");
endmodule
