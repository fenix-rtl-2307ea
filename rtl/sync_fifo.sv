// sync_fifo -- single-clock first-in first-out queue.
//
// Used as the Flow Identifier Queue of the vector I/O processor: flow
// identifiers wait here, in arrival order, until the matching inference
// result leaves the DNN module. The paper asks only for a FIFO; depth,
// show-ahead read and the full/empty flags are this design's choices.
//
// Interface: wr_en/wr_data write when not full; rd_data shows the head entry
// whenever empty is low, rd_en pops it. A write to a full FIFO or a read of
// an empty FIFO is ignored (and flagged by an assertion). count is the fill
// level. Timing: a word written at edge k is visible on rd_data after edge k.
module sync_fifo #(
  parameter int unsigned WIDTH = 104,
  parameter int unsigned DEPTH = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  output logic                     full,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;

  wire do_wr = wr_en && !full;
  wire do_rd = rd_en && !empty;

  assign full    = (count == ($clog2(DEPTH)+1)'(DEPTH));
  assign empty   = (count == '0);
  assign rd_data = mem[rptr];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_wr) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (do_rd) rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + ($clog2(DEPTH)+1)'(do_wr) - ($clog2(DEPTH)+1)'(do_rd);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full && !rd_en));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));
endmodule
