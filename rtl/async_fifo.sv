// async_fifo -- dual-clock FIFO with Gray-coded pointers.
//
// The DNN inference module sits in its own clock domain; its Input Queue and
// Output Queue are asynchronous FIFOs so that the vector I/O processor and
// the DNN core can run at different clocks (the paper names this use, not
// the circuit). This is the usual construction: binary read and write
// pointers with one extra wrap bit, converted to Gray code and passed through
// two-flop synchronizers into the other domain; full and empty are computed
// from the local pointer and the synchronized remote one.
//
// Interface: write side wclk/wrst_n/winc/wdata/wfull, read side
// rclk/rrst_n/rinc/rdata/rempty; rdata shows the head while rempty is low.
// Timing: a write becomes visible to the reader 2-3 rclk edges later; a read
// frees space for the writer 2-3 wclk edges later. Depth is 2**ADDR_W.
module async_fifo #(
  parameter int unsigned WIDTH  = 32,
  parameter int unsigned ADDR_W = 3
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             winc,
  input  logic [WIDTH-1:0] wdata,
  output logic             wfull,
  input  logic             rclk,
  input  logic             rrst_n,
  input  logic             rinc,
  output logic [WIDTH-1:0] rdata,
  output logic             rempty
);
  localparam int unsigned DEPTH = 1 << ADDR_W;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [ADDR_W:0]  wbin, wgray, rbin, rgray;
  logic [ADDR_W:0]  rq1_wgray, rq2_wgray;   // write pointer seen in rclk domain
  logic [ADDR_W:0]  wq1_rgray, wq2_rgray;   // read pointer seen in wclk domain
  logic [ADDR_W:0]  wbin_nx, wgray_nx, rbin_nx, rgray_nx;

  // ------------------------------------------------------------ write side
  assign wbin_nx  = wbin + (ADDR_W+1)'(winc && !wfull);
  assign wgray_nx = (wbin_nx >> 1) ^ wbin_nx;

  always_ff @(posedge wclk) begin
    if (winc && !wfull) mem[wbin[ADDR_W-1:0]] <= wdata;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin      <= '0;
      wgray     <= '0;
      wq1_rgray <= '0;
      wq2_rgray <= '0;
      wfull     <= 1'b0;
    end else begin
      wbin      <= wbin_nx;
      wgray     <= wgray_nx;
      wq1_rgray <= rgray;
      wq2_rgray <= wq1_rgray;
      wfull     <= (wgray_nx == {~wq2_rgray[ADDR_W:ADDR_W-1], wq2_rgray[ADDR_W-2:0]});
    end
  end

  // ------------------------------------------------------------- read side
  assign rbin_nx  = rbin + (ADDR_W+1)'(rinc && !rempty);
  assign rgray_nx = (rbin_nx >> 1) ^ rbin_nx;
  assign rdata    = mem[rbin[ADDR_W-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin      <= '0;
      rgray     <= '0;
      rq1_wgray <= '0;
      rq2_wgray <= '0;
      rempty    <= 1'b1;
    end else begin
      rbin      <= rbin_nx;
      rgray     <= rgray_nx;
      rq1_wgray <= wgray;
      rq2_wgray <= rq1_wgray;
      rempty    <= (rgray_nx == rq2_wgray);
    end
  end

  a_no_write_when_full: assert property (@(posedge wclk) disable iff (!wrst_n) !(winc && wfull));
  a_no_read_when_empty: assert property (@(posedge rclk) disable iff (!rrst_n) !(rinc && rempty));
endmodule
