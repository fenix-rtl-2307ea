// prob_table -- the discretised probability model P(T_i, C_i).
//
// The control plane evaluates the piecewise probability model offline and
// writes it here; the data plane only looks values up. As in the paper, the
// ranges of T_i and C_i are cut into uniform bins: the bin of T_i is
// T_i >> T_SHIFT and the bin of C_i is C_i >> C_SHIFT, each clamped to the
// last bin. Bin counts, bin widths and the 9-bit entry (0..256, where 256
// means "always") are this design's choices.
//
// Interface: we/waddr/wdata write one entry, waddr = t_bin * C_BINS + c_bin.
// ti/ci in, prob out, combinationally. Entries are not reset; the control
// plane must write every entry before traffic is enabled.
module prob_table #(
  parameter int unsigned TS_W    = 32,
  parameter int unsigned T_BINS  = 16,
  parameter int unsigned C_BINS  = 16,
  parameter int unsigned T_SHIFT = 11,
  parameter int unsigned C_SHIFT = 1,
  parameter int unsigned PROB_W  = 8
) (
  input  logic                                clk,
  input  logic                                we,
  input  logic [$clog2(T_BINS*C_BINS)-1:0]    waddr,
  input  logic [PROB_W:0]                     wdata,
  input  logic [TS_W-1:0]                     ti,
  input  logic [15:0]                         ci,
  output logic [PROB_W:0]                     prob
);
  localparam int unsigned TBW = $clog2(T_BINS);
  localparam int unsigned CBW = $clog2(C_BINS);

  logic [PROB_W:0]  mem [T_BINS*C_BINS];
  logic [TS_W-1:0]  tq;
  logic [15:0]      cq;
  logic [TBW-1:0]   tb;
  logic [CBW-1:0]   cb;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_comb begin
    tq = ti >> T_SHIFT;
    cq = ci >> C_SHIFT;
    tb = (tq >= TS_W'(T_BINS)) ? TBW'(T_BINS - 1) : tq[TBW-1:0];
    cb = (cq >= 16'(C_BINS))   ? CBW'(C_BINS - 1) : cq[CBW-1:0];
  end

  assign prob = mem[{tb, cb}];
endmodule
