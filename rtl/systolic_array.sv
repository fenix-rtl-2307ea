// systolic_array -- one-dimensional, output-stationary INT8 systolic array.
//
// LANES processing elements in a chain. The input vector enters PE 0 one
// element per cycle, together with its index; every PE passes element and
// index to its right neighbour one cycle later. PE i accumulates
// x[j] * w_i into a 32-bit accumulator when element j passes through it, so
// after the last element has crossed the chain PE i holds the dot product of
// row i of the weight tile with x. The weight for PE i is supplied from
// outside for the index the PE currently holds (pe_idx[i]), which lets the
// controller read weights from per-lane memory banks. The paper says only
// that layers share one INT8 systolic array; the shape is this design's.
//
// Interface: clear zeroes all accumulators (ignored elements keep flowing);
// in_valid/in_x/in_idx feed PE 0. pe_valid/pe_idx show what each PE holds;
// w must carry that PE's weight in the same cycle. Timing: element fed in
// cycle c is multiplied in PE i during cycle c+1+i; the accumulators are
// final LANES cycles after the last element was fed.
module systolic_array #(
  parameter int unsigned LANES = 16,
  parameter int unsigned IDX_W = 10
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          in_valid,
  input  logic signed [7:0]             in_x,
  input  logic [IDX_W-1:0]              in_idx,
  output logic [LANES-1:0]              pe_valid,
  output logic [LANES-1:0][IDX_W-1:0]   pe_idx,
  input  logic [LANES-1:0][7:0]         w,     // signed INT8 per lane
  output logic [LANES-1:0][31:0]        acc    // signed 32-bit per lane
);
  logic [LANES-1:0][7:0] x_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pe_valid <= '0;
      pe_idx   <= '0;
      x_q      <= '0;
      acc      <= '0;
    end else begin
      pe_valid[0] <= in_valid;
      pe_idx[0]   <= in_idx;
      x_q[0]      <= in_x;
      for (int i = 1; i < int'(LANES); i++) begin
        pe_valid[i] <= pe_valid[i-1];
        pe_idx[i]   <= pe_idx[i-1];
        x_q[i]      <= x_q[i-1];
      end
      for (int i = 0; i < int'(LANES); i++) begin
        if (clear)            acc[i] <= '0;
        else if (pe_valid[i]) acc[i] <= $signed(acc[i]) + 32'($signed(x_q[i]) * $signed(w[i]));
      end
    end
  end
endmodule
