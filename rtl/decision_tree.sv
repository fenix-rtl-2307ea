// decision_tree -- packet-level preliminary classifier of the data engine.
//
// Flows that have no class from the model engine yet are classified per
// packet by a small decision tree held in switch tables. The paper names the
// mechanism but not its shape; this is a complete binary tree of DEPTH
// levels, stored in heap order (node 1 is the root, children of n are 2n and
// 2n+1). Each internal node compares one packet field, chosen by a 3-bit
// selector (0 length, 1 inter-packet delay, 2 source port, 3 destination
// port, 4 protocol), with a 16-bit threshold: field <= threshold goes left.
// The 2**DEPTH leaves hold classes.
//
// Interface: the control plane writes nodes and leaves through we/addr/data:
// addr < 2**DEPTH is internal node addr (data[18:16] selector,
// data[15:0] threshold); addr >= 2**DEPTH is leaf addr - 2**DEPTH
// (data[CLASS_W-1:0] class). Classification is combinational.
// Only the selectable fields are read: the IP addresses in f_tuple are left
// unused on purpose, since a tree over addresses would memorise hosts rather
// than learn traffic behaviour. Reset clears all nodes and leaves, so an
// unprogrammed tree answers class 0.
module decision_tree
  import fenix_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 we,
  input  logic [DEPTH:0]       addr,
  input  logic [18:0]          data,
  input  logic [15:0]          f_len,
  input  logic [15:0]          f_ipd,
  input  five_tuple_t          f_tuple,
  output logic [CLASS_W-1:0]   cls
);
  localparam int unsigned NODES = 1 << DEPTH;   // index 0 unused

  logic [2:0]          sel_q [NODES];
  logic [15:0]         thr_q [NODES];
  logic [CLASS_W-1:0]  leaf_q [NODES];
  logic [DEPTH:0]      n;
  logic [15:0]         f;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NODES); i++) begin
        sel_q[i]  <= '0;
        thr_q[i]  <= '0;
        leaf_q[i] <= '0;
      end
    end else if (we) begin
      if (addr[DEPTH]) leaf_q[addr[DEPTH-1:0]] <= data[CLASS_W-1:0];
      else begin
        sel_q[addr[DEPTH-1:0]] <= data[18:16];
        thr_q[addr[DEPTH-1:0]] <= data[15:0];
      end
    end
  end

  always_comb begin
    n = (DEPTH+1)'(1);
    for (int l = 0; l < int'(DEPTH); l++) begin
      case (sel_q[n[DEPTH-1:0]])
        3'd0:    f = f_len;
        3'd1:    f = f_ipd;
        3'd2:    f = f_tuple.src_port;
        3'd3:    f = f_tuple.dst_port;
        default: f = {8'd0, f_tuple.proto};
      endcase
      n = {n[DEPTH-1:0], (f > thr_q[n[DEPTH-1:0]])};
    end
    // after DEPTH steps the walk has reached a leaf: the top bit of n is set
    a_leaf: assert (n[DEPTH]);
    cls = leaf_q[n[DEPTH-1:0]];
  end
endmodule
