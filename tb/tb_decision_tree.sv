// tb_decision_tree -- self-checking test of decision_tree.
//
// What: a random tree (feature selector and threshold per internal node,
// class per leaf) is written through the control port; random packets must
// get the class a software walk of the same tree gives. The tree is then
// rewritten and checked again, and the reset state (every packet -> class 0)
// is checked first.
// Timing: table writes take effect at the clock edge; classification is
// combinational. Watchdog at 100 us.
`timescale 1ns/1ps
module tb_decision_tree;
  import fenix_pkg::*;
  localparam int D = 4, NODES = 1 << D;
  logic clk = 0, rst_n = 0, we = 0;
  logic [D:0] addr = '0;
  logic [18:0] data = '0;
  logic [15:0] f_len = '0, f_ipd = '0;
  five_tuple_t f_tuple = '0;
  logic [7:0] cls;
  int checks = 0, failures = 0;
  int sel [NODES], thr [NODES], leaf [NODES];

  decision_tree #(.DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", msg, $time);
    end
  endtask

  function automatic int walk();
    int n, f;
    n = 1;
    for (int l = 0; l < D; l++) begin
      case (sel[n])
        0: f = f_len;
        1: f = f_ipd;
        2: f = f_tuple.src_port;
        3: f = f_tuple.dst_port;
        default: f = f_tuple.proto;
      endcase
      n = 2 * n + ((f > thr[n]) ? 1 : 0);
    end
    return leaf[n - NODES];
  endfunction

  task automatic program_tree();
    for (int i = 1; i < NODES; i++) begin
      sel[i] = $urandom_range(4);
      thr[i] = (sel[i] == 4) ? $urandom_range(255) : $urandom_range(65535);
      @(negedge clk);
      we = 1;
      addr = (D+1)'(i);
      data = {3'(sel[i]), 16'(thr[i])};
    end
    for (int i = 0; i < NODES; i++) begin
      leaf[i] = $urandom_range(11);
      @(negedge clk);
      we = 1;
      addr = (D+1)'(NODES + i);
      data = 19'(leaf[i]);
    end
    @(negedge clk);
    we = 0;
  endtask

  task automatic run(int n);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      f_len   = 16'($urandom);
      f_ipd   = 16'($urandom);
      f_tuple = {$urandom, $urandom, $urandom, $urandom};
      #1;
      check(cls == 8'(walk()), "class");
    end
  endtask

  initial begin
    #100us;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    check(cls == 0, "reset class");
    rst_n = 1;
    program_tree();
    run(1000);
    program_tree();
    run(1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
