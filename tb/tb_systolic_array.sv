// tb_systolic_array -- self-checking test of systolic_array.
//
// What: matrix-vector products of random INT8 data (including -128 and 127)
// with random lengths; each of the LANES accumulators must hold the dot
// product of its weight row with the input vector.
// How: the testbench plays the weight memory: for each PE it returns
// W[lane][pe_idx[lane]] combinationally, as the DNN core does.
// Timing check: an element fed in cycle c is in PE i in cycle c+1+i, so
// pe_valid of the last PE rises exactly LANES cycles after the first input
// and the products are complete LANES cycles after the last input.
// Watchdog at 200 us.
`timescale 1ns/1ps
module tb_systolic_array;
  localparam int L = 16, IW = 10;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  logic signed [7:0] in_x = 0;
  logic [IW-1:0] in_idx = 0;
  logic [L-1:0] pe_valid;
  logic [L-1:0][IW-1:0] pe_idx;
  logic [L-1:0][7:0] w;
  logic [L-1:0][31:0] acc;
  int checks = 0, failures = 0;
  int wm [L][256];
  int xv [256];

  systolic_array #(.LANES(L), .IDX_W(IW)) dut (.*);

  always #5 clk = ~clk;

  always_comb
    for (int i = 0; i < L; i++) w[i] = 8'(wm[i][pe_idx[i] & 8'hFF]);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", msg, $time);
    end
  endtask

  function automatic int r8();
    int k;
    k = $urandom_range(9);
    return (k == 0) ? -128 : (k == 1) ? 127 : int'($urandom_range(255)) - 128;
  endfunction

  initial begin
    #200us;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, first_cyc, rise;
    longint s;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      n = (round == 0) ? 1 : $urandom_range(1, 200);
      for (int i = 0; i < L; i++) for (int j = 0; j < n; j++) wm[i][j] = r8();
      for (int j = 0; j < n; j++) xv[j] = r8();
      @(negedge clk);
      clear = 1;
      @(negedge clk);
      clear = 0;
      rise = -1;
      for (int c = 0; c < n + L + 2; c++) begin
        in_valid = (c < n);
        in_idx   = IW'(c);
        in_x     = (c < n) ? 8'(xv[c]) : 8'd0;
        @(posedge clk);
        #1;
        if (rise < 0 && pe_valid[L-1]) rise = c;
        @(negedge clk);
        if (c == n - 1 + L) begin
          // last element has just been accumulated in the last PE
          for (int i = 0; i < L; i++) begin
            s = 0;
            for (int j = 0; j < n; j++) s += longint'(wm[i][j]) * longint'(xv[j]);
            check($signed(acc[i]) == int'(s), $sformatf("round %0d lane %0d", round, i));
          end
        end
      end
      in_valid = 0;
      check(rise == L - 1, $sformatf("last PE valid after %0d cycles", rise + 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
