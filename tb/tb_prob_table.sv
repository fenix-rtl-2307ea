// tb_prob_table -- self-checking test of prob_table.
//
// What: every entry of the P(T_i, C_i) table is written with a random
// probability (0..256); random T_i and C_i, including values beyond the last
// bin, must read back the entry of the bin they fall into.
// How: the testbench computes the bin as floor(T_i / 2^T_SHIFT) and
// floor(C_i / 2^C_SHIFT), clamped to the last bin, independently of the RTL.
// Timing: writes take effect at the clock edge; reads are combinational.
// Watchdog at 100 us.
`timescale 1ns/1ps
module tb_prob_table;
  localparam int TB = 16, CB = 16, TSH = 11, CSH = 1;
  logic clk = 0, we = 0;
  logic [7:0] waddr = '0;
  logic [8:0] wdata = '0, prob;
  logic [31:0] ti = '0;
  logic [15:0] ci = '0;
  int checks = 0, failures = 0;
  int model [TB*CB];

  prob_table #(.TS_W(32), .T_BINS(TB), .C_BINS(CB), .T_SHIFT(TSH), .C_SHIFT(CSH), .PROB_W(8)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", msg, $time);
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
    int tb_, cb_;
    for (int a = 0; a < TB*CB; a++) begin
      @(negedge clk);
      we    = 1;
      waddr = 8'(a);
      model[a] = $urandom_range(256);
      wdata = 9'(model[a]);
    end
    @(negedge clk);
    we = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      ti = ($urandom_range(3) == 0) ? $urandom : $urandom_range(40000);
      ci = ($urandom_range(3) == 0) ? 16'($urandom) : 16'($urandom_range(40));
      #1;
      tb_ = int'(ti >> TSH);
      if (ti >> TSH >= TB) tb_ = TB - 1;
      cb_ = int'(ci >> CSH);
      if (cb_ >= CB) cb_ = CB - 1;
      check(prob == 9'(model[tb_*CB + cb_]), $sformatf("ti=%0d ci=%0d", ti, ci));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
