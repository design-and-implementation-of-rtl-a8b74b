// tb_clk_div: checks that the divider's tick is one clock wide and comes
// every DIV = 400 clocks (100 MHz -> 250 kHz), starting DIV clocks after reset.
`timescale 1ns/1ps
module tb_clk_div;
  logic clk = 0, rst_n = 0, tick;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  clk_div u_dut (.clk, .rst_n, .tick);

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cycle count since reset release, and the cycles at which tick was high
  int cyc = 0;
  int at [$];
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (tick) at.push_back(cyc);
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (at.size() == 10);
    @(posedge clk);
    checks++;
    if (at[0] != 400) begin failures++; $display("FAIL: first tick at %0d", at[0]); end
    for (int i = 1; i < 10; i++) begin
      checks++;
      if (at[i] - at[i-1] != 400) begin failures++; $display("FAIL: period %0d", at[i] - at[i-1]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
