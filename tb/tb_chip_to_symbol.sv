// tb_chip_to_symbol: despreads the 16 clean chip words of the IEEE table
// (distance 0), then words with 1..5 random chip errors, which must still
// decode to the sent symbol with the error count reported, and checks the
// one-clock latency and first-flag propagation.
`timescale 1ns/1ps
module tb_chip_to_symbol;
  import tb154_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [31:0] in_chip; logic in_valid, in_first;
  logic [3:0] out_sym; logic [5:0] out_dist; logic out_valid, out_first;
  int checks = 0, failures = 0;

  chip_to_symbol u_dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  task automatic send(input logic [31:0] w, input bit first, input int s, input int d);
    @(negedge clk); in_chip = w; in_valid = 1; in_first = first;
    @(negedge clk); in_valid = 0; in_first = 0;
    chk(out_valid, "valid after one clock");
    chk(out_sym == 4'(s), $sformatf("symbol %0d decoded as %0d", s, out_sym));
    chk(int'(out_dist) == d, $sformatf("distance %0d vs %0d", out_dist, d));
    chk(out_first == first, "first flag");
  endtask

  initial begin
    #5_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_chip = 0; in_valid = 0; in_first = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int s = 0; s < 16; s++) send(ref_chip(s), s == 0, s, 0);
    for (int t = 0; t < 300; t++) begin
      int s, e;
      logic [31:0] m;
      s = $urandom_range(0, 15);
      e = $urandom_range(1, 5);
      m = 0;
      while ($countones(m) < e) m[$urandom_range(0, 31)] = 1'b1;
      send(ref_chip(s) ^ m, 0, s, e);
    end
    @(negedge clk);
    chk(!out_valid, "valid drops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
