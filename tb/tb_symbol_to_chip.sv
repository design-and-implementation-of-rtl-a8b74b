// tb_symbol_to_chip: sends all 16 symbols (and a random sequence with
// back-pressure) and compares each chip word with the chip table typed out
// from IEEE 802.15.4; also checks the word printed for symbol 0 in the
// paper's simulation, 32'h744ac39b, and the one-cycle latency.
`timescale 1ns/1ps
module tb_symbol_to_chip;
  import tb154_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] in_sym; logic in_valid, in_last, in_ready;
  logic [31:0] out_chip; logic out_valid, out_last, out_ready;
  int checks = 0, failures = 0;

  symbol_to_chip u_dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    #5_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int s;
    in_sym = 0; in_valid = 0; in_last = 0; out_ready = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    chk(ref_chip(0) == 32'h744AC39B, "reference table symbol 0 equals printed 744ac39b");
    for (int k = 0; k < 16; k++) begin
      @(negedge clk); in_sym = 4'(k); in_valid = 1; in_last = (k == 15);
      @(negedge clk); in_valid = 0;
      chk(out_valid, "valid one cycle after accept");
      chk(out_chip == ref_chip(k), $sformatf("symbol %0d: %h vs %h", k, out_chip, ref_chip(k)));
      chk(out_last == (k == 15), "last");
    end
    // random stream with back-pressure
    for (int k = 0; k < 100; k++) begin
      s = $urandom_range(0, 15);
      @(negedge clk); in_sym = 4'(s); in_valid = 1; in_last = 0;
      out_ready = 0;
      @(negedge clk);
      chk(!in_ready, "stalls when full");
      out_ready = 1; in_valid = 0;
      chk(out_valid && out_chip == ref_chip(s), "held under back-pressure");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
