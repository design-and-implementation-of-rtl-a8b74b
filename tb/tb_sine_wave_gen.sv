// tb_sine_wave_gen: steps the generator through two periods and compares
// SINE and COSINE with round(16384*sin/cos(2*pi*k/256)) computed in real
// arithmetic, plus the first values printed in the paper's transmitter
// simulation; checks clr and hold.
`timescale 1ns/1ps
module tb_sine_wave_gen;
  import tb154_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic signed [15:0] sine, cosine;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  sine_wave_gen u_dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  localparam logic [15:0] FIG_SIN [5] = '{16'h0000, 16'h0192, 16'h0324, 16'h04B5, 16'h0646};
  localparam logic [15:0] FIG_COS [5] = '{16'h4000, 16'h3FFB, 16'h3FEC, 16'h3FD4, 16'h3FB1};

  initial begin
    #5_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 512; k++) begin
      #1;
      chk(int'(sine) == ref_sin(k % 256), $sformatf("sin %0d: %0d vs %0d", k, sine, ref_sin(k % 256)));
      chk(int'(cosine) == ref_sin((k + 64) % 256), $sformatf("cos %0d: %0d vs %0d", k, cosine, ref_sin((k + 64) % 256)));
      if (k < 5) chk(sine == FIG_SIN[k] && cosine == FIG_COS[k], $sformatf("printed value %0d", k));
      @(negedge clk); en = 1; @(negedge clk); en = 0;
    end
    repeat (3) @(negedge clk);
    chk(sine == 16'(ref_sin(0)), "holds without en");
    @(negedge clk); en = 1; repeat (7) @(negedge clk); en = 0;
    chk(int'(sine) == ref_sin(7), "advances 7");
    clr = 1; @(negedge clk); clr = 0;
    chk(sine == 0 && cosine == 16'h4000, "clr");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
