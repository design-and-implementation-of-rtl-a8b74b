// tb_iq_demodulator: drives bursts of words built as the transmitter builds
// them (chip + SINE on even ticks, chip + COSINE on odd ticks) and checks
// that one chip word per symbol comes back. To check the I/Q chip selection,
// every I word has its odd chips scrambled and every Q word its even chips
// scrambled: only the even chips of I and odd chips of Q may be used. The
// first symbol of each burst must carry chip_first, and a second burst must
// restart the generator and symbol alignment.
`timescale 1ns/1ps
module tb_iq_demodulator;
  import tb154_pkg::*;
  import mac154_pkg::*;
  logic clk = 0, rst_n = 0, tick = 0;
  always #5 clk = ~clk;
  logic [31:0] in_data; logic in_valid;
  logic [31:0] chip; logic chip_valid, chip_first;
  logic [31:0] rx_i, rx_q;
  logic signed [15:0] sine, cosine;
  int checks = 0, failures = 0;

  iq_demodulator u_dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  int div = 0;
  always @(posedge clk) begin div <= (div == 3) ? 0 : div + 1; tick <= (div == 3); end

  localparam int N = 20;
  logic [31:0] words [N];
  int got, firsts;

  always @(posedge clk) if (rst_n && chip_valid) begin
    chk(chip == words[got % N], $sformatf("symbol %0d: %h vs %h", got, chip, words[got % N]));
    if (chip_first) firsts++;
    chk(chip_first == (got % N == 0), "chip_first on the first symbol only");
    got <= got + 1;
  end

  task automatic burst();
    for (int k = 0; k < 4 * N; k++) begin
      logic [31:0] w;
      w = words[k / 4];
      if (k % 2 == 0) w = ((w & EVEN_CHIPS) | ($urandom & ODD_CHIPS)) + 32'(ref_sin(k % 256));
      else            w = ((w & ODD_CHIPS) | ($urandom & EVEN_CHIPS)) + 32'(ref_sin((k + 64) % 256));
      @(posedge clk iff tick); #1;
      in_data = w; in_valid = 1;
    end
    @(posedge clk iff tick); #1;
    in_valid = 0; in_data = $urandom;
    repeat (3) @(posedge clk iff tick);
  endtask

  initial begin
    #5_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    got = 0; firsts = 0; in_valid = 0; in_data = 0;
    foreach (words[i]) words[i] = $urandom;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (2) @(posedge clk iff tick);
    burst();
    chk(got == N, $sformatf("first burst: %0d symbols", got));
    foreach (words[i]) words[i] = $urandom;
    burst();
    chk(got == 2 * N, $sformatf("second burst: %0d symbols", got));
    chk(firsts == 2, "two bursts started");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
