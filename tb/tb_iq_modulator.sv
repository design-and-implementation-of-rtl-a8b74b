// tb_iq_modulator: feeds a frame of random chip words and records OUT DATA at
// every tick. Expected, for tick k of the burst (symbol n = k/4):
//   even k: chip[n] + SINE(k),  odd k: chip[n] + COSINE(k)
// with SINE/COSINE from real arithmetic. Also checks the burst length (4 ticks
// per symbol), that the Q-phase register lags the I-phase register by one
// tick, the sample sum printed in the paper's simulation
// (744ac39b + 0192 = 744ac52d), and that a starved source raises `underrun`.
`timescale 1ns/1ps
module tb_iq_modulator;
  import tb154_pkg::*;
  logic clk = 0, rst_n = 0, tick = 0;
  always #5 clk = ~clk;
  logic [31:0] in_chip; logic in_valid, in_last, in_ready;
  logic [31:0] out_data; logic out_valid, underrun;
  logic [31:0] chip_i_phase, chip_q_phase;
  logic signed [15:0] sine, cosine;
  int checks = 0, failures = 0;

  iq_modulator u_dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  // tick every 5 clocks
  int div = 0;
  always @(posedge clk) begin div <= (div == 4) ? 0 : div + 1; tick <= (div == 4); end

  localparam int N = 12;
  logic [31:0] words [N];
  int ip, k, n_under;
  bit starve;

  always @(posedge clk) if (rst_n && in_valid && in_ready) ip <= ip + 1;
  assign in_chip  = words[ip % N];
  assign in_valid = rst_n && ip < N && !(starve && ip == 5);
  assign in_last  = (ip == N - 1);

  always @(posedge clk) if (rst_n) begin
    if (underrun) n_under++;
    if (tick && out_valid) begin
      logic [31:0] e;
      int n;
      n = k / 4;
      e = words[n] + 32'((k % 2 == 0) ? ref_sin(k % 256) : ref_sin((k + 64) % 256));
      chk(out_data == e, $sformatf("tick %0d: %h vs %h", k, out_data, e));
      if (k % 4 == 0 && n > 0) chk(chip_q_phase == words[n-1] && chip_i_phase == words[n], "Q lags I by one tick");
      if (k % 4 == 1) chk(chip_q_phase == words[n], "Q holds the symbol from its second tick");
      k++;
    end
  end

  initial begin
    #5_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ip = 0; k = 0; n_under = 0; starve = 0;
    foreach (words[i]) words[i] = $urandom;
    words[0] = 32'h744AC39B;
    repeat (2) @(negedge clk); rst_n = 1;
    wait (ip == N);
    wait (!out_valid);
    repeat (20) @(negedge clk);
    chk(k == 4 * N, $sformatf("burst of %0d ticks, expected %0d", k, 4 * N));
    chk(n_under == 0, "no underrun");
    // starved source
    ip = 0; k = 0; starve = 1;
    wait (ip == 5);
    wait (!out_valid);
    repeat (20) @(negedge clk);
    chk(n_under == 1, "underrun flagged once");
    chk(k == 4 * 5, "burst cut after the last word delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the sum printed in the paper's transmitter waveform
  initial chk(32'h744AC39B + 32'(ref_sin(1)) == 32'h744AC52D, "printed sum 744ac52d");
endmodule
