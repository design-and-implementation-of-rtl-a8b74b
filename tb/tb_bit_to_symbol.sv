// tb_bit_to_symbol: streams random octets through the splitter with random
// back-pressure and checks that each octet comes out as its low nibble then
// its high nibble, with `last` only on the high nibble of the last octet.
`timescale 1ns/1ps
module tb_bit_to_symbol;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] in_data; logic in_valid, in_last, in_ready;
  logic [3:0] out_sym; logic out_valid, out_last, out_ready;
  int checks = 0, failures = 0;

  bit_to_symbol u_dut (.*);

  localparam int N = 200;
  byte unsigned src [N];
  int ip, op;

  initial begin
    #5_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // source
  always @(posedge clk) if (rst_n && in_valid && in_ready) ip <= ip + 1;
  assign in_data  = src[ip % N];
  assign in_valid = rst_n && ip < N;
  assign in_last  = (ip == N - 1);

  // sink
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      logic [3:0] exp_s;
      exp_s = (op % 2 == 0) ? src[op / 2][3:0] : src[op / 2][7:4];
      checks++;
      if (out_sym !== exp_s || out_last !== (op == 2 * N - 1)) begin
        failures++; $display("FAIL: symbol %0d got %h exp %h last %b", op, out_sym, exp_s, out_last);
      end
      op <= op + 1;
    end
    out_ready <= ($urandom_range(0, 3) != 0);
  end

  initial begin
    ip = 0; op = 0; out_ready = 0;
    foreach (src[i]) src[i] = 8'($urandom);
    repeat (2) @(negedge clk); rst_n = 1;
    wait (op == 2 * N);
    repeat (5) @(negedge clk);
    checks++;
    if (op != 2 * N) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
