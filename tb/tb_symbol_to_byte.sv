// tb_symbol_to_byte: sends random symbol streams with gaps and checks that
// every pair becomes {second, first}; a symbol marked first in the middle of
// a pair must restart the pairing (the dangling symbol is dropped).
`timescale 1ns/1ps
module tb_symbol_to_byte;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] in_sym; logic in_valid, in_first;
  logic [7:0] out_byte; logic out_valid, out_first;
  int checks = 0, failures = 0;

  symbol_to_byte u_dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  byte unsigned exp_q [$];
  bit exp_f [$];
  always @(posedge clk) if (rst_n && out_valid) begin
    chk(exp_q.size() > 0, "unexpected byte");
    if (exp_q.size() > 0) begin
      chk(out_byte == exp_q[0], $sformatf("byte %h vs %h", out_byte, exp_q[0]));
      chk(out_first == exp_f[0], "first flag");
      void'(exp_q.pop_front()); void'(exp_f.pop_front());
    end
  end

  task automatic sym(input logic [3:0] s, input bit first);
    @(negedge clk); in_sym = s; in_valid = 1; in_first = first;
    @(negedge clk); in_valid = 0; in_first = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
  endtask

  initial begin
    #5_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_sym = 0; in_valid = 0; in_first = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int b = 0; b < 3; b++) begin
      // odd leftover symbol from a previous burst, then a new burst
      sym(4'hF, 0);
      for (int i = 0; i < 40; i++) begin
        byte unsigned v = 8'($urandom);
        exp_q.push_back(v); exp_f.push_back(i == 0);
        sym(v[3:0], i == 0);
        sym(v[7:4], 0);
      end
    end
    repeat (4) @(negedge clk);
    chk(exp_q.size() == 0, "all bytes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
