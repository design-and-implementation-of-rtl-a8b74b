// tb_crc16_ccitt: compares the byte-wide FCS register with an independent
// bit-serial model on the standard check string "123456789" (0x2189) and on
// random messages, and checks that a message followed by its FCS leaves a
// zero remainder. Also checks that clr restores zero.
`timescale 1ns/1ps
module tb_crc16_ccitt;
  import tb154_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [7:0] data = 0;
  logic [15:0] crc;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  crc16_ccitt u_dut (.clk, .rst_n, .clr, .en, .data, .crc);

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  task automatic feed(input byte unsigned b);
    @(negedge clk); en = 1; data = b;
    @(negedge clk); en = 0;
  endtask

  task automatic restart();
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
  endtask

  initial begin
    #5_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    byte unsigned m [];
    logic [15:0] r;
    repeat (2) @(negedge clk); rst_n = 1;
    restart();
    m = new[9];
    foreach (m[i]) begin m[i] = 8'h31 + 8'(i); feed(m[i]); end
    chk(crc == 16'h2189, $sformatf("check string: %h", crc));
    chk(ref_crc(m, 9) == 16'h2189, "reference model check string");
    for (int t = 0; t < 40; t++) begin
      int n = 1 + $urandom_range(0, 60);
      restart();
      chk(crc == 16'h0, "clr");
      m = new[n + 2];
      for (int i = 0; i < n; i++) begin m[i] = 8'($urandom); feed(m[i]); end
      r = ref_crc(m, n);
      chk(crc == r, $sformatf("random %0d: %h vs %h", t, crc, r));
      feed(r[7:0]); feed(r[15:8]);
      chk(crc == 16'h0, "residue zero");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
