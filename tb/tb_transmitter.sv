// tb_transmitter: sends two frames through the whole transmit chain and
// compares every word on air with a reference built from the typed chip table
// and real-valued sine/cosine: PPDU bytes -> nibbles (low first) -> chip word
// -> I, Q, I, Q ticks with SINE/COSINE added. Checks the on-air time of 8
// ticks per PPDU byte.
`timescale 1ns/1ps
module tb_transmitter;
  import mac154_pkg::*;
  import tb154_pkg::*;
  logic clk = 0, rst_n = 0, tick = 0;
  always #5 clk = ~clk;
  logic start; mac_hdr_t hdr; logic [6:0] payload_len;
  logic pl_we; logic [6:0] pl_waddr; logic [7:0] pl_wdata;
  logic busy, len_err; logic [31:0] out_data; logic on_air, underrun;
  logic [31:0] chip_i_phase, chip_q_phase;
  int checks = 0, failures = 0;

  transmitter u_dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  int div = 0;
  always @(posedge clk) begin div <= (div == 2) ? 0 : div + 1; tick <= (div == 2); end

  logic [31:0] got [$];
  int n_under = 0;
  always @(posedge clk) if (rst_n) begin
    if (tick && on_air) got.push_back(out_data);
    if (underrun) n_under++;
  end

  task automatic run(input mac_hdr_t h, input int n);
    byte unsigned pl [];
    byte unsigned q [$];
    logic [31:0] w [$];
    pl = new[n];
    foreach (pl[i]) pl[i] = 8'($urandom);
    for (int i = 0; i < n; i++) begin
      @(negedge clk); pl_we = 1; pl_waddr = 7'(i); pl_wdata = pl[i];
    end
    @(negedge clk); pl_we = 0;
    ref_ppdu(h, pl, n, q);
    ref_air(q, w);
    got.delete();
    hdr = h; payload_len = 7'(n); start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    repeat (8) @(negedge clk);
    chk(got.size() == 8 * q.size(), $sformatf("on air %0d ticks, expected %0d", got.size(), 8 * q.size()));
    for (int i = 0; i < w.size() && i < got.size(); i++)
      chk(got[i] == w[i], $sformatf("word %0d: %h vs %h", i, got[i], w[i]));
  endtask

  initial begin
    #50_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    mac_hdr_t h;
    start = 0; hdr = '0; payload_len = 0; pl_we = 0; pl_waddr = 0; pl_wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    h = '0; h.fcf = 16'h8861; h.seq = 8'h7; h.dst_pan = 16'h2222; h.dst_addr = 64'h3333; h.src_addr = 64'h4444;
    run(h, 10);
    h = '0; h.fcf = 16'h0002; h.seq = 8'h8;
    run(h, 0);
    chk(n_under == 0, "no underrun");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
