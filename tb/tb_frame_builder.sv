// tb_frame_builder: builds frames with several addressing modes (none, short
// with PAN-ID compression, extended without compression, mixed) and payload
// sizes up to a 127-byte MPDU, collects the byte stream under random
// back-pressure and compares it with an independently assembled PPDU
// (preamble, SFD 0xA7, length, MHR, payload, CRC). Also checks that an
// oversized request is refused with len_err.
`timescale 1ns/1ps
module tb_frame_builder;
  import mac154_pkg::*;
  import tb154_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start; mac_hdr_t hdr; logic [6:0] payload_len;
  logic pl_we; logic [6:0] pl_waddr; logic [7:0] pl_wdata;
  logic busy, done, len_err;
  logic [7:0] out_data; logic out_valid, out_last, out_ready;
  int checks = 0, failures = 0;

  frame_builder u_dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  byte unsigned got [$];
  bit last_seen;
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      got.push_back(out_data);
      if (out_last) last_seen = 1;
    end
    out_ready <= ($urandom_range(0, 2) != 0);
  end

  task automatic run(input mac_hdr_t h, input int n);
    byte unsigned pl [];
    byte unsigned exp_q [$];
    pl = new[n];
    foreach (pl[i]) pl[i] = 8'($urandom);
    for (int i = 0; i < n; i++) begin
      @(negedge clk); pl_we = 1; pl_waddr = 7'(i); pl_wdata = pl[i];
    end
    @(negedge clk); pl_we = 0;
    ref_ppdu(h, pl, n, exp_q);
    got.delete(); last_seen = 0;
    hdr = h; payload_len = 7'(n); start = 1;
    @(negedge clk); start = 0;
    chk(busy, "busy after start");
    while (!last_seen) @(negedge clk);
    @(negedge clk);
    chk(!busy, "idle after last byte");
    chk(got.size() == exp_q.size(), $sformatf("length %0d vs %0d", got.size(), exp_q.size()));
    for (int i = 0; i < exp_q.size() && i < got.size(); i++)
      chk(got[i] == exp_q[i], $sformatf("fcf %h byte %0d: %h vs %h", h.fcf, i, got[i], exp_q[i]));
  endtask

  initial begin
    #20_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    mac_hdr_t h;
    start = 0; hdr = '0; payload_len = 0; pl_we = 0; pl_waddr = 0; pl_wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // acknowledgment: no addresses, no payload (MPDU 5 bytes)
    h = '0; h.fcf = 16'h0002; h.seq = 8'h56;
    run(h, 0);
    // data, short addresses, PAN-ID compression
    h = '0; h.fcf = 16'h8861; h.seq = 8'h01; h.dst_pan = 16'hBEEF;
    h.dst_addr = 64'h1234; h.src_addr = 64'h5678;
    run(h, 20);
    // data, extended both, no compression: 23-byte MHR, 102-byte payload = 127
    h = '0; h.fcf = 16'hCC01; h.seq = 8'hFE; h.dst_pan = 16'h0102; h.src_pan = 16'h0304;
    h.dst_addr = 64'h0123_4567_89AB_CDEF; h.src_addr = 64'hFEDC_BA98_7654_3210;
    run(h, 102);
    // short destination, extended source, compressed
    h.fcf = 16'hC841; run(h, 7);
    // source only
    h.fcf = 16'h8001; run(h, 1);
    // too long: 23 + 103 + 2 = 128
    h.fcf = 16'hCC01;
    @(negedge clk); hdr = h; payload_len = 7'd103; start = 1;
    @(negedge clk); start = 0;
    chk(len_err, "oversized frame refused");
    chk(!busy, "not started");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
