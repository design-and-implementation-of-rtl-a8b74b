// tb_receiver: drives the receive chain with reference words on air (built
// from the typed chip table and real-valued sine/cosine) and checks the frame
// it reports: header, payload, crc_ok, accept. The second frame has two chip
// errors in every word, which must be corrected (max_dist 2); the third has
// one symbol inverted, which must give an FCS error.
`timescale 1ns/1ps
module tb_receiver;
  import mac154_pkg::*;
  import tb154_pkg::*;
  logic clk = 0, rst_n = 0, tick = 0;
  always #5 clk = ~clk;
  logic [31:0] in_data; logic in_valid;
  logic [15:0] my_pan, my_short; logic [63:0] my_ext;
  logic done; mac_hdr_t hdr; logic [6:0] payload_len; logic crc_ok, accept;
  logic [5:0] max_dist; logic [6:0] rd_addr; logic [7:0] rd_data;
  int checks = 0, failures = 0;

  receiver u_dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  int div = 0;
  always @(posedge clk) begin div <= (div == 2) ? 0 : div + 1; tick <= (div == 2); end

  int n_done = 0;
  always @(posedge clk) if (rst_n && done) n_done++;

  task automatic run(input mac_hdr_t h, input int n, input logic [31:0] flip,
                     input int bad_lo, input bit exp_ok, input int exp_dist);
    byte unsigned pl [];
    byte unsigned q [$];
    logic [31:0] w [$];
    int d0;
    logic [31:0] s_i;
    pl = new[n];
    foreach (pl[i]) pl[i] = 8'($urandom);
    ref_ppdu(h, pl, n, q);
    ref_air(q, w);
    d0 = n_done;
    foreach (w[i]) begin
      @(posedge clk iff tick); #1;
      in_valid = 1;
      // errors are applied to the chip word, under the added sine/cosine
      s_i      = 32'((i % 2 == 0) ? ref_sin(i % 256) : ref_sin((i + 64) % 256));
      in_data  = (((w[i] - s_i) ^ flip ^ ((i >= bad_lo && i < bad_lo + 4) ? 32'hFFFF_FFFF : 32'h0))) + s_i;
    end
    @(posedge clk iff tick); #1; in_valid = 0;
    repeat (3) @(posedge clk iff tick);
    chk(n_done == d0 + 1, "one frame");
    chk(crc_ok == exp_ok && accept == exp_ok, $sformatf("crc_ok %0d accept %0d", crc_ok, accept));
    if (exp_ok) begin
      chk(hdr.fcf == h.fcf && hdr.seq == h.seq && hdr.dst_addr == h.dst_addr && hdr.src_addr == h.src_addr, "header");
      chk(int'(payload_len) == n, "payload length");
      for (int i = 0; i < n; i++) begin
        rd_addr = 7'(i); #1;
        chk(rd_data == pl[i], $sformatf("payload %0d", i));
      end
      chk(int'(max_dist) == exp_dist, $sformatf("max chip errors %0d", max_dist));
    end
  endtask

  initial begin
    #50_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    mac_hdr_t h;
    in_data = 0; in_valid = 0; rd_addr = 0;
    my_pan = 16'h2222; my_short = 16'h3333; my_ext = 64'h1;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (3) @(posedge clk iff tick);
    h = '0; h.fcf = 16'h8861; h.seq = 8'h7; h.dst_pan = 16'h2222; h.dst_addr = 64'h3333; h.src_addr = 64'h4444;
    run(h, 12, 32'h0, -100, 1, 0);
    h.seq = 8'h8;
    run(h, 12, 32'h0400_0020, -100, 1, 2);
    h.seq = 8'h9;
    run(h, 12, 32'h0, 8 * 6 + 8 * 11, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
