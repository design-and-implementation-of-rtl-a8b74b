// tb_frame_parser: feeds independently assembled PPDUs byte by byte (with
// idle gaps and a leading noise byte) and checks the decoded header,
// payload length and contents, crc_ok and accept. Cases: own short address,
// broadcast, extended address, acknowledgment frame, foreign address
// (rejected), a flipped payload bit (FCS error), a beacon frame type
// (rejected by the frame-control comparison), and a burst restart in the
// middle of a frame.
`timescale 1ns/1ps
module tb_frame_parser;
  import mac154_pkg::*;
  import tb154_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] in_data; logic in_valid, in_first;
  logic [15:0] my_pan, my_short; logic [63:0] my_ext;
  logic done; mac_hdr_t hdr; logic [6:0] payload_len; logic crc_ok, accept, in_frame;
  logic [6:0] rd_addr; logic [7:0] rd_data;
  int checks = 0, failures = 0;

  frame_parser u_dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  int n_done;
  always @(posedge clk) if (rst_n && done) n_done++;

  task automatic send(input byte unsigned q[$], input int flip_at);
    for (int i = 0; i < q.size(); i++) begin
      @(negedge clk);
      in_data = q[i] ^ ((i == flip_at) ? 8'h10 : 8'h00);
      in_valid = 1; in_first = (i == 0);
      @(negedge clk); in_valid = 0; in_first = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    repeat (2) @(negedge clk);
  endtask

  task automatic run(input mac_hdr_t h, input int n, input int flip_at,
                     input bit exp_crc, input bit exp_acc);
    byte unsigned pl [];
    byte unsigned q [$];
    int n_before;
    pl = new[n];
    foreach (pl[i]) pl[i] = 8'($urandom);
    ref_ppdu(h, pl, n, q);
    q.push_front(8'h5C);     // noise n_before the preamble
    n_before = n_done;
    send(q, flip_at < 0 ? -1 : flip_at + 1);
    chk(n_done == n_before + 1, $sformatf("fcf %h: one frame", h.fcf));
    chk(crc_ok == exp_crc, $sformatf("fcf %h: crc_ok %0d", h.fcf, crc_ok));
    chk(accept == exp_acc, $sformatf("fcf %h: accept %0d", h.fcf, accept));
    if (exp_crc) begin
      chk(hdr.fcf == h.fcf && hdr.seq == h.seq, "fcf/seq");
      if (h.fcf[11:10] != 0) chk(hdr.dst_pan == h.dst_pan, "dst pan");
      if (h.fcf[11:10] == 2) chk(hdr.dst_addr[15:0] == h.dst_addr[15:0], "dst short");
      if (h.fcf[11:10] == 3) chk(hdr.dst_addr == h.dst_addr, "dst ext");
      if (h.fcf[15:14] == 2) chk(hdr.src_addr[15:0] == h.src_addr[15:0], "src short");
      if (h.fcf[15:14] == 3) chk(hdr.src_addr == h.src_addr, "src ext");
      chk(int'(payload_len) == n, $sformatf("payload length %0d vs %0d", payload_len, n));
      for (int i = 0; i < n; i++) begin
        rd_addr = 7'(i); #1;
        chk(rd_data == pl[i], $sformatf("payload %0d", i));
      end
    end
  endtask

  initial begin
    #20_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    mac_hdr_t h;
    byte unsigned q [$], pl [];
    in_data = 0; in_valid = 0; in_first = 0; rd_addr = 0; n_done = 0;
    my_pan = 16'hBEEF; my_short = 16'h1234; my_ext = 64'h0123_4567_89AB_CDEF;
    repeat (2) @(negedge clk); rst_n = 1;
    h = '0; h.fcf = 16'h8861; h.seq = 8'h21; h.dst_pan = 16'hBEEF; h.dst_addr = 64'h1234; h.src_addr = 64'h9999;
    run(h, 25, -1, 1, 1);                              // own short address
    h.dst_addr = 64'hFFFF; h.seq = 8'h22; run(h, 3, -1, 1, 1);   // broadcast
    h.dst_addr = 64'h4321; h.seq = 8'h23; run(h, 3, -1, 1, 0);   // foreign
    h.dst_addr = 64'h1234; h.seq = 8'h24; run(h, 10, 6 + 9 + 4, 0, 0);  // FCS error
    h = '0; h.fcf = 16'hCC21; h.seq = 8'h31; h.dst_pan = 16'hBEEF; h.src_pan = 16'h7777;
    h.dst_addr = 64'h0123_4567_89AB_CDEF; h.src_addr = 64'hAAAA_BBBB_CCCC_DDDD;
    run(h, 102, -1, 1, 1);                             // extended, 127-byte MPDU
    h = '0; h.fcf = 16'h0002; h.seq = 8'h41; run(h, 0, -1, 1, 1);  // acknowledgment
    h = '0; h.fcf = 16'h8000; h.seq = 8'h51; h.src_pan = 16'hBEEF; h.src_addr = 64'h5; run(h, 4, -1, 1, 0); // beacon type
    // a burst that restarts mid-frame: the cut frame produces nothing, the next one is received
    h = '0; h.fcf = 16'h8861; h.seq = 8'h61; h.dst_pan = 16'hBEEF; h.dst_addr = 64'h1234;
    pl = new[8];
    ref_ppdu(h, pl, 8, q);
    q = q[0:9];
    send(q, -1);
    h.seq = 8'h62;
    run(h, 8, -1, 1, 1);
    chk(hdr.seq == 8'h62, "frame after restart");
    chk(n_done == 8, $sformatf("frames seen %0d", n_done));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
