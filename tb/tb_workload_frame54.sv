// tb_workload_frame54: one acknowledged data packet of a 54-byte MPDU between
// two nodes at the default parameters (100 MHz clock, 250 kHz datapath).
//
// The frame has a length byte of 8'b0011_0110 (54), sequence number
// 8'b1100_1011, 64-bit destination and source addresses (source all ones)
// and PAN-ID compression: 2 (FCF) + 1 (seq) + 2 (PAN) + 8 + 8 (addresses)
// header bytes, 31 payload bytes and a 2-byte FCS. Node A sends it to node B
// over a clean link and requests an acknowledgment.
//
// Checked against values worked out here, not taken from the design:
//   * the burst lasts (6 + 54) * 8 = 480 ticks;
//   * the length byte on air: symbols 10 and 11 of the burst (the length
//     byte's low and high nibble) carry the chip words of 6 and 3, read
//     from the transmitter's I-phase chip register in mid-symbol;
//   * B delivers the frame once, with the header and all 31 payload bytes;
//   * B answers with an 11-byte acknowledgment (88 ticks on air) and A
//     reports success at the first attempt;
//   * A reports done within data burst + acknowledgment wait.
`timescale 1ns/1ps
module tb_workload_frame54;
  import mac154_pkg::*;
  import tb154_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic        a_pl_we, b_pl_we;
  logic [6:0]  a_pl_waddr, b_pl_waddr;
  logic [7:0]  a_pl_wdata, b_pl_wdata;
  logic        a_req, b_req;
  mac_hdr_t    a_hdr, b_hdr;
  logic [6:0]  a_len, b_len;
  logic        a_busy, a_done, a_ok, b_busy, b_done, b_ok;
  logic [1:0]  a_retries, b_retries;
  logic        a_rx_ind, b_rx_ind, a_crc_err, b_crc_err;
  mac_hdr_t    a_rx_hdr, b_rx_hdr;
  logic [6:0]  a_rx_len, b_rx_len, a_rd_addr, b_rd_addr;
  logic [7:0]  a_rd_data, b_rd_data;
  logic [5:0]  a_maxerr, b_maxerr;
  logic [31:0] a_tx_data, b_tx_data;
  logic        a_tx_valid, b_tx_valid;
  logic        a_tick, b_tick, a_unr, b_unr, a_lerr, b_lerr;
  logic        a_ack_sent, b_ack_sent, a_ack_to, b_ack_to;
  logic [31:0] a_ci, a_cq, b_ci, b_cq;

  localparam logic [15:0] PAN   = 16'hBEEF;
  localparam logic [63:0] A_EXT = 64'hFFFF_FFFF_FFFF_FFFF;
  localparam logic [63:0] B_EXT = 64'h0000_0000_0012_ADB4;
  localparam int MPDU = 54, PAYLOAD = MPDU - 21 - 2;

  ieee802154_node u_a (
    .clk, .rst_n, .my_pan (PAN), .my_short (16'hFFFE), .my_ext (A_EXT),
    .pl_we (a_pl_we), .pl_waddr (a_pl_waddr), .pl_wdata (a_pl_wdata),
    .host_req (a_req), .host_hdr (a_hdr), .host_len (a_len),
    .host_busy (a_busy), .host_done (a_done), .host_ack_ok (a_ok), .host_retries (a_retries),
    .rx_ind (a_rx_ind), .rx_hdr (a_rx_hdr), .rx_len (a_rx_len), .rx_crc_err (a_crc_err),
    .rx_rd_addr (a_rd_addr), .rx_rd_data (a_rd_data), .rx_max_chip_err (a_maxerr),
    .air_tx_data (a_tx_data), .air_tx_valid (a_tx_valid),
    .air_rx_data (b_tx_data), .air_rx_valid (b_tx_valid),
    .tick (a_tick), .tx_underrun (a_unr), .tx_len_err (a_lerr),
    .ack_sent (a_ack_sent), .ack_timeout (a_ack_to),
    .chip_i_phase (a_ci), .chip_q_phase (a_cq)
  );

  ieee802154_node u_b (
    .clk, .rst_n, .my_pan (PAN), .my_short (16'hFFFE), .my_ext (B_EXT),
    .pl_we (b_pl_we), .pl_waddr (b_pl_waddr), .pl_wdata (b_pl_wdata),
    .host_req (b_req), .host_hdr (b_hdr), .host_len (b_len),
    .host_busy (b_busy), .host_done (b_done), .host_ack_ok (b_ok), .host_retries (b_retries),
    .rx_ind (b_rx_ind), .rx_hdr (b_rx_hdr), .rx_len (b_rx_len), .rx_crc_err (b_crc_err),
    .rx_rd_addr (b_rd_addr), .rx_rd_data (b_rd_data), .rx_max_chip_err (b_maxerr),
    .air_tx_data (b_tx_data), .air_tx_valid (b_tx_valid),
    .air_rx_data (a_tx_data), .air_rx_valid (a_tx_valid),
    .tick (b_tick), .tx_underrun (b_unr), .tx_len_err (b_lerr),
    .ack_sent (b_ack_sent), .ack_timeout (b_ack_to),
    .chip_i_phase (b_ci), .chip_q_phase (b_cq)
  );

  // burst lengths in ticks, and A's I-phase chip words of symbols 10 and 11
  int a_air, b_air, a_tick_no, n_b_rx;
  logic [31:0] a_sym10, a_sym11;
  always @(posedge clk) if (rst_n) begin
    if (a_tick && a_tx_valid) begin
      // the I register holds symbol k during ticks 4k .. 4k+3 of the burst
      if (a_tick_no == 4 * 10 + 2) a_sym10 <= a_ci;
      if (a_tick_no == 4 * 11 + 2) a_sym11 <= a_ci;
      a_tick_no <= a_tick_no + 1;
      a_air++;
    end
    if (b_tick && b_tx_valid) b_air++;
    if (b_rx_ind) n_b_rx++;
  end

  initial begin
    #20_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte unsigned sent [PAYLOAD];
    mac_hdr_t h;
    longint t0, t1;
    a_pl_we = 0; b_pl_we = 0; a_req = 0; b_req = 0; a_hdr = '0; b_hdr = '0;
    a_len = 0; b_len = 0; a_pl_waddr = 0; b_pl_waddr = 0; a_pl_wdata = 0; b_pl_wdata = 0;
    a_rd_addr = 0; b_rd_addr = 0;
    a_air = 0; b_air = 0; a_tick_no = 0; n_b_rx = 0; a_sym10 = 0; a_sym11 = 0;
    repeat (20) @(negedge clk);
    rst_n = 1;

    for (int i = 0; i < PAYLOAD; i++) begin
      sent[i] = 8'($urandom);
      @(negedge clk);
      a_pl_we = 1; a_pl_waddr = 7'(i); a_pl_wdata = sent[i];
    end
    @(negedge clk);
    a_pl_we = 0;

    h = '0;
    h.fcf = 16'hCC61;        // data, ack request, PAN-ID compression, 64-bit dst and src
    h.seq = 8'b1100_1011;
    h.dst_pan = PAN; h.dst_addr = B_EXT; h.src_addr = A_EXT;

    @(negedge clk);
    a_hdr = h; a_len = 7'(PAYLOAD); a_req = 1;
    t0 = $time;
    @(negedge clk);
    a_req = 0;
    while (!a_done) @(negedge clk);
    t1 = $time;
    repeat (2000) @(negedge clk);

    check(a_lerr == 0, "length accepted");
    check(a_air == 8 * (6 + MPDU), $sformatf("data burst %0d ticks, expected %0d", a_air, 8 * (6 + MPDU)));
    check(a_sym10 == ref_chip(6), $sformatf("length low nibble chips %h", a_sym10));
    check(a_sym11 == ref_chip(3), $sformatf("length high nibble chips %h", a_sym11));
    check(a_ok && a_retries == 0, "acknowledged at first attempt");
    check(n_b_rx == 1, "delivered once");
    check(b_air == 8 * (6 + 5), $sformatf("acknowledgment burst %0d ticks, expected 88", b_air));
    check(b_rx_hdr.fcf == h.fcf && b_rx_hdr.seq == h.seq, "received FCF and sequence number");
    check(b_rx_hdr.dst_pan == PAN && b_rx_hdr.dst_addr == B_EXT && b_rx_hdr.src_addr == A_EXT,
          "received PAN and addresses");
    check(int'(b_rx_len) == PAYLOAD, $sformatf("payload length %0d", b_rx_len));
    check(b_maxerr == 0, "clean link: no chip errors");
    for (int i = 0; i < PAYLOAD; i++) begin
      b_rd_addr = 7'(i); #1;
      check(b_rd_data == sent[i], $sformatf("payload byte %0d", i));
    end
    // done must come before the data burst plus the full acknowledgment wait
    check((t1 - t0) < longint'(4000) * (8 * (6 + MPDU) + 216 + 100),
          $sformatf("done after %0d ns", t1 - t0));
    $display("frame54: data %0d ticks, ack %0d ticks, done after %0d us", a_air, b_air, (t1 - t0) / 1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
