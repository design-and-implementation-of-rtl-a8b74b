// tb_ieee802154_node: end-to-end test of the point-to-point link at the
// design's default parameters (100 MHz clock, 250 kHz datapath).
//
// Two nodes are wired crosswise through a channel model that can cut the
// link or flip chips. Scenarios:
//   1. A -> B data frame with acknowledgment request, short addresses.
//   2. Same, but the link A -> B is cut for the first attempt: A must time
//      out waiting for the acknowledgment and retransmit.
//   3. Frame without acknowledgment request.
//   4. Frame with a few bits of every word flipped on air (a few chip errors
//      per symbol once the sine is removed): the despreader corrects
//      them and the frame is delivered.
//   5. Frame with a whole symbol replaced: the FCS check must reject it and
//      A must exhaust its retries.
//   6. Frame to a foreign address: filtered, never acknowledged.
//   7. B -> A frame with 64-bit addresses and a maximum-size MPDU (127 bytes).
// For every delivered frame the header fields and the payload are compared
// with what was sent, and the on-air time of the first frame is compared with
// 8 ticks per PPDU byte. Each mechanism is counted; one that never happened
// counts as a failure.
`timescale 1ns/1ps
module tb_ieee802154_node;
  import mac154_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- node signals --------------------------------------------------------
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
  logic [31:0] a_tx_data, b_tx_data, ab_data, ba_data;
  logic        a_tx_valid, b_tx_valid, ab_valid, ba_valid;
  logic        a_tick, b_tick, a_unr, b_unr, a_lerr, b_lerr;
  logic        a_ack_sent, b_ack_sent, a_ack_to, b_ack_to;
  logic [31:0] a_ci, a_cq, b_ci, b_cq;

  localparam logic [15:0] PAN    = 16'h1A2B;
  localparam logic [15:0] A_SHORT = 16'h0001, B_SHORT = 16'h0002;
  localparam logic [63:0] A_EXT  = 64'h0011_2233_4455_6677;
  localparam logic [63:0] B_EXT  = 64'h8899_AABB_CCDD_EEFF;

  ieee802154_node u_a (
    .clk, .rst_n, .my_pan (PAN), .my_short (A_SHORT), .my_ext (A_EXT),
    .pl_we (a_pl_we), .pl_waddr (a_pl_waddr), .pl_wdata (a_pl_wdata),
    .host_req (a_req), .host_hdr (a_hdr), .host_len (a_len),
    .host_busy (a_busy), .host_done (a_done), .host_ack_ok (a_ok), .host_retries (a_retries),
    .rx_ind (a_rx_ind), .rx_hdr (a_rx_hdr), .rx_len (a_rx_len), .rx_crc_err (a_crc_err),
    .rx_rd_addr (a_rd_addr), .rx_rd_data (a_rd_data), .rx_max_chip_err (a_maxerr),
    .air_tx_data (a_tx_data), .air_tx_valid (a_tx_valid),
    .air_rx_data (ba_data), .air_rx_valid (ba_valid),
    .tick (a_tick), .tx_underrun (a_unr), .tx_len_err (a_lerr),
    .ack_sent (a_ack_sent), .ack_timeout (a_ack_to),
    .chip_i_phase (a_ci), .chip_q_phase (a_cq)
  );

  ieee802154_node u_b (
    .clk, .rst_n, .my_pan (PAN), .my_short (B_SHORT), .my_ext (B_EXT),
    .pl_we (b_pl_we), .pl_waddr (b_pl_waddr), .pl_wdata (b_pl_wdata),
    .host_req (b_req), .host_hdr (b_hdr), .host_len (b_len),
    .host_busy (b_busy), .host_done (b_done), .host_ack_ok (b_ok), .host_retries (b_retries),
    .rx_ind (b_rx_ind), .rx_hdr (b_rx_hdr), .rx_len (b_rx_len), .rx_crc_err (b_crc_err),
    .rx_rd_addr (b_rd_addr), .rx_rd_data (b_rd_data), .rx_max_chip_err (b_maxerr),
    .air_tx_data (b_tx_data), .air_tx_valid (b_tx_valid),
    .air_rx_data (ab_data), .air_rx_valid (ab_valid),
    .tick (b_tick), .tx_underrun (b_unr), .tx_len_err (b_lerr),
    .ack_sent (b_ack_sent), .ack_timeout (b_ack_to),
    .chip_i_phase (b_ci), .chip_q_phase (b_cq)
  );

  // ---- channel model ---------------------------------------------------------
  bit          ab_cut, ab_cut_once;
  logic [31:0] ab_flip;           // XOR pattern applied to every A -> B word
  int          ab_word;           // ticks since A's burst started
  int          hit_lo, hit_hi;    // ticks whose words are inverted (scenario 5)
  always @(posedge clk) if (a_tick) ab_word <= a_tx_valid ? ab_word + 1 : 0;
  assign ab_data  = a_tx_data ^ (ab_valid ? ab_flip : 32'h0) ^
                    ((ab_word >= hit_lo && ab_word < hit_hi) ? 32'hFFFF_FFFF : 32'h0);
  assign ab_valid = a_tx_valid & ~ab_cut;
  assign ba_data  = b_tx_data;
  assign ba_valid = b_tx_valid;

  // cut the A -> B link for exactly one frame when ab_cut_once is armed
  always @(posedge clk) begin
    if (ab_cut_once && a_tx_valid) ab_cut <= 1'b1;
    if (ab_cut && !a_tx_valid) begin ab_cut <= 1'b0; ab_cut_once <= 1'b0; end
  end

  // ---- event counters ------------------------------------------------------------
  int n_b_rx, n_a_rx, n_ack_sent, n_timeouts, n_retx, n_crc_err, n_corrected, n_filtered_req;
  int n_underrun;
  always @(posedge clk) if (rst_n) begin
    if (b_rx_ind) n_b_rx++;
    if (a_rx_ind) n_a_rx++;
    if (b_ack_sent || a_ack_sent) n_ack_sent++;
    if (a_ack_to || b_ack_to) n_timeouts++;
    if (b_crc_err || a_crc_err) n_crc_err++;
    if (b_rx_ind && b_maxerr != 0) n_corrected++;
    if (a_unr || b_unr) n_underrun++;
  end

  // on-air time of A's transmissions, in ticks
  int air_ticks;
  always @(posedge clk) if (a_tick && a_tx_valid) air_ticks++;

  // watchdog: 40 ms of simulated time
  initial begin
    #40_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- host helpers -----------------------------------------------------------------
  byte unsigned sent [128];

  task automatic load_payload(input bit to_a, input int n, input int seed);
    for (int i = 0; i < n; i++) begin
      sent[i] = 8'((i * 37 + seed * 11 + 5) ^ (i >> 2));
      @(negedge clk);
      if (to_a) begin a_pl_we = 1; a_pl_waddr = 7'(i); a_pl_wdata = sent[i]; end
      else      begin b_pl_we = 1; b_pl_waddr = 7'(i); b_pl_wdata = sent[i]; end
    end
    @(negedge clk);
    a_pl_we = 0; b_pl_we = 0;
  endtask

  function automatic mac_hdr_t short_hdr(input logic [7:0] seq, input bit ar,
                                         input logic [15:0] dst, input logic [15:0] src);
    mac_hdr_t h = '0;
    h.fcf      = 16'h8841;       // data, PAN-ID compression, short dst/src
    h.fcf[FCF_ACK_REQ] = ar;
    h.seq      = seq;
    h.dst_pan  = PAN;
    h.dst_addr = {48'h0, dst};
    h.src_addr = {48'h0, src};
    return h;
  endfunction

  // A sends; returns ack_ok and retries
  task automatic a_send(input mac_hdr_t h, input int n, output bit ok, output int retries);
    @(negedge clk);
    a_hdr = h; a_len = 7'(n); a_req = 1;
    @(negedge clk);
    a_req = 0;
    while (!a_done) @(negedge clk);
    ok = a_ok; retries = int'(a_retries);
    repeat (5000) @(negedge clk);
  endtask

  task automatic check_rx_b(input mac_hdr_t h, input int n, input string tag);
    check(b_rx_hdr.fcf == h.fcf, {tag, ": fcf"});
    check(b_rx_hdr.seq == h.seq, {tag, ": seq"});
    check(b_rx_hdr.dst_addr == h.dst_addr && b_rx_hdr.src_addr == h.src_addr, {tag, ": addresses"});
    check(int'(b_rx_len) == n, {tag, ": payload length"});
    for (int i = 0; i < n; i++) begin
      b_rd_addr = 7'(i); #1;
      check(b_rd_data == sent[i], $sformatf("%s: payload byte %0d", tag, i));
    end
  endtask

  initial begin
    bit ok; int retries, n_before, mpdu;
    mac_hdr_t h;
    a_pl_we = 0; b_pl_we = 0; a_req = 0; b_req = 0; a_hdr = '0; b_hdr = '0;
    a_len = 0; b_len = 0; a_pl_waddr = 0; b_pl_waddr = 0; a_pl_wdata = 0; b_pl_wdata = 0;
    a_rd_addr = 0; b_rd_addr = 0; ab_word = 0; hit_lo = 0; hit_hi = 0; ab_cut = 0; ab_cut_once = 0; ab_flip = 0;
    n_b_rx = 0; n_a_rx = 0; n_ack_sent = 0; n_timeouts = 0; n_retx = 0; n_crc_err = 0;
    n_corrected = 0; n_underrun = 0; air_ticks = 0;
    repeat (20) @(negedge clk);
    rst_n = 1;

    // 1. acknowledged data frame
    load_payload(1, 20, 1);
    h = short_hdr(8'h11, 1, B_SHORT, A_SHORT);
    n_before = n_b_rx; air_ticks = 0;
    a_send(h, 20, ok, retries);
    check(ok && retries == 0, "1: acknowledged at first attempt");
    check(n_b_rx == n_before + 1, "1: delivered once");
    check_rx_b(h, 20, "1");
    mpdu = 9 + 20 + 2;
    // data frame on air 8 ticks per PPDU byte; A also sent nothing else
    check(air_ticks == 8 * (6 + mpdu), $sformatf("1: on-air ticks %0d, expected %0d", air_ticks, 8 * (6 + mpdu)));

    // 2. first attempt lost -> timeout and retransmission
    load_payload(1, 12, 2);
    h = short_hdr(8'h12, 1, B_SHORT, A_SHORT);
    ab_cut_once = 1; n_before = n_b_rx;
    a_send(h, 12, ok, retries);
    check(ok && retries == 1, $sformatf("2: delivered after one retry (ok=%0d retries=%0d)", ok, retries));
    if (retries > 0) n_retx++;
    check(n_b_rx == n_before + 1, "2: delivered once");
    check_rx_b(h, 12, "2");

    // 3. no acknowledgment requested
    load_payload(1, 5, 3);
    h = short_hdr(8'h13, 0, B_SHORT, A_SHORT);
    n_before = n_ack_sent;
    a_send(h, 5, ok, retries);
    check(ok && retries == 0, "3: done without acknowledgment");
    check(n_ack_sent == n_before, "3: no acknowledgment sent");
    check_rx_b(h, 5, "3");

    // 4. three bits flipped in every word on air: corrected by despreading
    load_payload(1, 16, 4);
    h = short_hdr(8'h14, 1, B_SHORT, A_SHORT);
    ab_flip = 32'h0100_8001;
    a_send(h, 16, ok, retries);
    ab_flip = 0;
    check(ok && retries == 0, "4: delivered despite chip errors");
    check(b_maxerr != 0, "4: chip errors seen by receiver");
    check_rx_b(h, 16, "4");

    // 5. corrupted symbols: FCS error, retries exhausted
    load_payload(1, 8, 5);
    h = short_hdr(8'h15, 1, B_SHORT, A_SHORT);
    hit_lo = 8 * 6 + 8 * 12; hit_hi = hit_lo + 4;   // one symbol inside the payload
    n_before = n_b_rx;
    a_send(h, 8, ok, retries);
    hit_lo = 0; hit_hi = 0;
    check(!ok && retries == 3, $sformatf("5: reported failure after 3 retries (ok=%0d retries=%0d)", ok, retries));
    check(n_b_rx == n_before, "5: nothing delivered");

    // 6. foreign destination: filtered
    load_payload(1, 4, 6);
    h = short_hdr(8'h16, 1, 16'h0777, A_SHORT);
    n_before = n_b_rx;
    a_send(h, 4, ok, retries);
    check(!ok, "6: not acknowledged");
    check(n_b_rx == n_before, "6: not delivered");
    n_filtered_req = (n_b_rx == n_before) ? 1 : 0;

    // 7. B -> A, 64-bit addresses, MPDU of 127 bytes
    load_payload(0, 127 - 23 - 2, 7);
    h = '0;
    h.fcf = 16'hCC21;   // data, ack request, extended dst/src, no compression
    h.seq = 8'h77; h.dst_pan = PAN; h.dst_addr = A_EXT; h.src_pan = PAN; h.src_addr = B_EXT;
    n_before = n_a_rx;
    @(negedge clk);
    b_hdr = h; b_len = 7'(127 - 25); b_req = 1;
    @(negedge clk);
    b_req = 0;
    while (!b_done) @(negedge clk);
    check(b_ok && b_retries == 0, "7: acknowledged");
    check(n_a_rx == n_before + 1, "7: delivered");
    check(a_rx_hdr.dst_addr == A_EXT && a_rx_hdr.src_addr == B_EXT &&
          a_rx_hdr.src_pan == PAN && a_rx_hdr.seq == 8'h77, "7: header");
    check(int'(a_rx_len) == 102, "7: payload length");
    for (int i = 0; i < 102; i++) begin
      a_rd_addr = 7'(i); #1;
      check(a_rd_data == sent[i], $sformatf("7: payload byte %0d", i));
    end

    // mechanisms
    $display("events: deliveredB=%0d deliveredA=%0d acks=%0d timeouts=%0d retx=%0d crc_err=%0d corrected=%0d filtered=%0d underrun=%0d",
             n_b_rx, n_a_rx, n_ack_sent, n_timeouts, n_retx, n_crc_err, n_corrected, n_filtered_req, n_underrun);
    check(n_ack_sent > 0, "mechanism: acknowledgment sent");
    check(n_timeouts > 0, "mechanism: acknowledgment timeout");
    check(n_retx > 0, "mechanism: retransmission");
    check(n_crc_err > 0, "mechanism: FCS error detected");
    check(n_corrected > 0, "mechanism: chip errors corrected");
    check(n_filtered_req > 0, "mechanism: address filter");
    check(n_a_rx > 0, "mechanism: extended addressing / max MPDU");
    check(n_underrun == 0, "no transmit underrun");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
