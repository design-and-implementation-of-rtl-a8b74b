// tb_mac_ctrl: drives the MAC controller with a stand-in transmitter (busy
// for a fixed time after each start) and injected receiver results. Checks:
// the data frame is started with the host's header; an acknowledgment with
// the right sequence number completes it; a wrong sequence number is ignored;
// without an acknowledgment the frame is resent after ACK_WAIT_TICKS ticks,
// at most MAX_RETRIES times, then reported as failed; a frame without
// acknowledgment request completes at once; a received data frame asking for
// an acknowledgment is answered with an acknowledgment frame (type 2, same
// sequence number, no payload) TURNAROUND_TICKS ticks later, one that does
// not ask is not; a frame the transmitter refuses is reported failed.
`timescale 1ns/1ps
module tb_mac_ctrl;
  import mac154_pkg::*;
  logic clk = 0, rst_n = 0, tick = 0;
  always #5 clk = ~clk;
  logic host_req; mac_hdr_t host_hdr; logic [6:0] host_len;
  logic host_busy, host_done, host_ack_ok; logic [1:0] host_retries;
  logic tx_start; mac_hdr_t tx_hdr; logic [6:0] tx_len; logic tx_busy, tx_err;
  logic rx_done, rx_accept; mac_hdr_t rx_hdr;
  logic ack_sent, ack_timeout;
  int checks = 0, failures = 0;

  mac_ctrl u_dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  // tick every 4 clocks, tick counter
  int div = 0, ticks = 0;
  always @(posedge clk) begin
    div <= (div == 3) ? 0 : div + 1; tick <= (div == 3);
    if (tick) ticks <= ticks + 1;
  end

  // stand-in transmitter: busy for 160 clocks (40 ticks) after a start
  int busy_left = 0, n_starts = 0, last_start_tick, last_end_tick;
  mac_hdr_t last_hdr; logic [6:0] last_len;
  assign tx_busy = (busy_left != 0);
  bit refuse = 0;
  always @(posedge clk) begin
    tx_err <= 1'b0;
    if (tx_start && !tx_busy && refuse) begin
      tx_err <= 1'b1; n_starts++;
    end else if (tx_start && !tx_busy) begin
      busy_left <= 160; n_starts++; last_hdr <= tx_hdr; last_len <= tx_len;
      last_start_tick <= ticks;
    end else if (busy_left != 0) begin
      busy_left <= busy_left - 1;
      if (busy_left == 1) last_end_tick <= ticks;
    end
  end

  int n_done, n_ack_sent; bit done_ok; int done_retries;
  always @(posedge clk) if (rst_n) begin
    if (host_done) begin n_done++; done_ok = host_ack_ok; done_retries = int'(host_retries); end
    if (ack_sent) n_ack_sent++;
  end

  task automatic inject(input logic [15:0] fcf, input logic [7:0] seq, input bit acc);
    @(negedge clk);
    rx_hdr = '0; rx_hdr.fcf = fcf; rx_hdr.seq = seq; rx_done = 1; rx_accept = acc;
    @(negedge clk); rx_done = 0; rx_accept = 0;
  endtask

  task automatic request(input logic [15:0] fcf, input logic [7:0] seq, input int n);
    @(negedge clk);
    host_hdr = '0; host_hdr.fcf = fcf; host_hdr.seq = seq; host_hdr.dst_addr = 64'hABCD;
    host_len = 7'(n); host_req = 1;
    @(negedge clk); host_req = 0;
  endtask

  initial begin
    #20_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int s0, d0, t0;
    host_req = 0; host_hdr = '0; host_len = 0; rx_done = 0; rx_accept = 0; rx_hdr = '0;
    n_done = 0; n_ack_sent = 0;
    repeat (2) @(negedge clk); rst_n = 1;

    // 1. acknowledged at once
    s0 = n_starts; d0 = n_done;
    request(16'h8861, 8'h10, 9);
    wait (n_starts == s0 + 1);
    @(negedge clk);
    chk(last_hdr.fcf == 16'h8861 && last_hdr.seq == 8'h10 && last_hdr.dst_addr == 64'hABCD &&
        last_len == 7'd9, "data frame started with host header");
    chk(host_busy, "host busy");
    wait (!tx_busy);
    repeat (30 * 4) @(negedge clk);
    inject(16'h0002, 8'h11, 1);            // wrong sequence number
    repeat (8) @(negedge clk);
    chk(n_done == d0, "wrong sequence ignored");
    inject(16'h0002, 8'h10, 1);
    repeat (2) @(negedge clk);
    chk(n_done == d0 + 1 && done_ok && done_retries == 0, "acknowledged");
    chk(n_starts == s0 + 1, "sent once");

    // 2. never acknowledged: 1 + 3 transmissions, spaced by the wait time
    s0 = n_starts; d0 = n_done;
    request(16'h8861, 8'h20, 3);
    wait (n_starts == s0 + 1);
    wait (!tx_busy);
    t0 = last_end_tick;
    wait (n_starts == s0 + 2);
    chk(last_start_tick - t0 >= 216 && last_start_tick - t0 <= 218,
        $sformatf("retransmission after %0d ticks", last_start_tick - t0));
    wait (n_done == d0 + 1);
    chk(!done_ok && done_retries == 3, $sformatf("failure after 3 retries (ok=%0d r=%0d)", done_ok, done_retries));
    chk(n_starts == s0 + 4, $sformatf("four transmissions (%0d)", n_starts - s0));

    // 3. no acknowledgment requested
    s0 = n_starts; d0 = n_done;
    request(16'h8841, 8'h30, 3);
    wait (n_done == d0 + 1);
    chk(done_ok && n_starts == s0 + 1, "unacknowledged frame completes after transmission");

    // 3b. a frame the transmitter refuses is reported as failed at once
    s0 = n_starts; d0 = n_done; refuse = 1;
    request(16'h8861, 8'h31, 127);
    wait (n_done == d0 + 1);
    refuse = 0;
    chk(!done_ok && n_starts == s0 + 1, "refused frame reported as failed, not retried");

    // 4. answer a data frame that asks for an acknowledgment
    s0 = n_starts;
    inject(16'h8861, 8'h44, 1);
    t0 = ticks;
    wait (n_starts == s0 + 1);
    @(negedge clk);
    chk(last_hdr.fcf == 16'h0002 && last_hdr.seq == 8'h44 && last_len == 0, "acknowledgment frame");
    chk(last_start_tick - t0 >= 48 && last_start_tick - t0 <= 50,
        $sformatf("turnaround %0d ticks", last_start_tick - t0));
    wait (!tx_busy);
    repeat (3) @(negedge clk);
    chk(n_ack_sent == 1, "ack_sent strobe");

    // 5. no acknowledgment for a frame that does not ask, or is not accepted
    s0 = n_starts;
    inject(16'h8841, 8'h55, 1);
    inject(16'h8861, 8'h56, 0);
    repeat (100 * 4) @(negedge clk);
    chk(n_starts == s0, "no acknowledgment sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
