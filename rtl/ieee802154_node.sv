// ieee802154_node: one end of the point-to-point IEEE 802.15.4 link.
//
// A node holds the clock divider (100 MHz board clock -> 250 kHz enable), the
// transmitter section, the receiver section and the MAC controller that
// sequences data and acknowledgment frames. The radio itself is not part of
// the design: `air_tx_data`/`air_tx_valid` carry OUT DATA towards it and
// `air_rx_data`/`air_rx_valid` bring the received words back. Two nodes wired
// crosswise (one's air_tx to the other's air_rx) form the link.
//
// Host interface: configure my_pan/my_short/my_ext; write the payload through
// pl_*; pulse `host_req` with a header and length; wait for `host_done` and
// read `host_ack_ok`/`host_retries`. Received data frames that pass the FCS
// and frame-control checks raise `rx_ind` for one clock with the header and
// payload length; the payload is then read through rx_rd_addr/rx_rd_data.
//
// Timing: everything runs on `clk`; the datapath advances once per 250 kHz
// tick (DIV clocks). A frame of N PPDU bytes takes 8*N ticks on air.
module ieee802154_node
  import mac154_pkg::*;
#(
  parameter int unsigned DIV              = 400,
  parameter int unsigned MAX_PAYLOAD      = 127,
  parameter int unsigned SYM_TICKS        = 4,
  parameter int unsigned ACK_WAIT_TICKS   = 216,
  parameter int unsigned TURNAROUND_TICKS = 48,
  parameter int unsigned MAX_RETRIES      = 3
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration
  input  logic [15:0] my_pan,
  input  logic [15:0] my_short,
  input  logic [63:0] my_ext,
  // host transmit
  input  logic        pl_we,
  input  logic [6:0]  pl_waddr,
  input  logic [7:0]  pl_wdata,
  input  logic        host_req,
  input  mac_hdr_t    host_hdr,
  input  logic [6:0]  host_len,
  output logic        host_busy,
  output logic        host_done,
  output logic        host_ack_ok,
  output logic [1:0]  host_retries,
  // host receive
  output logic        rx_ind,
  output mac_hdr_t    rx_hdr,
  output logic [6:0]  rx_len,
  output logic        rx_crc_err,
  input  logic [6:0]  rx_rd_addr,
  output logic [7:0]  rx_rd_data,
  output logic [5:0]  rx_max_chip_err,
  // radio side
  output logic [31:0] air_tx_data,
  output logic        air_tx_valid,
  input  logic [31:0] air_rx_data,
  input  logic        air_rx_valid,
  // monitoring
  output logic        tick,
  output logic        tx_underrun,
  output logic        tx_len_err,
  output logic        ack_sent,
  output logic        ack_timeout,
  output logic [31:0] chip_i_phase,
  output logic [31:0] chip_q_phase
);
  logic       tx_start, tx_busy;
  mac_hdr_t   tx_hdr;
  logic [6:0] tx_len;
  logic       rx_done, rx_crc_ok, rx_accept;

  clk_div #(.DIV(DIV)) u_div (.clk, .rst_n, .tick);

  transmitter #(.MAX_PAYLOAD(MAX_PAYLOAD), .SYM_TICKS(SYM_TICKS)) u_tx (
    .clk, .rst_n, .tick,
    .start (tx_start), .hdr (tx_hdr), .payload_len (tx_len),
    .pl_we, .pl_waddr, .pl_wdata,
    .busy (tx_busy), .len_err (tx_len_err),
    .out_data (air_tx_data), .on_air (air_tx_valid), .underrun (tx_underrun),
    .chip_i_phase, .chip_q_phase
  );

  receiver #(.MAX_PAYLOAD(MAX_PAYLOAD), .SYM_TICKS(SYM_TICKS)) u_rx (
    .clk, .rst_n, .tick,
    .in_data (air_rx_data), .in_valid (air_rx_valid),
    .my_pan, .my_short, .my_ext,
    .done (rx_done), .hdr (rx_hdr), .payload_len (rx_len),
    .crc_ok (rx_crc_ok), .accept (rx_accept), .max_dist (rx_max_chip_err),
    .rd_addr (rx_rd_addr), .rd_data (rx_rd_data)
  );

  mac_ctrl #(
    .ACK_WAIT_TICKS (ACK_WAIT_TICKS),
    .TURNAROUND_TICKS (TURNAROUND_TICKS),
    .MAX_RETRIES (MAX_RETRIES)
  ) u_mac (
    .clk, .rst_n, .tick,
    .host_req, .host_hdr, .host_len, .host_busy, .host_done, .host_ack_ok, .host_retries,
    .tx_start, .tx_hdr, .tx_len, .tx_busy, .tx_err (tx_len_err),
    .rx_done, .rx_accept, .rx_hdr,
    .ack_sent, .ack_timeout
  );

  assign rx_ind     = rx_done & rx_accept & (fcf_type(rx_hdr.fcf) == FT_DATA);
  assign rx_crc_err = rx_done & ~rx_crc_ok;
endmodule
