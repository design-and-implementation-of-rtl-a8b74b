// mac_ctrl: point-to-point MAC control with data and acknowledgment frames.
//
// Sending: `host_req` hands over a data frame header and payload length (the
// payload is already in the transmitter's buffer). The frame is started; when
// it has left the air and its frame control requests an acknowledgment, the
// controller waits ACK_WAIT_TICKS ticks for an accepted acknowledgment frame
// with the same sequence number. Without one it sends the frame again, up to
// MAX_RETRIES times. `host_done` then pulses with `host_ack_ok` (1: delivered
// and acknowledged, or no acknowledgment asked for) and `host_retries`. A
// frame the transmitter refuses (`tx_err`, MPDU over 127 bytes) is reported
// at once with `host_ack_ok` = 0.
//
// Answering: a received data frame that is accepted and requests an
// acknowledgment schedules an acknowledgment frame (frame control type 2, same
// sequence number, no addresses), sent TURNAROUND_TICKS ticks after the frame
// ended, as soon as the transmitter is free. A pending acknowledgment takes
// precedence over a new host frame. One acknowledgment is held at a time: a
// newer request replaces an older one not yet sent.
//
// The paper states that data and acknowledgment packets are used for its
// point-to-point link but not how they are sequenced; the wait, turnaround and
// retry numbers are IEEE 802.15.4 defaults (54 and 12 symbol periods of 4
// ticks, 3 retries). There is no CSMA-CA back-off.
module mac_ctrl
  import mac154_pkg::*;
#(
  parameter int unsigned ACK_WAIT_TICKS   = 216,
  parameter int unsigned TURNAROUND_TICKS = 48,
  parameter int unsigned MAX_RETRIES      = 3
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tick,
  // host side
  input  logic        host_req,
  input  mac_hdr_t    host_hdr,
  input  logic [6:0]  host_len,
  output logic        host_busy,
  output logic        host_done,
  output logic        host_ack_ok,
  output logic [1:0]  host_retries,
  // transmitter control
  output logic        tx_start,
  output mac_hdr_t    tx_hdr,
  output logic [6:0]  tx_len,
  input  logic        tx_busy,
  input  logic        tx_err,
  // receiver results
  input  logic        rx_done,
  input  logic        rx_accept,
  input  mac_hdr_t    rx_hdr,
  // event strobes for monitoring
  output logic        ack_sent,
  output logic        ack_timeout
);
  typedef enum logic [2:0] {
    S_IDLE, S_START_DATA, S_TX_DATA, S_WAIT_ACK, S_START_ACK, S_TX_ACK
  } state_e;

  localparam int unsigned TW = $clog2(ACK_WAIT_TICKS + TURNAROUND_TICKS + 2);

  state_e      state;
  mac_hdr_t    data_hdr;
  logic [6:0]  data_len;
  logic [TW-1:0] wait_cnt;
  logic        ack_pend;
  logic [7:0]  ack_seq;
  logic [TW-1:0] ta_cnt;
  logic        ack_match, ack_needed;

  assign ack_match  = rx_done && rx_accept && fcf_type(rx_hdr.fcf) == FT_ACK &&
                      rx_hdr.seq == data_hdr.seq;
  assign ack_needed = rx_done && rx_accept && fcf_type(rx_hdr.fcf) == FT_DATA &&
                      rx_hdr.fcf[FCF_ACK_REQ];
  assign host_busy  = (state inside {S_START_DATA, S_TX_DATA, S_WAIT_ACK});

  always_comb begin
    tx_start = 1'b0;
    tx_hdr   = data_hdr;
    tx_len   = data_len;
    if (state == S_START_ACK) begin
      tx_hdr     = '0;
      tx_hdr.fcf = 16'(FT_ACK);
      tx_hdr.seq = ack_seq;
      tx_len     = '0;
      tx_start   = ~tx_busy;
    end else if (state == S_START_DATA) begin
      tx_start = ~tx_busy;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      data_hdr     <= '0;
      data_len     <= '0;
      wait_cnt     <= '0;
      ack_pend     <= 1'b0;
      ack_seq      <= '0;
      ta_cnt       <= '0;
      host_done    <= 1'b0;
      host_ack_ok  <= 1'b0;
      host_retries <= '0;
      ack_sent     <= 1'b0;
      ack_timeout  <= 1'b0;
    end else begin
      host_done   <= 1'b0;
      ack_sent    <= 1'b0;
      ack_timeout <= 1'b0;

      // acknowledgment scheduling, independent of the sending state
      if (ack_needed) begin
        ack_pend <= 1'b1;
        ack_seq  <= rx_hdr.seq;
        ta_cnt   <= TW'(TURNAROUND_TICKS);
      end else if (tick && ta_cnt != 0) begin
        ta_cnt <= ta_cnt - 1'b1;
      end

      case (state)
        S_IDLE: begin
          if (ack_pend && ta_cnt == 0 && !ack_needed) begin
            state <= S_START_ACK;
          end else if (host_req) begin
            data_hdr     <= host_hdr;
            data_len     <= host_len;
            host_retries <= '0;
            state        <= S_START_DATA;
          end
        end
        S_START_DATA: if (!tx_busy) state <= S_TX_DATA;
        S_TX_DATA: if (tx_err) begin
          host_done   <= 1'b1;
          host_ack_ok <= 1'b0;
          state       <= S_IDLE;
        end else if (!tx_busy) begin
          if (data_hdr.fcf[FCF_ACK_REQ]) begin
            wait_cnt <= TW'(ACK_WAIT_TICKS);
            state    <= S_WAIT_ACK;
          end else begin
            host_done   <= 1'b1;
            host_ack_ok <= 1'b1;
            state       <= S_IDLE;
          end
        end
        S_WAIT_ACK: begin
          if (ack_match) begin
            host_done   <= 1'b1;
            host_ack_ok <= 1'b1;
            state       <= S_IDLE;
          end else if (tick) begin
            if (wait_cnt == 0) begin
              ack_timeout <= 1'b1;
              if (32'(host_retries) < MAX_RETRIES) begin
                host_retries <= host_retries + 1'b1;
                state        <= S_START_DATA;
              end else begin
                host_done   <= 1'b1;
                host_ack_ok <= 1'b0;
                state       <= S_IDLE;
              end
            end else begin
              wait_cnt <= wait_cnt - 1'b1;
            end
          end
        end
        S_START_ACK: if (!tx_busy) begin
          if (!ack_needed) ack_pend <= 1'b0;
          state <= S_TX_ACK;
        end
        S_TX_ACK: if (!tx_busy) begin
          ack_sent <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial assert (MAX_RETRIES <= 3) else $error("mac_ctrl: MAX_RETRIES must fit in 2 bits");
endmodule
