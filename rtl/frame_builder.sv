// frame_builder: the transmitter's FRAME STRUCTURE block.
//
// On `start` it sends one PPDU as a byte stream (valid/ready, `out_last` on
// the final byte):
//   preamble  4 x 0x00
//   SFD       0xA7
//   length    MPDU length in bytes (header + payload + 2)
//   MHR       frame control (2, low byte first), sequence number (1),
//             addressing fields (0..20 bytes, laid out by the frame control's
//             address modes and PAN-ID compression bit)
//   payload   payload_len bytes from the payload buffer
//   FCS       CRC-CCITT of MHR and payload, low byte first
// The PPDU layout, the 0x00 preamble and the 0xA7 SFD follow the paper; the
// addressing layout is IEEE 802.15.4's. The header and length are captured at
// `start`; the payload buffer (MAX_PAYLOAD+1 bytes, written through the
// pl_we/pl_waddr/pl_wdata port while idle) is read as the frame goes out.
//
// A start whose MPDU would exceed 127 bytes, or whose payload would not fit
// the buffer, is refused with a one-clock `len_err`. At the default
// MAX_PAYLOAD of 127 the second test is always false (lint tools report it as
// a constant comparison); it is kept for builds with a smaller buffer.
// `busy` is high from the clock after `start` until the last byte
// has been accepted; `done` pulses then.
module frame_builder
  import mac154_pkg::*;
#(
  parameter int unsigned MAX_PAYLOAD = 127
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  mac_hdr_t       hdr,
  input  logic [6:0]     payload_len,
  input  logic           pl_we,
  input  logic [6:0]     pl_waddr,
  input  logic [7:0]     pl_wdata,
  output logic           busy,
  output logic           done,
  output logic           len_err,
  output logic [7:0]     out_data,
  output logic           out_valid,
  output logic           out_last,
  input  logic           out_ready
);
  typedef enum logic [2:0] {
    S_IDLE, S_PRE, S_SFD, S_LEN, S_HDR, S_PAY, S_FCS0, S_FCS1
  } state_e;

  state_e      state;
  mac_hdr_t    h;
  logic [6:0]  plen;
  logic [4:0]  hlen;
  logic [6:0]  cnt;
  logic [7:0]  pbuf [MAX_PAYLOAD + 1];
  logic [15:0] crc;
  logic        fire;

  hdr_layout_t lay_in;
  logic [7:0]  mpdu_len_in;
  assign lay_in      = hdr_layout(hdr.fcf);
  assign mpdu_len_in = 8'(lay_in.hdr_len) + 8'(payload_len) + 8'd2;

  always_ff @(posedge clk) begin
    if (pl_we) pbuf[pl_waddr] <= pl_wdata;
  end

  assign fire = out_valid & out_ready;
  assign busy = (state != S_IDLE);

  always_comb begin
    out_valid = (state != S_IDLE);
    out_last  = (state == S_FCS1);
    case (state)
      S_SFD:   out_data = SFD;
      S_LEN:   out_data = 8'(hlen) + 8'(plen) + 8'd2;
      S_HDR:   out_data = hdr_byte(h, cnt[4:0]);
      S_PAY:   out_data = pbuf[cnt];
      S_FCS0:  out_data = crc[7:0];
      S_FCS1:  out_data = crc[15:8];
      default: out_data = 8'h00;   // preamble and idle
    endcase
  end

  crc16_ccitt u_crc (
    .clk, .rst_n,
    .clr  (state == S_IDLE),
    .en   (fire && (state == S_HDR || state == S_PAY)),
    .data (out_data),
    .crc
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      h       <= '0;
      plen    <= '0;
      hlen    <= '0;
      cnt     <= '0;
      done    <= 1'b0;
      len_err <= 1'b0;
    end else begin
      done    <= 1'b0;
      len_err <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          if (mpdu_len_in > 8'(MAX_PSDU) || 32'(payload_len) > MAX_PAYLOAD) begin
            len_err <= 1'b1;
          end else begin
            h     <= hdr;
            plen  <= payload_len;
            hlen  <= lay_in.hdr_len;
            cnt   <= '0;
            state <= S_PRE;
          end
        end
        S_PRE: if (fire) begin
          cnt <= cnt + 1'b1;
          if (cnt == 7'(PREAMBLE_BYTES - 1)) begin
            cnt   <= '0;
            state <= S_SFD;
          end
        end
        S_SFD: if (fire) state <= S_LEN;
        S_LEN: if (fire) state <= S_HDR;
        S_HDR: if (fire) begin
          cnt <= cnt + 1'b1;
          if (cnt == 7'(hlen) - 1'b1) begin
            cnt   <= '0;
            state <= (plen == 0) ? S_FCS0 : S_PAY;
          end
        end
        S_PAY: if (fire) begin
          cnt <= cnt + 1'b1;
          if (cnt == plen - 1'b1) begin
            cnt   <= '0;
            state <= S_FCS0;
          end
        end
        S_FCS0: if (fire) state <= S_FCS1;
        S_FCS1: if (fire) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
