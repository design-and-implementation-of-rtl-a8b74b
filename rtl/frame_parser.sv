// frame_parser: the receiver's FRAME STRUCTURE block.
//
// It watches the received byte stream for the start-of-frame delimiter 0xA7
// following at least one 0x00 preamble byte, takes the next byte as the MPDU
// length, and then reads that many MPDU bytes. The first MAX_HDR_BYTES bytes
// are kept to decode the MAC header (frame control, sequence number and the
// addressing fields the frame control announces); the bytes between header
// and FCS are written into the receive payload buffer; the CRC-CCITT of the
// whole MPDU including the FCS must come out as zero.
//
// When the last MPDU byte arrives `done` pulses for one clock, together with
// the decoded header `hdr`, `payload_len`, `crc_ok`, and `accept`. As the
// paper puts it, data is released only after the frame control is compared:
// `accept` is high when the FCS is correct, the frame type is data or
// acknowledgment, the header fits in the length and the destination (if any)
// is this node's PAN and address or broadcast. The address filter is IEEE
// 802.15.4 behaviour added here; the paper only names the frame control
// comparison.
//
// A byte marked `in_first` (first of a new burst) restarts the search. The
// payload buffer is read through rd_addr/rd_data (combinational) and keeps
// the latest frame's payload until the next frame overwrites it.
module frame_parser
  import mac154_pkg::*;
#(
  parameter int unsigned MAX_PAYLOAD = 127
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  in_data,
  input  logic        in_valid,
  input  logic        in_first,
  input  logic [15:0] my_pan,
  input  logic [15:0] my_short,
  input  logic [63:0] my_ext,
  output logic        done,
  output mac_hdr_t    hdr,
  output logic [6:0]  payload_len,
  output logic        crc_ok,
  output logic        accept,
  output logic        in_frame,
  input  logic [6:0]  rd_addr,
  output logic [7:0]  rd_data
);
  typedef enum logic [1:0] { S_HUNT, S_LEN, S_MPDU } state_e;

  state_e      state;
  logic        zeros;                      // a 0x00 byte came right before
  logic [6:0]  len;
  logic [6:0]  cnt;
  logic [15:0] crc;
  logic [7:0]  hbuf [MAX_HDR_BYTES];
  logic [7:0]  pbuf [MAX_PAYLOAD + 1];
  logic [15:0] fcf;
  hdr_layout_t lay;

  assign fcf      = {hbuf[1], hbuf[0]};
  assign lay      = hdr_layout(fcf);
  assign rd_data  = pbuf[rd_addr];
  assign in_frame = (state == S_MPDU);

  // Rebuild the header struct from the captured bytes.
  function automatic mac_hdr_t decode(input logic [7:0] b [MAX_HDR_BYTES],
                                      input hdr_layout_t l);
    mac_hdr_t    r;
    int unsigned p;
    r     = '0;
    r.fcf = {b[1], b[0]};
    r.seq = b[2];
    p     = 3;
    for (int i = 0; i < 2; i++)
      if (i < int'(l.dst_pan_len)) r.dst_pan[8*i +: 8] = b[p + i];
    p += int'(l.dst_pan_len);
    for (int i = 0; i < 8; i++)
      if (i < int'(l.dst_len)) r.dst_addr[8*i +: 8] = b[p + i];
    p += int'(l.dst_len);
    for (int i = 0; i < 2; i++)
      if (i < int'(l.src_pan_len)) r.src_pan[8*i +: 8] = b[p + i];
    p += int'(l.src_pan_len);
    for (int i = 0; i < 8; i++)
      if (i < int'(l.src_len)) r.src_addr[8*i +: 8] = b[p + i];
    return r;
  endfunction

  mac_hdr_t    dec;
  logic        dst_ok, type_ok, fits;
  logic [15:0] crc_next;
  assign dec      = decode(hbuf, lay);
  assign crc_next = crc16_byte(crc, in_data);
  assign type_ok  = (fcf_type(fcf) == FT_DATA) || (fcf_type(fcf) == FT_ACK);
  assign fits     = (8'(lay.hdr_len) + 8'd2) <= 8'(len);
  always_comb begin
    case (fcf_dst_mode(fcf))
      AM_NONE:  dst_ok = 1'b1;
      AM_SHORT: dst_ok = (dec.dst_pan == my_pan || dec.dst_pan == 16'hFFFF) &&
                         (dec.dst_addr[15:0] == my_short || dec.dst_addr[15:0] == 16'hFFFF);
      AM_EXT:   dst_ok = (dec.dst_pan == my_pan || dec.dst_pan == 16'hFFFF) &&
                         (dec.dst_addr == my_ext);
      default:  dst_ok = 1'b0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (in_valid && !in_first && state == S_MPDU && cnt >= 7'(lay.hdr_len) && cnt >= 7'd3 &&
        cnt < len - 7'd2)
      pbuf[cnt - 7'(lay.hdr_len)] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_HUNT;
      zeros       <= 1'b0;
      len         <= '0;
      cnt         <= '0;
      crc         <= '0;
      done        <= 1'b0;
      hdr         <= '0;
      payload_len <= '0;
      crc_ok      <= 1'b0;
      accept      <= 1'b0;
      for (int i = 0; i < MAX_HDR_BYTES; i++) hbuf[i] <= '0;
    end else begin
      done <= 1'b0;
      if (in_valid) begin
        if (in_first || state == S_HUNT) begin
          state <= (zeros && !in_first && in_data == SFD) ? S_LEN : S_HUNT;
          zeros <= (in_data == 8'h00);
        end else if (state == S_LEN) begin
          len   <= in_data[6:0];
          cnt   <= '0;
          crc   <= '0;
          zeros <= 1'b0;
          state <= (in_data[6:0] >= 7'd5) ? S_MPDU : S_HUNT;
          for (int i = 0; i < MAX_HDR_BYTES; i++) hbuf[i] <= '0;
        end else begin  // S_MPDU
          crc <= crc_next;
          cnt <= cnt + 1'b1;
          if (cnt < 7'(MAX_HDR_BYTES)) hbuf[cnt[4:0]] <= in_data;
          if (cnt == len - 1'b1) begin
            state       <= S_HUNT;
            done        <= 1'b1;
            hdr         <= dec;
            payload_len <= fits ? (len - 7'(lay.hdr_len) - 7'd2) : 7'd0;
            crc_ok      <= (crc_next == 16'h0000);
            accept      <= (crc_next == 16'h0000) && type_ok && dst_ok && fits;
          end
        end
      end
    end
  end
endmodule
