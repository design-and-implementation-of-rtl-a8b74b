// mac154_pkg: constants, types and helper functions shared by the
// IEEE 802.15.4 (2.4 GHz) MAC/PHY datapath.
//
// The PPDU constants (4-byte preamble of 0x00, SFD 0xA7, at most 127 bytes of
// PSDU) and the 32-chip spreading rule follow the paper. The frame-control bit
// positions, the addressing-field layout and the CRC convention are taken from
// IEEE 802.15.4 itself, which the paper refers to for them.
//
// Chip words hold chip c0 in bit 0. Symbol 0 is 32'h744AC39B; symbols 1..7 are
// symbol 0 rotated by 4 chips per step, symbols 8..15 are symbols 0..7 with
// every odd-indexed chip inverted (the "cyclic shift and/or conjugation" rule).
package mac154_pkg;

  localparam int          PREAMBLE_BYTES = 4;
  localparam logic [7:0]  SFD            = 8'hA7;
  localparam int          MAX_PSDU       = 127;
  localparam logic [31:0] CHIP_BASE      = 32'h744A_C39B;
  localparam logic [31:0] ODD_CHIPS      = 32'hAAAA_AAAA;
  localparam logic [31:0] EVEN_CHIPS     = 32'h5555_5555;

  typedef enum logic [2:0] {
    FT_BEACON = 3'd0,
    FT_DATA   = 3'd1,
    FT_ACK    = 3'd2,
    FT_CMD    = 3'd3
  } frame_type_e;

  typedef enum logic [1:0] {
    AM_NONE  = 2'd0,
    AM_RSVD  = 2'd1,
    AM_SHORT = 2'd2,
    AM_EXT   = 2'd3
  } addr_mode_e;

  // Frame control field bit positions (IEEE 802.15.4-2003, 7.2.1.1)
  localparam int FCF_ACK_REQ   = 5;
  localparam int FCF_PAN_COMP  = 6;

  // MAC header as carried between blocks. Short addresses use bits [15:0].
  typedef struct packed {
    logic [15:0] fcf;
    logic [7:0]  seq;
    logic [15:0] dst_pan;
    logic [63:0] dst_addr;
    logic [15:0] src_pan;
    logic [63:0] src_addr;
  } mac_hdr_t;

  localparam int MAX_HDR_BYTES = 23;  // 2 FCF + 1 seq + 20 addressing

  function automatic frame_type_e fcf_type(input logic [15:0] fcf);
    return frame_type_e'(fcf[2:0]);
  endfunction

  function automatic addr_mode_e fcf_dst_mode(input logic [15:0] fcf);
    return addr_mode_e'(fcf[11:10]);
  endfunction

  function automatic addr_mode_e fcf_src_mode(input logic [15:0] fcf);
    return addr_mode_e'(fcf[15:14]);
  endfunction

  function automatic int unsigned addr_len(input addr_mode_e m);
    case (m)
      AM_SHORT: return 2;
      AM_EXT:   return 8;
      default:  return 0;
    endcase
  endfunction

  // Byte offsets of the addressing sub-fields, decided by the frame control.
  typedef struct packed {
    logic [4:0] dst_pan_len;   // 0 or 2
    logic [4:0] dst_len;       // 0, 2 or 8
    logic [4:0] src_pan_len;   // 0 or 2
    logic [4:0] src_len;       // 0, 2 or 8
    logic [4:0] hdr_len;       // whole MHR in bytes
  } hdr_layout_t;

  function automatic hdr_layout_t hdr_layout(input logic [15:0] fcf);
    hdr_layout_t l;
    l.dst_len     = 5'(addr_len(fcf_dst_mode(fcf)));
    l.src_len     = 5'(addr_len(fcf_src_mode(fcf)));
    l.dst_pan_len = (l.dst_len != 0) ? 5'd2 : 5'd0;
    l.src_pan_len = (l.src_len != 0 && !(fcf[FCF_PAN_COMP] && l.dst_len != 0)) ? 5'd2 : 5'd0;
    l.hdr_len     = 5'd3 + l.dst_pan_len + l.dst_len + l.src_pan_len + l.src_len;
    return l;
  endfunction

  // Byte i (0-based) of the serialised MHR, little endian fields.
  function automatic logic [7:0] hdr_byte(input mac_hdr_t h, input logic [4:0] i);
    hdr_layout_t l;
    int unsigned k, p0, p1, p2, p3;
    l  = hdr_layout(h.fcf);
    p0 = 3;
    p1 = p0 + int'(l.dst_pan_len);
    p2 = p1 + int'(l.dst_len);
    p3 = p2 + int'(l.src_pan_len);
    k  = int'(i);
    if (k == 0) return h.fcf[7:0];
    if (k == 1) return h.fcf[15:8];
    if (k == 2) return h.seq;
    if (k < p1) return h.dst_pan[8*(k-p0) +: 8];
    if (k < p2) return h.dst_addr[8*(k-p1) +: 8];
    if (k < p3) return h.src_pan[8*(k-p2) +: 8];
    return h.src_addr[8*(k-p3) +: 8];
  endfunction

  // 32-chip PN word for a 4-bit data symbol.
  function automatic logic [31:0] chip_word(input logic [3:0] sym);
    logic [31:0] w;
    w = (CHIP_BASE << (4 * sym[2:0])) | (CHIP_BASE >> ((32 - 4 * sym[2:0]) % 32));
    if (sym[2:0] == 3'd0) w = CHIP_BASE;
    return sym[3] ? (w ^ ODD_CHIPS) : w;
  endfunction

  // One byte of the reflected CRC-CCITT (x^16+x^12+x^5+1), LSB first.
  function automatic logic [15:0] crc16_byte(input logic [15:0] crc, input logic [7:0] d);
    logic [15:0] c;
    c = crc;
    for (int b = 0; b < 8; b++) begin
      if (c[0] ^ d[b]) c = (c >> 1) ^ 16'h8408;
      else             c = c >> 1;
    end
    return c;
  endfunction

endpackage
