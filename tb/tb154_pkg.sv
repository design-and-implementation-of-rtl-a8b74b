// tb154_pkg: reference models shared by the testbenches, written
// independently of the RTL: the IEEE 802.15.4 2.4 GHz chip table typed out
// chip by chip, a non-reflected bit-serial CRC, and a PPDU assembler.
package tb154_pkg;
  import mac154_pkg::*;

  // Chip sequences c0..c31 of symbols 0..15 (IEEE 802.15.4, O-QPSK PHY).
  localparam string CHIP_TABLE [16] = '{
    "11011001110000110101001000101110",
    "11101101100111000011010100100010",
    "00101110110110011100001101010010",
    "00100010111011011001110000110101",
    "01010010001011101101100111000011",
    "00110101001000101110110110011100",
    "11000011010100100010111011011001",
    "10011100001101010010001011101101",
    "10001100100101100000011101111011",
    "10111000110010010110000001110111",
    "01111011100011001001011000000111",
    "01110111101110001100100101100000",
    "00000111011110111000110010010110",
    "01100000011101111011100011001001",
    "10010110000001110111101110001100",
    "11001001011000000111011110111000"
  };

  // chip word with c0 in bit 0
  function automatic logic [31:0] ref_chip(input int s);
    logic [31:0] w;
    string t;
    t = CHIP_TABLE[s];
    for (int i = 0; i < 32; i++) w[i] = (t[i] == "1");
    return w;
  endfunction

  // CRC-16 (poly 0x1021, init 0) on bits taken LSB first, result bit-reversed
  function automatic logic [15:0] ref_crc(input byte unsigned d [], input int n);
    logic [15:0] c, r;
    logic fb;
    c = 16'h0;
    for (int k = 0; k < n; k++)
      for (int b = 0; b < 8; b++) begin
        fb = c[15] ^ d[k][b];
        c  = {c[14:0], 1'b0};
        if (fb) c = c ^ 16'h1021;
      end
    for (int i = 0; i < 16; i++) r[i] = c[15 - i];
    return r;
  endfunction

  // header bytes in the order they go on air
  function automatic void ref_hdr_bytes(input mac_hdr_t h, ref byte unsigned q[$]);
    int dm, sm;
    bit comp;
    dm = int'(h.fcf[11:10]); sm = int'(h.fcf[15:14]); comp = h.fcf[6];
    q.push_back(h.fcf[7:0]); q.push_back(h.fcf[15:8]); q.push_back(h.seq);
    if (dm >= 2) begin
      q.push_back(h.dst_pan[7:0]); q.push_back(h.dst_pan[15:8]);
      for (int i = 0; i < (dm == 3 ? 8 : 2); i++) q.push_back(h.dst_addr[8*i +: 8]);
    end
    if (sm >= 2) begin
      if (!(comp && dm >= 2)) begin q.push_back(h.src_pan[7:0]); q.push_back(h.src_pan[15:8]); end
      for (int i = 0; i < (sm == 3 ? 8 : 2); i++) q.push_back(h.src_addr[8*i +: 8]);
    end
  endfunction

  // complete PPDU: preamble, SFD, length, MHR, payload, FCS
  function automatic void ref_ppdu(input mac_hdr_t h, input byte unsigned pl [], input int n,
                                   ref byte unsigned q[$]);
    byte unsigned m[$];
    byte unsigned a [];
    logic [15:0] c;
    ref_hdr_bytes(h, m);
    for (int i = 0; i < n; i++) m.push_back(pl[i]);
    a = new[m.size()];
    foreach (m[i]) a[i] = m[i];
    c = ref_crc(a, m.size());
    m.push_back(c[7:0]); m.push_back(c[15:8]);
    q.delete();
    repeat (4) q.push_back(8'h00);
    q.push_back(8'hA7);
    q.push_back(8'(m.size()));
    foreach (m[i]) q.push_back(m[i]);
  endfunction

  // round(16384 * sin(2*pi*k/256)), halves away from zero
  function automatic int ref_sin(input int k);
    real v;
    v = 16384.0 * $sin(2.0 * 3.14159265358979 * real'(k) / 256.0);
    return (v >= 0.0) ? $rtoi(v + 0.5) : -$rtoi(0.5 - v);
  endfunction

  // words on air for a PPDU: per octet low then high symbol, per symbol four
  // ticks I, Q, I, Q; tick k adds SINE(k) (I) or COSINE(k) (Q)
  function automatic void ref_air(input byte unsigned q[$], ref logic [31:0] w[$]);
    int k;
    w.delete();
    k = 0;
    foreach (q[i])
      for (int h = 0; h < 2; h++) begin
        logic [31:0] c;
        c = ref_chip(h ? int'(q[i][7:4]) : int'(q[i][3:0]));
        for (int t = 0; t < 4; t++) begin
          w.push_back(c + 32'((k % 2 == 0) ? ref_sin(k % 256) : ref_sin((k + 64) % 256)));
          k++;
        end
      end
  endfunction
endpackage
