// receiver: the IEEE 802.15.4 receiver section.
//
// Chain, as in the paper's receiver diagram:
//   iq_demodulator (de-serialise OUT DATA, subtract SINE/COSINE, recombine
//   the I and Q chips) -> chip_to_symbol (despread the 32-chip word) ->
//   symbol_to_byte (two symbols -> octet) -> frame_parser (FRAME STRUCTURE:
//   SFD search, header decode, FCS check, frame control comparison, payload
//   buffer).
// Everything advances on the 250 kHz tick through the demodulator; the later
// stages work on one-clock strobes. A frame's `done` comes two clocks after
// the tick that samples its last word.
//
// `max_dist` is the largest chip-error count seen by the despreader in the
// current frame (0 on a clean link); it is cleared at the start of a burst.
module receiver
  import mac154_pkg::*;
#(
  parameter int unsigned MAX_PAYLOAD = 127,
  parameter int unsigned SYM_TICKS   = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tick,
  input  logic [31:0] in_data,
  input  logic        in_valid,
  input  logic [15:0] my_pan,
  input  logic [15:0] my_short,
  input  logic [63:0] my_ext,
  output logic        done,
  output mac_hdr_t    hdr,
  output logic [6:0]  payload_len,
  output logic        crc_ok,
  output logic        accept,
  output logic [5:0]  max_dist,
  input  logic [6:0]  rd_addr,
  output logic [7:0]  rd_data
);
  logic [31:0] chip;
  logic        chip_valid, chip_first;
  logic [3:0]  sym;
  logic [5:0]  chip_err;
  logic        sym_valid, sym_first;
  logic [7:0]  byte_data;
  logic        byte_valid, byte_first;
  logic [31:0] rx_i, rx_q;
  logic signed [15:0] sine, cosine;
  logic        in_frame;

  iq_demodulator #(.SYM_TICKS(SYM_TICKS)) u_demod (
    .clk, .rst_n, .tick, .in_data, .in_valid,
    .chip, .chip_valid, .chip_first, .rx_i, .rx_q, .sine, .cosine
  );

  chip_to_symbol u_c2s (
    .clk, .rst_n,
    .in_chip (chip), .in_valid (chip_valid), .in_first (chip_first),
    .out_sym (sym), .out_dist (chip_err), .out_valid (sym_valid), .out_first (sym_first)
  );

  symbol_to_byte u_s2b (
    .clk, .rst_n,
    .in_sym (sym), .in_valid (sym_valid), .in_first (sym_first),
    .out_byte (byte_data), .out_valid (byte_valid), .out_first (byte_first)
  );

  frame_parser #(.MAX_PAYLOAD(MAX_PAYLOAD)) u_parse (
    .clk, .rst_n,
    .in_data (byte_data), .in_valid (byte_valid), .in_first (byte_first),
    .my_pan, .my_short, .my_ext,
    .done, .hdr, .payload_len, .crc_ok, .accept, .in_frame,
    .rd_addr, .rd_data
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                           max_dist <= '0;
    else if (sym_valid && sym_first)      max_dist <= chip_err;
    else if (sym_valid && chip_err > max_dist) max_dist <= chip_err;
  end
endmodule
