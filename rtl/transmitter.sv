// transmitter: the IEEE 802.15.4 transmitter section.
//
// Chain, as in the paper's transmitter diagram:
//   frame_builder (FRAME STRUCTURE) -> bit_to_symbol (octet -> two 4-bit
//   symbols) -> symbol_to_chip (symbol -> 32-chip word) -> iq_modulator
//   (CHIP I-PHASE / CHIP Q-PHASE, SINE/COSINE addition, OUT DATA).
// The stages are joined by valid/ready handshakes; the modulator pulls one
// chip word every four ticks of the 250 kHz enable, so the air rate is
// 62.5 ksymbol/s = 250 kbit/s and the rest of the chain simply waits.
//
// `start` with a header and payload length launches one frame (payload
// written beforehand through pl_*). `on_air` is high while OUT DATA is valid;
// a frame of N PPDU bytes is on air for 8*N ticks. `busy` covers the whole
// time from start to the end of the air time.
module transmitter
  import mac154_pkg::*;
#(
  parameter int unsigned MAX_PAYLOAD = 127,
  parameter int unsigned SYM_TICKS   = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               tick,
  input  logic               start,
  input  mac_hdr_t           hdr,
  input  logic [6:0]         payload_len,
  input  logic               pl_we,
  input  logic [6:0]         pl_waddr,
  input  logic [7:0]         pl_wdata,
  output logic               busy,
  output logic               len_err,
  output logic [31:0]        out_data,
  output logic               on_air,
  output logic               underrun,
  output logic [31:0]        chip_i_phase,
  output logic [31:0]        chip_q_phase
);
  logic [7:0]  b_data;
  logic        b_valid, b_last, b_ready;
  logic [3:0]  s_sym;
  logic        s_valid, s_last, s_ready;
  logic [31:0] c_chip;
  logic        c_valid, c_last, c_ready;
  logic        bld_busy, bld_done;
  logic signed [15:0] sine, cosine;

  frame_builder #(.MAX_PAYLOAD(MAX_PAYLOAD)) u_build (
    .clk, .rst_n, .start, .hdr, .payload_len,
    .pl_we, .pl_waddr, .pl_wdata,
    .busy (bld_busy), .done (bld_done), .len_err,
    .out_data (b_data), .out_valid (b_valid), .out_last (b_last), .out_ready (b_ready)
  );

  bit_to_symbol u_b2s (
    .clk, .rst_n,
    .in_data (b_data), .in_valid (b_valid), .in_last (b_last), .in_ready (b_ready),
    .out_sym (s_sym), .out_valid (s_valid), .out_last (s_last), .out_ready (s_ready)
  );

  symbol_to_chip u_s2c (
    .clk, .rst_n,
    .in_sym (s_sym), .in_valid (s_valid), .in_last (s_last), .in_ready (s_ready),
    .out_chip (c_chip), .out_valid (c_valid), .out_last (c_last), .out_ready (c_ready)
  );

  iq_modulator #(.SYM_TICKS(SYM_TICKS)) u_mod (
    .clk, .rst_n, .tick,
    .in_chip (c_chip), .in_valid (c_valid), .in_last (c_last), .in_ready (c_ready),
    .out_data, .out_valid (on_air), .underrun,
    .chip_i_phase, .chip_q_phase, .sine, .cosine
  );

  assign busy = bld_busy | s_valid | c_valid | on_air;
endmodule
