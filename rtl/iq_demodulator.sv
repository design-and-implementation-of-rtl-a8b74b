// iq_demodulator: the receiver's de-serializer, sine-wave removal and chip
// recombination.
//
// It samples the incoming OUT DATA word on each 250 kHz tick while `in_valid`
// is high. Samples alternate I, Q, I, Q within each symbol of SYM_TICKS ticks,
// counted from the first sample of a burst. Its own sine wave generator,
// restarted at phase 0 whenever a tick sees no burst, advances once per sample
// so it stays in step with the transmitter's; SINE is subtracted from the I
// samples and COSINE from the Q samples, giving back the I-phase and Q-phase
// chip words.
//
// On the last sample of a symbol the chip word is rebuilt from the even chips
// of the symbol's last I word and the odd chips of its last Q word, and
// presented for one clock on `chip`/`chip_valid`, with `chip_first` set for
// the first symbol of a burst. `rx_i`/`rx_q` show the recovered words.
module iq_demodulator
  import mac154_pkg::*;
#(
  parameter int unsigned SYM_TICKS = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               tick,
  input  logic [31:0]        in_data,
  input  logic               in_valid,
  output logic [31:0]        chip,
  output logic               chip_valid,
  output logic               chip_first,
  output logic [31:0]        rx_i,
  output logic [31:0]        rx_q,
  output logic signed [15:0] sine,
  output logic signed [15:0] cosine
);
  localparam int unsigned SW = $clog2(SYM_TICKS);

  logic [SW-1:0] slot;
  logic          first_sym;
  logic          sample;

  assign sample = tick & in_valid;

  sine_wave_gen u_swg (
    .clk, .rst_n,
    .clr    (tick & ~in_valid),
    .en     (sample),
    .sine,
    .cosine
  );

  logic [31:0] cur_i, cur_q;
  assign cur_i = in_data - 32'(sine);
  assign cur_q = in_data - 32'(cosine);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot       <= '0;
      first_sym  <= 1'b1;
      rx_i       <= '0;
      rx_q       <= '0;
      chip       <= '0;
      chip_valid <= 1'b0;
      chip_first <= 1'b0;
    end else begin
      chip_valid <= 1'b0;
      chip_first <= 1'b0;
      if (tick && !in_valid) begin
        slot      <= '0;
        first_sym <= 1'b1;
      end else if (sample) begin
        slot <= (slot == SW'(SYM_TICKS - 1)) ? '0 : slot + 1'b1;
        if (!slot[0]) rx_i <= cur_i;
        else          rx_q <= cur_q;
        if (slot == SW'(SYM_TICKS - 1)) begin
          chip       <= (rx_i & EVEN_CHIPS) | (cur_q & ODD_CHIPS);
          chip_valid <= 1'b1;
          chip_first <= first_sym;
          first_sym  <= 1'b0;
        end
      end
    end
  end

  initial assert (SYM_TICKS >= 2 && SYM_TICKS % 2 == 0 && (SYM_TICKS & (SYM_TICKS - 1)) == 0)
    else $error("iq_demodulator: SYM_TICKS must be a power of 2, at least 2");
endmodule
