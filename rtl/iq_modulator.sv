// iq_modulator: CHIP I-PHASE / CHIP Q-PHASE registers, sine-wave addition and
// output multiplexing of the transmitter.
//
// One chip word (32 chips, one data symbol) is taken every SYM_TICKS ticks of
// the 250 kHz enable, i.e. 62.5 ksymbol/s. The word is loaded into the I-phase
// register at the first tick of the symbol; the Q-phase register copies the
// I-phase register on every tick, so Q carries the same word one tick later:
// this is the I/Q offset of O-QPSK at the resolution of the tick (the paper's
// offset is one chip time Tc; a tick is eight chip times). Both registers hold
// whole 32-bit words as in the paper's simulation; the receiver uses the even
// chips of the I word and the odd chips of the Q word.
//
// As the paper's design does, the 16-bit SINE is added to the I word and the
// COSINE to the Q word (sign-extended, modulo 2^32). OUT DATA carries the I
// sum on even ticks of a symbol and the Q sum on odd ticks, so each symbol
// gives I, Q, I, Q. The sine wave generator restarts at phase 0 with every
// frame and advances once per tick while on air.
//
// Timing: `out_valid` rises on the tick at which the first chip word is
// accepted and falls SYM_TICKS ticks after the word marked `in_last`; all
// outputs change only on ticks. `underrun` pulses if the upstream has no word
// ready at a symbol boundary before the last word (the frame is then cut).
module iq_modulator #(
  parameter int unsigned SYM_TICKS = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               tick,
  input  logic [31:0]        in_chip,
  input  logic               in_valid,
  input  logic               in_last,
  output logic               in_ready,
  output logic [31:0]        out_data,
  output logic               out_valid,
  output logic               underrun,
  output logic [31:0]        chip_i_phase,
  output logic [31:0]        chip_q_phase,
  output logic signed [15:0] sine,
  output logic signed [15:0] cosine
);
  localparam int unsigned SW = (SYM_TICKS > 1) ? $clog2(SYM_TICKS) : 1;

  logic          active;
  logic [SW-1:0] slot;        // tick index inside the symbol
  logic          last_sym;    // the word in chip_i_phase is the frame's last
  logic          boundary;

  assign boundary = ~active | (slot == SW'(SYM_TICKS - 1));
  assign in_ready = tick & boundary & ~(active & last_sym);

  sine_wave_gen u_swg (
    .clk, .rst_n,
    .clr    (~active),
    .en     (tick & active),
    .sine,
    .cosine
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active       <= 1'b0;
      slot         <= '0;
      last_sym     <= 1'b0;
      chip_i_phase <= '0;
      chip_q_phase <= '0;
      underrun     <= 1'b0;
    end else begin
      underrun <= 1'b0;
      if (tick) begin
        chip_q_phase <= chip_i_phase;
        if (boundary) begin
          slot <= '0;
          if (in_ready && in_valid) begin
            active       <= 1'b1;
            chip_i_phase <= in_chip;
            last_sym     <= in_last;
          end else begin
            if (active && !last_sym) underrun <= 1'b1;
            active   <= 1'b0;
            last_sym <= 1'b0;
          end
        end else begin
          slot <= slot + 1'b1;
        end
      end
    end
  end

  logic [31:0] out_i, out_q;
  assign out_i     = chip_i_phase + 32'(sine);
  assign out_q     = chip_q_phase + 32'(cosine);
  assign out_data  = slot[0] ? out_q : out_i;
  assign out_valid = active;

  initial assert (SYM_TICKS >= 2 && SYM_TICKS % 2 == 0)
    else $error("iq_modulator: SYM_TICKS must be even and at least 2");
endmodule
