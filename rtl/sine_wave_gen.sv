// sine_wave_gen: the SINE WAVE GENERATOR of the transmitter and receiver.
//
// It produces a 16-bit two's-complement SINE and COSINE pair that steps
// through one period in STEPS equal phase steps, with amplitude AMPL. The
// defaults, 256 steps and amplitude 16384 (0x4000), reproduce the values the
// paper's transmitter simulation shows (SINE 0000, 0192, 0324, ...; COSINE
// 4000, 3ffb, 3fec, ...).
//
// An 8-bit phase register indexes a quarter-wave table of 65 entries; the
// other three quadrants come from symmetry and COSINE is the SINE 64 steps
// ahead. The table is computed at elaboration by a fixed-point Taylor series
// (Q28 arithmetic, rounded to the nearest integer), so no numbers are pasted
// into the source.
//
// Interface/timing: `clr` sets the phase to 0 (SINE 0, COSINE AMPL); each
// clock with `en` high advances one step. Outputs are combinational from the
// phase register, so they change the clock after `en`.
module sine_wave_gen #(
  parameter int unsigned STEPS = 256,    // phase steps per period (power of 4)
  parameter int unsigned AMPL  = 16384   // peak value
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clr,
  input  logic               en,
  output logic signed [15:0] sine,
  output logic signed [15:0] cosine
);
  localparam int unsigned PW = $clog2(STEPS);   // phase width
  localparam int unsigned QN = STEPS / 4;       // steps per quadrant

  // round(AMPL * sin(pi/2 * j / QN)) using Q28 fixed point.
  function automatic logic [15:0] quarter_sine(input int unsigned j);
    longint signed pi_q28, x, x2, term, sum;
    pi_q28 = 64'sd843314857;                      // pi * 2^28
    x      = (pi_q28 * longint'(j)) / longint'(2 * QN);
    x2     = (x * x) >>> 28;
    term   = x;
    sum    = x;
    for (int n = 1; n < 10; n++) begin
      term = -((term * x2) >>> 28) / longint'((2 * n) * (2 * n + 1));
      sum  = sum + term;
    end
    return 16'((sum * longint'(AMPL) + (64'sd1 <<< 27)) >>> 28);
  endfunction

  logic [15:0] qtab [QN+1];
  for (genvar j = 0; j <= QN; j++) begin : g_tab
    localparam logic [15:0] V = quarter_sine(j);
    assign qtab[j] = V;
  end

  function automatic logic signed [15:0] lookup(input logic [PW-1:0] ph,
                                                input logic [15:0] tab [QN+1]);
    logic [1:0]    q;
    logic [PW-3:0] j;
    logic [15:0]   mag;
    q   = ph[PW-1:PW-2];
    j   = ph[PW-3:0];
    mag = q[0] ? tab[QN - int'(j)] : tab[int'(j)];
    return q[1] ? -signed'(mag) : signed'(mag);
  endfunction

  logic [PW-1:0] phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   phase <= '0;
    else if (clr) phase <= '0;
    else if (en)  phase <= phase + 1'b1;
  end

  assign sine   = lookup(phase, qtab);
  assign cosine = lookup(phase + PW'(QN), qtab);

  initial assert (STEPS >= 8 && (STEPS & (STEPS - 1)) == 0 && PW % 2 == 0)
    else $error("sine_wave_gen: STEPS must be a power of 4");
endmodule
