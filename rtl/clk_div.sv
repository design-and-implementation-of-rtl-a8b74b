// clk_div: turns the board clock into the rate the datapath runs at.
//
// The paper's FPGA board clock is about 100 MHz while the 802.15.4 datapath
// must run at 250 kHz, so a divide-by-400 is needed in front of it. Instead of
// producing a second clock, this divider emits `tick`, a pulse one clock wide
// every DIV cycles; every other block uses it as a clock enable, so the whole
// design stays in one clock domain (this is a design choice, the paper only
// says a divider is needed).
//
// Timing: the first tick comes DIV cycles after reset is released, then one
// every DIV cycles.
module clk_div #(
  parameter int unsigned DIV = 400     // 100 MHz / 250 kHz
) (
  input  logic clk,
  input  logic rst_n,
  output logic tick
);
  localparam int unsigned W = (DIV > 1) ? $clog2(DIV) : 1;

  logic [W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      tick <= 1'b0;
    end else if (cnt == W'(DIV - 1)) begin
      cnt  <= '0;
      tick <= 1'b1;
    end else begin
      cnt  <= cnt + 1'b1;
      tick <= 1'b0;
    end
  end

  initial assert (DIV >= 2) else $error("clk_div: DIV must be at least 2");
endmodule
