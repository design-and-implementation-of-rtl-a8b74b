// chip_to_symbol: despreads a received 32-chip word back to a data symbol.
//
// The word is compared with all 16 PN words and the symbol whose word differs
// in the fewest chips is chosen (lowest symbol wins a tie); `dist` reports
// that number of differing chips so a caller can judge the link quality. An
// error-free word gives dist 0. The decision is registered: `out_valid`
// follows `in_valid` by one clock, and `in_first` (first word of a burst) is
// carried along. The paper names this stage only; the minimum-distance rule
// is this design's choice.
module chip_to_symbol
  import mac154_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] in_chip,
  input  logic        in_valid,
  input  logic        in_first,
  output logic [3:0]  out_sym,
  output logic [5:0]  out_dist,
  output logic        out_valid,
  output logic        out_first
);
  logic [3:0] best_sym;
  logic [5:0] best_dist;

  always_comb begin
    logic [5:0] d;
    best_sym  = 4'd0;
    best_dist = 6'd63;
    for (int s = 0; s < 16; s++) begin
      d = 6'($countones(in_chip ^ chip_word(4'(s))));
      if (d < best_dist) begin
        best_dist = d;
        best_sym  = 4'(s);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_sym   <= '0;
      out_dist  <= '0;
    end else begin
      out_valid <= in_valid;
      out_first <= in_valid & in_first;
      if (in_valid) begin
        out_sym  <= best_sym;
        out_dist <= best_dist;
      end
    end
  end
endmodule
