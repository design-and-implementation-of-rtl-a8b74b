// symbol_to_chip: spreads each 4-bit data symbol into its 32-chip PN word.
//
// The word for symbol s is symbol 0's word (32'h744AC39B, chip c0 in bit 0)
// rotated by 4*(s mod 8) chips, with the odd-indexed chips inverted for
// s >= 8; this generates the standard's 16-entry table from the cyclic-shift
// and conjugation rule the paper states. The mapping is registered in a
// one-entry valid/ready pipeline stage, so the chip word appears the cycle
// after the symbol is accepted.
module symbol_to_chip
  import mac154_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [3:0]  in_sym,
  input  logic        in_valid,
  input  logic        in_last,
  output logic        in_ready,
  output logic [31:0] out_chip,
  output logic        out_valid,
  output logic        out_last,
  input  logic        out_ready
);
  assign in_ready = ~out_valid | out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_chip  <= '0;
      out_last  <= 1'b0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_chip <= chip_word(in_sym);
        out_last <= in_last;
      end
    end
  end
endmodule
