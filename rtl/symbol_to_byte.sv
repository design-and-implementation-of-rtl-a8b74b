// symbol_to_byte: pairs received data symbols back into octets.
//
// It undoes the transmit bit-to-symbol split: the first symbol of a pair is
// bits b0..b3 and the second bits b4..b7. Pairing restarts whenever a symbol
// arrives with `in_first` set (the first symbol of a received burst), which
// keeps octet alignment with the transmitter. An octet is presented for one
// clock (`out_valid`) the cycle after its second symbol arrives.
module symbol_to_byte (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [3:0] in_sym,
  input  logic       in_valid,
  input  logic       in_first,
  output logic [7:0] out_byte,
  output logic       out_valid,
  output logic       out_first
);
  logic       have_low;
  logic [3:0] low;
  logic       low_first;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_low  <= 1'b0;
      low       <= '0;
      low_first <= 1'b0;
      out_byte  <= '0;
      out_valid <= 1'b0;
      out_first <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      if (in_valid) begin
        if (in_first || !have_low) begin
          have_low  <= 1'b1;
          low       <= in_sym;
          low_first <= in_first;
        end else begin
          have_low  <= 1'b0;
          out_byte  <= {in_sym, low};
          out_valid <= 1'b1;
          out_first <= low_first;
        end
      end
    end
  end
endmodule
