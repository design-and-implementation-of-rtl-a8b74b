// bit_to_symbol: splits every PPDU octet into two 4-bit data symbols.
//
// Following the paper, bits b0..b3 of an octet form the first symbol and bits
// b4..b7 the next. The block sits between two valid/ready streams: an octet is
// accepted when its second symbol leaves, so throughput is one symbol per
// cycle and there is no extra latency (the output is combinational from the
// input octet and a one-bit nibble pointer). `last` marks the final octet of
// a frame and is passed on with its high nibble.
module bit_to_symbol (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] in_data,
  input  logic       in_valid,
  input  logic       in_last,
  output logic       in_ready,
  output logic [3:0] out_sym,
  output logic       out_valid,
  output logic       out_last,
  input  logic       out_ready
);
  logic hi;   // 0: low nibble goes next, 1: high nibble

  assign out_sym   = hi ? in_data[7:4] : in_data[3:0];
  assign out_valid = in_valid;
  assign out_last  = in_last & hi;
  assign in_ready  = out_ready & hi;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     hi <= 1'b0;
    else if (out_valid & out_ready) hi <= ~hi;
  end
endmodule
