// lfsr: free-running 64-bit Fibonacci LFSR used as the seed source of the
// D-CBF hash functions (polynomial x^64 + x^63 + x^61 + x^60 + 1, maximal
// length). It advances every cycle; a consumer samples `value` when it needs a
// new random seed. The reset value must be non-zero. The source design asks
// only for "a randomly-generated value"; a pseudo-random LFSR is this design's
// choice (a true random number generator could replace it).
module lfsr #(
  parameter logic [63:0] INIT = 64'h9E37_79B9_7F4A_7C15
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic [63:0] value
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) value <= INIT;
    else        value <= {value[62:0], value[63] ^ value[62] ^ value[60] ^ value[59]};
  end
endmodule
