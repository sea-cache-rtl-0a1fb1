// sea_lfsr: 32-bit Galois LFSR (polynomial x^32 + x^22 + x^2 + x + 1, maximal
// length) used as the pseudo-random source of the replacement choice. It steps
// every cycle that en is high and restarts from SEED on reset. A random source
// is this design's stand-in: the replacement policy only asks for randomness.
module sea_lfsr #(
  parameter logic [31:0] SEED = 32'hace1_2468
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [31:0] state
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  state <= SEED;
    else if (en) state <= {1'b0, state[31:1]} ^ (state[0] ? 32'h8020_0003 : 32'h0);
  end
endmodule
