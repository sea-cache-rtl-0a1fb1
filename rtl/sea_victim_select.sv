// sea_victim_select: random replacement of the SEA cache.
//
// On a miss, one way is chosen at random, and the victim set is that way's
// home set plus a random offset o with 0 <= o < H, i.e. a random position of
// the line's logical set in a random way. The random numbers come from a
// free-running LFSR; the way is taken from its upper bits and the offset as
// (16 random bits * H) >> 16, which lies in [0, H) for any H. Combinational
// from the LFSR state, so the choice is ready in the cycle it is needed.
// The scaling of the random numbers is this design's choice.
module sea_victim_select
  import sea_pkg::*;
#(
  parameter int unsigned WAYS    = 16,
  parameter int unsigned INDEX_W = 13,
  localparam int unsigned WAY_W  = $clog2(WAYS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [INDEX_W-1:0] home [WAYS],  // home set of the missing line in every way
  input  logic [H_W-1:0]     h,            // logical associativity of the access
  output logic [WAY_W-1:0]   victim_way,
  output logic [INDEX_W-1:0] victim_set,
  output logic [H_W-1:0]     victim_off
);

  logic [31:0] rnd;

  sea_lfsr u_lfsr (.clk, .rst_n, .en(1'b1), .state(rnd));

  always_comb begin
    logic [15+H_W:0] prod;
    logic [31:0]     wsel;
    wsel       = 32'(rnd[31:16]) * 32'(WAYS);
    victim_way = WAY_W'(wsel >> 16);
    prod       = (16+H_W)'(rnd[15:0]) * (16+H_W)'(h);
    victim_off = H_W'(prod >> 16);
    victim_set = home[victim_way] + INDEX_W'(victim_off);
  end

endmodule
