// sea_bank_addr_gen: spreads one way's logical set over the tag banks.
//
// Sets are interleaved over NUM_BANKS banks by their low index bits (bank =
// set mod NUM_BANKS, row = set / NUM_BANKS), so NUM_BANKS consecutive sets
// always fall in distinct banks and can be read in one parallel round. A
// logical set is the home set and the following H-1 sets (wrapping at the
// last set). In round r, bank b serves offset
//   k = ((b - home) mod NUM_BANKS) + NUM_BANKS * r,
// and is enabled only if k < H; H sets thus need ceil(H / NUM_BANKS) rounds.
// The outputs give, per bank, the enable, the row, the physical set and the
// offset k, from which a hit is traced back to its set.
//
// Purely combinational. The cache registers its outputs when H > 1, which is
// the one-cycle offset computation; with H = 1 the home set goes to its bank
// directly. Wrap-around at the last set is this design's choice.
module sea_bank_addr_gen
  import sea_pkg::*;
#(
  parameter int unsigned INDEX_W   = 13,
  parameter int unsigned NUM_BANKS = 8,
  localparam int unsigned BANK_W   = $clog2(NUM_BANKS),
  localparam int unsigned ROW_W    = INDEX_W - BANK_W
) (
  input  logic [INDEX_W-1:0] home,
  input  logic [H_W-1:0]     h,        // logical associativity, >= 1
  input  logic [H_W-1:0]     round_i,  // round number
  output logic [NUM_BANKS-1:0] en,
  output logic [ROW_W-1:0]   row [NUM_BANKS],
  output logic [INDEX_W-1:0] set [NUM_BANKS],
  output logic [H_W-1:0]     off [NUM_BANKS],
  output logic               last_round  // no set of the logical set lies beyond this round
);

  always_comb begin
    for (int b = 0; b < NUM_BANKS; b++) begin
      logic [BANK_W-1:0]  d;
      logic [H_W+BANK_W:0] k;
      d      = BANK_W'(b) - home[BANK_W-1:0];
      k      = (H_W+BANK_W+1)'(d) + (H_W+BANK_W+1)'(round_i) * (H_W+BANK_W+1)'(NUM_BANKS);
      en[b]  = k < (H_W+BANK_W+1)'(h);
      off[b] = H_W'(k);
      set[b] = home + INDEX_W'(k);
      row[b] = set[b][INDEX_W-1:BANK_W];
    end
    last_round = (32'(round_i) + 1) * NUM_BANKS >= 32'(h);
  end

endmodule
