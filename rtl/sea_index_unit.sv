// sea_index_unit: randomised set indexing of the SEA cache.
//
// The cache is fully partitioned (skewed): every way w has its own key, and the
// home set of a line in way w is the low INDEX_W bits of PRINCE(line address)
// under that key. Re-keying follows the two-cipher scheme of CEASER-S: each way
// has one cipher with the current key and one with the next key, and a remap
// pointer (sptr) sweeps the sets. A home set under the current key that lies
// below sptr has already been remapped, so the next-key home set is used
// instead. Both raw home sets are also output; the remap engine uses the
// current-key one to find lines that belong to the set being remapped.
//
// Interface: in_addr carries one line address per way (all equal for a lookup,
// the stored line addresses of one set for a remap scan). Timing: out_* follow
// in_valid by the 3-cycle PRINCE latency; sptr is compared when the result
// appears. The way-key derivation (sea_pkg::way_key) is this design's choice.
module sea_index_unit
  import sea_pkg::*;
#(
  parameter int unsigned WAYS    = 16,
  parameter int unsigned INDEX_W = 13
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [LINE_ADDR_W-1:0] in_addr [WAYS],
  input  logic [127:0]           key_cur,
  input  logic [127:0]           key_nxt,
  input  logic [INDEX_W-1:0]     sptr,
  output logic                   out_valid,
  output logic [INDEX_W-1:0]     home_cur [WAYS],  // home set under the current key
  output logic [INDEX_W-1:0]     home_nxt [WAYS],  // home set under the next key
  output logic [INDEX_W-1:0]     home_sel [WAYS]   // home set to use for a lookup
);

  logic [WAYS-1:0] v_cur, v_nxt;
  logic [63:0]     ct_cur [WAYS];
  logic [63:0]     ct_nxt [WAYS];

  for (genvar w = 0; w < WAYS; w++) begin : g_way
    prince_core u_cur (
      .clk, .rst_n, .in_valid,
      .in_data  (64'(in_addr[w])),
      .in_key   (way_key(key_cur, w)),
      .out_valid(v_cur[w]),
      .out_data (ct_cur[w])
    );
    prince_core u_nxt (
      .clk, .rst_n, .in_valid,
      .in_data  (64'(in_addr[w])),
      .in_key   (way_key(key_nxt, w)),
      .out_valid(v_nxt[w]),
      .out_data (ct_nxt[w])
    );
    assign home_cur[w] = ct_cur[w][INDEX_W-1:0];
    assign home_nxt[w] = ct_nxt[w][INDEX_W-1:0];
    assign home_sel[w] = (home_cur[w] < sptr) ? home_nxt[w] : home_cur[w];
  end

  assign out_valid = v_cur[0];

endmodule
