// sea_hit_collector: hit determination of the SEA cache over several rounds.
//
// In every round each way reads up to NUM_BANKS tag entries in parallel. This
// unit compares each entry that was read with the looked-up line address,
// accumulates the hits of all rounds, and reports the result only once the
// results of the last round are in. Because a line is stored at most once,
// at most one (way, bank, round) can hit; the position of that hit gives the
// way and the physical set the line sits in, which are reported with the
// result. A second hit is flagged on multi_hit (a coherence error).
//
// Timing: clear on start; one round of results per cycle with rd_valid; the
// result (result_valid, one cycle) follows the round flagged rd_last by one
// cycle. Interface details are this design's choice.
module sea_hit_collector
  import sea_pkg::*;
#(
  parameter int unsigned WAYS      = 16,
  parameter int unsigned NUM_BANKS = 8,
  parameter int unsigned INDEX_W   = 13,
  localparam int unsigned WAY_W    = $clog2(WAYS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,          // new lookup: clear accumulated state
  input  logic [LINE_ADDR_W-1:0] addr,           // line address looked up
  input  logic                   rd_valid,       // a round of tag entries is present
  input  logic                   rd_last,        // ... and it is the last round
  input  logic [NUM_BANKS-1:0]   rd_en   [WAYS], // which banks were read in each way
  input  tag_entry_t             rd_tag  [WAYS][NUM_BANKS],
  input  logic [INDEX_W-1:0]     rd_set  [WAYS][NUM_BANKS],
  output logic                   result_valid,
  output logic                   hit,
  output logic [WAY_W-1:0]       hit_way,
  output logic [INDEX_W-1:0]     hit_set,
  output logic                   hit_dirty,
  output logic                   multi_hit
);

  logic             acc_hit, acc_dirty, acc_multi;
  logic [WAY_W-1:0] acc_way;
  logic [INDEX_W-1:0] acc_set;

  // Hits of the present round
  logic             r_hit, r_multi, r_dirty;
  logic [WAY_W-1:0] r_way;
  logic [INDEX_W-1:0] r_set;

  always_comb begin
    r_hit = 1'b0; r_multi = 1'b0; r_dirty = 1'b0; r_way = '0; r_set = '0;
    for (int w = 0; w < WAYS; w++)
      for (int b = 0; b < NUM_BANKS; b++)
        if (rd_en[w][b] && rd_tag[w][b].valid && rd_tag[w][b].addr == addr) begin
          if (r_hit) r_multi = 1'b1;
          r_hit   = 1'b1;
          r_way   = WAY_W'(w);
          r_set   = rd_set[w][b];
          r_dirty = rd_tag[w][b].dirty;
        end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_hit <= 1'b0; acc_multi <= 1'b0; acc_dirty <= 1'b0;
      acc_way <= '0; acc_set <= '0;
      result_valid <= 1'b0;
    end else begin
      result_valid <= 1'b0;
      if (start) begin
        acc_hit <= 1'b0; acc_multi <= 1'b0;
      end else if (rd_valid) begin
        if (r_hit) begin
          acc_hit <= 1'b1; acc_way <= r_way; acc_set <= r_set; acc_dirty <= r_dirty;
        end
        acc_multi    <= acc_multi | r_multi | (r_hit & acc_hit);
        result_valid <= rd_last;
      end
    end
  end

  assign hit       = acc_hit;
  assign hit_way   = acc_way;
  assign hit_set   = acc_set;
  assign hit_dirty = acc_dirty;
  assign multi_hit = acc_multi;

endmodule
