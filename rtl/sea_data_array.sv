// sea_data_array: data storage of the SEA cache, one LINE_W-bit line per
// (set, way). The SEA scheme leaves the data storage of a conventional cache
// unchanged; only the location (physical set, way) found by the tag search is
// used to address it. One synchronous read port (rd_data updated the cycle
// after rd_en, held otherwise) and one write port; no reset.
module sea_data_array #(
  parameter int unsigned SETS   = 8192,
  parameter int unsigned WAYS   = 16,
  parameter int unsigned LINE_W = 512,
  localparam int unsigned SET_W = $clog2(SETS),
  localparam int unsigned WAY_W = $clog2(WAYS)
) (
  input  logic              clk,
  input  logic              rd_en,
  input  logic [SET_W-1:0]  rd_set,
  input  logic [WAY_W-1:0]  rd_way,
  output logic [LINE_W-1:0] rd_data,
  input  logic              wr_en,
  input  logic [SET_W-1:0]  wr_set,
  input  logic [WAY_W-1:0]  wr_way,
  input  logic [LINE_W-1:0] wr_data
);

  logic [LINE_W-1:0] mem [SETS*WAYS];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[{rd_set, rd_way}];
    if (wr_en) mem[{wr_set, wr_way}] <= wr_data;
  end

endmodule
