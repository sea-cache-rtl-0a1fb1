// sea_tag_bank: tag storage of one way in one bank of the SEA cache.
//
// ROWS entries of ENTRY_W bits: the full line address (the original tag and
// index bits, since the set index is encrypted) plus valid and dirty bits.
// One synchronous read port (rd_data is updated the cycle after rd_en and
// holds otherwise) and one write port. The array has no reset; the cache
// clears it after reset. Port and timing choices are this design's own.
module sea_tag_bank #(
  parameter int unsigned ROWS    = 1024,
  parameter int unsigned ENTRY_W = 42,
  localparam int unsigned ROW_W  = $clog2(ROWS)
) (
  input  logic               clk,
  input  logic               rd_en,
  input  logic [ROW_W-1:0]   rd_row,
  output logic [ENTRY_W-1:0] rd_data,
  input  logic               wr_en,
  input  logic [ROW_W-1:0]   wr_row,
  input  logic [ENTRY_W-1:0] wr_data
);

  logic [ENTRY_W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_row];
    if (wr_en) mem[wr_row] <= wr_data;
  end

endmodule
