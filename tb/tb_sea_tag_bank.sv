// tb_sea_tag_bank: random writes and reads of one tag bank (default size)
// compared with a model array; checks the one-cycle read latency and that the
// read data holds while no read is issued.
module tb_sea_tag_bank;
  localparam int ROWS = 1024, W = 42;
  logic clk = 0; always #5 clk = ~clk;
  logic rd_en, wr_en; logic [9:0] rd_row, wr_row; logic [W-1:0] rd_data, wr_data;
  sea_tag_bank #(.ROWS(ROWS), .ENTRY_W(W)) dut (.*);
  logic [W-1:0] model [ROWS];
  bit written [ROWS];
  int checks = 0, failures = 0;
  initial begin
    rd_en = 0; wr_en = 0; rd_row = 0; wr_row = 0; wr_data = 0;
    for (int i = 0; i < 3000; i++) begin
      logic [W-1:0] exp; bit chk;
      @(negedge clk);
      wr_en = $urandom % 2; wr_row = 10'($urandom % 64); wr_data = {$urandom, $urandom};
      rd_en = $urandom % 2; rd_row = 10'($urandom % 64);
      chk = rd_en && written[rd_row] && !(wr_en && wr_row == rd_row);
      exp = model[rd_row];
      @(posedge clk);
      if (wr_en) begin model[wr_row] = wr_data; written[wr_row] = 1; end
      #1;
      if (chk) begin
        checks++;
        if (rd_data != exp) begin failures++; $display("FAIL row %0d", rd_row); end
      end
      if (chk) begin
        @(negedge clk); rd_en = 0; wr_en = 0; @(posedge clk); #1;
        checks++; if (rd_data != exp) begin failures++; $display("FAIL hold"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
