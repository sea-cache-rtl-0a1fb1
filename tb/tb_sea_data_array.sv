// tb_sea_data_array: random line writes and reads of the data array (64 sets,
// 16 ways, 512-bit lines) compared with a model, with the one-cycle read
// latency checked.
module tb_sea_data_array;
  localparam int SETS = 64, WAYS = 16, LINE_W = 512;
  logic clk = 0; always #5 clk = ~clk;
  logic rd_en, wr_en; logic [5:0] rd_set, wr_set; logic [3:0] rd_way, wr_way;
  logic [LINE_W-1:0] rd_data, wr_data;
  sea_data_array #(.SETS(SETS), .WAYS(WAYS), .LINE_W(LINE_W)) dut (.*);
  logic [LINE_W-1:0] model [SETS][WAYS];
  bit written [SETS][WAYS];
  int checks = 0, failures = 0;
  initial begin
    rd_en = 0; wr_en = 0; rd_set = 0; wr_set = 0; rd_way = 0; wr_way = 0; wr_data = 0;
    for (int i = 0; i < 3000; i++) begin
      logic [LINE_W-1:0] exp; bit chk;
      @(negedge clk);
      wr_en = $urandom % 2; wr_set = 6'($urandom % 8); wr_way = 4'($urandom); wr_data = {16{$urandom}};
      rd_en = 1; rd_set = 6'($urandom % 8); rd_way = 4'($urandom);
      chk = written[rd_set][rd_way] && !(wr_en && wr_set == rd_set && wr_way == rd_way);
      exp = model[rd_set][rd_way];
      @(posedge clk);
      if (wr_en) begin model[wr_set][wr_way] = wr_data; written[wr_set][wr_way] = 1; end
      #1;
      if (chk) begin
        checks++;
        if (rd_data != exp) begin failures++; $display("FAIL set %0d way %0d", rd_set, rd_way); end
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
