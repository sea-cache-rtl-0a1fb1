// tb_sea_index_unit: checks the per-way home sets of the index unit (4 ways,
// 13 index bits) against values computed with an independent PRINCE reference
// model for three line addresses under a current and a next key, and checks
// the remap-pointer selection and the 3-cycle latency.
module tb_sea_index_unit;
  import sea_pkg::*;
  localparam int WAYS = 4, INDEX_W = 13;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic [LINE_ADDR_W-1:0] in_addr [WAYS];
  logic [127:0] key_cur = 128'h00112233445566778899aabbccddeeff;
  logic [127:0] key_nxt = 128'h0f1e2d3c4b5a69788796a5b4c3d2e1f0;
  logic [INDEX_W-1:0] sptr, home_cur [WAYS], home_nxt [WAYS], home_sel [WAYS];

  sea_index_unit #(.WAYS(WAYS), .INDEX_W(INDEX_W)) dut (.*);

  localparam logic [39:0] ADDR [3] = '{40'h0000000000, 40'h123456789a, 40'hfedcba9876};
  localparam logic [12:0] EXP_CUR [3][4] = '{'{13'h0e50, 13'h035c, 13'h09ec, 13'h0907},
                                             '{13'h1478, 13'h1ac5, 13'h1647, 13'h1d95},
                                             '{13'h02cc, 13'h0c2f, 13'h0a02, 13'h030b}};
  localparam logic [12:0] EXP_NXT [3][4] = '{'{13'h0d8b, 13'h19d7, 13'h10b9, 13'h1b50},
                                             '{13'h1fcc, 13'h1f33, 13'h18ee, 13'h1867},
                                             '{13'h1230, 13'h1fb3, 13'h17d3, 13'h1ac1}};
  localparam logic [12:0] SPTRS [4] = '{13'h0000, 13'h0a00, 13'h1500, 13'h1fff};
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    in_valid = 0; sptr = 0;
    for (int w = 0; w < WAYS; w++) in_addr[w] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int a = 0; a < 3; a++)
      for (int s = 0; s < 4; s++) begin
        @(negedge clk);
        in_valid = 1; sptr = SPTRS[s];
        for (int w = 0; w < WAYS; w++) in_addr[w] = ADDR[a];
        @(negedge clk); in_valid = 0;
        for (int w = 0; w < WAYS; w++) in_addr[w] = '1;   // inputs change after issue
        check(!out_valid, "no result after 1 cycle");
        @(negedge clk); check(!out_valid, "no result after 2 cycles");
        @(negedge clk); check(out_valid, "result ready for the 3rd clock edge");
        for (int w = 0; w < WAYS; w++) begin
          check(home_cur[w] == EXP_CUR[a][w], $sformatf("cur addr %0d way %0d: %h", a, w, home_cur[w]));
          check(home_nxt[w] == EXP_NXT[a][w], $sformatf("nxt addr %0d way %0d: %h", a, w, home_nxt[w]));
          check(home_sel[w] == ((EXP_CUR[a][w] < SPTRS[s]) ? EXP_NXT[a][w] : EXP_CUR[a][w]),
                $sformatf("sel addr %0d way %0d sptr %h", a, w, SPTRS[s]));
        end
      end
    // different addresses per way (remap scan): way w gets ADDR[w % 3]
    @(negedge clk); in_valid = 1; sptr = 0;
    for (int w = 0; w < WAYS; w++) in_addr[w] = ADDR[w % 3];
    @(negedge clk); in_valid = 0;
    repeat (2) @(negedge clk);
    for (int w = 0; w < WAYS; w++) check(home_cur[w] == EXP_CUR[w % 3][w], "per-way address");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
