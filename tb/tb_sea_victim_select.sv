// tb_sea_victim_select: with random home sets (including sets near the end,
// which wrap) and H from 1 to 24, checks every cycle that the victim set is
// the chosen way's home set plus the reported offset, that the offset is below
// H (zero for H = 1), and that over many cycles every way and every offset
// 0..H-1 is chosen.
module tb_sea_victim_select;
  import sea_pkg::*;
  localparam int WAYS = 16, INDEX_W = 13, SETS = 1 << INDEX_W;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic [INDEX_W-1:0] home [WAYS]; logic [H_W-1:0] h;
  logic [3:0] victim_way; logic [INDEX_W-1:0] victim_set; logic [H_W-1:0] victim_off;
  sea_victim_select #(.WAYS(WAYS), .INDEX_W(INDEX_W)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    h = 1;
    for (int w = 0; w < WAYS; w++) home[w] = INDEX_W'(SETS - 1 - w);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int hv = 1; hv <= 24; hv += (hv < 4 ? 1 : 5)) begin
      int way_seen [int]; int off_seen [int];
      h = H_W'(hv);
      way_seen.delete(); off_seen.delete();
      for (int i = 0; i < 600; i++) begin
        @(negedge clk);
        if (i % 50 == 0) for (int w = 0; w < WAYS; w++) home[w] = (i == 0) ? INDEX_W'(SETS - 1 - w) : INDEX_W'($urandom);
        #1;
        check(int'(victim_off) < hv, "offset below H");
        check(int'(victim_set) == (int'(home[victim_way]) + int'(victim_off)) % SETS, "victim set = home + offset");
        way_seen[int'(victim_way)] = 1; off_seen[int'(victim_off)] = 1;
      end
      check(way_seen.size() == WAYS, $sformatf("all ways chosen (H=%0d)", hv));
      check(off_seen.size() == hv, $sformatf("all offsets chosen (H=%0d): %0d", hv, off_seen.size()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
