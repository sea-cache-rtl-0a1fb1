// tb_sea_hit_collector: drives random multi-round lookups (4 ways, 8 banks) in
// which the looked-up line is placed in at most one random (round, way, bank)
// among decoy entries (wrong address, or right address but invalid, or right
// address in a bank that was not read). Checks that the result appears only
// one cycle after the last round, with the hit flag, way, set and dirty bit
// of the placed entry; also checks that two matching entries raise multi_hit.
module tb_sea_hit_collector;
  import sea_pkg::*;
  localparam int WAYS = 4, NUM_BANKS = 8, INDEX_W = 13;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start, rd_valid, rd_last;
  logic [LINE_ADDR_W-1:0] addr;
  logic [NUM_BANKS-1:0] rd_en [WAYS];
  tag_entry_t rd_tag [WAYS][NUM_BANKS];
  logic [INDEX_W-1:0] rd_set [WAYS][NUM_BANKS];
  logic result_valid, hit, hit_dirty, multi_hit; logic [1:0] hit_way; logic [INDEX_W-1:0] hit_set;

  sea_hit_collector #(.WAYS(WAYS), .NUM_BANKS(NUM_BANKS), .INDEX_W(INDEX_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    start = 0; rd_valid = 0; rd_last = 0; addr = 0;
    for (int w = 0; w < WAYS; w++) begin
      rd_en[w] = '0;
      for (int b = 0; b < NUM_BANKS; b++) begin rd_tag[w][b] = '0; rd_set[w][b] = '0; end
    end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int rounds, hr, hw, hb, dup_r; bit place, dup; logic [INDEX_W-1:0] exp_set; bit exp_dirty;
      rounds = 1 + $urandom % 3;
      place = $urandom % 3 != 0;
      dup = (t % 10 == 9) && place;
      hr = $urandom % rounds; hw = $urandom % WAYS; hb = $urandom % NUM_BANKS;
      dup_r = $urandom % rounds;
      @(negedge clk); start = 1; addr = {$urandom, 8'($urandom)};
      @(negedge clk); start = 0;
      for (int r = 0; r < rounds; r++) begin
        rd_valid = 1; rd_last = (r == rounds - 1);
        for (int w = 0; w < WAYS; w++) begin
          rd_en[w] = 8'($urandom);
          for (int b = 0; b < NUM_BANKS; b++) begin
            rd_set[w][b] = INDEX_W'($urandom);
            case ($urandom % 3)
              0: rd_tag[w][b] = '{valid: 1'b1, dirty: 1'($urandom), addr: addr ^ 40'(1 + $urandom % 255)};
              1: rd_tag[w][b] = '{valid: 1'b0, dirty: 1'b0, addr: addr};
              default: begin
                rd_tag[w][b] = '{valid: 1'b1, dirty: 1'b0, addr: addr};
                rd_en[w][b] = 1'b0;
              end
            endcase
          end
        end
        if (place && r == hr) begin
          rd_en[hw][hb] = 1'b1; exp_dirty = 1'($urandom);
          rd_tag[hw][hb] = '{valid: 1'b1, dirty: exp_dirty, addr: addr};
          exp_set = rd_set[hw][hb];
        end
        if (dup && r == dup_r) begin
          int dw; dw = (hw + 1) % WAYS;
          rd_en[dw][hb] = 1'b1; rd_tag[dw][hb] = '{valid: 1'b1, dirty: 1'b0, addr: addr};
        end
        @(negedge clk);
        if (r < rounds - 1) check(!result_valid, "no result before the last round is in");
      end
      check(result_valid, "result one cycle after the last round");
      rd_valid = 0; rd_last = 0;
      if (!dup) begin
        check(hit == place, $sformatf("hit flag t=%0d", t));
        check(!multi_hit, "no multi-hit");
        if (place) begin
          check(hit_way == 2'(hw), "hit way");
          check(hit_set == exp_set, "hit set");
          check(hit_dirty == exp_dirty, "hit dirty");
        end
      end else begin
        check(multi_hit, "two matches flagged");
      end
      @(negedge clk); check(!result_valid, "result is a pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
