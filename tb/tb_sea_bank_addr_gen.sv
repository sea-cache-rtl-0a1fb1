// tb_sea_bank_addr_gen: for random home sets and every H from 1 to 32, walks
// the rounds of the logical set and checks, against sets worked out in the
// testbench, that every set home .. home+H-1 (mod SETS) is read exactly once,
// in the bank given by its low index bits, in round offset/8, with the right
// row and offset, and that the last round is flagged after ceil(H/8) rounds.
module tb_sea_bank_addr_gen;
  import sea_pkg::*;
  localparam int INDEX_W = 13, NUM_BANKS = 8, SETS = 1 << INDEX_W;
  logic [INDEX_W-1:0] home; logic [H_W-1:0] h, round_i;
  logic [NUM_BANKS-1:0] en; logic [INDEX_W-4:0] row [NUM_BANKS];
  logic [INDEX_W-1:0] set [NUM_BANKS]; logic [H_W-1:0] off [NUM_BANKS]; logic last_round;

  sea_bank_addr_gen #(.INDEX_W(INDEX_W), .NUM_BANKS(NUM_BANKS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int t = 0; t < 60; t++) begin
      int seen [int];
      int nrounds;
      home = (t < 4) ? INDEX_W'(SETS - 1 - t) : INDEX_W'($urandom);   // include wrap-around
      h = H_W'(1 + (t % 32));
      nrounds = 0;
      seen.delete();
      for (int r = 0; r < 8; r++) begin
        round_i = H_W'(r);
        #1;
        nrounds++;
        for (int b = 0; b < NUM_BANKS; b++) if (en[b]) begin
          int k; int s;
          k = int'(off[b]);
          s = (int'(home) + k) % SETS;
          check(k < int'(h), "offset below H");
          check(k / NUM_BANKS == r, "offset in this round");
          check(int'(set[b]) == s, $sformatf("set for bank %0d", b));
          check(s % NUM_BANKS == b, "bank = set mod banks");
          check(int'(row[b]) == s / NUM_BANKS, "row = set / banks");
          check(!seen.exists(s), "set read once");
          seen[s] = 1;
        end
        if (last_round) break;
      end
      check(nrounds == (int'(h) + NUM_BANKS - 1) / NUM_BANKS, $sformatf("rounds for H=%0d", h));
      check(seen.size() == int'(h), $sformatf("all %0d sets read", h));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
