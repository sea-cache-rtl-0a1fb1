// tb_sea_la_config: checks the reset settings (H = 1 and 16, step 9 * 16),
// privileged writes, refusal of unprivileged and out-of-range writes
// (cfg_err, no change), that raising H does not request a flush, that
// lowering H requests exactly one, and h_max.
module tb_sea_la_config;
  import sea_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic cfg_valid, cfg_priv, cfg_err, flush_req; cfg_addr_e cfg_addr; logic [31:0] cfg_wdata;
  logic [H_W-1:0] h [2]; logic [H_W-1:0] h_max; logic [31:0] rkp_step;
  sea_la_config dut (.*);
  int checks = 0, failures = 0, flushes = 0, errs = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  always @(posedge clk) if (rst_n) begin flushes += flush_req; errs += cfg_err; end
  task automatic wr(input cfg_addr_e a, input int v, input bit p);
    @(negedge clk); cfg_valid = 1; cfg_addr = a; cfg_wdata = v; cfg_priv = p;
    @(negedge clk); cfg_valid = 0;
    @(negedge clk);
  endtask
  initial begin
    cfg_valid = 0; cfg_priv = 0; cfg_addr = CFG_H_DOMAIN0; cfg_wdata = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    check(h[0] == 1 && h[1] == 16 && h_max == 16, "reset H");
    check(rkp_step == 144, "reset step 9N");
    wr(CFG_H_DOMAIN1, 24, 1);  check(h[1] == 24 && h_max == 24 && flushes == 0 && errs == 0, "raise H1");
    wr(CFG_H_DOMAIN0, 30, 1);  check(h[0] == 30 && h_max == 30 && flushes == 0, "raise H0");
    wr(CFG_H_DOMAIN0, 2, 0);   check(h[0] == 30 && errs == 1 && flushes == 0, "unprivileged refused");
    wr(CFG_H_DOMAIN1, 0, 1);   check(h[1] == 24 && errs == 2, "H = 0 refused");
    wr(CFG_H_DOMAIN1, 33, 1);  check(h[1] == 24 && errs == 3, "H > 32 refused");
    wr(CFG_H_DOMAIN0, 4, 1);   check(h[0] == 4 && h_max == 24 && flushes == 1, "lower H0 flushes");
    wr(CFG_H_DOMAIN1, 24, 1);  check(flushes == 1, "same H no flush");
    wr(CFG_H_DOMAIN1, 3, 1);   check(h[1] == 3 && h_max == 4 && flushes == 2, "lower H1 flushes");
    wr(CFG_RKP_STEP, 1000, 1); check(rkp_step == 1000, "step write");
    wr(CFG_RKP_STEP, 0, 1);    check(rkp_step == 1000 && errs == 4, "step 0 refused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
