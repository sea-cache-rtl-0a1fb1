// tb_sea_rekey_ctrl: with 8 sets and a step of 5 accesses, checks the key
// load after reset (current key, then next key, two key_take pulses), that a
// remap step becomes due exactly after 5 accesses, that sptr advances on each
// completed step, and that after 8 steps the next key becomes current, a new
// next key is taken and epoch_end pulses.
module tb_sea_rekey_ctrl;
  localparam int INDEX_W = 3;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic access, step_done, key_take, keys_ready, remap_due, epoch_end;
  logic [31:0] rkp_step; logic [127:0] key_i, key_cur, key_nxt; logic [INDEX_W-1:0] sptr;
  sea_rekey_ctrl #(.INDEX_W(INDEX_W)) dut (.*);
  int checks = 0, failures = 0, takes = 0, epochs = 0;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask
  logic [127:0] keys [8];
  always @(posedge clk) if (rst_n) begin
    if (key_take) begin takes++; key_i <= keys[takes % 8]; end
    if (epoch_end) epochs++;
  end
  initial begin
    for (int i = 0; i < 8; i++) keys[i] = {4{32'(i * 32'h11111111 + 1)}};
    key_i = keys[0]; access = 0; step_done = 0; rkp_step = 5;
    repeat (2) @(posedge clk); rst_n = 1;
    repeat (4) @(negedge clk);
    check(keys_ready, "keys loaded");
    check(key_cur == keys[0] && key_nxt == keys[1], "initial current and next keys");
    check(takes == 2, "two keys taken at start");
    for (int e = 0; e < 2; e++)
      for (int s = 0; s < 8; s++) begin
        for (int a = 0; a < 5; a++) begin
          check(!remap_due, $sformatf("no step due after %0d accesses", a));
          @(negedge clk); access = 1; @(negedge clk); access = 0;
        end
        check(remap_due, "step due after 5 accesses");
        check(int'(sptr) == s, "sptr before the step");
        @(negedge clk); step_done = 1; @(negedge clk); step_done = 0;
        check(int'(sptr) == (s + 1) % 8, "sptr advanced");
        check(!remap_due, "step no longer due");
        if (s == 7) begin
          check(epoch_end && epochs == e, "epoch end pulsed");
          check(key_cur == keys[e + 1] && key_nxt == keys[e + 2], "keys rotated");
        end else begin
          check(key_cur == keys[e], "key unchanged within the epoch");
        end
      end
    @(negedge clk);
    check(takes == 4 && epochs == 2, "one key taken per epoch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
