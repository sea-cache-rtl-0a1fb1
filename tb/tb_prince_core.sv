// tb_prince_core: checks the PRINCE core against the five published PRINCE
// test vectors, fed back to back one per cycle, and checks that each result
// appears exactly 3 cycles after its input.
module tb_prince_core;
  logic clk = 0, rst_n = 0;
  logic in_valid; logic [63:0] in_data; logic [127:0] in_key;
  logic out_valid; logic [63:0] out_data;
  int checks = 0, failures = 0;

  prince_core dut (.*);
  always #5 clk = ~clk;

  localparam logic [63:0] PT [5] = '{64'h0, 64'hffffffffffffffff, 64'h0, 64'h0, 64'h0123456789abcdef};
  localparam logic [127:0] K [5] = '{128'h0, 128'h0, {64'hffffffffffffffff, 64'h0},
                                     {64'h0, 64'hffffffffffffffff}, {64'h0, 64'hfedcba9876543210}};
  localparam logic [63:0] CT [5] = '{64'h818665aa0d02dfda, 64'h604ae6ca03c20ada, 64'h9fb51935fc3df524,
                                     64'h78a54cbe737bb7ef, 64'hae25ad3ca8fa9ccf};
  int cyc = 0, n_out = 0;
  int in_cyc [5];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      checks++;
      if (out_data !== CT[n_out]) begin
        failures++; $display("FAIL vector %0d: got %h expected %h", n_out, out_data, CT[n_out]);
      end
      checks++;
      if (cyc - in_cyc[n_out] != 3) begin
        failures++; $display("FAIL latency vector %0d: %0d cycles", n_out, cyc - in_cyc[n_out]);
      end
      n_out <= n_out + 1;
    end
  end

  initial begin
    in_valid = 0; in_data = 0; in_key = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5; i++) begin
      @(negedge clk);
      in_valid = 1; in_data = PT[i]; in_key = K[i]; in_cyc[i] = cyc;
    end
    @(negedge clk); in_valid = 0;
    repeat (6) @(posedge clk);
    checks++; if (n_out != 5) begin failures++; $display("FAIL: %0d outputs", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
