// tb_sea_cache_full: the SEA cache at its default size (8 MB: 8192 sets,
// 16 ways, 8 banks, 64 B lines; H = 1 for SDID 0 and 16 for SDID 1; a remap
// step every 144 accesses). After the tag clear that follows reset it runs
// read misses, read hits, write hits and write misses in both security
// domains, checks data against a reference model and the read-hit latency
// (7 cycles with H = 1, 9 cycles with H = 16: two rounds of 8 banks), and
// runs past 144 accesses so that one remap step takes place.
module tb_sea_cache_full;
  import sea_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, req_sdid; op_e req_op;
  logic [PADDR_W-1:0] req_addr; logic [LINE_W-1:0] req_wdata;
  logic resp_valid, resp_hit; logic [12:0] resp_set; logic [3:0] resp_way;
  logic [LINE_W-1:0] resp_rdata;
  logic mem_rd_valid, mem_rd_ready, mem_rd_resp_valid;
  logic [LINE_ADDR_W-1:0] mem_rd_addr, mem_wb_addr;
  logic [LINE_W-1:0] mem_rd_resp_data, mem_wb_data;
  logic mem_wb_valid, mem_wb_ready;
  logic cfg_valid, cfg_priv, cfg_err; cfg_addr_e cfg_addr; logic [31:0] cfg_wdata;
  logic [127:0] key_i; logic key_take;
  logic [12:0] sptr_o; logic remap_busy_o, flush_busy_o, epoch_end_o;

  sea_cache dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask
  always @(posedge clk) cyc++;
  always @(posedge clk) if (key_take) key_i <= {$urandom, $urandom, $urandom, $urandom};

  // memory: fixed 3-cycle read latency, always ready
  logic [LINE_W-1:0] ref_mem [logic [LINE_ADDR_W-1:0]];
  function automatic logic [LINE_W-1:0] init_data(input logic [LINE_ADDR_W-1:0] a);
    return {8{a[31:0] ^ 32'h5eaca000, ~a[31:0]}};
  endfunction
  function automatic logic [LINE_W-1:0] ref_rd(input logic [LINE_ADDR_W-1:0] a);
    return ref_mem.exists(a) ? ref_mem[a] : init_data(a);
  endfunction
  logic [LINE_W-1:0] dram [logic [LINE_ADDR_W-1:0]];
  int rd_cnt = -1; logic [LINE_ADDR_W-1:0] rd_a;
  assign mem_rd_ready = 1'b1;
  assign mem_wb_ready = 1'b1;
  always @(posedge clk) begin
    mem_rd_resp_valid <= 1'b0;
    if (mem_wb_valid) dram[mem_wb_addr] = mem_wb_data;
    if (mem_rd_valid) begin rd_cnt <= 3; rd_a <= mem_rd_addr; end
    else if (rd_cnt > 0) rd_cnt <= rd_cnt - 1;
    else if (rd_cnt == 0) begin
      rd_cnt <= -1; mem_rd_resp_valid <= 1'b1;
      mem_rd_resp_data <= dram.exists(rd_a) ? dram[rd_a] : init_data(rd_a);
    end
  end

  int n_hit = 0, n_miss = 0, n_steps = 0;
  logic [12:0] last_sptr = '0;
  always @(posedge clk) if (rst_n) begin
    if (sptr_o != last_sptr) n_steps++;
    last_sptr <= sptr_o;
  end

  task automatic access(input op_e op, input logic [LINE_ADDR_W-1:0] la, input logic sdid,
                        input int exp_hit, input int exp_lat);
    logic [LINE_W-1:0] wd; int t0;
    wd = {16{$urandom}};
    @(negedge clk);
    req_valid = 1; req_op = op; req_addr = {la, 6'd0}; req_sdid = sdid; req_wdata = wd;
    do @(posedge clk); while (!req_ready);
    t0 = cyc;
    @(negedge clk); req_valid = 0;
    while (!resp_valid) @(posedge clk);
    if (resp_hit) n_hit++; else n_miss++;
    if (exp_hit >= 0) check(resp_hit == exp_hit, $sformatf("hit flag of %h", la));
    if (exp_lat >= 0) check(cyc - t0 == exp_lat, $sformatf("latency %0d, expected %0d", cyc - t0, exp_lat));
    if (op == OP_READ) check(resp_rdata == ref_rd(la), $sformatf("read data of %h", la));
    else ref_mem[la] = wd;
  endtask

  logic [LINE_ADDR_W-1:0] la;
  initial begin
    req_valid = 0; cfg_valid = 0; cfg_priv = 0; cfg_addr = CFG_H_DOMAIN0; cfg_wdata = 0;
    key_i = 128'h243f6a8885a308d313198a2e03707344; mem_rd_resp_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (req_ready);
    check(cyc > 1024, "tag clear takes one cycle per bank row");
    for (int i = 0; i < 20; i++) begin
      la = 40'h00_1234_0000 + 40'(i * 977);
      access(OP_READ, la, 1'b0, 0, -1);          // miss, H = 1
      access(OP_READ, la, 1'b0, 1, 7);           // hit, H = 1
      la = 40'h77_0000_0000 + 40'(i * 1013);
      access(OP_READ, la, 1'b1, 0, -1);          // miss, H = 16
      access(OP_READ, la, 1'b1, 1, 9);           // hit, H = 16
      access(OP_WRITE, la, 1'b1, 1, -1);         // write hit
      access(OP_READ, la, 1'b1, 1, 9);           // read back written data
      access(OP_WRITE, la + 40'h1_0000_0000, 1'b0, 0, -1);  // write miss allocates
    end
    for (int i = 0; i < 12; i++) access(OP_READ, 40'h33_0000_0000 + 40'(i * 4099), 1'(i), -1, -1);
    check(n_steps >= 1, "a remap step took place after 144 accesses");
    $display("full-size run: %0d hits, %0d misses, %0d remap steps, %0d cycles", n_hit, n_miss, n_steps, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
