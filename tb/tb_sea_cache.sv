// tb_sea_cache: end-to-end test of the SEA cache at reduced size (64 sets,
// 4 ways, 8 banks). A behavioural memory answers line reads after a random
// delay and accepts writebacks with random back-pressure. A reference model
// (ref_mem: what the requesters last wrote; dram: what was written back)
// checks every read response, and after a flush checks that memory holds
// every written line. The test walks through:
//   reads and re-reads with H = 1 and H = 16 (latency checked per H),
//   raising H (contents stay valid), full-line write hits and write misses,
//   random traffic over more lines than the cache holds (dirty evictions),
//   fast re-keying through a full key epoch (remap steps and evictions),
//   lowering H (full flush with writebacks), and a refused unprivileged write.
// Every response must report a set inside the line's logical set (the home
// set of the reported way, as computed by the index unit, plus less than H).
// Each mechanism is counted and must have happened at least once.
module tb_sea_cache;
  import sea_pkg::*;

  localparam int INDEX_W = 6, WAYS = 4, NUM_BANKS = 8;
  localparam int SETS = 1 << INDEX_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, req_sdid; op_e req_op;
  logic [PADDR_W-1:0] req_addr; logic [LINE_W-1:0] req_wdata;
  logic resp_valid, resp_hit; logic [INDEX_W-1:0] resp_set; logic [1:0] resp_way;
  logic [LINE_W-1:0] resp_rdata;
  logic mem_rd_valid, mem_rd_ready, mem_rd_resp_valid;
  logic [LINE_ADDR_W-1:0] mem_rd_addr, mem_wb_addr;
  logic [LINE_W-1:0] mem_rd_resp_data, mem_wb_data;
  logic mem_wb_valid, mem_wb_ready;
  logic cfg_valid, cfg_priv, cfg_err; cfg_addr_e cfg_addr; logic [31:0] cfg_wdata;
  logic [127:0] key_i; logic key_take;
  logic [INDEX_W-1:0] sptr_o; logic remap_busy_o, flush_busy_o, epoch_end_o;

  sea_cache #(.INDEX_W(INDEX_W), .WAYS(WAYS), .NUM_BANKS(NUM_BANKS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // ------------------------------------------------------------ key source
  always @(posedge clk) if (key_take) key_i <= {$urandom, $urandom, $urandom, $urandom};

  // ------------------------------------------------------------ memory model
  logic [LINE_W-1:0] dram [logic [LINE_ADDR_W-1:0]];
  logic [LINE_W-1:0] ref_mem [logic [LINE_ADDR_W-1:0]];
  function automatic logic [LINE_W-1:0] init_data(input logic [LINE_ADDR_W-1:0] a);
    return {8{a[31:0] ^ 32'hc0de0000, ~a[31:0]}};
  endfunction
  function automatic logic [LINE_W-1:0] dram_rd(input logic [LINE_ADDR_W-1:0] a);
    return dram.exists(a) ? dram[a] : init_data(a);
  endfunction
  function automatic logic [LINE_W-1:0] ref_rd(input logic [LINE_ADDR_W-1:0] a);
    return ref_mem.exists(a) ? ref_mem[a] : init_data(a);
  endfunction

  int n_wb = 0, n_fill = 0, rd_delay = 0;
  logic [LINE_ADDR_W-1:0] rd_pend_addr; bit rd_pend = 0;
  always @(posedge clk) begin
    mem_rd_resp_valid <= 1'b0;
    mem_rd_ready <= ($urandom % 4) != 0;
    mem_wb_ready <= ($urandom % 3) != 0;
    if (mem_wb_valid && mem_wb_ready) begin
      dram[mem_wb_addr] = mem_wb_data; n_wb++;
    end
    if (mem_rd_valid && mem_rd_ready) begin
      rd_pend <= 1; rd_pend_addr <= mem_rd_addr; rd_delay <= 2 + $urandom % 5; n_fill++;
    end else if (rd_pend) begin
      if (rd_delay == 0) begin
        rd_pend <= 0; mem_rd_resp_valid <= 1'b1; mem_rd_resp_data <= dram_rd(rd_pend_addr);
      end else rd_delay <= rd_delay - 1;
    end
  end

  // ------------------------------------------------------------ event counters
  int n_remap_steps = 0, n_epochs = 0, n_remap_wb = 0, n_flush_wb = 0;
  int n_case1 = 0, n_case2 = 0, n_case3 = 0, n_rd_hit = 0, n_rd_miss = 0;
  int n_offset_nonzero = 0, n_wr_hit = 0, n_wr_miss = 0, n_victim_wb = 0, n_cfg_err = 0, n_flush = 0;
  int cyc = 0;
  bit remap_seen;
  logic [INDEX_W-1:0] last_sptr;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (sptr_o != last_sptr) n_remap_steps++;
      last_sptr <= sptr_o;
      if (epoch_end_o) n_epochs++;
      if (remap_busy_o) remap_seen = 1;
      if (mem_wb_valid && mem_wb_ready && remap_busy_o) n_remap_wb++;
      if (mem_wb_valid && mem_wb_ready && flush_busy_o) n_flush_wb++;
      if (cfg_err) n_cfg_err++;
    end
  end

  // ------------------------------------------------------------ request driver
  function automatic int exp_extra(input int h);
    return (h > 1 ? 1 : 0) + (h + NUM_BANKS - 1) / NUM_BANKS - 1;
  endfunction
  int base_lat = -1;
  bit cur_sdid_h [2];
  int dom_h [2] = '{1, 16};

  task automatic access(input op_e op, input logic [LINE_ADDR_W-1:0] la, input logic sdid,
                        output bit hit, output int lat, output int set, output int way);
    logic [LINE_W-1:0] wd;
    int t0;
    wd = {16{$urandom}};
    @(negedge clk);
    req_valid = 1; req_op = op; req_addr = {la, 6'(($urandom))}; req_sdid = sdid; req_wdata = wd;
    do @(posedge clk); while (!req_ready);
    t0 = cyc;
    @(negedge clk); req_valid = 0;
    while (!resp_valid) @(posedge clk);
    lat = cyc - t0; hit = resp_hit; set = resp_set; way = resp_way;
    // the line sits inside its logical set: home set of its way plus an offset below H
    check((int'(resp_set) - int'(dut.home_q[resp_way]) + SETS) % SETS < dom_h[sdid],
          $sformatf("set %0d lies in the logical set of home %0d (H=%0d)", resp_set, dut.home_q[resp_way], dom_h[sdid]));
    if ((int'(resp_set) - int'(dut.home_q[resp_way]) + SETS) % SETS > 0) n_offset_nonzero++;
    if (op == OP_READ) begin
      check(resp_rdata == ref_rd(la), $sformatf("read data of line %h", la));
      if (hit) n_rd_hit++; else n_rd_miss++;
    end else begin
      ref_mem[la] = wd;
      if (hit) n_wr_hit++; else n_wr_miss++;
    end
    if (hit && op == OP_READ) begin
      int h = dom_h[sdid];
      if (base_lat < 0) base_lat = lat - exp_extra(h);
      check(lat == base_lat + exp_extra(h), $sformatf("hit latency %0d with H=%0d (base %0d)", lat, h, base_lat));
      if (h == 1) n_case1++; else if (h <= NUM_BANKS) n_case2++; else n_case3++;
    end
  endtask

  task automatic cfg_write(input cfg_addr_e a, input int v, input bit priv);
    @(negedge clk);
    cfg_valid = 1; cfg_addr = a; cfg_wdata = v; cfg_priv = priv;
    @(negedge clk); cfg_valid = 0;
    if (priv && a != CFG_RKP_STEP) dom_h[int'(a)] = v;
  endtask

  // read a line, then read it again: the second read must hit in the same place
  task automatic read_twice(input logic [LINE_ADDR_W-1:0] la, input logic sdid);
    bit h1, h2; int l1, l2, s1, s2, w1, w2;
    remap_seen = 0;
    access(OP_READ, la, sdid, h1, l1, s1, w1);
    access(OP_READ, la, sdid, h2, l2, s2, w2);
    if (!remap_seen) begin
      check(h2, $sformatf("re-read of %h hits", la));
      check(s1 == s2 && w1 == w2, "re-read location");
    end
  endtask

  logic [LINE_ADDR_W-1:0] lines [64];
  int nwb0;
  bit hit; int lat, set, way;

  initial begin
    req_valid = 0; cfg_valid = 0; cfg_priv = 0; cfg_addr = CFG_H_DOMAIN0; cfg_wdata = 0;
    key_i = 128'h0123456789abcdef_fedcba9876543210;
    mem_rd_resp_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // slow re-keying at first so the early checks see no remap step
    cfg_write(CFG_RKP_STEP, 100000, 1);
    wait (req_ready);

    for (int i = 0; i < 64; i++) lines[i] = {$urandom, 8'($urandom)} & ~40'h200 | (40'(i & 1) << 9);

    // H = 1 (domain 0) and H = 16 (domain 1)
    for (int i = 0; i < 16; i++) read_twice(lines[i], lines[i][9]);
    check(n_rd_miss > 0 && n_rd_hit > 0, "misses then hits");

    // raising H keeps lines reachable: H = 24 / H = 5, no flush
    nwb0 = n_wb;
    cfg_write(CFG_H_DOMAIN1, 24, 1);
    cfg_write(CFG_H_DOMAIN0, 5, 1);
    for (int i = 0; i < 16; i++) begin
      access(OP_READ, lines[i], lines[i][9], hit, lat, set, way);
      check(hit, "line still hits after H was raised");
    end
    check(!flush_busy_o && n_wb == nwb0, "raising H does not flush");

    // full-line writes: hits on cached lines, misses on new ones
    for (int i = 0; i < 24; i++) access(OP_WRITE, lines[i], lines[i][9], hit, lat, set, way);
    for (int i = 0; i < 24; i++) read_twice(lines[i], lines[i][9]);

    // random traffic over many more lines than the cache holds
    for (int i = 0; i < 1500; i++) begin
      logic [LINE_ADDR_W-1:0] la;
      la = 40'($urandom % 700) << 2 | 40'h100000;
      access(($urandom % 3 == 0) ? OP_WRITE : OP_READ, la, la[9], hit, lat, set, way);
    end
    check(n_wb > nwb0, "dirty victims were written back");
    n_victim_wb = n_wb - nwb0;

    // fast re-keying: one remap step every 2 accesses, through a full epoch
    cfg_write(CFG_RKP_STEP, 2, 1);
    for (int i = 0; i < 400; i++) begin
      logic [LINE_ADDR_W-1:0] la;
      la = 40'($urandom % 300) << 2 | 40'h100000;
      access(($urandom % 3 == 0) ? OP_WRITE : OP_READ, la, la[9], hit, lat, set, way);
    end
    for (int i = 24; i < 40; i++) read_twice(lines[i], lines[i][9]);
    cfg_write(CFG_RKP_STEP, 100000, 1);

    // an unprivileged write is refused and changes nothing
    cfg_write(CFG_H_DOMAIN1, 2, 0);
    dom_h[1] = 24;
    repeat (2) @(posedge clk);
    check(n_cfg_err == 1, "unprivileged write refused");
    check(!flush_busy_o, "refused write does not flush");

    // lowering H flushes the cache: afterwards memory holds every written line
    cfg_write(CFG_H_DOMAIN1, 3, 1);
    repeat (2) @(negedge clk);
    check(flush_busy_o, "lowering H starts a flush");
    n_flush = flush_busy_o;
    wait (!flush_busy_o);
    foreach (ref_mem[a]) check(dram_rd(a) == ref_mem[a], $sformatf("memory holds line %h after flush", a));
    for (int i = 0; i < 8; i++) begin
      access(OP_READ, lines[i], lines[i][9], hit, lat, set, way);
      check(!hit, "cache is empty after the flush");
    end
    for (int i = 40; i < 64; i++) read_twice(lines[i], lines[i][9]);

    $display("events: case1=%0d case2=%0d case3=%0d rd_hit=%0d rd_miss=%0d wr_hit=%0d wr_miss=%0d",
             n_case1, n_case2, n_case3, n_rd_hit, n_rd_miss, n_wr_hit, n_wr_miss);
    $display("events: victim_wb=%0d remap_steps=%0d remap_wb=%0d epochs=%0d flush=%0d flush_wb=%0d cfg_err=%0d fills=%0d base_latency=%0d",
             n_victim_wb, n_remap_steps, n_remap_wb, n_epochs, n_flush, n_flush_wb, n_cfg_err, n_fill, base_lat);
    check(n_case1 > 0, "H = 1 lookups");
    check(n_offset_nonzero > 0, "lines placed away from their home set");
    check(n_case2 > 0, "1 < H <= banks lookups");
    check(n_case3 > 0, "H > banks lookups");
    check(n_wr_hit > 0 && n_wr_miss > 0, "write hits and misses");
    check(n_victim_wb > 0, "dirty victim writebacks");
    check(n_remap_steps >= SETS, "remap steps");
    check(n_remap_wb > 0, "remap writebacks");
    check(n_epochs > 0, "key epochs");
    check(n_flush > 0 && n_flush_wb > 0, "flush with writebacks");
    check(base_lat == 7, "read-hit latency with H = 1 is 7 cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired: state %s sptr %0d rm_k %0d hmax %0d due %0d cnt %0d step %0d", dut.state.name(), sptr_o, dut.rm_k_q, dut.h_max, dut.remap_due, dut.u_rekey.cnt, dut.rkp_step);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
