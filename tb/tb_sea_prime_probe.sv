// tb_sea_prime_probe: a scaled-down Prime+Probe experiment on the SEA cache
// (64 sets, 4 ways, 8 banks, no re-keying during the run). The attacker runs in
// the normal domain (SDID 0, H = 1); the victim line is in the high-protection
// domain (SDID 1) with VH = 1 and then VH = 8.
//   Profiling: each round the whole cache is flushed (the attacker is allowed
//   to empty the cache), the attacker loads 48 fresh candidate lines and
//   re-loads them until all hit (pruning), the victim touches its line, and
//   the attacker re-reads the candidates; the first one that misses was
//   evicted by the victim and joins the eviction set (up to 8 members).
//   Attack: in each trial the cache is flushed, the attacker primes the
//   eviction set twice, the victim touches its line, and the attacker probes;
//   a probe miss is a detected victim access.
// The check is the trend the scheme is built for: the attack succeeds less
// often with VH = 8 than with VH = 1. Rates are printed.
module tb_sea_prime_probe;
  import sea_pkg::*;
  localparam int INDEX_W = 6, WAYS = 4, NUM_BANKS = 8;

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
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (key_take) key_i <= {$urandom, $urandom, $urandom, $urandom};
  // memory: read data is the line address, 2-cycle latency, always ready
  assign mem_rd_ready = 1'b1;
  assign mem_wb_ready = 1'b1;
  int rd_cnt = -1; logic [LINE_ADDR_W-1:0] rd_a;
  always @(posedge clk) begin
    mem_rd_resp_valid <= 1'b0;
    if (mem_rd_valid) begin rd_cnt <= 2; rd_a <= mem_rd_addr; end
    else if (rd_cnt > 0) rd_cnt <= rd_cnt - 1;
    else if (rd_cnt == 0) begin
      rd_cnt <= -1; mem_rd_resp_valid <= 1'b1; mem_rd_resp_data <= LINE_W'(rd_a);
    end
  end

  task automatic rd(input logic [LINE_ADDR_W-1:0] la, input logic sdid, output bit hit);
    @(negedge clk);
    req_valid = 1; req_op = OP_READ; req_addr = {la, 6'd0}; req_sdid = sdid; req_wdata = '0;
    do @(posedge clk); while (!req_ready);
    @(negedge clk); req_valid = 0;
    while (!resp_valid) @(posedge clk);
    hit = resp_hit;
    check(resp_rdata == LINE_W'(la), "read data");
  endtask

  task automatic cfg_write(input cfg_addr_e a, input int v);
    @(negedge clk); cfg_valid = 1; cfg_addr = a; cfg_wdata = v; cfg_priv = 1;
    @(negedge clk); cfg_valid = 0;
  endtask

  int n_flush = 0;
  // empty the cache: raise H of domain 0 and lower it again
  task automatic flush_all();
    cfg_write(CFG_H_DOMAIN0, 2);
    cfg_write(CFG_H_DOMAIN0, 1);
    repeat (2) @(negedge clk);
    wait (!flush_busy_o);
    n_flush++;
  endtask

  localparam logic [LINE_ADDR_W-1:0] VICTIM = 40'h00_dead_beef;
  localparam int K = 48, M = 8, ROUNDS = 40, TRIALS = 80;
  int rate [2];

  task automatic experiment(input int vh, output int successes, output int members);
    logic [LINE_ADDR_W-1:0] pce [$];
    logic [LINE_ADDR_W-1:0] cand [K];
    bit hit;
    cfg_write(CFG_H_DOMAIN1, vh);
    flush_all();
    // profiling
    for (int r = 0; r < ROUNDS && pce.size() < M; r++) begin
      flush_all();
      for (int i = 0; i < K; i++) cand[i] = {8'h10, 32'($urandom)} & ~40'h3f | 40'h40;
      for (int p = 0; p < 5; p++) begin
        bit all_hit; all_hit = 1;
        for (int i = 0; i < K; i++) begin rd(cand[i], 1'b0, hit); all_hit &= hit; end
        if (all_hit && p > 0) break;
      end
      rd(VICTIM, 1'b1, hit);
      for (int i = 0; i < K; i++) begin
        rd(cand[i], 1'b0, hit);
        if (!hit) begin pce.push_back(cand[i]); break; end
      end
    end
    members = pce.size();
    // attack
    successes = 0;
    for (int t = 0; t < TRIALS; t++) begin
      bit detected; detected = 0;
      flush_all();
      for (int p = 0; p < 2; p++) foreach (pce[i]) rd(pce[i], 1'b0, hit);
      rd(VICTIM, 1'b1, hit);
      foreach (pce[i]) begin rd(pce[i], 1'b0, hit); if (!hit) detected = 1; end
      successes += detected;
    end
  endtask

  int s1, m1, s8, m8;
  initial begin
    req_valid = 0; cfg_valid = 0; cfg_priv = 0; cfg_addr = CFG_H_DOMAIN0; cfg_wdata = 0;
    key_i = 128'hb7e151628aed2a6abf7158809cf4f3c7; mem_rd_resp_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    cfg_write(CFG_RKP_STEP, 32'h7fffffff);
    wait (req_ready);
    experiment(1, s1, m1);
    experiment(8, s8, m8);
    $display("Prime+Probe: VH=1: %0d-member set, %0d/%0d detected; VH=8: %0d-member set, %0d/%0d detected; %0d flushes",
             m1, s1, TRIALS, m8, s8, TRIALS, n_flush);
    check(m1 > 0 && m8 > 0, "profiling found eviction-set members");
    check(s1 > 0, "the attack works against VH = 1");
    check(s8 < s1, "VH = 8 lowers the attack success rate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
