// sea_cache: SEA (Skewed Elastic-Associativity) last-level cache.
//
// A randomised-remapping cache against contention (Prime+Probe) attacks in
// which a line may be placed not only in its home set but in the H-1 sets
// that follow it (logical associativity H), and H is chosen per security
// domain: every request carries a 1-bit SDID, and each domain has its own H
// (reset: 1 for normal protection, 16 for high protection). Low-H domains keep
// the short access latency; only high-H domains pay for the wider search.
//
// Lookup, for a request accepted on req_valid & req_ready:
//   1. sea_index_unit encrypts the 40-bit line address with PRINCE, one key per
//      way (fully skewed), current or next key according to the remap pointer,
//      giving a home set per way (3 cycles).
//   2. H = 1: each way's home set goes straight to its bank. H > 1: one cycle
//      computes the offset sets (sea_bank_addr_gen, registered).
//   3. Sets are interleaved over NUM_BANKS tag banks by their low index bits, so
//      up to NUM_BANKS sets of a logical set are read per way in one round;
//      ceil(H / NUM_BANKS) rounds, one cycle each.
//   4. sea_hit_collector reports hit/miss after the last round, with the way and
//      the physical set of the hit, which are returned with the response.
//   Latency from acceptance to resp_valid for a read hit is 7 cycles with H = 1,
//   8 with 2 <= H <= NUM_BANKS, and one more for every further NUM_BANKS.
// Miss: sea_victim_select picks a random way and a random offset below H from
// that way's home set; a dirty victim is written back (mem_wb_*), a read then
// fetches the line (mem_rd_*); a full-line write allocates without fetching.
// Re-keying: sea_rekey_ctrl makes a remap step due every rkp_step accesses.
// A step for remap pointer p reads the physical sets p .. p+Hmax-1 of all
// ways, re-encrypts the stored line addresses under the current key and
// evicts (writing back if dirty) every line whose home set is p; afterwards
// such lines are found under the next key. Lowering any domain's H flushes
// the whole cache. After reset, the tag banks are cleared row by row.
//
// This design's own choices: evicting rather than relocating lines in a remap
// step, the blocking (one request at a time) controller, the request,
// response, memory and configuration handshakes (valid/ready, with the
// response and the memory read response as one-cycle pulses without ready),
// the key source port, wrap-around of logical sets at the last set, and the
// absolute latencies; the paper's latency figures are the increments above.
module sea_cache
  import sea_pkg::*;
#(
  parameter int unsigned INDEX_W   = 13,   // 8192 sets
  parameter int unsigned WAYS      = 16,
  parameter int unsigned NUM_BANKS = 8,
  parameter int unsigned RKP_MULT  = 9,    // full re-key every RKP_MULT * N accesses
  localparam int unsigned SETS     = 1 << INDEX_W,
  localparam int unsigned BANK_W   = $clog2(NUM_BANKS),
  localparam int unsigned ROW_W    = INDEX_W - BANK_W,
  localparam int unsigned ROWS     = SETS / NUM_BANKS,
  localparam int unsigned WAY_W    = $clog2(WAYS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // requests from the level above
  input  logic                   req_valid,
  output logic                   req_ready,
  input  op_e                    req_op,
  input  logic [PADDR_W-1:0]     req_addr,
  input  logic                   req_sdid,
  input  logic [LINE_W-1:0]      req_wdata,
  // response (one-cycle pulse)
  output logic                   resp_valid,
  output logic                   resp_hit,
  output logic [INDEX_W-1:0]     resp_set,
  output logic [WAY_W-1:0]       resp_way,
  output logic [LINE_W-1:0]      resp_rdata,
  // memory: line read request / response, and writeback
  output logic                   mem_rd_valid,
  input  logic                   mem_rd_ready,
  output logic [LINE_ADDR_W-1:0] mem_rd_addr,
  input  logic                   mem_rd_resp_valid,
  input  logic [LINE_W-1:0]      mem_rd_resp_data,
  output logic                   mem_wb_valid,
  input  logic                   mem_wb_ready,
  output logic [LINE_ADDR_W-1:0] mem_wb_addr,
  output logic [LINE_W-1:0]      mem_wb_data,
  // privileged configuration port
  input  logic                   cfg_valid,
  input  logic                   cfg_priv,
  input  cfg_addr_e              cfg_addr,
  input  logic [31:0]            cfg_wdata,
  output logic                   cfg_err,
  // random key source
  input  logic [127:0]           key_i,
  output logic                   key_take,
  // status
  output logic [INDEX_W-1:0]     sptr_o,
  output logic                   remap_busy_o,
  output logic                   flush_busy_o,
  output logic                   epoch_end_o
);

  typedef enum logic [4:0] {
    S_INIT, S_IDLE, S_LK_IDX, S_LK_RND, S_LK_WAIT, S_RESP_RD,
    S_VIC_RD, S_VIC_CHK, S_VIC_WB, S_INSTALL_W, S_FILL_REQ, S_FILL_WAIT,
    S_RM_RD, S_RM_ENC, S_RM_WAIT, S_FL_RD, S_FL_CHK, S_EV, S_EV_WB
  } state_e;

  state_e state;

  // ---------------------------------------------------------------- config
  logic [H_W-1:0] cfg_h [2];
  logic [H_W-1:0] h_max;
  logic [31:0]    rkp_step;
  logic           flush_req;

  sea_la_config #(.NUM_DOMAINS(2), .WAYS(WAYS), .RKP_MULT(RKP_MULT)) u_cfg (
    .clk, .rst_n, .cfg_valid, .cfg_priv, .cfg_addr, .cfg_wdata, .cfg_err,
    .h(cfg_h), .h_max, .rkp_step, .flush_req
  );

  // ---------------------------------------------------------------- re-keying
  logic               req_fire, step_done, keys_ready, remap_due;
  logic [INDEX_W-1:0] sptr;
  logic [127:0]       key_cur, key_nxt;

  sea_rekey_ctrl #(.INDEX_W(INDEX_W)) u_rekey (
    .clk, .rst_n, .access(req_fire), .rkp_step, .step_done, .key_i, .key_take,
    .keys_ready, .remap_due, .sptr, .epoch_end(epoch_end_o), .key_cur, .key_nxt
  );

  // ---------------------------------------------------------------- index unit
  logic                   idx_in_valid, idx_valid;
  logic [LINE_ADDR_W-1:0] idx_addr [WAYS];
  logic [INDEX_W-1:0]     home_cur [WAYS];
  logic [INDEX_W-1:0]     home_nxt [WAYS];
  logic [INDEX_W-1:0]     home_sel [WAYS];

  sea_index_unit #(.WAYS(WAYS), .INDEX_W(INDEX_W)) u_idx (
    .clk, .rst_n, .in_valid(idx_in_valid), .in_addr(idx_addr), .key_cur, .key_nxt,
    .sptr, .out_valid(idx_valid), .home_cur, .home_nxt, .home_sel
  );

  // ---------------------------------------------------------------- tag banks
  logic [NUM_BANKS-1:0] tg_rd_en [WAYS];
  logic [ROW_W-1:0]     tg_rd_row [WAYS][NUM_BANKS];
  tag_entry_t           tg_rd_data [WAYS][NUM_BANKS];
  logic [NUM_BANKS-1:0] tg_wr_en [WAYS];
  logic [ROW_W-1:0]     tg_wr_row;
  tag_entry_t           tg_wr_data;

  for (genvar w = 0; w < WAYS; w++) begin : g_way
    for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
      sea_tag_bank #(.ROWS(ROWS), .ENTRY_W(TAG_ENTRY_W)) u_tag (
        .clk, .rd_en(tg_rd_en[w][b]), .rd_row(tg_rd_row[w][b]), .rd_data(tg_rd_data[w][b]),
        .wr_en(tg_wr_en[w][b]), .wr_row(tg_wr_row), .wr_data(tg_wr_data)
      );
    end
  end

  // ---------------------------------------------------------------- data array
  logic               dt_rd_en, dt_wr_en;
  logic [INDEX_W-1:0] dt_rd_set, dt_wr_set;
  logic [WAY_W-1:0]   dt_rd_way, dt_wr_way;
  logic [LINE_W-1:0]  dt_rd_data, dt_wr_data;

  sea_data_array #(.SETS(SETS), .WAYS(WAYS), .LINE_W(LINE_W)) u_data (
    .clk, .rd_en(dt_rd_en), .rd_set(dt_rd_set), .rd_way(dt_rd_way), .rd_data(dt_rd_data),
    .wr_en(dt_wr_en), .wr_set(dt_wr_set), .wr_way(dt_wr_way), .wr_data(dt_wr_data)
  );

  // ---------------------------------------------------------------- request registers
  op_e                    op_q;
  logic [LINE_ADDR_W-1:0] addr_q;
  logic [LINE_W-1:0]      wdata_q;
  logic [H_W-1:0]         h_q;
  logic [INDEX_W-1:0]     home_q [WAYS];

  // ---------------------------------------------------------------- offset units
  logic [H_W-1:0]       gen_round;
  logic [INDEX_W-1:0]   gen_home [WAYS];
  logic [NUM_BANKS-1:0] gen_en [WAYS];
  logic [ROW_W-1:0]     gen_row [WAYS][NUM_BANKS];
  logic [INDEX_W-1:0]   gen_set [WAYS][NUM_BANKS];
  logic [H_W-1:0]       gen_off [WAYS][NUM_BANKS];
  logic [WAYS-1:0]      gen_last;

  // registered offset-unit outputs: the round to issue next
  logic [H_W-1:0]       round_q;
  logic [NUM_BANKS-1:0] bk_en_q [WAYS];
  logic [ROW_W-1:0]     bk_row_q [WAYS][NUM_BANKS];
  logic [INDEX_W-1:0]   bk_set_q [WAYS][NUM_BANKS];
  logic                 bk_last_q;

  for (genvar w = 0; w < WAYS; w++) begin : g_gen
    assign gen_home[w] = (state == S_LK_IDX) ? home_sel[w] : home_q[w];
    sea_bank_addr_gen #(.INDEX_W(INDEX_W), .NUM_BANKS(NUM_BANKS)) u_gen (
      .home(gen_home[w]), .h(h_q), .round_i(gen_round),
      .en(gen_en[w]), .row(gen_row[w]), .set(gen_set[w]), .off(gen_off[w]),
      .last_round(gen_last[w])
    );
  end
  assign gen_round = (state == S_LK_IDX) ? '0 : round_q + 1'b1;

  // ---------------------------------------------------------------- hit collector
  logic                 iss_valid, iss_last;           // a lookup round is issued now
  logic [NUM_BANKS-1:0] iss_en [WAYS];
  logic [INDEX_W-1:0]   iss_set [WAYS][NUM_BANKS];
  logic                 iss_valid_q, iss_last_q;
  logic [NUM_BANKS-1:0] iss_en_q [WAYS];
  logic [INDEX_W-1:0]   iss_set_q [WAYS][NUM_BANKS];
  logic                 co_valid, co_hit, co_dirty, co_multi;
  logic [WAY_W-1:0]     co_way;
  logic [INDEX_W-1:0]   co_set;

  sea_hit_collector #(.WAYS(WAYS), .NUM_BANKS(NUM_BANKS), .INDEX_W(INDEX_W)) u_hit (
    .clk, .rst_n, .start(state == S_IDLE), .addr(addr_q),
    .rd_valid(iss_valid_q), .rd_last(iss_last_q), .rd_en(iss_en_q), .rd_tag(tg_rd_data),
    .rd_set(iss_set_q), .result_valid(co_valid), .hit(co_hit), .hit_way(co_way),
    .hit_set(co_set), .hit_dirty(co_dirty), .multi_hit(co_multi)
  );

  // ---------------------------------------------------------------- victim selection
  logic [WAY_W-1:0]   vs_way;
  logic [INDEX_W-1:0] vs_set;
  logic [H_W-1:0]     vs_off;
  logic [WAY_W-1:0]   vic_way_q;
  logic [INDEX_W-1:0] vic_set_q;
  tag_entry_t         vic_tag_q;

  sea_victim_select #(.WAYS(WAYS), .INDEX_W(INDEX_W)) u_vic (
    .clk, .rst_n, .home(home_q), .h(h_q), .victim_way(vs_way), .victim_set(vs_set),
    .victim_off(vs_off)
  );

  // ---------------------------------------------------------------- remap / flush state
  logic [H_W-1:0]     rm_k_q;
  logic [INDEX_W-1:0] ev_set_q;
  logic [WAYS-1:0]    ev_mask_q;
  tag_entry_t         ev_tag_q [WAYS];
  logic               ev_flush_q;
  logic [WAY_W-1:0]   ev_way_q;
  logic [INDEX_W-1:0] fl_set_q;
  logic               flush_pending_q;
  logic [ROW_W-1:0]   init_row_q;

  logic [INDEX_W-1:0] rm_set;
  logic [WAY_W-1:0]   ev_first;
  logic               ev_any;
  logic [BANK_W-1:0]  ev_bank;

  assign rm_set  = sptr + INDEX_W'(rm_k_q);
  assign ev_bank = ev_set_q[BANK_W-1:0];

  always_comb begin
    ev_any = 1'b0; ev_first = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (ev_mask_q[w]) begin ev_any = 1'b1; ev_first = WAY_W'(w); end
  end

  assign req_fire = req_valid && req_ready;
  assign req_ready = (state == S_IDLE) && !flush_pending_q && !remap_due;

  // ---------------------------------------------------------------- datapath control
  always_comb begin
    idx_in_valid = 1'b0;
    for (int w = 0; w < WAYS; w++) idx_addr[w] = req_addr[PADDR_W-1:OFFSET_W];
    iss_valid = 1'b0; iss_last = 1'b0;
    for (int w = 0; w < WAYS; w++) begin
      iss_en[w] = '0; tg_rd_en[w] = '0; tg_wr_en[w] = '0;
      for (int b = 0; b < NUM_BANKS; b++) begin
        iss_set[w][b]   = '0;
        tg_rd_row[w][b] = '0;
      end
    end
    tg_wr_row  = '0;
    tg_wr_data = '0;
    dt_rd_en = 1'b0; dt_rd_set = '0; dt_rd_way = '0;
    dt_wr_en = 1'b0; dt_wr_set = '0; dt_wr_way = '0; dt_wr_data = '0;
    mem_rd_valid = 1'b0; mem_rd_addr = addr_q;
    mem_wb_valid = 1'b0; mem_wb_addr = '0; mem_wb_data = dt_rd_data;
    step_done = 1'b0;

    unique case (state)
      S_INIT: begin
        tg_wr_row = init_row_q;
        for (int w = 0; w < WAYS; w++) tg_wr_en[w] = '1;
      end
      S_IDLE: idx_in_valid = req_fire;
      S_LK_IDX: if (idx_valid && h_q == 1) begin
        // H = 1: home sets go to their banks without the offset stage
        iss_valid = 1'b1; iss_last = 1'b1;
        for (int w = 0; w < WAYS; w++) begin
          iss_en[w] = gen_en[w];
          for (int b = 0; b < NUM_BANKS; b++) begin
            iss_set[w][b]   = gen_set[w][b];
            tg_rd_row[w][b] = gen_row[w][b];
          end
        end
      end
      S_LK_RND: begin
        iss_valid = 1'b1; iss_last = bk_last_q;
        for (int w = 0; w < WAYS; w++) begin
          iss_en[w] = bk_en_q[w];
          for (int b = 0; b < NUM_BANKS; b++) begin
            iss_set[w][b]   = bk_set_q[w][b];
            tg_rd_row[w][b] = bk_row_q[w][b];
          end
        end
      end
      S_LK_WAIT: if (co_valid && co_hit) begin
        if (op_q == OP_READ) begin
          dt_rd_en = 1'b1; dt_rd_set = co_set; dt_rd_way = co_way;
        end else begin
          dt_wr_en = 1'b1; dt_wr_set = co_set; dt_wr_way = co_way; dt_wr_data = wdata_q;
          tg_wr_en[co_way][co_set[BANK_W-1:0]] = 1'b1;
          tg_wr_row  = co_set[INDEX_W-1:BANK_W];
          tg_wr_data = '{valid: 1'b1, dirty: 1'b1, addr: addr_q};
        end
      end
      S_VIC_RD: begin
        tg_rd_en[vic_way_q][vic_set_q[BANK_W-1:0]] = 1'b1;
        tg_rd_row[vic_way_q][vic_set_q[BANK_W-1:0]] = vic_set_q[INDEX_W-1:BANK_W];
        dt_rd_en = 1'b1; dt_rd_set = vic_set_q; dt_rd_way = vic_way_q;
      end
      S_VIC_WB: begin
        mem_wb_valid = 1'b1; mem_wb_addr = vic_tag_q.addr;
      end
      S_INSTALL_W, S_FILL_WAIT: if (state == S_INSTALL_W || mem_rd_resp_valid) begin
        tg_wr_en[vic_way_q][vic_set_q[BANK_W-1:0]] = 1'b1;
        tg_wr_row  = vic_set_q[INDEX_W-1:BANK_W];
        tg_wr_data = '{valid: 1'b1, dirty: (state == S_INSTALL_W), addr: addr_q};
        dt_wr_en = 1'b1; dt_wr_set = vic_set_q; dt_wr_way = vic_way_q;
        dt_wr_data = (state == S_INSTALL_W) ? wdata_q : mem_rd_resp_data;
      end
      S_FILL_REQ: mem_rd_valid = 1'b1;
      S_RM_RD, S_FL_RD: begin
        for (int w = 0; w < WAYS; w++) begin
          tg_rd_en[w][(state == S_RM_RD) ? rm_set[BANK_W-1:0] : fl_set_q[BANK_W-1:0]] = 1'b1;
          tg_rd_row[w][(state == S_RM_RD) ? rm_set[BANK_W-1:0] : fl_set_q[BANK_W-1:0]] =
            (state == S_RM_RD) ? rm_set[INDEX_W-1:BANK_W] : fl_set_q[INDEX_W-1:BANK_W];
        end
      end
      S_RM_ENC: begin
        idx_in_valid = 1'b1;
        for (int w = 0; w < WAYS; w++) idx_addr[w] = tg_rd_data[w][ev_bank].addr;
      end
      S_EV: if (ev_any) begin
        // invalidate the line; read its data if it must be written back
        tg_wr_en[ev_first][ev_bank] = 1'b1;
        tg_wr_row  = ev_set_q[INDEX_W-1:BANK_W];
        tg_wr_data = '0;
        dt_rd_en = ev_tag_q[ev_first].dirty; dt_rd_set = ev_set_q; dt_rd_way = ev_first;
      end else if (!ev_flush_q && 32'(rm_k_q) + 1 >= 32'(h_max)) begin
        step_done = 1'b1;
      end
      S_EV_WB: begin
        mem_wb_valid = 1'b1; mem_wb_addr = ev_tag_q[ev_way_q].addr;
      end
      default: ;
    endcase

    // a lookup round reads every enabled bank of every way
    if (iss_valid)
      for (int w = 0; w < WAYS; w++) tg_rd_en[w] = iss_en[w];
  end

  // ---------------------------------------------------------------- state machine
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_INIT;
      init_row_q <= '0;
      flush_pending_q <= 1'b0;
      iss_valid_q <= 1'b0; iss_last_q <= 1'b0;
      resp_valid <= 1'b0; resp_hit <= 1'b0; resp_set <= '0; resp_way <= '0;
      op_q <= OP_READ; h_q <= 6'd1; round_q <= '0; bk_last_q <= 1'b0;
      rm_k_q <= '0; ev_mask_q <= '0; ev_flush_q <= 1'b0; fl_set_q <= '0;
    end else begin
      resp_valid  <= 1'b0;
      iss_valid_q <= iss_valid;
      iss_last_q  <= iss_last;
      iss_en_q    <= iss_en;
      iss_set_q   <= iss_set;
      if (flush_req) flush_pending_q <= 1'b1;

      unique case (state)
        S_INIT: begin
          if (!(&init_row_q)) init_row_q <= init_row_q + 1'b1;
          else if (keys_ready) state <= S_IDLE;
        end
        S_IDLE: begin
          if (flush_pending_q) begin
            fl_set_q <= '0; state <= S_FL_RD;
          end else if (remap_due) begin
            rm_k_q <= '0; state <= S_RM_RD;
          end else if (req_fire) begin
            op_q  <= req_op;
            addr_q <= req_addr[PADDR_W-1:OFFSET_W];
            wdata_q <= req_wdata;
            h_q   <= cfg_h[req_sdid];
            state <= S_LK_IDX;
          end
        end
        S_LK_IDX: if (idx_valid) begin
          home_q <= home_sel;
          if (h_q == 1) state <= S_LK_WAIT;
          else begin
            // offset computation: register round 0 of the logical set
            round_q <= '0; bk_last_q <= gen_last[0];
            bk_en_q <= gen_en; bk_row_q <= gen_row; bk_set_q <= gen_set;
            state <= S_LK_RND;
          end
        end
        S_LK_RND: begin
          round_q <= gen_round; bk_last_q <= gen_last[0];
          bk_en_q <= gen_en; bk_row_q <= gen_row; bk_set_q <= gen_set;
          if (bk_last_q) state <= S_LK_WAIT;
        end
        S_LK_WAIT: if (co_valid) begin
          if (co_hit) begin
            resp_set <= co_set; resp_way <= co_way; resp_hit <= 1'b1;
            if (op_q == OP_READ) state <= S_RESP_RD;
            else begin
              resp_valid <= 1'b1; state <= S_IDLE;
            end
          end else begin
            vic_way_q <= vs_way; vic_set_q <= vs_set;
            state <= S_VIC_RD;
          end
        end
        S_RESP_RD: begin
          resp_valid <= 1'b1; resp_rdata <= dt_rd_data; state <= S_IDLE;
        end
        S_VIC_RD: state <= S_VIC_CHK;
        S_VIC_CHK: begin
          vic_tag_q <= tg_rd_data[vic_way_q][vic_set_q[BANK_W-1:0]];
          if (tg_rd_data[vic_way_q][vic_set_q[BANK_W-1:0]].valid &&
              tg_rd_data[vic_way_q][vic_set_q[BANK_W-1:0]].dirty) state <= S_VIC_WB;
          else if (op_q == OP_READ) state <= S_FILL_REQ;
          else state <= S_INSTALL_W;
        end
        S_VIC_WB: if (mem_wb_ready) state <= (op_q == OP_READ) ? S_FILL_REQ : S_INSTALL_W;
        S_INSTALL_W: begin
          resp_valid <= 1'b1; resp_hit <= 1'b0; resp_set <= vic_set_q; resp_way <= vic_way_q;
          state <= S_IDLE;
        end
        S_FILL_REQ: if (mem_rd_ready) state <= S_FILL_WAIT;
        S_FILL_WAIT: if (mem_rd_resp_valid) begin
          resp_valid <= 1'b1; resp_hit <= 1'b0; resp_set <= vic_set_q; resp_way <= vic_way_q;
          resp_rdata <= mem_rd_resp_data;
          state <= S_IDLE;
        end
        S_RM_RD: begin
          ev_set_q <= rm_set; state <= S_RM_ENC;
        end
        S_RM_ENC: begin
          for (int w = 0; w < WAYS; w++) ev_tag_q[w] <= tg_rd_data[w][ev_bank];
          state <= S_RM_WAIT;
        end
        S_RM_WAIT: if (idx_valid) begin
          for (int w = 0; w < WAYS; w++)
            ev_mask_q[w] <= ev_tag_q[w].valid && (home_cur[w] == sptr);
          ev_flush_q <= 1'b0;
          state <= S_EV;
        end
        S_FL_RD: begin
          ev_set_q <= fl_set_q; state <= S_FL_CHK;
        end
        S_FL_CHK: begin
          for (int w = 0; w < WAYS; w++) begin
            ev_tag_q[w]  <= tg_rd_data[w][ev_bank];
            ev_mask_q[w] <= tg_rd_data[w][ev_bank].valid;
          end
          ev_flush_q <= 1'b1;
          state <= S_EV;
        end
        S_EV: begin
          if (ev_any) begin
            ev_way_q <= ev_first;
            if (ev_tag_q[ev_first].dirty) state <= S_EV_WB;
            else ev_mask_q[ev_first] <= 1'b0;
          end else if (ev_flush_q) begin
            fl_set_q <= fl_set_q + 1'b1;
            if (&fl_set_q) begin
              if (!flush_req) flush_pending_q <= 1'b0;
              state <= S_IDLE;
            end else state <= S_FL_RD;
          end else begin
            rm_k_q <= rm_k_q + 1'b1;
            if (32'(rm_k_q) + 1 >= 32'(h_max)) state <= S_IDLE;
            else state <= S_RM_RD;
          end
        end
        S_EV_WB: if (mem_wb_ready) begin
          ev_mask_q[ev_way_q] <= 1'b0; state <= S_EV;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign sptr_o       = sptr;
  assign remap_busy_o = (state inside {S_RM_RD, S_RM_ENC, S_RM_WAIT}) || (state inside {S_EV, S_EV_WB} && !ev_flush_q);
  assign flush_busy_o = flush_pending_q;

  // ---------------------------------------------------------------- checks
  // a line is never stored twice
  assert property (@(posedge clk) disable iff (!rst_n) co_valid |-> !co_multi)
    else $error("sea_cache: line found in more than one location");
  // memory handshakes hold until accepted
  assert property (@(posedge clk) disable iff (!rst_n) mem_wb_valid && !mem_wb_ready |=> mem_wb_valid)
    else $error("sea_cache: writeback request dropped");
  assert property (@(posedge clk) disable iff (!rst_n) mem_rd_valid && !mem_rd_ready |=> mem_rd_valid)
    else $error("sea_cache: read request dropped");

endmodule
