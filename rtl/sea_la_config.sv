// sea_la_config: logical-associativity settings of the SEA cache.
//
// Holds the logical associativity H of each security domain, selected by the
// 1-bit security domain identifier (SDID) that every request carries: domain 0
// is the normal-protection domain (reset H = 1), domain 1 the high-protection
// domain (reset H = 16). It also holds the re-keying step (accesses between two
// remap steps, reset RKP_MULT * WAYS, i.e. a full re-key every RKP_MULT * N
// accesses). Only a privileged write (cfg_priv) may change a register; H must
// lie in 1..HMAX and the step must be non-zero, otherwise the write is refused
// and cfg_err pulses. Raising H keeps the cache contents valid, since lines
// placed with a smaller H stay inside the larger logical set. Lowering H of any
// domain raises flush_req for one cycle: lines may lie outside the smaller
// logical set, so the cache must be flushed.
//
// Timing: registers update on the clock edge that accepts the write; outputs
// are registered. The register map and error rule are this design's choice.
module sea_la_config
  import sea_pkg::*;
#(
  parameter int unsigned NUM_DOMAINS = 2,
  parameter int unsigned WAYS        = 16,
  parameter int unsigned RKP_MULT    = 9,
  parameter logic [H_W-1:0] H_RESET [NUM_DOMAINS] = '{6'd1, 6'd16}
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_valid,
  input  logic             cfg_priv,
  input  cfg_addr_e        cfg_addr,
  input  logic [31:0]      cfg_wdata,
  output logic             cfg_err,
  output logic [H_W-1:0]   h [NUM_DOMAINS],
  output logic [H_W-1:0]   h_max,
  output logic [31:0]      rkp_step,
  output logic             flush_req
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h         <= H_RESET;
      rkp_step  <= 32'(RKP_MULT * WAYS);
      cfg_err   <= 1'b0;
      flush_req <= 1'b0;
    end else begin
      cfg_err   <= 1'b0;
      flush_req <= 1'b0;
      if (cfg_valid) begin
        if (!cfg_priv) begin
          cfg_err <= 1'b1;
        end else if (cfg_addr == CFG_RKP_STEP) begin
          if (cfg_wdata == 0) cfg_err <= 1'b1;
          else                rkp_step <= cfg_wdata;
        end else if (int'(cfg_addr) < NUM_DOMAINS) begin
          if (cfg_wdata == 0 || cfg_wdata > HMAX) cfg_err <= 1'b1;
          else begin
            h[int'(cfg_addr)] <= H_W'(cfg_wdata);
            if (H_W'(cfg_wdata) < h[int'(cfg_addr)]) flush_req <= 1'b1;
          end
        end else begin
          cfg_err <= 1'b1;
        end
      end
    end
  end

  always_comb begin
    h_max = h[0];
    for (int d = 1; d < NUM_DOMAINS; d++)
      if (h[d] > h_max) h_max = h[d];
  end

endmodule
