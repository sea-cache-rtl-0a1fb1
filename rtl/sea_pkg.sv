// sea_pkg: constants and types shared by the SEA (Skewed Elastic-Associativity)
// last-level cache. The default geometry is the 8 MB, 16-way, 64 B-line cache
// with 46-bit physical addresses and 8 tag banks that the design is evaluated
// with; the tag entry holds the full 40-bit line address plus valid and dirty
// (42 bits). Widths of the logical-associativity field, the configuration bus
// and the request/response bundles are this implementation's own choice.
package sea_pkg;

  localparam int unsigned PADDR_W     = 46;  // physical address bits
  localparam int unsigned OFFSET_W    = 6;   // 64 B line
  localparam int unsigned LINE_ADDR_W = PADDR_W - OFFSET_W;  // 40: stored in full as the tag
  localparam int unsigned LINE_W      = 512; // data bits per line
  localparam int unsigned H_W         = 6;   // logical associativity field, H = 1..HMAX
  localparam int unsigned HMAX        = 32;  // largest H accepted by the configuration

  // Tag entry: {valid, dirty, line address}; 42 bits at the default sizes.
  typedef struct packed {
    logic                   valid;
    logic                   dirty;
    logic [LINE_ADDR_W-1:0] addr;
  } tag_entry_t;

  localparam int unsigned TAG_ENTRY_W = $bits(tag_entry_t);

  typedef enum logic {
    OP_READ  = 1'b0,   // line read (fill request from the level above)
    OP_WRITE = 1'b1    // full-line write (writeback from the level above)
  } op_e;

  // Configuration register addresses of the privileged configuration port.
  typedef enum logic [1:0] {
    CFG_H_DOMAIN0 = 2'd0,  // logical associativity of SDID 0 (normal protection)
    CFG_H_DOMAIN1 = 2'd1,  // logical associativity of SDID 1 (high protection)
    CFG_RKP_STEP  = 2'd2   // accesses between two remap steps
  } cfg_addr_e;

  // 64-bit PRINCE round constants RC0..RC11 (RC_i ^ RC_11-i = alpha).
  localparam logic [63:0] PRINCE_RC [12] = '{
    64'h0000000000000000, 64'h13198a2e03707344, 64'ha4093822299f31d0,
    64'h082efa98ec4e6c89, 64'h452821e638d01377, 64'hbe5466cf34e90c6c,
    64'h7ef84f78fd955cb1, 64'h85840851f1ac43aa, 64'hc882d32f25323c54,
    64'h64a51195e0e3610d, 64'hd3b5a399ca0c2399, 64'hc0ac29b7c97c50dd};

  // Per-way key derivation: partition w of the fully partitioned cache uses the
  // shared 128-bit key XORed with a way-dependent constant.
  function automatic logic [127:0] way_key(input logic [127:0] k, input int unsigned w);
    logic [63:0] c;
    c = 64'h9e3779b97f4a7c15 * 64'(w);
    return k ^ {c, ~c};
  endfunction

endpackage
