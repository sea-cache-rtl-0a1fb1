// sea_rekey_ctrl: re-keying schedule of the SEA cache (CEASER-S style).
//
// The re-keying period is given as a number of cache accesses per full
// re-key of the cache, e.g. 9N for N cache lines. The cache is remapped one set
// at a time: after every rkp_step accesses (9N / SETS = 9 * WAYS by default) a
// remap step is due (remap_due). When the cache reports the step done, the
// remap pointer sptr advances; sets below sptr are mapped with the next key.
// When sptr wraps past the last set, every line has been remapped: the next
// key becomes the current key and a fresh key is taken from key_i.
//
// Keys: key_i is an external source of random keys; key_take pulses for one
// cycle whenever key_i has been consumed and must be replaced. After reset the
// unit takes the current key, then the next key (keys_ready rises two cycles
// after reset). Accesses arriving while a step is already due are still
// counted; the count is reduced by rkp_step (not below zero) when a step
// completes. The key
// source interface and the counting are this design's choices.
module sea_rekey_ctrl #(
  parameter int unsigned INDEX_W = 13
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               access,     // one cache access accepted
  input  logic [31:0]        rkp_step,   // accesses per remap step, >= 1
  input  logic               step_done,  // the set at sptr has been remapped
  input  logic [127:0]       key_i,
  output logic               key_take,
  output logic               keys_ready,
  output logic               remap_due,
  output logic [INDEX_W-1:0] sptr,
  output logic               epoch_end,  // pulses when the keys are swapped
  output logic [127:0]       key_cur,
  output logic [127:0]       key_nxt
);

  logic [1:0]  init_q;
  logic [31:0] cnt;

  assign keys_ready = init_q == 2'd2;
  assign remap_due  = keys_ready && (cnt >= rkp_step);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_q <= 2'd0; cnt <= '0; sptr <= '0;
      key_take <= 1'b0; epoch_end <= 1'b0;
      key_cur <= '0; key_nxt <= '0;
    end else begin
      key_take  <= 1'b0;
      epoch_end <= 1'b0;
      if (init_q == 2'd0) begin
        key_cur <= key_i; key_take <= 1'b1; init_q <= 2'd1;
      end else if (init_q == 2'd1 && !key_take) begin
        key_nxt <= key_i; key_take <= 1'b1; init_q <= 2'd2;
      end else if (keys_ready) begin
        // access counter, saturating
        if (step_done)
          cnt <= ((cnt >= rkp_step) ? cnt - rkp_step : 32'd0) + 32'(access);
        else if (access && cnt != '1)
          cnt <= cnt + 1;
        if (step_done) begin
          sptr <= sptr + 1'b1;
          if (&sptr) begin
            key_cur   <= key_nxt;
            key_nxt   <= key_i;
            key_take  <= 1'b1;
            epoch_end <= 1'b1;
          end
        end
      end
    end
  end

endmodule
