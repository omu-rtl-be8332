// prob_update: the probability arithmetic of a PE.
//
// Leaf update (OctoMap log-odds rule): L <- clamp(L + l_z), with l_z = hit for
// an occupied observation and miss for a free one, saturated to
// [clamp_min, clamp_max]. A leaf that did not exist starts from L = 0
// (p = 0.5). Its new status tag is occupied when L >= 0, free otherwise.
//
// Parent update: the parent's log-odds is the maximum over its existing
// children (status tag not unknown). The eight children may be pruned into
// the parent when all eight exist, none is an inner node and all eight carry
// the same log-odds; the parent then becomes a leaf with that value and the
// status of its children.
//
// The add-and-clamp, max and equality rules follow the published algorithm;
// the 16-bit two's-complement format with 10 fractional bits and the
// occupancy threshold of 0 are this design's choices. Combinational.
module prob_update
  import omu_pkg::*;
(
  input  cfg_t              cfg,
  // leaf update
  input  prob_t             leaf_prob,
  input  status_e           leaf_st,
  input  logic              occupied,
  output prob_t             leaf_new,
  output status_e           leaf_new_st,
  // parent update
  input  prob_t             ch_prob [N_BANK],
  input  status_e           ch_st   [N_BANK],
  output prob_t             parent_prob,
  output logic              prune,
  output status_e           prune_st
);
  logic signed [PROB_W:0] sum;

  always_comb begin
    sum = (leaf_st == ST_UNKNOWN) ? '0 : (PROB_W+1)'(leaf_prob);
    sum = sum + (PROB_W+1)'(occupied ? cfg.hit : cfg.miss);
    if (sum < (PROB_W+1)'(cfg.clamp_min))      leaf_new = cfg.clamp_min;
    else if (sum > (PROB_W+1)'(cfg.clamp_max)) leaf_new = cfg.clamp_max;
    else                                       leaf_new = PROB_W'(sum);
    leaf_new_st = leaf_status(leaf_new);
  end

  always_comb begin
    logic any;
    parent_prob = '0;
    any         = 1'b0;
    prune       = 1'b1;
    for (int i = 0; i < N_BANK; i++) begin
      if (ch_st[i] != ST_UNKNOWN) begin
        if (!any || ch_prob[i] > parent_prob) parent_prob = ch_prob[i];
        any = 1'b1;
      end
      if (ch_st[i] == ST_UNKNOWN || ch_st[i] == ST_INNER) prune = 1'b0;
      if (ch_prob[i] != ch_prob[0]) prune = 1'b0;
    end
    prune_st = ch_st[0];
  end
endmodule
