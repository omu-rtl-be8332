// voxel_scheduler: issues voxel updates to the PE that owns them.
//
// The octree is split across the PEs by first-level branch, so the target PE
// of a voxel is its child ID below the global root (one key bit per axis).
// The scheduler looks at the heads of the free queue and the occupied queue;
// a head is issued when its PE is ready. When both heads can go, the queue
// not served last goes first (round robin); when neither can, the heads wait
// and a stall is signalled. Voxels of one queue stay in order, so updates of
// one voxel from one queue reach its PE in order. The ID check by branch
// follows the published design; the two-queue arbitration is this design's
// choice. Combinational issue with one state bit.
module voxel_scheduler
  import omu_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              free_valid,
  output logic              free_ready,
  input  key_t              free_key,
  input  logic              occ_valid,
  output logic              occ_ready,
  input  key_t              occ_key,
  output logic [N_PE-1:0]   pe_valid,
  input  logic [N_PE-1:0]   pe_ready,
  output voxel_t            pe_vox,
  output logic              stall        // a head waits for a busy PE
);
  logic [2:0] fid, oid;
  logic       f_ok, o_ok, pick_occ, last_occ_q;

  child_id u_fid (.key(free_key), .level(5'd0), .idx(fid));
  child_id u_oid (.key(occ_key),  .level(5'd0), .idx(oid));

  always_comb begin
    f_ok     = free_valid && pe_ready[fid];
    o_ok     = occ_valid  && pe_ready[oid];
    pick_occ = o_ok && (!f_ok || !last_occ_q);
    pe_valid = '0;
    pe_vox   = '{key: free_key, occupied: 1'b0};
    free_ready = 1'b0;
    occ_ready  = 1'b0;
    if (pick_occ) begin
      pe_valid[oid] = 1'b1;
      pe_vox        = '{key: occ_key, occupied: 1'b1};
      occ_ready     = 1'b1;
    end else if (f_ok) begin
      pe_valid[fid] = 1'b1;
      free_ready    = 1'b1;
    end
    stall = (free_valid || occ_valid) && !f_ok && !o_ok;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               last_occ_q <= 1'b0;
    else if (pick_occ)        last_occ_q <= 1'b1;
    else if (f_ok)            last_occ_q <= 1'b0;
  end
endmodule
