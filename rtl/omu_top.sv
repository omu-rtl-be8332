// omu_top: the occupancy-map accelerator.
//
// Data flow: the host writes sensor points over AXI4-Lite (omu_ctrl); ray
// casting turns each point into free voxels along the ray and one occupied
// voxel at the end; these wait in the free and occupied queues; the voxel
// scheduler sends each voxel to the PE that owns its first-level octree
// branch; the eight PEs update their part of the map in parallel. Queries
// posted over AXI go through the voxel query unit to the owning PE and come
// back as occupied / free / unknown with the log-odds. The depth-0 root of
// the map sits above the eight PE subtrees: its log-odds is the maximum over
// the PE roots and it collapses to a leaf when all eight are equal leaves
// (the same parent rule as inside a PE, from a second prob_update); the host
// reads it as the ROOT register. The top's ports are
// the AXI4-Lite slave plus an interrupt-style level that is high while the
// accelerator still has work.
//
// N_PE = 8 PEs with 8 banks of ROWS = 4096 x 64 bit (256 kB per PE, 2 MB of
// map memory) are the published configuration. Queue depths are this
// design's choice.
module omu_top
  import omu_pkg::*;
#(
  parameter int unsigned ROWS   = 4096,
  parameter int unsigned QDEPTH = 16,
  parameter int unsigned AXI_AW = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [AXI_AW-1:0] s_awaddr,
  input  logic              s_wvalid,
  output logic              s_wready,
  input  logic [31:0]       s_wdata,
  input  logic [3:0]        s_wstrb,
  output logic              s_bvalid,
  input  logic              s_bready,
  output logic [1:0]        s_bresp,
  input  logic              s_arvalid,
  output logic              s_arready,
  input  logic [AXI_AW-1:0] s_araddr,
  output logic              s_rvalid,
  input  logic              s_rready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  output logic              busy
);
  cfg_t    cfg;
  key_t    origin, pt, qkey, free_in, occ_in, free_head, occ_head, pe_qkey;
  logic    pt_valid, pt_ready, q_valid, q_ready;
  logic    rc_free_valid, rc_free_ready, rc_occ_valid, rc_occ_ready, rc_busy;
  logic    fq_valid, fq_ready, oq_valid, oq_ready, stall;
  logic    res_valid, res_ready, vq_busy;
  status_e res_status;
  qresp_t  res;
  voxel_t  pe_vox;
  logic [N_PE-1:0] upd_valid, upd_ready, pe_qvalid, pe_qready, pe_rvalid;
  logic [N_PE-1:0] pe_busy, oom, ev_done, ev_expand, ev_reuse, ev_prune;
  qresp_t  pe_resp [N_PE];
  status_e pe_root_st [N_PE];
  prob_t   pe_root_prob [N_PE];
  status_e root_st, root_leaf_st;
  prob_t   root_prob;
  logic    root_pruned;

  omu_ctrl #(.AXI_AW(AXI_AW)) u_ctrl (
    .clk, .rst_n,
    .s_awvalid, .s_awready, .s_awaddr, .s_wvalid, .s_wready, .s_wdata, .s_wstrb,
    .s_bvalid, .s_bready, .s_bresp, .s_arvalid, .s_arready, .s_araddr,
    .s_rvalid, .s_rready, .s_rdata, .s_rresp,
    .cfg, .origin, .pt_valid, .pt_ready, .pt, .qry_valid(q_valid), .qry_ready(q_ready),
    .qry(qkey), .res_valid, .res_ready, .res_status, .res, .busy, .oom,
    .ev_done, .ev_prune, .ev_expand, .ev_reuse, .ev_stall(stall),
    .root_st, .root_prob
  );

  ray_cast u_rc (
    .clk, .rst_n, .origin, .pt_valid, .pt_ready, .pt,
    .free_valid(rc_free_valid), .free_ready(rc_free_ready), .free_key(free_in),
    .occ_valid(rc_occ_valid), .occ_ready(rc_occ_ready), .occ_key(occ_in), .busy(rc_busy)
  );

  voxel_fifo #(.T(key_t), .DEPTH(QDEPTH)) u_free_q (
    .clk, .rst_n, .in_valid(rc_free_valid), .in_ready(rc_free_ready), .in_data(free_in),
    .out_valid(fq_valid), .out_ready(fq_ready), .out_data(free_head), .level()
  );
  voxel_fifo #(.T(key_t), .DEPTH(QDEPTH)) u_occ_q (
    .clk, .rst_n, .in_valid(rc_occ_valid), .in_ready(rc_occ_ready), .in_data(occ_in),
    .out_valid(oq_valid), .out_ready(oq_ready), .out_data(occ_head), .level()
  );

  voxel_scheduler u_sched (
    .clk, .rst_n, .free_valid(fq_valid), .free_ready(fq_ready), .free_key(free_head),
    .occ_valid(oq_valid), .occ_ready(oq_ready), .occ_key(occ_head),
    .pe_valid(upd_valid), .pe_ready(upd_ready), .pe_vox, .stall
  );

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    omu_pe #(.ROWS(ROWS)) u_pe (
      .clk, .rst_n, .cfg,
      .upd_valid(upd_valid[p]), .upd_ready(upd_ready[p]), .upd(pe_vox),
      .qry_valid(pe_qvalid[p]), .qry_ready(pe_qready[p]), .qry_key(pe_qkey),
      .resp_valid(pe_rvalid[p]), .resp(pe_resp[p]),
      .busy(pe_busy[p]), .oom(oom[p]), .ev_done(ev_done[p]), .ev_expand(ev_expand[p]),
      .ev_reuse(ev_reuse[p]), .ev_prune(ev_prune[p]),
      .root_st(pe_root_st[p]), .root_prob(pe_root_prob[p])
    );
  end

  // depth-0 root: parent of the eight PE roots
  prob_update u_root (
    .cfg, .leaf_prob('0), .leaf_st(ST_UNKNOWN), .occupied(1'b0),
    .leaf_new(), .leaf_new_st(),
    .ch_prob(pe_root_prob), .ch_st(pe_root_st),
    .parent_prob(root_prob), .prune(root_pruned), .prune_st(root_leaf_st)
  );

  always_comb begin
    root_st = ST_UNKNOWN;
    for (int p = 0; p < N_PE; p++) if (pe_root_st[p] != ST_UNKNOWN) root_st = ST_INNER;
    if (root_pruned) root_st = root_leaf_st;
  end

  voxel_query u_vq (
    .clk, .rst_n, .cfg, .q_valid, .q_ready, .q_key(qkey),
    .pe_qvalid, .pe_qready, .pe_qkey, .pe_rvalid, .pe_resp,
    .res_valid, .res_ready, .res_status, .res, .busy(vq_busy)
  );

  assign busy = rc_busy || fq_valid || oq_valid || (|pe_busy) || vq_busy;
endmodule
