// voxel_query: answers "is this voxel occupied, free or unknown?".
//
// Queries wait in a queue. The head is checked for its first-level branch
// (ID check) and issued to the owning PE, which returns the log-odds of the
// deepest existing node on the voxel's path; the answer is picked from the
// eight PE response buses by that ID and classified with two thresholds:
// occupied when L >= occ_thr, free when L <= free_thr, otherwise (or when no
// node exists) unknown. The result is held until it is taken. One query is
// in flight at a time. Queue, ID check, response multiplexer and threshold
// follow the published block diagram; the thresholds' form, the queue depth
// and the one-in-flight rule are this design's choices.
module voxel_query
  import omu_pkg::*;
#(
  parameter int unsigned QDEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  input  logic             q_valid,
  output logic             q_ready,
  input  key_t             q_key,
  // to and from the PEs
  output logic [N_PE-1:0]  pe_qvalid,
  input  logic [N_PE-1:0]  pe_qready,
  output key_t             pe_qkey,
  input  logic [N_PE-1:0]  pe_rvalid,
  input  qresp_t           pe_resp [N_PE],
  // occupancy result
  output logic             res_valid,
  input  logic             res_ready,
  output status_e          res_status,
  output qresp_t           res,
  output logic             busy
);

  key_t       head;
  logic       head_valid, head_pop;
  logic [2:0] hid, id_q;
  logic       wait_q, res_valid_q;
  qresp_t     res_q;
  status_e    st_q;

  voxel_fifo #(.T(key_t), .DEPTH(QDEPTH)) u_q (
    .clk(clk), .rst_n(rst_n), .in_valid(q_valid), .in_ready(q_ready), .in_data(q_key),
    .out_valid(head_valid), .out_ready(head_pop), .out_data(head), .level()
  );

  child_id u_id (.key(head), .level(5'd0), .idx(hid));

  always_comb begin
    pe_qvalid = '0;
    pe_qkey   = head;
    if (head_valid && !wait_q && !res_valid_q) pe_qvalid[hid] = 1'b1;
    head_pop = head_valid && !wait_q && !res_valid_q && pe_qready[hid];
  end

  function automatic status_e classify(qresp_t r, cfg_t c);
    if (!r.found)              return ST_UNKNOWN;
    if (r.prob >= c.occ_thr)   return ST_OCCUPIED;
    if (r.prob <= c.free_thr)  return ST_FREE;
    return ST_UNKNOWN;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wait_q <= 1'b0; id_q <= '0; res_valid_q <= 1'b0; res_q <= '0; st_q <= ST_UNKNOWN;
    end else begin
      if (head_pop) begin
        wait_q <= 1'b1;
        id_q   <= hid;
      end
      if (wait_q && pe_rvalid[id_q]) begin
        wait_q      <= 1'b0;
        res_valid_q <= 1'b1;
        res_q       <= pe_resp[id_q];
        st_q        <= classify(pe_resp[id_q], cfg);
      end else if (res_valid_q && res_ready) begin
        res_valid_q <= 1'b0;
      end
    end
  end

  assign res_valid  = res_valid_q;
  assign res        = res_q;
  assign res_status = st_q;
  assign busy       = head_valid || wait_q;
endmodule
