// omu_pe: processing element holding one first-level branch of the octree.
//
// The map is split across eight PEs by the first-level branch of a voxel, so
// a PE owns the subtree whose root is a depth-1 node and all of its updates
// are independent of the other PEs. The PE keeps that subtree in eight
// banks (tree_mem). The subtree root sits in row 0 of bank 0; every node's
// 64-bit word carries the row of its eight children (child i in bank i of
// that row), a 2-bit status per child and its own log-odds. The root's own
// status and a copy of its log-odds are kept in registers and output
// (root_st, root_prob), so the depth-0 node above the eight PEs can be formed
// outside.
//
// Voxel update (one at a time, from the voxel scheduler):
//   descend  from depth 1 to the leaf at depth 16. An inner node's children
//            row is read in one cycle across all banks; a node that is not
//            inner is expanded first: a row is taken from the prune address
//            manager and all eight children are written at once (new nodes
//            unknown; a pruned leaf passes its log-odds and status to all
//            eight children).
//   leaf     log-odds add and clamp (prob_update).
//   ascend   per level the children row is read again, the updated child
//            substituted, the parent set to the maximum of its children and,
//            if all eight are equal leaves, the children are pruned and their
//            row pushed to the prune address manager; otherwise only the
//            changed child is written back. The subtree root is written last.
// Voxel query: the same descent without writes; the response carries the
// log-odds of the deepest existing node on the key's path (found = 0 when the
// path ends in an unknown node).
//
// Timing: an update whose path exists takes 65 cycles from acceptance to
// ready again (2 per level down, 2 per level up, 5 overhead); an expanded
// level costs 1 cycle instead of 2. A query takes 34 cycles. Queries win
// over updates when both wait. If the banks are full when an expansion is
// needed, the update is dropped and the sticky oom flag is set.
//
// The partitioning, bank organisation, word format, expansion, pruning and
// pointer recycling follow the published design; the cycle schedule and the
// handshakes are this design's own.
module omu_pe
  import omu_pkg::*;
#(
  parameter int unsigned ROWS  = 4096,            // rows per bank (32 kB / 8 B)
  parameter int unsigned ROW_W = $clog2(ROWS)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_t        cfg,
  // voxel updates
  input  logic        upd_valid,
  output logic        upd_ready,
  input  voxel_t      upd,
  // voxel queries
  input  logic        qry_valid,
  output logic        qry_ready,
  input  key_t        qry_key,
  output logic        resp_valid,
  output qresp_t      resp,
  // status and events
  output logic        busy,
  output logic        oom,
  output logic        ev_done,      // an update finished
  output logic        ev_expand,    // a level was expanded
  output logic        ev_reuse,     // ... into a recycled row
  output logic        ev_prune,     // a children row was pruned
  output status_e     root_st,      // status of this PE's depth-1 node
  output prob_t       root_prob     // its log-odds
);
  localparam int unsigned D = TREE_DEPTH;

  typedef enum logic [2:0] {
    S_IDLE, S_ROOT_RD, S_ROOT, S_DESC, S_DESC_RD, S_ASC_RD, S_ASC, S_ROOT_WR
  } state_e;

  state_e           state_q;
  logic             is_q_q, occ_q, oom_q;
  key_t             key_q;
  logic [4:0]       d_q;                   // depth of the current node
  node_t            cur_q;
  status_e          cur_st_q, root_st_q;
  prob_t            root_prob_q;
  node_t            upd_w_q;
  status_e          upd_s_q;
  logic [ROW_W-1:0] path_ptr_q [D];        // children row of the node at depth d
  logic [15:0]      path_tag_q [D];        // its children's status tags

  // memory banks
  ag_op_e                op;
  logic [ROW_W-1:0]      row;
  logic [N_BANK-1:0]     en, we;
  logic                  ptr_err;
  logic [WORD_W-1:0]     wdata;
  logic [WORD_W-1:0]     rdata [N_BANK];
  node_t                 rnode [N_BANK];

  // helpers
  logic [2:0]            c;
  logic                  pam_pop, pam_push, free_valid, from_stack;
  logic [ROW_W-1:0]      free_ptr;
  prob_t                 leaf_new, parent_prob;
  status_e               leaf_new_st, prune_st;
  logic                  prune;
  prob_t                 ch_prob [N_BANK];
  status_e               ch_st   [N_BANK];
  logic [15:0]           asc_tags;

  child_id u_cid (.key(key_q), .level(d_q), .idx(c));

  addr_gen #(.ROWS(ROWS)) u_ag (
    .op(op), .node_ptr(cur_q.ptr), .path_ptr(path_ptr_q[d_q[3:0]]),
    .free_ptr(free_ptr), .child(c), .row(row), .en(en), .we(we), .ptr_err(ptr_err)
  );

  for (genvar b = 0; b < N_BANK; b++) begin : g_bank
    tree_mem #(.ROWS(ROWS)) u_mem (
      .clk(clk), .en(en[b]), .we(we[b]), .row(row), .wdata(wdata), .rdata(rdata[b])
    );
    assign rnode[b] = node_t'(rdata[b]);
  end

  prune_addr_mgr #(.ROWS(ROWS)) u_pam (
    .clk(clk), .rst_n(rst_n), .push(pam_push), .pruned_ptr(path_ptr_q[d_q[3:0]]),
    .pop(pam_pop), .free_ptr(free_ptr), .free_valid(free_valid),
    .from_stack(from_stack), .count()
  );

  // children of the ascending level with the updated child substituted
  always_comb begin
    asc_tags = path_tag_q[d_q[3:0]];
    asc_tags[2*c +: 2] = upd_s_q;
    for (int i = 0; i < N_BANK; i++) begin
      ch_prob[i] = (3'(i) == c) ? upd_w_q.prob : rnode[i].prob;
      ch_st[i]   = status_e'(asc_tags[2*i +: 2]);
    end
  end

  prob_update u_pu (
    .cfg(cfg), .leaf_prob(cur_q.prob), .leaf_st(cur_st_q), .occupied(occ_q),
    .leaf_new(leaf_new), .leaf_new_st(leaf_new_st),
    .ch_prob(ch_prob), .ch_st(ch_st),
    .parent_prob(parent_prob), .prune(prune), .prune_st(prune_st)
  );

  // children written on expansion: all copy the expanded node
  node_t   exp_child;
  logic [15:0] exp_tags;
  always_comb begin
    exp_child = '{ptr: '0, tags: '0, prob: (cur_st_q == ST_UNKNOWN) ? prob_t'(0) : cur_q.prob};
    exp_tags  = (cur_st_q == ST_UNKNOWN) ? 16'h0 : {8{cur_st_q}};
  end

  logic at_leaf;
  assign at_leaf = (d_q == 5'(D));

  // step control
  always_comb begin
    op         = AG_IDLE;
    wdata      = '0;
    pam_pop    = 1'b0;
    pam_push   = 1'b0;
    upd_ready  = 1'b0;
    qry_ready  = 1'b0;
    unique case (state_q)
      S_IDLE: begin
        qry_ready = 1'b1;
        upd_ready = !qry_valid;
      end
      S_ROOT_RD: op = AG_ROOT_RD;
      S_DESC: begin
        if (!at_leaf) begin
          if (cur_st_q == ST_INNER) op = AG_DESC_RD;
          else if (!is_q_q && free_valid) begin
            op      = AG_EXPAND;
            wdata   = exp_child;
            pam_pop = 1'b1;
          end
        end
      end
      S_ASC_RD: op = AG_ASC_RD;
      S_ASC: begin
        if (prune) pam_push = 1'b1;
        else begin
          op    = AG_CHILD_WR;
          wdata = upd_w_q;
        end
      end
      S_ROOT_WR: begin
        op    = AG_ROOT_WR;
        wdata = upd_w_q;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      root_st_q  <= ST_UNKNOWN;
      root_prob_q <= '0;
      oom_q      <= 1'b0;
      resp_valid <= 1'b0;
      resp       <= '0;
      is_q_q     <= 1'b0;
      occ_q      <= 1'b0;
      key_q      <= '0;
      d_q        <= '0;
      cur_q      <= '0;
      cur_st_q   <= ST_UNKNOWN;
      upd_w_q    <= '0;
      upd_s_q    <= ST_UNKNOWN;
      ev_done    <= 1'b0;
      ev_expand  <= 1'b0;
      ev_reuse   <= 1'b0;
      ev_prune   <= 1'b0;
    end else begin
      resp_valid <= 1'b0;
      ev_done    <= 1'b0;
      ev_expand  <= 1'b0;
      ev_reuse   <= 1'b0;
      ev_prune   <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          if (qry_valid) begin
            is_q_q  <= 1'b1;
            key_q   <= qry_key;
            state_q <= S_ROOT_RD;
          end else if (upd_valid) begin
            is_q_q  <= 1'b0;
            key_q   <= upd.key;
            occ_q   <= upd.occupied;
            state_q <= S_ROOT_RD;
          end
        end
        S_ROOT_RD: state_q <= S_ROOT;
        S_ROOT: begin
          cur_q    <= (root_st_q == ST_UNKNOWN) ? '0 : rnode[0];
          cur_st_q <= root_st_q;
          d_q      <= 5'd1;
          state_q  <= S_DESC;
        end
        S_DESC: begin
          if (at_leaf || (is_q_q && cur_st_q != ST_INNER)) begin
            if (is_q_q) begin
              resp_valid <= 1'b1;
              resp       <= '{found: (cur_st_q != ST_UNKNOWN), prob: cur_q.prob};
              state_q    <= S_IDLE;
            end else begin
              upd_w_q <= '{ptr: '0, tags: '0, prob: leaf_new};
              upd_s_q <= leaf_new_st;
              d_q     <= d_q - 5'd1;
              state_q <= S_ASC_RD;
            end
          end else if (cur_st_q == ST_INNER) begin
            path_ptr_q[d_q[3:0]] <= cur_q.ptr[ROW_W-1:0];
            path_tag_q[d_q[3:0]] <= cur_q.tags;
            state_q <= S_DESC_RD;
          end else if (free_valid) begin
            // expand: the new children row holds copies of exp_child
            path_ptr_q[d_q[3:0]] <= free_ptr;
            path_tag_q[d_q[3:0]] <= exp_tags;
            cur_q     <= exp_child;
            cur_st_q  <= status_e'(exp_tags[2*c +: 2]);
            d_q       <= d_q + 5'd1;
            ev_expand <= 1'b1;
            ev_reuse  <= from_stack;
          end else begin
            oom_q   <= 1'b1;
            state_q <= S_IDLE;
          end
        end
        S_DESC_RD: begin
          cur_q    <= rnode[c];
          cur_st_q <= status_e'(path_tag_q[d_q[3:0]][2*c +: 2]);
          d_q      <= d_q + 5'd1;
          state_q  <= S_DESC;
        end
        S_ASC_RD: state_q <= S_ASC;
        S_ASC: begin
          if (prune) begin
            upd_w_q  <= '{ptr: '0, tags: '0, prob: parent_prob};
            upd_s_q  <= prune_st;
            ev_prune <= 1'b1;
          end else begin
            upd_w_q <= '{ptr: PTR_W'(path_ptr_q[d_q[3:0]]), tags: asc_tags, prob: parent_prob};
            upd_s_q <= ST_INNER;
          end
          if (d_q == 5'd1) state_q <= S_ROOT_WR;
          else begin
            d_q     <= d_q - 5'd1;
            state_q <= S_ASC_RD;
          end
        end
        S_ROOT_WR: begin
          root_st_q <= upd_s_q;
          root_prob_q <= upd_w_q.prob;
          ev_done   <= 1'b1;
          state_q   <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // path registers need no reset: each entry is written on the way down
  // before it is read on the way up.

  assign busy = (state_q != S_IDLE);
  assign oom  = oom_q;
  assign root_st   = root_st_q;
  assign root_prob = root_prob_q;

  assert property (@(posedge clk) disable iff (!rst_n) !(op == AG_DESC_RD && ptr_err))
    else $error("omu_pe: node pointer outside the bank");
endmodule
