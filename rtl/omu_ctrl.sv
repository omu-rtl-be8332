// omu_ctrl: AXI4-Lite slave and configuration registers of the accelerator.
//
// The host programs the sensor model, the occupancy thresholds and the
// sensor origin, streams point-cloud points in, posts voxel queries and
// reads their results and a few event counters, all as 32-bit registers:
//
//   0x00 STATUS     RO  [0] busy, [1] result waiting, [15:8] PE out of memory
//   0x04 HIT        RW  [15:0] log-odds added on an occupied observation
//   0x08 MISS       RW  [15:0] log-odds added on a free observation
//   0x0C CLAMP_MIN  RW  [15:0]
//   0x10 CLAMP_MAX  RW  [15:0]
//   0x14 OCC_THR    RW  [15:0] query: L >= OCC_THR is occupied
//   0x18 FREE_THR   RW  [15:0] query: L <= FREE_THR is free
//   0x1C ORIGIN_XY  RW  sensor origin key, x [15:0], y [31:16]
//   0x20 ORIGIN_Z   RW  [15:0]
//   0x24 POINT_XY   RW  point key x [15:0], y [31:16] (staged)
//   0x28 POINT_Z    WO  [15:0] z; the write sends the point to ray casting
//   0x2C QUERY_XY   RW  query key x, y (staged)
//   0x30 QUERY_Z    WO  [15:0] z; the write posts the query
//   0x34 RESULT     RO  [31] valid, [30] found, [17:16] status, [15:0] log-odds;
//                       a read of a valid result removes it
//   0x38..0x48      RO  counters: voxel updates done, prunes, expansions,
//                       scheduler stall cycles, expansions into recycled rows
//   0x4C ROOT       RO  depth-0 node of the map: [17:16] status, [15:0] log-odds
// Log-odds are signed with 10 fractional bits. A write to POINT_Z or QUERY_Z
// is not answered (no BVALID) until the unit behind it accepts the data, so
// a full queue back-pressures the bus. One read and one write are handled at
// a time; AW and W are taken together; responses are OKAY except SLVERR for
// an unmapped address. The published design states an AXI slave and a few
// configuration registers; the AXI4-Lite subset and the register map are
// this design's choice.
module omu_ctrl
  import omu_pkg::*;
#(
  parameter int unsigned AXI_AW = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
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
  // to the datapath
  output cfg_t              cfg,
  output key_t              origin,
  output logic              pt_valid,
  input  logic              pt_ready,
  output key_t              pt,
  output logic              qry_valid,
  input  logic              qry_ready,
  output key_t              qry,
  input  logic              res_valid,
  output logic              res_ready,
  input  status_e           res_status,
  input  qresp_t            res,
  input  logic              busy,
  input  logic [N_PE-1:0]   oom,
  input  logic [N_PE-1:0]   ev_done,
  input  logic [N_PE-1:0]   ev_prune,
  input  logic [N_PE-1:0]   ev_expand,
  input  logic [N_PE-1:0]   ev_reuse,
  input  logic              ev_stall,
  input  status_e           root_st,
  input  prob_t             root_prob
);
  localparam logic [7:0] A_STATUS = 8'h00, A_HIT = 8'h04, A_MISS = 8'h08,
    A_CMIN = 8'h0C, A_CMAX = 8'h10, A_OCC = 8'h14, A_FREE = 8'h18,
    A_OXY = 8'h1C, A_OZ = 8'h20, A_PXY = 8'h24, A_PZ = 8'h28,
    A_QXY = 8'h2C, A_QZ = 8'h30, A_RES = 8'h34, A_CUPD = 8'h38,
    A_CPRN = 8'h3C, A_CEXP = 8'h40, A_CSTL = 8'h44, A_CRUS = 8'h48,
    A_ROOT = 8'h4C;

  logic [31:0] oxy_q, pxy_q, qxy_q;
  logic [15:0] oz_q;
  logic [31:0] cnt_upd_q, cnt_prn_q, cnt_exp_q, cnt_stl_q, cnt_rus_q;

  // ---------------- write channel
  logic [7:0] waddr;
  logic       wfire, wneeds_pt, wneeds_q, wok;
  assign waddr     = 8'(s_awaddr);
  assign wneeds_pt = (waddr == A_PZ);
  assign wneeds_q  = (waddr == A_QZ);
  assign wok       = (!wneeds_pt || pt_ready) && (!wneeds_q || qry_ready);
  assign wfire     = s_awvalid && s_wvalid && !s_bvalid && wok;
  assign s_awready = wfire;
  assign s_wready  = wfire;

  assign pt_valid  = s_awvalid && s_wvalid && !s_bvalid && wneeds_pt;
  assign pt        = '{x: pxy_q[15:0], y: pxy_q[31:16], z: s_wdata[15:0]};
  assign qry_valid = s_awvalid && s_wvalid && !s_bvalid && wneeds_q;
  assign qry       = '{x: qxy_q[15:0], y: qxy_q[31:16], z: s_wdata[15:0]};
  assign origin    = '{x: oxy_q[15:0], y: oxy_q[31:16], z: oz_q};

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] d, logic [3:0] s);
    for (int i = 0; i < 4; i++) if (s[i]) old[8*i +: 8] = d[8*i +: 8];
    return old;
  endfunction

  function automatic logic known(logic [7:0] a);
    return a inside {A_STATUS, A_HIT, A_MISS, A_CMIN, A_CMAX, A_OCC, A_FREE, A_OXY,
                     A_OZ, A_PXY, A_PZ, A_QXY, A_QZ, A_RES, A_CUPD, A_CPRN, A_CEXP, A_CSTL, A_CRUS, A_ROOT};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg      <= '{hit: HIT_DEFAULT, miss: MISS_DEFAULT, clamp_min: CLAMP_MIN_DEFAULT,
                    clamp_max: CLAMP_MAX_DEFAULT, occ_thr: OCC_THR_DEFAULT,
                    free_thr: FREE_THR_DEFAULT};
      oxy_q    <= '0;
      oz_q     <= '0;
      pxy_q    <= '0;
      qxy_q    <= '0;
      s_bvalid <= 1'b0;
      s_bresp  <= 2'b00;
    end else begin
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wfire) begin
        s_bvalid <= 1'b1;
        s_bresp  <= known(waddr) ? 2'b00 : 2'b10;
        unique case (waddr)
          A_HIT:  cfg.hit       <= prob_t'(merge(32'(cfg.hit),       s_wdata, s_wstrb));
          A_MISS: cfg.miss      <= prob_t'(merge(32'(cfg.miss),      s_wdata, s_wstrb));
          A_CMIN: cfg.clamp_min <= prob_t'(merge(32'(cfg.clamp_min), s_wdata, s_wstrb));
          A_CMAX: cfg.clamp_max <= prob_t'(merge(32'(cfg.clamp_max), s_wdata, s_wstrb));
          A_OCC:  cfg.occ_thr   <= prob_t'(merge(32'(cfg.occ_thr),   s_wdata, s_wstrb));
          A_FREE: cfg.free_thr  <= prob_t'(merge(32'(cfg.free_thr),  s_wdata, s_wstrb));
          A_OXY:  oxy_q <= merge(oxy_q, s_wdata, s_wstrb);
          A_OZ:   oz_q  <= 16'(merge(32'(oz_q), s_wdata, s_wstrb));
          A_PXY:  pxy_q <= merge(pxy_q, s_wdata, s_wstrb);
          A_QXY:  qxy_q <= merge(qxy_q, s_wdata, s_wstrb);
          default: ;
        endcase
      end
    end
  end

  // ---------------- read channel
  logic [7:0]  raddr;
  logic [31:0] rword;
  assign raddr     = 8'(s_araddr);
  assign s_arready = !s_rvalid;
  assign res_ready = s_arvalid && s_arready && (raddr == A_RES);

  always_comb begin
    unique case (raddr)
      A_STATUS: rword = {16'h0, 8'(oom), 6'h0, res_valid, busy};
      A_HIT:    rword = 32'(cfg.hit);
      A_MISS:   rword = 32'(cfg.miss);
      A_CMIN:   rword = 32'(cfg.clamp_min);
      A_CMAX:   rword = 32'(cfg.clamp_max);
      A_OCC:    rword = 32'(cfg.occ_thr);
      A_FREE:   rword = 32'(cfg.free_thr);
      A_OXY:    rword = oxy_q;
      A_OZ:     rword = {16'h0, oz_q};
      A_PXY:    rword = pxy_q;
      A_QXY:    rword = qxy_q;
      A_RES:    rword = {res_valid, res.found & res_valid, 12'h0, res_status, res.prob};
      A_CUPD:   rword = cnt_upd_q;
      A_CPRN:   rword = cnt_prn_q;
      A_CEXP:   rword = cnt_exp_q;
      A_CSTL:   rword = cnt_stl_q;
      A_CRUS:   rword = cnt_rus_q;
      A_ROOT:   rword = {14'h0, root_st, root_prob};
      default:  rword = 32'h0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
      s_rresp  <= 2'b00;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        s_rdata  <= rword;
        s_rresp  <= known(raddr) ? 2'b00 : 2'b10;
      end
    end
  end

  // ---------------- event counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_upd_q <= '0; cnt_prn_q <= '0; cnt_exp_q <= '0; cnt_stl_q <= '0; cnt_rus_q <= '0;
    end else begin
      cnt_upd_q <= cnt_upd_q + 32'($countones(ev_done));
      cnt_prn_q <= cnt_prn_q + 32'($countones(ev_prune));
      cnt_exp_q <= cnt_exp_q + 32'($countones(ev_expand));
      cnt_stl_q <= cnt_stl_q + 32'(ev_stall);
      cnt_rus_q <= cnt_rus_q + 32'($countones(ev_reuse));
    end
  end

  // AXI: a response stays valid until taken
  assert property (@(posedge clk) disable iff (!rst_n) s_bvalid && !s_bready |=> s_bvalid);
  assert property (@(posedge clk) disable iff (!rst_n) s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
