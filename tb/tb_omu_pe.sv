// tb_omu_pe: one PE with full-size banks against a reference map that keeps
// every leaf's log-odds (add and clamp per observation). Phases:
//   1. first update of a voxel (path created by expansion), then repeats of
//      it; the update latency must fit the published throughput (1.01e8
//      voxel updates in 1.31 s at 1 GHz on 8 PEs = at most 103 cycles per
//      update per PE) and matches the 65-cycle schedule;
//   2. eight sibling leaves driven to the clamp -> their row is pruned;
//   3. 64 leaves driven to the clamp -> pruning two levels up;
//   4. a miss inside the pruned region -> re-expansion into recycled rows;
//   5. random hits and misses in a small cube with queries interleaved;
//   6. random far voxels until the banks are full -> oom, map still correct.
// Every query result (found flag and log-odds) is compared with the model,
// and the subtree root's status and log-odds with the maximum over all
// leaves of the model.
module tb_omu_pe;
  import omu_pkg::*;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic upd_valid, upd_ready, qry_valid, qry_ready, resp_valid;
  voxel_t upd;
  key_t qry_key;
  qresp_t resp;
  logic busy, oom, ev_done, ev_expand, ev_reuse, ev_prune;
  status_e root_st;
  prob_t root_prob;
  int checks = 0, failures = 0;
  int n_prune = 0, n_expand = 0, n_reuse = 0, n_done = 0;
  int ref_map [key_t];

  omu_pe dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    n_prune  += int'(ev_prune);
    n_expand += int'(ev_expand);
    n_reuse  += int'(ev_reuse);
    n_done   += int'(ev_done);
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void model_update(key_t k, logic occ);
    int v;
    v = ref_map.exists(k) ? ref_map[k] : 0;
    v += occ ? int'(cfg.hit) : int'(cfg.miss);
    if (v < int'(cfg.clamp_min)) v = int'(cfg.clamp_min);
    if (v > int'(cfg.clamp_max)) v = int'(cfg.clamp_max);
    ref_map[k] = v;
  endfunction

  // returns the cycles from acceptance to the done pulse
  task automatic do_update(key_t k, logic occ, output int cyc);
    @(negedge clk);
    upd = '{key: k, occupied: occ}; upd_valid = 1;
    do @(posedge clk); while (!upd_ready);
    #1 upd_valid = 0;
    cyc = 0;
    while (!ev_done && !(oom && !busy)) begin @(posedge clk); #1 cyc++; end
    if (ev_done) model_update(k, occ);
  endtask

  task automatic do_query(key_t k);
    @(negedge clk);
    qry_key = k; qry_valid = 1;
    do @(posedge clk); while (!qry_ready);
    #1 qry_valid = 0;
    while (!resp_valid) @(posedge clk);
    #1;
    checks++;
    if (resp.found != ref_map.exists(k) || (resp.found && int'(resp.prob) != ref_map[k])) begin
      failures++;
      $display("query %0d,%0d,%0d: got found %b prob %0d, exp %b %0d", k.x, k.y, k.z,
               resp.found, resp.prob, ref_map.exists(k), ref_map.exists(k) ? ref_map[k] : 0);
    end
  endtask

  // the subtree root carries the maximum log-odds of all leaves below it
  task automatic check_root();
    int mx;
    mx = -100000;
    foreach (ref_map[k]) if (ref_map[k] > mx) mx = ref_map[k];
    checks++;
    if (root_st != ST_INNER || int'(root_prob) != mx) begin
      failures++;
      $display("root: status %0d log-odds %0d, expected inner %0d", root_st, root_prob, mx);
    end
  endtask

  function automatic key_t K(int x, int y, int z);
    return '{x: 16'(x), y: 16'(y), z: 16'(z)};
  endfunction

  initial begin
    int cyc, p0;
    cfg = '{hit: HIT_DEFAULT, miss: MISS_DEFAULT, clamp_min: CLAMP_MIN_DEFAULT,
            clamp_max: CLAMP_MAX_DEFAULT, occ_thr: OCC_THR_DEFAULT, free_thr: FREE_THR_DEFAULT};
    upd_valid = 0; qry_valid = 0; upd = '0; qry_key = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. latency
    do_query(K(100, 200, 300));
    checks++;
    if (root_st != ST_UNKNOWN) begin failures++; $display("root known after reset"); end
    do_update(K(100, 200, 300), 1, cyc);
    check_root();
    checks++;
    if (n_expand != 15) begin failures++; $display("first update expanded %0d levels", n_expand); end
    for (int i = 0; i < 3; i++) begin
      do_update(K(100, 200, 300), i[0], cyc);
      checks++;
      if (cyc + 1 > 103 || cyc + 1 != 65) begin
        failures++; $display("update latency %0d cycles", cyc + 1);
      end
    end
    do_query(K(100, 200, 300));
    do_query(K(101, 200, 300));

    // 2. eight siblings to the clamp -> prune
    p0 = n_prune;
    for (int r = 0; r < 5; r++)
      for (int c = 0; c < 8; c++) do_update(K(c & 1, (c >> 1) & 1, (c >> 2) & 1), 1, cyc);
    checks++;
    if (n_prune == p0) begin failures++; $display("no prune"); end
    for (int c = 0; c < 8; c++) do_query(K(c & 1, (c >> 1) & 1, (c >> 2) & 1));
    do_query(K(2, 0, 0));

    // 3. 64 leaves -> prune two levels
    p0 = n_prune;
    for (int r = 0; r < 5; r++)
      for (int c = 0; c < 64; c++) do_update(K(c & 3, (c >> 2) & 3, (c >> 4) & 3), 1, cyc);
    checks++;
    if (n_prune - p0 < 9) begin failures++; $display("only %0d prunes", n_prune - p0); end
    for (int c = 0; c < 64; c++) do_query(K(c & 3, (c >> 2) & 3, (c >> 4) & 3));
    check_root();

    // 4. expansion of the pruned region reuses pruned rows
    p0 = n_reuse;
    do_update(K(1, 2, 3), 0, cyc);
    checks++;
    if (n_reuse == p0) begin failures++; $display("no row reuse"); end
    for (int c = 0; c < 64; c++) do_query(K(c & 3, (c >> 2) & 3, (c >> 4) & 3));

    // 5. random updates and queries in an 8x8x8 cube
    for (int n = 0; n < 3000; n++) begin
      key_t k;
      k = K($urandom_range(0, 7), $urandom_range(0, 7), $urandom_range(0, 7));
      // voxels with x < 4 are mostly hit, others mostly miss
      do_update(k, ($urandom_range(0, 9) < (k.x < 4 ? 9 : 1)), cyc);
      if (n % 50 == 0) check_root();
      if (n % 4 == 0) do_query(K($urandom_range(0, 8), $urandom_range(0, 8), $urandom_range(0, 8)));
    end
    for (int c = 0; c < 512; c++) do_query(K(c & 7, (c >> 3) & 7, (c >> 6) & 7));

    // 6. fill the banks with scattered voxels until out of memory
    while (!oom) begin
      do_update(K($urandom_range(0, 32767), $urandom_range(0, 32767), $urandom_range(0, 32767)), 1, cyc);
    end
    checks++;
    if (!oom) failures++;
    for (int c = 0; c < 512; c++) do_query(K(c & 7, (c >> 3) & 7, (c >> 6) & 7));
    begin
      int q = 0;
      foreach (ref_map[k]) if (q++ < 300) do_query(k);
    end

    check_root();
    $display("updates %0d prunes %0d expansions %0d reused %0d", n_done, n_prune, n_expand, n_reuse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
