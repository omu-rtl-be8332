// tb_omu_top: the whole accelerator at its full size, driven over AXI4-Lite.
//
// A sensor at a fixed origin scans a wall of points; every scan is repeated
// so that log-odds reach the clamps. Between scans the testbench waits for
// the accelerator to go idle. The wall first stands 20 voxels away, then
// moves to 10 voxels (voxels seen free become occupied), then back (those
// become free again). The rays cross the key midpoint on all three axes, so
// all eight PEs receive work. The testbench keeps its own map: the same
// integer ray walk, then add-and-clamp per voxel. Afterwards it queries
// every voxel the model knows plus unknown ones and compares the status and
// log-odds returned over the bus, and the depth-0 root against the maximum
// of its map. It counts the mechanisms of the design and
// fails if one never happened: scheduler stalls, AXI back-pressure on point
// writes, branch expansion, pruning, reuse of pruned rows, query results of
// each kind, and a query served while updates were running.
module tb_omu_top;
  import omu_pkg::*;
  logic clk = 0, rst_n = 0;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready, busy;
  logic [7:0] s_awaddr, s_araddr;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0] s_wstrb;
  logic [1:0] s_bresp, s_rresp;
  int checks = 0, failures = 0;
  int ref_map [key_t];
  int n_bp = 0, n_occ = 0, n_free = 0, n_unk = 0, n_live_q = 0;
  longint cyc_total = 0;

  omu_top dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc_total++;

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- AXI4-Lite master
  task automatic axi_write(input logic [7:0] a, input logic [31:0] d, output int cyc);
    @(negedge clk);
    s_awvalid = 1; s_awaddr = a; s_wvalid = 1; s_wdata = d; s_wstrb = 4'hF; cyc = 0;
    #1;
    while (!(s_awready && s_wready)) begin @(negedge clk); #1; cyc++; end
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0; s_bready = 1;
    while (!s_bvalid) @(negedge clk);
    checks++;
    if (s_bresp != 2'b00) begin failures++; $display("write %h: bresp %0d", a, s_bresp); end
    @(negedge clk); s_bready = 0;
  endtask

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_arvalid = 1; s_araddr = a;
    #1;
    while (!s_arready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_arvalid = 0; s_rready = 1;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(negedge clk); s_rready = 0;
  endtask

  // ---------------- reference model
  function automatic void model_update(key_t k, logic occ);
    int v;
    v = ref_map.exists(k) ? ref_map[k] : 0;
    v += occ ? int'(HIT_DEFAULT) : int'(MISS_DEFAULT);
    if (v < int'(CLAMP_MIN_DEFAULT)) v = int'(CLAMP_MIN_DEFAULT);
    if (v > int'(CLAMP_MAX_DEFAULT)) v = int'(CLAMP_MAX_DEFAULT);
    ref_map[k] = v;
  endfunction

  function automatic int iabs(int v); return v < 0 ? -v : v; endfunction

  function automatic void model_ray(key_t o, key_t p);
    int d[3], s[3], e[3], c[3], dm;
    d[0] = int'(p.x) - int'(o.x); d[1] = int'(p.y) - int'(o.y); d[2] = int'(p.z) - int'(o.z);
    dm = 0;
    for (int a = 0; a < 3; a++) begin
      s[a] = d[a] < 0 ? -1 : 1; d[a] = iabs(d[a]); if (d[a] > dm) dm = d[a];
    end
    for (int a = 0; a < 3; a++) e[a] = dm / 2;
    c[0] = o.x; c[1] = o.y; c[2] = o.z;
    for (int i = 0; i < dm; i++) begin
      model_update('{x: 16'(c[0]), y: 16'(c[1]), z: 16'(c[2])}, 1'b0);
      for (int a = 0; a < 3; a++) begin
        e[a] -= d[a];
        if (e[a] < 0) begin e[a] += dm; c[a] += s[a]; end
      end
    end
    model_update(p, 1'b1);
  endfunction

  function automatic key_t K(int x, int y, int z);
    return '{x: 16'(x), y: 16'(y), z: 16'(z)};
  endfunction

  localparam int OX = 32762, OY = 32762, OZ = 32762, HALF = 7;

  task automatic send_point(key_t p);
    int cyc;
    axi_write(8'h24, {p.y, p.x}, cyc);
    axi_write(8'h28, {16'h0, p.z}, cyc);
    if (cyc > 0) n_bp++;
    model_ray(K(OX, OY, OZ), p);
  endtask

  task automatic wait_idle();
    logic [31:0] st;
    do axi_read(8'h00, st); while (st[0]);
  endtask

  task automatic query(key_t k, input bit check);
    logic [31:0] r;
    int cyc;
    axi_write(8'h2C, {k.y, k.x}, cyc);
    axi_write(8'h30, {16'h0, k.z}, cyc);
    do axi_read(8'h34, r); while (!r[31]);
    if (check) begin
      status_e es; int v; logic f;
      f  = ref_map.exists(k);
      v  = f ? ref_map[k] : 0;
      es = !f ? ST_UNKNOWN : (v >= int'(OCC_THR_DEFAULT)) ? ST_OCCUPIED
         : (v <= int'(FREE_THR_DEFAULT)) ? ST_FREE : ST_UNKNOWN;
      checks++;
      if (r[30] != f || r[17:16] != es || (f && int'(prob_t'(r[15:0])) != v)) begin
        failures++;
        $display("query %0d,%0d,%0d: got %h, exp found %b status %0d prob %0d", k.x, k.y, k.z, r, f, es, v);
      end
      if (es == ST_OCCUPIED) n_occ++; else if (es == ST_FREE) n_free++; else n_unk++;
    end
  endtask

  task automatic scan(int wall, int reps);
    for (int r = 0; r < reps; r++)
      for (int y = -HALF; y <= HALF; y++)
        for (int z = -HALF; z <= HALF; z++)
          send_point(K(OX + wall, OY + y, OZ + z));
  endtask

  initial begin
    logic [31:0] d;
    int cyc, c_upd, c_prn, c_exp, c_stl, c_rus;
    longint t0;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    axi_read(8'h4C, d);
    checks++;
    if (d != 0) begin failures++; $display("ROOT after reset %h", d); end
    axi_write(8'h1C, {16'(OY), 16'(OX)}, cyc);
    axi_write(8'h20, 32'(OZ), cyc);

    t0 = cyc_total;
    scan(20, 3);
    // a query while the PEs are still updating
    axi_read(8'h00, d);
    if (d[0]) begin query(K(OX + 1, OY, OZ), 0); n_live_q++; end
    scan(20, 2);
    wait_idle();
    $display("scan at 20 voxels: %0d cycles", cyc_total - t0);
    scan(10, 5);
    wait_idle();
    scan(20, 5);
    wait_idle();

    axi_read(8'h38, d); c_upd = d;
    axi_read(8'h3C, d); c_prn = d;
    axi_read(8'h40, d); c_exp = d;
    axi_read(8'h44, d); c_stl = d;
    axi_read(8'h48, d); c_rus = d;
    axi_read(8'h00, d);
    checks++;
    if (d[15:8] != 0) begin failures++; $display("out of memory"); end

    // the depth-0 root holds the maximum log-odds of the whole map
    begin
      int mx = -100000;
      foreach (ref_map[k]) if (ref_map[k] > mx) mx = ref_map[k];
      axi_read(8'h4C, d);
      checks++;
      if (d[17:16] != 2'(ST_INNER) || int'($signed(d[15:0])) != mx) begin
        failures++; $display("ROOT %h, expected inner with %0d", d, mx);
      end
    end

    // compare the map
    begin
      int n = 0;
      foreach (ref_map[k]) begin
        if (n % 2 == 0) query(k, 1);
        n++;
      end
      $display("model holds %0d voxels", n);
    end
    for (int i = 0; i < 40; i++) query(K(OX - 1 - i, OY + 3, OZ), 1);
    query(K(100, 40000, 5), 1);

    $display("updates %0d prunes %0d expansions %0d reused rows %0d stall cycles %0d",
             c_upd, c_prn, c_exp, c_rus, c_stl);
    $display("point writes back-pressured %0d, queries during updates %0d, results occ %0d free %0d unknown %0d",
             n_bp, n_live_q, n_occ, n_free, n_unk);
    checks++;
    if (c_prn == 0 || c_exp == 0 || c_rus == 0 || c_stl == 0 || n_bp == 0 || n_live_q == 0
        || n_occ == 0 || n_free == 0 || n_unk == 0) begin
      failures++; $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
