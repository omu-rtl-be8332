// tb_omu_ctrl: AXI4-Lite register access of the controller: reset values,
// byte-strobed writes and read-back, the sensor origin, point and query
// posting with back-pressure (write response held while the unit is not
// ready), result reads that pop, event counters, the ROOT register, STATUS and
// SLVERR.
module tb_omu_ctrl;
  import omu_pkg::*;
  logic clk = 0, rst_n = 0;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [7:0] s_awaddr, s_araddr;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0] s_wstrb;
  logic [1:0] s_bresp, s_rresp;
  cfg_t cfg;
  key_t origin, pt, qry;
  logic pt_valid, pt_ready, qry_valid, qry_ready, res_valid, res_ready, busy, ev_stall;
  status_e res_status, root_st;
  prob_t root_prob;
  qresp_t res;
  logic [N_PE-1:0] oom, ev_done, ev_prune, ev_expand, ev_reuse;
  int checks = 0, failures = 0;
  int pts_taken = 0, qs_taken = 0, pops = 0;
  key_t last_pt, last_q;

  omu_ctrl dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (pt_valid && pt_ready) begin pts_taken++; last_pt = pt; end
    if (qry_valid && qry_ready) begin qs_taken++; last_q = qry; end
    if (res_ready && res_valid) pops++;
  end

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d, input logic [3:0] strb,
                           output logic [1:0] resp, output int cyc);
    @(negedge clk);
    s_awvalid = 1; s_awaddr = a; s_wvalid = 1; s_wdata = d; s_wstrb = strb; cyc = 0;
    #1;
    while (!(s_awready && s_wready)) begin @(negedge clk); #1; cyc++; end
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0; s_bready = 1;
    while (!s_bvalid) @(negedge clk);
    resp = s_bresp;
    @(negedge clk); s_bready = 0;
  endtask

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    s_arvalid = 1; s_araddr = a;
    #1;
    while (!s_arready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_arvalid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    s_rready = 1;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata; resp = s_rresp;
    @(negedge clk); s_rready = 0;
  endtask

  task automatic expect32(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h exp %h", what, got, exp); end
  endtask

  initial begin
    logic [31:0] d; logic [1:0] r; int cyc;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0;
    pt_ready = 0; qry_ready = 0; res_valid = 0; res_status = ST_UNKNOWN; res = '0;
    root_st = ST_UNKNOWN; root_prob = '0;
    busy = 0; oom = 0; ev_done = 0; ev_prune = 0; ev_expand = 0; ev_reuse = 0; ev_stall = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    axi_read(8'h04, d, r); expect32("HIT reset", d, 32'(HIT_DEFAULT));
    axi_read(8'h08, d, r); expect32("MISS reset", d, 32'(MISS_DEFAULT));
    axi_read(8'h10, d, r); expect32("CLAMP_MAX reset", d, 32'(CLAMP_MAX_DEFAULT));
    axi_write(8'h04, 32'h0000_0123, 4'b0011, r, cyc);
    axi_read(8'h04, d, r); expect32("HIT write", d, 32'h123);
    axi_write(8'h0C, 32'h0000_AB00, 4'b0010, r, cyc);
    axi_read(8'h0C, d, r); expect32("CLAMP_MIN byte write", d, 32'(prob_t'({8'hAB, 8'(CLAMP_MIN_DEFAULT)})));
    checks++; if (cfg.hit != 16'h123) failures++;
    axi_write(8'h1C, 32'h0022_0011, 4'hF, r, cyc);
    axi_write(8'h20, 32'h0000_0033, 4'hF, r, cyc);
    checks++; if (origin != '{x: 16'h11, y: 16'h22, z: 16'h33}) begin failures++; $display("origin"); end

    // point with back-pressure: BVALID only after pt_ready
    axi_write(8'h24, 32'h0200_0100, 4'hF, r, cyc);
    fork
      begin repeat (7) @(negedge clk); pt_ready = 1; end
      axi_write(8'h28, 32'h0000_0300, 4'hF, r, cyc);
    join
    pt_ready = 0;
    checks++;
    if (pts_taken != 1 || last_pt != '{x: 16'h100, y: 16'h200, z: 16'h300} || cyc < 6) begin
      failures++; $display("point: taken %0d wait %0d", pts_taken, cyc);
    end
    qry_ready = 1;
    axi_write(8'h2C, 32'h0005_0004, 4'hF, r, cyc);
    axi_write(8'h30, 32'h0000_0006, 4'hF, r, cyc);
    checks++;
    if (qs_taken != 1 || last_q != '{x: 16'h4, y: 16'h5, z: 16'h6}) begin failures++; $display("query"); end

    // results
    axi_read(8'h34, d, r); expect32("RESULT empty", d & 32'h8000_0000, 0);
    res_valid = 1; res = '{found: 1'b1, prob: -16'sd500}; res_status = ST_FREE;
    axi_read(8'h00, d, r); expect32("STATUS result", d[1:0], 2'b10);
    axi_read(8'h34, d, r); expect32("RESULT", d, {1'b1, 1'b1, 12'h0, 2'b10, 16'hFE0C});
    checks++; if (pops != 1) begin failures++; $display("pops %0d", pops); end
    res_valid = 0;

    // counters
    @(negedge clk); ev_done = 8'b1011_0001; ev_prune = 8'h03; ev_expand = 8'hFF; ev_reuse = 8'h10; ev_stall = 1;
    @(negedge clk); ev_done = 8'h01; ev_prune = 0; ev_expand = 0; ev_reuse = 0; ev_stall = 1;
    @(negedge clk); ev_done = 0; ev_stall = 0;
    axi_read(8'h38, d, r); expect32("CNT updates", d, 5);
    axi_read(8'h3C, d, r); expect32("CNT prunes", d, 2);
    axi_read(8'h40, d, r); expect32("CNT expands", d, 8);
    axi_read(8'h44, d, r); expect32("CNT stalls", d, 2);
    axi_read(8'h48, d, r); expect32("CNT reuse", d, 1);
    root_st = ST_INNER; root_prob = -16'sd300;
    axi_read(8'h4C, d, r); expect32("ROOT inner", d, 32'h0003_FED4);
    expect32("ROOT OKAY", 32'(r), 0);
    root_st = ST_FREE; root_prob = 16'sd5;
    axi_read(8'h4C, d, r); expect32("ROOT free leaf", d, 32'h0002_0005);
    busy = 1; oom = 8'h81;
    axi_read(8'h00, d, r); expect32("STATUS", d, 32'h0000_8101);
    axi_read(8'hF0, d, r); expect32("SLVERR read", 32'(r), 2);
    axi_write(8'hF0, 0, 4'hF, r, cyc); expect32("SLVERR write", 32'(r), 2);
    axi_write(8'h18, 32'hFFFF_FFF0, 4'hF, r, cyc); expect32("OKAY write", 32'(r), 0);
    checks++; if (cfg.free_thr != -16'sd16) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
