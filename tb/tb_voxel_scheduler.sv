// tb_voxel_scheduler: two random voxel streams through model queues into
// eight model PEs that are randomly busy. Every voxel must reach the PE named
// by its first-level branch (key bit 15 of x, y, z), as hit or miss
// according to its queue, each queue in order, at most one per cycle; a
// stall must be flagged exactly when a head waits and none can go.
module tb_voxel_scheduler;
  import omu_pkg::*;
  logic clk = 0, rst_n = 0;
  logic free_valid, free_ready, occ_valid, occ_ready, stall;
  key_t free_key, occ_key;
  logic [N_PE-1:0] pe_valid, pe_ready;
  voxel_t pe_vox;
  key_t fq[$], oq[$];
  int checks = 0, failures = 0, stalls = 0, got_f = 0, got_o = 0;
  localparam int N = 3000;

  voxel_scheduler dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pe_of(key_t k);
    return k.x[15] + 2 * k.y[15] + 4 * k.z[15];
  endfunction

  initial begin
    for (int i = 0; i < N; i++) begin
      fq.push_back(key_t'({$urandom, $urandom}));
      oq.push_back(key_t'({$urandom, $urandom}));
    end
    pe_ready = '0; free_valid = 0; occ_valid = 0; free_key = '0; occ_key = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (got_f < N || got_o < N) begin
      @(negedge clk);
      pe_ready   = 8'($urandom) & 8'($urandom);
      free_valid = fq.size() > 0 && $urandom_range(0, 3) != 0;
      occ_valid  = oq.size() > 0 && $urandom_range(0, 3) != 0;
      free_key   = fq.size() > 0 ? fq[0] : '0;
      occ_key    = oq.size() > 0 ? oq[0] : '0;
      #1;
      checks++;
      begin
        logic fo, oo;
        fo = free_valid && pe_ready[pe_of(free_key)];
        oo = occ_valid && pe_ready[pe_of(occ_key)];
        if ($countones(pe_valid) > 1 || (pe_valid & ~pe_ready) != 0 || stall != ((free_valid || occ_valid) && !fo && !oo)
            || (free_ready && occ_ready) || ((fo || oo) && pe_valid == 0)) begin
          failures++;
          $display("handshake error pe_valid %b ready %b stall %b", pe_valid, pe_ready, stall);
        end
      end
      if (stall) stalls++;
      if (free_ready) begin
        checks++;
        if (pe_vox.key != fq[0] || pe_vox.occupied || pe_valid != 8'(1 << pe_of(fq[0]))) begin
          failures++; $display("free voxel misrouted");
        end
        void'(fq.pop_front()); got_f++;
      end
      if (occ_ready) begin
        checks++;
        if (pe_vox.key != oq[0] || !pe_vox.occupied || pe_valid != 8'(1 << pe_of(oq[0]))) begin
          failures++; $display("occupied voxel misrouted");
        end
        void'(oq.pop_front()); got_o++;
      end
    end
    checks++;
    if (stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
