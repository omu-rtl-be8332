// tb_ray_cast: random rays with random queue back-pressure. Every ray must
// yield max(|dx|,|dy|,|dz|) free voxels starting at the origin, each one step
// (at most 1 per axis, exactly 1 on the longest axis) from the previous,
// ending next to the point, then the point as the one occupied voxel; the
// voxels are also compared with an integer line walk computed here.
module tb_ray_cast;
  import omu_pkg::*;
  logic clk = 0, rst_n = 0;
  key_t origin, pt, free_key, occ_key;
  logic pt_valid, pt_ready, free_valid, free_ready, occ_valid, occ_ready, busy;
  int checks = 0, failures = 0;

  ray_cast dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int iabs(int v); return v < 0 ? -v : v; endfunction

  initial begin
    pt_valid = 0; free_ready = 0; occ_ready = 0;
    origin = '{x: 16'd1000, y: 16'd2000, z: 16'd3000}; pt = origin;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 400; r++) begin
      int d[3], s[3], e[3], c[3], dm, nfree, cyc;
      key_t p;
      if (r % 50 == 0)
        origin = '{x: 16'($urandom_range(100, 65000)), y: 16'($urandom_range(100, 65000)),
                   z: 16'($urandom_range(100, 65000))};
      p.x = origin.x + 16'($urandom_range(0, 80) - 40);
      p.y = origin.y + 16'($urandom_range(0, 80) - 40);
      p.z = origin.z + 16'($urandom_range(0, 80) - 40);
      if (r == 3) p = origin;
      d[0] = int'(p.x) - int'(origin.x); d[1] = int'(p.y) - int'(origin.y); d[2] = int'(p.z) - int'(origin.z);
      dm = 0;
      for (int a = 0; a < 3; a++) begin
        s[a] = d[a] < 0 ? -1 : 1; d[a] = iabs(d[a]); if (d[a] > dm) dm = d[a];
      end
      for (int a = 0; a < 3; a++) e[a] = dm / 2;
      c[0] = origin.x; c[1] = origin.y; c[2] = origin.z;
      // offer the point
      @(negedge clk);
      pt = p; pt_valid = 1;
      do @(posedge clk); while (!pt_ready);
      @(negedge clk); pt_valid = 0;
      nfree = 0; cyc = 0;
      forever begin
        free_ready = $urandom_range(0, 3) != 0;
        occ_ready  = $urandom_range(0, 3) != 0;
        #1;
        if (free_valid && free_ready) begin
          checks++;
          if (free_key.x != 16'(c[0]) || free_key.y != 16'(c[1]) || free_key.z != 16'(c[2])) begin
            failures++;
            $display("ray %0d free %0d: got %0d,%0d,%0d exp %0d,%0d,%0d", r, nfree,
                     free_key.x, free_key.y, free_key.z, c[0], c[1], c[2]);
          end
          for (int a = 0; a < 3; a++) begin
            e[a] -= d[a];
            if (e[a] < 0) begin e[a] += dm; c[a] += s[a]; end
          end
          nfree++;
        end
        if (occ_valid && occ_ready) begin
          checks++;
          if (occ_key != p || nfree != dm || free_valid
              || c[0] != int'(p.x) || c[1] != int'(p.y) || c[2] != int'(p.z)) begin
            failures++;
            $display("ray %0d end: occ %p free count %0d exp %0d", r, occ_key, nfree, dm);
          end
          @(negedge clk);
          break;
        end
        @(negedge clk);
        cyc++;
      end
      free_ready = 0; occ_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
