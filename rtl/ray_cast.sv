// ray_cast: turns a sensor point into voxel updates.
//
// For each point (given as an integer voxel key, as is the sensor origin)
// the unit walks the straight line of voxels from the origin to the point
// and emits every voxel before the point as a free (miss) voxel and the
// point itself as an occupied (hit) voxel, like OctoMap's ray insertion.
// The walk is an integer 3D Bresenham line: the axis with the largest
// distance N steps every cycle, the other two carry error terms, so a ray
// yields N free voxels and one occupied voxel, one voxel per cycle when the
// queues accept them. No de-duplication of voxels shared between rays is
// done. The published design gives the function of this unit only; the
// integer line walk, key inputs and handshakes are this design's choice
// (OctoMap itself walks the ray in floating point, which can pick a
// slightly different voxel where a line passes near a voxel corner).
module ray_cast
  import omu_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  key_t   origin,
  input  logic   pt_valid,
  output logic   pt_ready,
  input  key_t   pt,
  output logic   free_valid,
  input  logic   free_ready,
  output key_t   free_key,
  output logic   occ_valid,
  input  logic   occ_ready,
  output key_t   occ_key,
  output logic   busy
);
  typedef logic signed [KEY_W+1:0] s_t;     // 18-bit signed

  typedef enum logic [1:0] {R_IDLE, R_FREE, R_OCC} rstate_e;
  rstate_e     state_q;
  key_t        cur_q, end_q;
  s_t          dx_q, dy_q, dz_q, dm_q, ex_q, ey_q, ez_q;
  logic [2:0]  neg_q;                        // step direction -1 per axis
  s_t          n_q;                          // free voxels left

  function automatic s_t absd(logic [KEY_W-1:0] a, logic [KEY_W-1:0] b);
    return (a >= b) ? s_t'({2'b00, a - b}) : s_t'({2'b00, b - a});
  endfunction

  s_t dx, dy, dz, dm;
  always_comb begin
    dx = absd(pt.x, origin.x);
    dy = absd(pt.y, origin.y);
    dz = absd(pt.z, origin.z);
    dm = dx;
    if (dy > dm) dm = dy;
    if (dz > dm) dm = dz;
  end

  assign pt_ready   = (state_q == R_IDLE);
  assign free_valid = (state_q == R_FREE);
  assign free_key   = cur_q;
  assign occ_valid  = (state_q == R_OCC);
  assign occ_key    = end_q;
  assign busy       = (state_q != R_IDLE);

  s_t ex_n, ey_n, ez_n;
  key_t nxt;
  always_comb begin
    nxt  = cur_q;
    ex_n = ex_q - dx_q;
    ey_n = ey_q - dy_q;
    ez_n = ez_q - dz_q;
    if (ex_n < 0) begin ex_n = ex_n + dm_q; nxt.x = neg_q[0] ? cur_q.x - 1'b1 : cur_q.x + 1'b1; end
    if (ey_n < 0) begin ey_n = ey_n + dm_q; nxt.y = neg_q[1] ? cur_q.y - 1'b1 : cur_q.y + 1'b1; end
    if (ez_n < 0) begin ez_n = ez_n + dm_q; nxt.z = neg_q[2] ? cur_q.z - 1'b1 : cur_q.z + 1'b1; end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= R_IDLE;
      cur_q <= '0; end_q <= '0;
      dx_q <= '0; dy_q <= '0; dz_q <= '0; dm_q <= '0;
      ex_q <= '0; ey_q <= '0; ez_q <= '0;
      neg_q <= '0; n_q <= '0;
    end else begin
      unique case (state_q)
        R_IDLE: if (pt_valid) begin
          cur_q <= origin;
          end_q <= pt;
          dx_q <= dx; dy_q <= dy; dz_q <= dz; dm_q <= dm;
          ex_q <= dm >>> 1; ey_q <= dm >>> 1; ez_q <= dm >>> 1;
          neg_q <= {pt.z < origin.z, pt.y < origin.y, pt.x < origin.x};
          n_q   <= dm;
          state_q <= (dm == 0) ? R_OCC : R_FREE;
        end
        R_FREE: if (free_ready) begin
          cur_q <= nxt;
          ex_q <= ex_n; ey_q <= ey_n; ez_q <= ez_n;
          n_q  <= n_q - 1'b1;
          if (n_q == s_t'(1)) state_q <= R_OCC;
        end
        R_OCC: if (occ_ready) state_q <= R_IDLE;
        default: state_q <= R_IDLE;
      endcase
    end
  end
endmodule
