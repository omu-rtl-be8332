// voxel_fifo: first-in first-out queue with valid/ready on both sides.
//
// Used for the free-voxel and occupied-voxel queues between ray casting and
// the voxel scheduler, and for the query queue of the voxel query unit. The
// element type T and the depth are parameters (the depth is this design's
// choice; queue sizes are not published). A push is accepted when not full,
// a pop when not empty; both may happen in the same cycle. The head is shown
// combinationally from a circular buffer. Registers reset, storage does not.
module voxel_fifo #(
  parameter type         T     = omu_pkg::voxel_t,
  parameter int unsigned DEPTH = 16,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  T        in_data,
  output logic    out_valid,
  input  logic    out_ready,
  output T        out_data,
  output logic [AW:0] level
);
  T             buf_q [DEPTH];
  logic [AW-1:0] rd_q, wr_q;
  logic [AW:0]   cnt_q;
  logic          push, pop;

  assign in_ready  = (cnt_q != (AW+1)'(DEPTH));
  assign out_valid = (cnt_q != '0);
  assign out_data  = buf_q[rd_q];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign level     = cnt_q;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= inc(wr_q);
      if (pop)  rd_q <= inc(rd_q);
      cnt_q <= cnt_q + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) buf_q[wr_q] <= in_data;
  end
endmodule
