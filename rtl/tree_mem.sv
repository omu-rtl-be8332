// tree_mem: one map-memory bank ("T-Mem") of a PE.
//
// Each PE holds eight of these banks so that the eight children of a node,
// which share one row address, are read or written in a single cycle. A bank
// is 32 kB: ROWS = 4096 words of 64 bits (the bank size is the published
// one; the 64-bit word layout is omu_pkg::node_t). In silicon the bank is a
// compiled single-port SRAM macro; here it is an array with the same
// behaviour: one access per cycle, write when en & we, read data registered
// and valid the cycle after a read (en & !we). The array is not reset.
module tree_mem #(
  parameter int unsigned ROWS  = 4096,
  parameter int unsigned ROW_W = $clog2(ROWS)
) (
  input  logic                      clk,
  input  logic                      en,
  input  logic                      we,
  input  logic [ROW_W-1:0]          row,
  input  logic [omu_pkg::WORD_W-1:0] wdata,
  output logic [omu_pkg::WORD_W-1:0] rdata
);
  logic [omu_pkg::WORD_W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[row] <= wdata;
      else    rdata    <= mem[row];
    end
  end
endmodule
