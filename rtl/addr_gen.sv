// addr_gen: row address and bank enables of a PE's eight tree-memory banks.
//
// All eight banks of a PE share one row address: the children of a node live
// in one row, child i in bank i. For each step of a voxel walk the PE
// controller names an operation and this block forms the access:
//   AG_ROOT_RD / AG_ROOT_WR  row 0 of bank 0, where the PE's subtree root lives
//   AG_DESC_RD               row = pointer field of the current node, all banks
//   AG_ASC_RD                row = pointer saved on the way down, all banks
//   AG_EXPAND                row = free pointer from the prune address manager,
//                            all banks written (new or re-expanded children)
//   AG_CHILD_WR              row = saved pointer, only bank CHILD written
// ptr_err flags a node pointer outside the bank. Combinational.
module addr_gen
  import omu_pkg::*;
#(
  parameter int unsigned ROWS  = 4096,
  parameter int unsigned ROW_W = $clog2(ROWS)
) (
  input  ag_op_e             op,
  input  logic [PTR_W-1:0]   node_ptr,
  input  logic [ROW_W-1:0]   path_ptr,
  input  logic [ROW_W-1:0]   free_ptr,
  input  logic [2:0]         child,
  output logic [ROW_W-1:0]   row,
  output logic [N_BANK-1:0]  en,
  output logic [N_BANK-1:0]  we,
  output logic               ptr_err
);
  always_comb begin
    row     = '0;
    en      = '0;
    we      = '0;
    ptr_err = 1'b0;
    unique case (op)
      AG_IDLE: ;
      AG_ROOT_RD: en = N_BANK'(1);
      AG_ROOT_WR: begin en = N_BANK'(1); we = N_BANK'(1); end
      AG_DESC_RD: begin
        row     = node_ptr[ROW_W-1:0];
        en      = '1;
        ptr_err = (node_ptr >= PTR_W'(ROWS));
      end
      AG_ASC_RD: begin row = path_ptr; en = '1; end
      AG_EXPAND: begin row = free_ptr; en = '1; we = '1; end
      AG_CHILD_WR: begin
        row = path_ptr;
        en  = N_BANK'(1) << child;
        we  = N_BANK'(1) << child;
      end
      default: ;
    endcase
  end
endmodule
