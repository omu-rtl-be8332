// prune_addr_mgr: recycles the rows of pruned children blocks.
//
// When eight children are pruned into their parent, the one row (pointer)
// that held them becomes free; it is pushed onto a stack. When a branch has
// to be expanded, the manager hands out a free pointer: the stack top if the
// stack holds any, otherwise the next never-used row. The stack with a
// separate top-of-stack register and the push/pop use follow the published
// block diagram; the never-used-row counter, the stack depth and the
// same-cycle rule are this design's choices.
//
// Interface: free_ptr/free_valid always show the pointer the next pop takes
// (free_valid = 0: the bank is full). pop ("tree expand") consumes it at the
// clock edge; push stores pruned_ptr. Push and pop in one cycle are allowed:
// the pop takes the current free_ptr and the pushed pointer becomes the top.
// Row 0 is reserved for the PE's subtree root, so rows start at FIRST_ROW.
// With DEPTH = ROWS - FIRST_ROW the stack can hold every row and never
// overflows.
module prune_addr_mgr #(
  parameter int unsigned ROWS      = 4096,
  parameter int unsigned ROW_W     = $clog2(ROWS),
  parameter int unsigned FIRST_ROW = 1,
  parameter int unsigned DEPTH     = ROWS - FIRST_ROW,
  parameter int unsigned CNT_W     = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [ROW_W-1:0] pruned_ptr,
  input  logic             pop,
  output logic [ROW_W-1:0] free_ptr,
  output logic             free_valid,
  output logic             from_stack,   // free_ptr is a recycled row
  output logic [CNT_W-1:0] count         // pointers on the stack
);
  logic [ROW_W-1:0] stack [DEPTH-1];     // entries below the top
  logic [ROW_W-1:0] top_q;
  logic [CNT_W-1:0] cnt_q;
  logic [ROW_W:0]   next_row_q;          // first never-used row

  assign from_stack = (cnt_q != '0);
  assign free_ptr   = from_stack ? top_q : next_row_q[ROW_W-1:0];
  assign free_valid = from_stack || (next_row_q < (ROW_W+1)'(ROWS));
  assign count      = cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q      <= '0;
      top_q      <= '0;
      next_row_q <= (ROW_W+1)'(FIRST_ROW);
    end else begin
      if (push && pop) begin
        top_q <= pruned_ptr;
        if (!from_stack) begin
          next_row_q <= next_row_q + 1'b1;
          cnt_q      <= cnt_q + 1'b1;
        end
      end else if (push) begin
        if (cnt_q < CNT_W'(DEPTH)) begin
          top_q <= pruned_ptr;
          cnt_q <= cnt_q + 1'b1;
        end
      end else if (pop && free_valid) begin
        if (from_stack) begin
          cnt_q <= cnt_q - 1'b1;
          if (cnt_q > CNT_W'(1)) top_q <= stack[cnt_q - CNT_W'(2)];
        end else begin
          next_row_q <= next_row_q + 1'b1;
        end
      end
    end
  end

  // The stack body has no reset; only entries below cnt_q are ever read.
  always_ff @(posedge clk) begin
    if (push && !pop && cnt_q != '0 && cnt_q < CNT_W'(DEPTH))
      stack[cnt_q - CNT_W'(1)] <= top_q;
  end

  assert property (@(posedge clk) disable iff (!rst_n) pop |-> free_valid)
    else $error("prune_addr_mgr: pop with no free row");
  assert property (@(posedge clk) disable iff (!rst_n) push && !pop |-> cnt_q < CNT_W'(DEPTH))
    else $error("prune_addr_mgr: stack overflow");
endmodule
