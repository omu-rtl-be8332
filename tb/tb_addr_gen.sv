// tb_addr_gen: every operation with random pointers and child IDs, checked
// against the expected row, enable and write masks.
module tb_addr_gen;
  import omu_pkg::*;
  ag_op_e op;
  logic [31:0] node_ptr;
  logic [11:0] path_ptr, free_ptr, row;
  logic [2:0]  child;
  logic [7:0]  en, we;
  logic        ptr_err;
  int checks = 0, failures = 0;

  addr_gen #(.ROWS(4096)) dut (.op, .node_ptr, .path_ptr, .free_ptr, .child, .row, .en, .we, .ptr_err);

  task automatic expect_eq(string what, logic [11:0] r, logic [7:0] e, logic [7:0] w, logic pe);
    checks++;
    if (row !== r || en !== e || we !== w || ptr_err !== pe) begin
      failures++;
      $display("%s: row %0d en %b we %b err %b, exp %0d %b %b %b", what, row, en, we, ptr_err, r, e, w, pe);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      node_ptr = ($urandom_range(0, 9) == 0) ? $urandom : 32'($urandom_range(0, 4095));
      path_ptr = 12'($urandom); free_ptr = 12'($urandom); child = 3'($urandom);
      op = AG_IDLE;     #1; expect_eq("idle", 0, 0, 0, 0);
      op = AG_ROOT_RD;  #1; expect_eq("root_rd", 0, 8'h01, 8'h00, 0);
      op = AG_ROOT_WR;  #1; expect_eq("root_wr", 0, 8'h01, 8'h01, 0);
      op = AG_DESC_RD;  #1; expect_eq("desc", node_ptr[11:0], 8'hFF, 8'h00, node_ptr > 4095);
      op = AG_ASC_RD;   #1; expect_eq("asc", path_ptr, 8'hFF, 8'h00, 0);
      op = AG_EXPAND;   #1; expect_eq("expand", free_ptr, 8'hFF, 8'hFF, 0);
      op = AG_CHILD_WR; #1; expect_eq("child_wr", path_ptr, 8'(1 << child), 8'(1 << child), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
