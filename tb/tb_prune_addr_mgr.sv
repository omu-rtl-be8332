// tb_prune_addr_mgr: random pops (expansions) and pushes of previously
// handed-out rows (prunes), single and same-cycle, against a stack model
// with a never-used-row counter; runs the bank until it is full.
module tb_prune_addr_mgr;
  localparam int ROWS = 64;
  logic clk = 0, rst_n = 0, push, pop, free_valid, from_stack;
  logic [5:0] pruned_ptr, free_ptr;
  logic [6:0] count;
  int checks = 0, failures = 0, reuses = 0, both = 0, fulls = 0;
  logic [5:0] stk[$];
  logic [5:0] held[$];
  int next_row = 1;

  prune_addr_mgr #(.ROWS(ROWS)) dut (.clk, .rst_n, .push, .pruned_ptr, .pop,
    .free_ptr, .free_valid, .from_stack, .count);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; pruned_ptr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 20000; n++) begin
      int exp_ptr, exp_valid, k;
      @(negedge clk);
      exp_valid = (stk.size() > 0) || (next_row < ROWS);
      exp_ptr   = (stk.size() > 0) ? int'(stk[$]) : next_row;
      checks++;
      if (free_valid != 1'(exp_valid) || (exp_valid && free_ptr != 6'(exp_ptr))
          || count != 7'(stk.size()) || from_stack != (stk.size() > 0)) begin
        failures++;
        $display("n %0d: free %0d/%b exp %0d/%0d count %0d exp %0d", n, free_ptr, free_valid,
                 exp_ptr, exp_valid, count, stk.size());
      end
      if (!exp_valid) fulls++;
      pop  = exp_valid && ($urandom_range(0, 99) < ((n / 2000) % 2 ? 70 : 40));
      push = held.size() > 0 && $urandom_range(0, 99) < 45;
      if (push) begin
        k = $urandom_range(0, held.size() - 1);
        pruned_ptr = held[k];
        held.delete(k);
      end
      if (pop) begin
        held.push_back(6'(exp_ptr));
        if (stk.size() > 0) begin void'(stk.pop_back()); reuses++; end
        else next_row++;
      end
      if (push) stk.push_back(pruned_ptr);
      if (push && pop) both++;
      @(posedge clk); #1;
      push = 0; pop = 0;
    end
    checks++;
    if (reuses == 0 || both == 0 || fulls == 0) begin
      failures++;
      $display("coverage: reuses %0d both %0d full %0d", reuses, both, fulls);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
