// tb_tree_mem: random writes and reads of one bank against a shadow copy;
// checks that read data arrives exactly one cycle after the read.
module tb_tree_mem;
  localparam int ROWS = 4096;
  logic clk = 0, en, we;
  logic [11:0] row;
  logic [63:0] wdata, rdata;
  logic [63:0] shadow [ROWS];
  logic        written [ROWS];
  int checks = 0, failures = 0;

  tree_mem #(.ROWS(ROWS)) dut (.clk, .en, .we, .row, .wdata, .rdata);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < ROWS; i++) written[i] = 1'b0;
    en = 0; we = 0; row = 0; wdata = 0;
    @(negedge clk);
    for (int n = 0; n < 20000; n++) begin
      logic [11:0] r;
      r = 12'($urandom_range(0, 255)) << ($urandom_range(0, 1) * 4);
      if ($urandom_range(0, 1) == 0 || !written[r]) begin
        en = 1; we = 1; row = r; wdata = {$urandom, $urandom};
        shadow[r] = wdata; written[r] = 1'b1;
        @(negedge clk);
      end else begin
        en = 1; we = 0; row = r;
        @(negedge clk);
        en = 0; row = ~r;                    // idle cycle: data must hold
        checks++;
        if (rdata !== shadow[r]) begin
          failures++;
          $display("row %0d: got %h exp %h", r, rdata, shadow[r]);
        end
      end
    end
    en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
