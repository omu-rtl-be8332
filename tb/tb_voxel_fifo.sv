// tb_voxel_fifo: random push/pop traffic against a queue model, filling
// and emptying the FIFO.
module tb_voxel_fifo;
  import omu_pkg::*;
  localparam int DEPTH = 5;
  logic clk = 0, rst_n = 0, in_valid, in_ready, out_valid, out_ready;
  voxel_t in_data, out_data;
  logic [3:0] level;
  voxel_t model[$];
  int checks = 0, failures = 0, fulls = 0;

  voxel_fifo #(.T(voxel_t), .DEPTH(DEPTH), .AW(3)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      in_valid  = $urandom_range(0, 99) < ((n / 1000) % 2 ? 70 : 30);
      out_ready = $urandom_range(0, 99) < 50;
      in_data   = voxel_t'({$urandom, $urandom});
      #1;
      checks++;
      if (in_ready != (model.size() < DEPTH) || out_valid != (model.size() > 0)
          || level != 4'(model.size()) || (out_valid && out_data != model[0])) begin
        failures++;
        $display("n %0d: mismatch size %0d", n, model.size());
      end
      if (!in_ready) fulls++;
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    checks++;
    if (fulls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
