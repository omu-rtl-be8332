// tb_child_id: branch IDs of random keys at every level against the octree
// key rule (bit 15-level of x, y, z with weights 1, 2, 4).
module tb_child_id;
  import omu_pkg::*;
  key_t key;
  logic [4:0] level;
  logic [2:0] idx;
  int checks = 0, failures = 0;

  child_id dut (.key, .level, .idx);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      int exp_idx;
      key   = '{x: 16'($urandom), y: 16'($urandom), z: 16'($urandom)};
      level = 5'($urandom_range(0, 15));
      #1;
      exp_idx = ((key.x >> (15 - level)) & 1) + 2 * ((key.y >> (15 - level)) & 1)
              + 4 * ((key.z >> (15 - level)) & 1);
      checks++;
      if (idx != 3'(exp_idx)) begin
        failures++;
        $display("key %h level %0d: got %0d exp %0d", key, level, idx, exp_idx);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
