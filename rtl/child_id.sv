// child_id: branch ID of the child a key descends into below a node.
//
// A node at tree depth LEVEL (0 = global root) has eight children; the one
// that contains the voxel KEY is chosen by one bit of each axis key, bit
// KEY_W-1-LEVEL, packed as {z, y, x} (x weight 1, y weight 2, z weight 4, the
// OctoMap convention). At LEVEL 0 this is the first-level branch that selects
// the PE; inside a PE it selects the bank that holds the child. Purely
// combinational.
module child_id
  import omu_pkg::*;
(
  input  key_t       key,
  input  logic [4:0] level,   // depth of the parent node, 0..TREE_DEPTH-1
  output logic [2:0] idx
);
  logic [3:0] bitpos;
  always_comb begin
    bitpos = 4'(KEY_W - 1 - 32'(level));
    idx    = {key.z[bitpos], key.y[bitpos], key.x[bitpos]};
  end
endmodule
