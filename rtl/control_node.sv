// control_node: leaf node of the controller tree.
//
// The controller needs two bits from every PE, busy and odd (the paper's codd).
// A leaf node is wired to a fixed subset of PEs and reports upwards whether any
// of them is busy and whether any of them belongs to an odd cluster: both are
// plain OR reductions. The paper leaves the tree's height, branching factor and
// PE subsets open; here each leaf serves the PEs of one measurement round and
// the reduction is combinational, so the tree adds no clock cycle and the root
// sees the PEs' registered busy/odd bits in the same cycle, as a single-node
// controller would.
module control_node #(
  parameter int unsigned N_IN = 12
) (
  input  logic [N_IN-1:0] pe_busy,
  input  logic [N_IN-1:0] pe_odd,
  output logic            any_busy,
  output logic            any_odd
);

  assign any_busy = |pe_busy;
  assign any_odd  = |pe_odd;

endmodule
