// helios_top: the Helios distributed Union-Find decoder for one distance-D
// rotated surface code over D measurement rounds.
//
// A syndrome (one defect bit per ancilla measurement) is loaded into a 3-D
// array of processing elements, one per decoding-graph vertex (pe_array). The
// PEs grow odd clusters over the edges between them and merge clusters that
// touch, each cluster electing its lowest vertex id as cid and building a
// spanning tree through parent pointers, while the tree controller
// (one control_node per measurement round feeding root_control_node) steps the
// array through GROWING and MERGING until no odd cluster is left. The result is
// the cluster assignment (cid) and spanning tree (parent direction) of every
// vertex, plus the grown edges; turning these into a correction is left to a
// later stage.
//
// Interface and timing (own choices; the paper does not describe how syndromes
// reach the decoder): hold syndrome and weight stable and pulse start for one
// cycle; the PEs load their defect bits on that edge and decoding begins.
// done rises when the controller reaches TERMINATE and stays high, with all PE
// outputs frozen, until the next start. cycle_count is the number of cycles
// from start to done; iteration_count the number of growing stages. With the
// paper's 100 MHz clock one cycle is 10 ns.
//
// Parameters follow the paper's largest implemented configuration, d = 21 with
// 21 rounds (22 x 10 x 21 = 4620 PEs). W_BITS = 5 holds edge weights up to 16,
// the largest w_max the paper evaluates; unweighted decoding uses w = 2.
module helios_top
  import helios_pkg::*;
#(
  parameter int unsigned D      = 21,
  parameter int unsigned ROUNDS = D,
  parameter int unsigned W_BITS = 5,
  parameter int unsigned CNT_W  = 16,
  localparam int unsigned N     = vertices_of(D, ROUNDS),
  localparam int unsigned ID_W  = $clog2(N + 1),
  localparam int unsigned PER_ROUND = rows_of(D) * cols_of(D)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [N-1:0]      syndrome,
  input  logic [W_BITS-1:0] weight      [N][NOWN],
  output logic              done,
  output global_stage_t     global_stage,
  output logic [CNT_W-1:0]  cycle_count,
  output logic [CNT_W-1:0]  iteration_count,
  output logic [ID_W-1:0]   cid         [N],
  output dir_t              parent      [N],
  output logic [W_BITS-1:0] edge_growth [N][NOWN]
);

  logic [N-1:0]      pe_odd;
  logic [N-1:0]      pe_busy;
  logic [ROUNDS-1:0] leaf_busy;
  logic [ROUNDS-1:0] leaf_odd;

  pe_array #(
    .D     (D),
    .ROUNDS(ROUNDS),
    .W_BITS(W_BITS)
  ) u_array (
    .clk         (clk),
    .rst_n       (rst_n),
    .load        (start),
    .syndrome    (syndrome),
    .global_stage(global_stage),
    .weight      (weight),
    .pe_cid      (cid),
    .pe_parent   (parent),
    .pe_odd      (pe_odd),
    .pe_busy     (pe_busy),
    .edge_growth (edge_growth)
  );

  for (genvar t = 0; t < ROUNDS; t++) begin : g_leaf
    control_node #(.N_IN(PER_ROUND)) u_node (
      .pe_busy (pe_busy[t*PER_ROUND +: PER_ROUND]),
      .pe_odd  (pe_odd[t*PER_ROUND +: PER_ROUND]),
      .any_busy(leaf_busy[t]),
      .any_odd (leaf_odd[t])
    );
  end

  root_control_node #(
    .N_LEAF(ROUNDS),
    .CNT_W (CNT_W)
  ) u_root (
    .clk            (clk),
    .rst_n          (rst_n),
    .start          (start),
    .leaf_busy      (leaf_busy),
    .leaf_odd       (leaf_odd),
    .global_stage   (global_stage),
    .done           (done),
    .cycle_count    (cycle_count),
    .iteration_count(iteration_count)
  );

endmodule
