// pe_array: the 3-D grid of processing elements, one per decoding-graph vertex.
//
// For code distance D and ROUNDS measurement rounds the array holds
// (D+1) x (D-1)/2 x ROUNDS PEs: (D+1) rows of (D-1)/2 Z-ancillas per round,
// numbered from 1 in the bottom-left corner in row-major order, round after
// round (PE index = id - 1). Adjacent rows are offset by half a column, so a PE
// links to two PEs in the row above and two in the row below (fewer at the
// left and right ends of a row), and to the same ancilla in the previous and
// next round. Each link is a decoding-graph edge: the two PEs read each other's
// S1 state (cid, odd, st_odd, parent) over it, and the lower-id PE holds the
// edge's growth register and exports its fully-grown flag to the higher-id PE.
// The direction names and the neighbour function are in helios_pkg.
//
// The graph holds only edges between two ancillas; data qubits on the code's
// left and right boundaries, which touch a single Z-ancilla, have no edge (the
// paper counts only the (d+1)(d-1)/2 ancilla vertices per round and describes
// no boundary vertex). A syndrome therefore needs an even number of defects in
// every connected group to be decodable, which holds for any pattern of bulk
// data-qubit and measurement errors.
//
// Interface: syndrome and the outputs are indexed by PE index; weight[p][e] is
// the weight of the edge PE p owns in direction e (UA, UB, TU), ignored where
// the edge does not exist, and edge_growth[p][e] is that edge's growth (0 for
// a missing edge). Everything is registered inside the PEs; the array
// itself is wiring.
module pe_array
  import helios_pkg::*;
#(
  parameter int unsigned D      = 21,
  parameter int unsigned ROUNDS = D,
  parameter int unsigned W_BITS = 5,
  localparam int unsigned N     = vertices_of(D, ROUNDS),
  localparam int unsigned ID_W  = $clog2(N + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  logic [N-1:0]      syndrome,
  input  global_stage_t     global_stage,
  input  logic [W_BITS-1:0] weight  [N][NOWN],
  output logic [ID_W-1:0]   pe_cid    [N],
  output dir_t              pe_parent [N],
  output logic [N-1:0]      pe_odd,
  output logic [N-1:0]      pe_busy,
  output logic [W_BITS-1:0] edge_growth [N][NOWN]
);

  localparam int unsigned R = rows_of(D);
  localparam int unsigned C = cols_of(D);

  logic [ID_W-1:0]   cid_a    [N];
  logic              odd_a    [N];
  logic              st_odd_a [N];
  dir_t              parent_a [N];
  logic              busy_a   [N];
  logic [W_BITS-1:0] growth_a [N][NOWN];
  logic              full_a   [N][NOWN];

  for (genvar p = 0; p < N; p++) begin : g_pe
    localparam int T = p / (R * C);
    localparam int I = (p / C) % R;
    localparam int K = p % C;

    logic [ID_W-1:0] nb_cid    [NDIR];
    logic            nb_odd    [NDIR];
    logic            nb_st_odd [NDIR];
    dir_t            nb_parent [NDIR];
    logic            in_full   [NOWN];

    for (genvar d = 0; d < NDIR; d++) begin : g_link
      localparam int Q = neighbour_index(D, ROUNDS, T, I, K, d);
      if (Q >= 0) begin : g_yes
        assign nb_cid[d]    = cid_a[Q];
        assign nb_odd[d]    = odd_a[Q];
        assign nb_st_odd[d] = st_odd_a[Q];
        assign nb_parent[d] = parent_a[Q];
        if (d >= NOWN) begin : g_in
          // DA reads the neighbour's UB edge, DB its UA edge, TD its TU edge
          localparam int OWN = (d == 3) ? 1 : (d == 4) ? 0 : 2;
          assign in_full[d-NOWN] = full_a[Q][OWN];
        end
      end else begin : g_no
        assign nb_cid[d]    = '0;
        assign nb_odd[d]    = 1'b0;
        assign nb_st_odd[d] = 1'b0;
        assign nb_parent[d] = DIR_SELF;
        if (d >= NOWN) begin : g_in
          assign in_full[d-NOWN] = 1'b0;
        end
      end
    end

    processing_element #(
      .ID_W   (ID_W),
      .W_BITS (W_BITS),
      .ID     (p + 1),
      .NB_MASK(link_mask(D, ROUNDS, T, I, K))
    ) u_pe (
      .clk         (clk),
      .rst_n       (rst_n),
      .load        (load),
      .m_in        (syndrome[p]),
      .global_stage(global_stage),
      .w_own       (weight[p]),
      .nb_cid      (nb_cid),
      .nb_odd      (nb_odd),
      .nb_st_odd   (nb_st_odd),
      .nb_parent   (nb_parent),
      .in_full     (in_full),
      .cid         (cid_a[p]),
      .odd         (odd_a[p]),
      .st_odd      (st_odd_a[p]),
      .parent      (parent_a[p]),
      .busy        (busy_a[p]),
      .own_growth  (growth_a[p]),
      .own_full    (full_a[p])
    );

    assign pe_cid[p]    = cid_a[p];
    assign pe_parent[p] = parent_a[p];
    assign pe_odd[p]    = odd_a[p];
    assign pe_busy[p]   = busy_a[p];
    assign edge_growth[p] = growth_a[p];
  end

endmodule
