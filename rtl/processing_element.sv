// processing_element: one vertex of the decoding graph in the distributed
// Union-Find decoder.
//
// Each PE keeps the state the paper places in its shared memories:
//   S1 (read by adjacent PEs): cid, odd, parent, st_odd
//   S2 (read by the controller): busy, and odd doubling as codd
//   S3: growth of every edge to a higher-id neighbour (edge_grow instances)
// plus its defect flag m and its local stage. All of it is registers.
//
// Per clock, in parallel, following the paper's FPGA-oriented PE algorithm:
//   stage    GROWING while the controller broadcasts GROWING, then MERGING on
//            the next clock; frozen while the controller says TERMINATE.
//   growing  in stage GROWING, owned edges to a PE of another cluster grow by
//            the number of odd endpoints (edge_grow).
//   merging  among the neighbours (PEs across fully grown edges) and itself,
//            the PE takes the lowest cid; if that is a neighbour's, it adopts it
//            and makes that neighbour its parent. st_odd becomes m XOR the
//            st_odd of all children (neighbours whose parent is this PE). A root
//            (parent = itself) sets odd to st_odd, others copy the parent's odd.
//   checking busy is set when a neighbour disagrees on cid or odd, when st_odd
//            is not yet the parity of the children, or when a root's odd is not
//            its st_odd; it clears once none of these holds. The per-link terms
//            are the edge_busy flags of the paper's PE diagram.
// Parity therefore flows from the leaves to the root and cid/odd flow from the
// root to the leaves until the whole array is quiet.
//
// Own choices where the paper is silent: parent is kept as a 3-bit direction
// (dir_t) instead of a full id, which identifies the same neighbour; a one-cycle
// load pulse initialises the PE from its syndrome bit m (cid = id, odd = st_odd
// = m, parent = self, busy = 0, growth = 0); ties between neighbours with the
// same lowest cid go to the lowest direction number.
//
// Interface: nb_* inputs are indexed by dir_t (UA, UB, TU, DA, DB, TD) and carry
// the S1 state of the six adjacent PEs; in_full carries the fully-grown flag of
// the three edges owned by the DA, DB and TD neighbours. NB_MASK says which of
// the six links exist; inputs of missing links are ignored.
module processing_element
  import helios_pkg::*;
#(
  parameter int unsigned ID_W    = 13,
  parameter int unsigned W_BITS  = 5,
  parameter int unsigned ID      = 1,
  parameter logic [5:0]  NB_MASK = 6'b111111
) (
  input  logic                clk,
  input  logic                rst_n,
  // syndrome load, one-cycle pulse at the start of a decode
  input  logic                load,
  input  logic                m_in,
  // S4, controller broadcast
  input  global_stage_t       global_stage,
  // weights of the owned edges (UA, UB, TU)
  input  logic [W_BITS-1:0]   w_own     [NOWN],
  // S1 of the adjacent PEs, indexed by direction
  input  logic [ID_W-1:0]     nb_cid    [NDIR],
  input  logic                nb_odd    [NDIR],
  input  logic                nb_st_odd [NDIR],
  input  dir_t                nb_parent [NDIR],
  // fully-grown flags of the edges owned by the DA, DB and TD neighbours
  input  logic                in_full   [NOWN],
  // S1 of this PE
  output logic [ID_W-1:0]     cid,
  output logic                odd,
  output logic                st_odd,
  output dir_t                parent,
  // S2 of this PE
  output logic                busy,
  // S3 of this PE
  output logic [W_BITS-1:0]   own_growth [NOWN],
  output logic                own_full   [NOWN]
);

  localparam logic [ID_W-1:0] MY_ID = ID_W'(ID);

  logic      m;
  pe_stage_t stage;
  logic      running;

  logic [NDIR-1:0] nb;        // link exists and its edge is fully grown
  logic [NDIR-1:0] child;     // neighbour whose parent is this PE
  logic [NDIR-1:0] edge_busy; // neighbour disagrees on cid or odd
  logic            sub_parity;
  logic [ID_W-1:0] min_cid;
  dir_t            min_dir;
  logic            parent_odd;

  assign running = (global_stage != GS_TERMINATE);

  // ---------------------------------------------------------------- growing
  for (genvar e = 0; e < NOWN; e++) begin : g_own
    if (NB_MASK[e]) begin : g_edge
      edge_grow #(.W_BITS(W_BITS)) u_grow (
        .clk       (clk),
        .rst_n     (rst_n),
        .clear     (load),
        .growing   (running && stage == PS_GROWING),
        .cid_differ(nb_cid[e] != cid),
        .odd_a     (odd),
        .odd_b     (nb_odd[e]),
        .w         (w_own[e]),
        .growth    (own_growth[e]),
        .full      (own_full[e])
      );
    end else begin : g_none
      assign own_growth[e] = '0;
      assign own_full[e]   = 1'b0;
    end
  end

  // ---------------------------------------------------------- neighbourhood
  always_comb begin
    for (int d = 0; d < NDIR; d++) begin
      if (d < NOWN) nb[d] = NB_MASK[d] && own_full[d];
      else          nb[d] = NB_MASK[d] && in_full[d-NOWN];
      child[d]     = nb[d] && (nb_parent[d] == opposite(d));
      edge_busy[d] = nb[d] && ((nb_cid[d] != cid) || (nb_odd[d] != odd));
    end
  end

  // subtree_parity(v) = m XOR st_odd of every child
  always_comb begin
    sub_parity = m;
    for (int d = 0; d < NDIR; d++) begin
      if (child[d]) sub_parity = sub_parity ^ nb_st_odd[d];
    end
  end

  // lowest cid among the neighbours and this PE
  always_comb begin
    min_cid = cid;
    min_dir = DIR_SELF;
    for (int d = 0; d < NDIR; d++) begin
      if (nb[d] && (nb_cid[d] < min_cid)) begin
        min_cid = nb_cid[d];
        min_dir = dir_t'(d);
      end
    end
  end

  always_comb begin
    parent_odd = st_odd;
    for (int d = 0; d < NDIR; d++) begin
      if (parent == dir_t'(d)) parent_odd = nb_odd[d];
    end
  end

  // ------------------------------------------------------------------ state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m      <= 1'b0;
      stage  <= PS_MERGING;
      cid    <= MY_ID;
      odd    <= 1'b0;
      st_odd <= 1'b0;
      parent <= DIR_SELF;
      busy   <= 1'b0;
    end else if (load) begin
      m      <= m_in;
      stage  <= PS_MERGING;
      cid    <= MY_ID;
      odd    <= m_in;
      st_odd <= m_in;
      parent <= DIR_SELF;
      busy   <= 1'b0;
    end else if (running) begin
      // stage transition
      if (global_stage == GS_GROWING) stage <= PS_GROWING;
      else if (stage == PS_GROWING)   stage <= PS_MERGING;
      // merging
      if (min_cid < cid) begin
        cid    <= min_cid;
        parent <= min_dir;
      end
      st_odd <= sub_parity;
      odd    <= (parent == DIR_SELF) ? st_odd : parent_odd;
      // checking
      busy <= (|edge_busy) || (st_odd != sub_parity) ||
              ((parent == DIR_SELF) && (odd != st_odd));
    end
  end

endmodule
