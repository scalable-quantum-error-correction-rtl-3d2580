// helios_pkg: types and helpers shared by the distributed Union-Find decoder.
//
// The decoder keeps one processing element (PE) per vertex of the 3-D decoding
// graph of a rotated surface code. A vertex is a Z-type ancilla measurement in
// one measurement round. Per round the ancillas form (d+1) rows of (d-1)/2
// columns; each row is shifted by half a column against its neighbours, so a
// vertex touches up to two vertices in the row above, two in the row below, and
// the same ancilla in the previous and the next round (six links at most).
//
// Vertex numbering follows the paper: ids start at 1 in the bottom-left corner
// and run in row-major order, round after round. The edge between two vertices
// is owned (its growth register lives) in the PE with the lower id, that is the
// PE for which the link points "up" (next row or next round).
//
// Directions, as seen from a PE (row i, column k, round t):
//   DIR_UA  row i+1, the lower of the two columns it touches
//   DIR_UB  row i+1, the higher column
//   DIR_DA  row i-1, the PE whose DIR_UB link points here
//   DIR_DB  row i-1, the PE whose DIR_UA link points here
//   DIR_TU  same ancilla, round t+1
//   DIR_TD  same ancilla, round t-1
// The first three are the owned edges (higher-id neighbour), the last three are
// read from the neighbour that owns them. DIR_SELF marks a root's own parent.
package helios_pkg;

  // Controller state held in S4 and broadcast to every PE. The paper's
  // Checking stage runs concurrently with Merging in the FPGA version, so only
  // three values remain. TERMINATE also serves as the idle state between
  // decodes.
  typedef enum logic [1:0] {
    GS_TERMINATE = 2'd0,
    GS_GROWING   = 2'd1,
    GS_MERGING   = 2'd2
  } global_stage_t;

  // Local stage of a PE (never shared with the controller).
  typedef enum logic {
    PS_GROWING = 1'b0,
    PS_MERGING = 1'b1
  } pe_stage_t;

  localparam int unsigned NDIR = 6;
  localparam int unsigned NOWN = 3;  // owned edges per PE: UA, UB, TU

  typedef enum logic [2:0] {
    DIR_UA   = 3'd0,
    DIR_UB   = 3'd1,
    DIR_TU   = 3'd2,
    DIR_DA   = 3'd3,
    DIR_DB   = 3'd4,
    DIR_TD   = 3'd5,
    DIR_SELF = 3'd7
  } dir_t;

  // Direction under which the neighbour in direction d sees this PE.
  function automatic dir_t opposite(input int unsigned d);
    case (d)
      0:       return DIR_DB;  // my UA neighbour reaches me through its DB link
      1:       return DIR_DA;
      2:       return DIR_TD;
      3:       return DIR_UB;
      4:       return DIR_UA;
      5:       return DIR_TU;
      default: return DIR_SELF;
    endcase
  endfunction

  // Geometry of the decoding graph for code distance d.
  function automatic int unsigned rows_of(input int unsigned d);
    return d + 1;
  endfunction

  function automatic int unsigned cols_of(input int unsigned d);
    return (d - 1) / 2;
  endfunction

  function automatic int unsigned vertices_of(input int unsigned d, input int unsigned rounds);
    return (d + 1) * ((d - 1) / 2) * rounds;
  endfunction

  // Index (0-based, id-1) of the neighbour of vertex (t,i,k) in direction dir,
  // or -1 when there is none (edge of the lattice, or a boundary data qubit,
  // which this graph does not model).
  function automatic int neighbour_index(input int unsigned d, input int unsigned rounds,
                                         input int t, input int i, input int k,
                                         input int unsigned dir);
    int r;
    int c;
    int nt;
    int ni;
    int nk;
    r  = int'(rows_of(d));
    c  = int'(cols_of(d));
    nt = t;
    ni = i;
    nk = k;
    case (dir)
      0: begin ni = i + 1; nk = (i % 2 == 0) ? k : k - 1; end
      1: begin ni = i + 1; nk = (i % 2 == 0) ? k + 1 : k; end
      2: begin nt = t + 1; end
      3: begin ni = i - 1; nk = (i % 2 == 0) ? k : k - 1; end
      4: begin ni = i - 1; nk = (i % 2 == 0) ? k + 1 : k; end
      5: begin nt = t - 1; end
      default: return -1;
    endcase
    if (nt < 0 || nt >= int'(rounds) || ni < 0 || ni >= r || nk < 0 || nk >= c) return -1;
    return (nt * r + ni) * c + nk;
  endfunction

  // Which of the six links of vertex (t,i,k) exist, one bit per direction.
  function automatic logic [5:0] link_mask(input int unsigned d, input int unsigned rounds,
                                           input int t, input int i, input int k);
    logic [5:0] m;
    for (int dir = 0; dir < 6; dir++) begin
      m[dir] = (neighbour_index(d, rounds, t, i, k, dir) >= 0);
    end
    return m;
  endfunction

endpackage
