// uf_ref_pkg: reference model used by the testbenches.
//
// It builds the decoding graph of a distance-d rotated surface code straight
// from the code's geometry, independently of the RTL's neighbour function:
// data qubits sit at (r,c), 0 <= r,c < d, and the plaquette whose top-left data
// qubit is (r,c) sits at (r,c) too, with plaquette rows running from -1 to d-1
// and columns from 0 to d-2. A plaquette is Z-type when r+c is even. Data qubit
// (r,c) joins the Z plaquettes (r-1,c-1) and (r,c) when r+c is even, and
// (r-1,c) and (r,c-1) otherwise; if one of them falls outside the code the
// qubit lies on a boundary and gives no edge. The vertex of plaquette (pr,pc)
// in round t has index (t*(d+1) + pr+1) * (d-1)/2 + pc/2, i.e. id - 1. Vertical
// edges join the same plaquette in rounds t and t+1.
//
// On that graph it runs the serial Union-Find decoder (grow every boundary edge
// of every odd cluster, growth += number of odd endpoint clusters, capped at the
// weight; merge across fully grown edges; repeat while an odd cluster exists)
// and reports each vertex's cluster as its lowest id, the number of growing
// iterations and the final growth of every edge.
//
// Syndromes follow the phenomenological noise model: every edge, i.e. every
// bulk data qubit in every round and every measurement between two rounds,
// flips with probability p, and a vertex is a defect when an odd number of its
// edges flipped.
package uf_ref_pkg;

  typedef struct {
    int a;     // lower vertex index (owner of the growth register)
    int b;     // higher vertex index
    int slot;  // 0: UA (lower column, next row), 1: UB, 2: TU (next round)
  } edge_t;

  localparam int SELF_DIR = 7;

  function automatic int vidx(int d, int t, int pr, int pc);
    return (t * (d + 1) + pr + 1) * ((d - 1) / 2) + pc / 2;
  endfunction

  function automatic void build_graph(input int d, input int rounds, ref edge_t edges[$]);
    edge_t e;
    int p1r, p1c, p2r, p2c;
    edges.delete();
    for (int t = 0; t < rounds; t++) begin
      for (int r = 0; r < d; r++) begin
        for (int c = 0; c < d; c++) begin
          if ((r + c) % 2 == 0) begin p1r = r - 1; p1c = c - 1; p2r = r; p2c = c; end
          else begin p1r = r - 1; p1c = c; p2r = r; p2c = c - 1; end
          if (p1c < 0 || p1c > d - 2 || p2c < 0 || p2c > d - 2) continue;
          // p1 is in the lower plaquette row, so it has the lower id
          e.a = vidx(d, t, p1r, p1c);
          e.b = vidx(d, t, p2r, p2c);
          e.slot = (p2c < p1c) ? 0 : 1;
          edges.push_back(e);
        end
      end
      if (t + 1 < rounds) begin
        for (int pr = -1; pr < d; pr++) begin
          for (int pc = 0; pc <= d - 2; pc++) begin
            if ((((pr + pc) % 2) + 2) % 2 != 0) continue;  // X-type plaquette
            e.a = vidx(d, t, pr, pc);
            e.b = vidx(d, t + 1, pr, pc);
            e.slot = 2;
            edges.push_back(e);
          end
        end
      end
    end
  endfunction

  // neighbour table indexed [vertex*6 + dir], -1 where there is no link
  function automatic void build_nbr(input int n, input edge_t edges[$], ref int nbr[]);
    nbr = new[n * 6];
    foreach (nbr[i]) nbr[i] = -1;
    foreach (edges[i]) begin
      nbr[edges[i].a * 6 + edges[i].slot] = edges[i].b;
      // b sees a through DB (3+1) for UA, DA (3+0) for UB, TD (5) for TU
      case (edges[i].slot)
        0: nbr[edges[i].b * 6 + 4] = edges[i].a;
        1: nbr[edges[i].b * 6 + 3] = edges[i].a;
        default: nbr[edges[i].b * 6 + 5] = edges[i].a;
      endcase
    end
  endfunction

  function automatic int uf_find(ref int par[], input int v);
    while (par[v] != v) begin
      par[v] = par[par[v]];
      v = par[v];
    end
    return v;
  endfunction

  // Serial Union-Find clustering. cid[v] = lowest id (index+1) in v's cluster.
  function automatic void ref_decode(input int n, input edge_t edges[$], input int w[],
                                     input bit syn[], ref int cid[], ref int growth[],
                                     output int iters);
    int par[];
    bit odd[];
    int ra, rb, g;
    bit any_odd;
    par = new[n];
    odd = new[n];
    cid = new[n];
    growth = new[edges.size()];
    foreach (par[v]) par[v] = v;
    foreach (growth[i]) growth[i] = 0;
    iters = 0;
    forever begin
      foreach (odd[v]) odd[v] = 0;
      for (int v = 0; v < n; v++) begin
        ra = uf_find(par, v);
        odd[ra] ^= syn[v];
      end
      any_odd = 0;
      foreach (odd[v]) any_odd |= odd[v];
      if (!any_odd) break;
      iters++;
      foreach (edges[i]) begin
        ra = uf_find(par, edges[i].a);
        rb = uf_find(par, edges[i].b);
        if (ra != rb && growth[i] < w[i]) begin
          g = growth[i] + int'(odd[ra]) + int'(odd[rb]);
          growth[i] = (g < w[i]) ? g : w[i];
        end
      end
      foreach (edges[i]) begin
        if (growth[i] >= w[i]) begin
          ra = uf_find(par, edges[i].a);
          rb = uf_find(par, edges[i].b);
          if (ra != rb) par[ra] = rb;
        end
      end
    end
    foreach (cid[v]) cid[v] = n + 1;
    for (int v = 0; v < n; v++) begin
      ra = uf_find(par, v);
      if (v + 1 < cid[ra]) cid[ra] = v + 1;
    end
    for (int v = 0; v < n; v++) cid[v] = cid[uf_find(par, v)];
  endfunction

  // Phenomenological noise: each edge flips with probability ppm / 1e6.
  function automatic void gen_syndrome(input int n, input edge_t edges[$], input int ppm[],
                                       ref bit syn[]);
    syn = new[n];
    foreach (syn[v]) syn[v] = 0;
    foreach (edges[i]) begin
      if (($urandom % 1000000) < ppm[i]) begin
        syn[edges[i].a] ^= 1'b1;
        syn[edges[i].b] ^= 1'b1;
      end
    end
  endfunction

endpackage
