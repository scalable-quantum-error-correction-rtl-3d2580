// tb_helios_top: end-to-end test of the decoder at distance 5 (5 rounds,
// 60 PEs).
//
// Syndromes come from the phenomenological noise model of uf_ref_pkg at
// several error rates, unweighted (w = 2) and with random weights. After each
// decode the testbench checks, against the serial Union-Find reference: the
// cluster id of every vertex, the final growth of every edge, the number of
// growing iterations, and that the parent pointers form a spanning tree of
// each cluster (every non-root points to a vertex of its own cluster across a
// fully grown edge, and following parents reaches the root). Directed cases
// check exact cycle counts: 4 cycles for an empty syndrome and 8 for two
// defects joined by one unweighted edge.
//
// It also counts how often each mechanism of the design happened and fails if
// one never did: double growth (both endpoints odd), single growth, growth
// capped at the weight, merges (vertices adopting a lower cid), cycles in which
// the controller waited for busy PEs, multi-iteration decodes, decodes of an
// empty syndrome, and weighted decodes.
module tb_helios_top;
  import helios_pkg::*;
  import uf_ref_pkg::*;

  localparam int unsigned D      = 5;
  localparam int unsigned ROUNDS = D;
  localparam int unsigned W_BITS = 5;
  localparam int unsigned CNT_W  = 16;
  localparam int unsigned N      = (D + 1) * ((D - 1) / 2) * ROUNDS;
  localparam int unsigned ID_W   = $clog2(N + 1);

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              start = 1'b0;
  logic [N-1:0]      syndrome = '0;
  logic [W_BITS-1:0] weight [N][NOWN];
  logic              done;
  global_stage_t     global_stage;
  logic [CNT_W-1:0]  cycle_count;
  logic [CNT_W-1:0]  iteration_count;
  logic [ID_W-1:0]   cid [N];
  dir_t              parent [N];
  logic [W_BITS-1:0] edge_growth [N][NOWN];

  helios_top #(.D(D), .ROUNDS(ROUNDS), .W_BITS(W_BITS), .CNT_W(CNT_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  // mechanism counters
  int n_grow2 = 0, n_grow1 = 0, n_capped = 0, n_merge = 0, n_wait_busy = 0;
  int n_multi_iter = 0, n_empty = 0, n_weighted = 0;

  edge_t edges[$];
  int    nbr[];
  int    w[];
  int    ppm[];
  bit    syn[];
  int    ref_cid[];
  int    ref_growth[];
  int    ref_iters;
  logic [W_BITS-1:0] prev_growth [N][NOWN];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 20) $display("FAIL: %s", what);
    end
  endtask

  // observe growth steps and controller stalls
  always @(negedge clk) begin
    if (rst_n) begin
      foreach (edges[i]) begin
        int g0, g1;
        g0 = int'(prev_growth[edges[i].a][edges[i].slot]);
        g1 = int'(edge_growth[edges[i].a][edges[i].slot]);
        if (g1 == g0 + 2) n_grow2++;
        if (g1 == g0 + 1) begin
          n_grow1++;
          // a +1 step to the weight while both ends were odd is a capped +2
          if (g1 == w[i] && dut.u_array.odd_a[edges[i].a] && dut.u_array.odd_a[edges[i].b])
            n_capped++;
        end
      end
      prev_growth = edge_growth;
      if (global_stage == GS_MERGING && dut.u_root.wait_cnt == 0 && dut.u_root.any_busy)
        n_wait_busy++;
    end
  end

  task automatic apply_and_decode(input bit exp_cycles_given, input int exp_cycles);
    int timeout;
    int u, v, steps, vv, pd;
    bit ok;
    for (int p = 0; p < int'(N); p++) begin
      syndrome[p] = syn[p];
      for (int e = 0; e < int'(NOWN); e++) weight[p][e] = W_BITS'(2);
    end
    foreach (edges[i]) weight[edges[i].a][edges[i].slot] = W_BITS'(w[i]);
    ref_decode(N, edges, w, syn, ref_cid, ref_growth, ref_iters);
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    timeout = 0;
    while (!done && timeout < 5000) begin
      @(negedge clk);
      timeout++;
    end
    check(done, "decode did not finish");
    check(global_stage == GS_TERMINATE, "controller not in TERMINATE at done");
    check(int'(iteration_count) == ((ref_iters == 0) ? 1 : ref_iters),
          $sformatf("iterations %0d, reference %0d", iteration_count, ref_iters));
    if (exp_cycles_given)
      check(int'(cycle_count) == exp_cycles,
            $sformatf("cycle count %0d, expected %0d", cycle_count, exp_cycles));
    for (int p = 0; p < int'(N); p++) begin
      check(int'(cid[p]) == ref_cid[p],
            $sformatf("vertex %0d cid %0d, reference %0d", p + 1, cid[p], ref_cid[p]));
      if (int'(cid[p]) != p + 1) n_merge++;
      // spanning tree
      if (int'(cid[p]) == p + 1) begin
        check(parent[p] == DIR_SELF, $sformatf("root %0d has a parent", p + 1));
      end else begin
        pd = parent[p];
        ok = (pd < 6);
        if (ok) begin
          u  = nbr[p * 6 + pd];
          ok = (u >= 0) && (cid[u] == cid[p]);
        end
        // walk to the root
        vv = p;
        steps = 0;
        while (ok && parent[vv] != DIR_SELF && steps <= int'(N)) begin
          pd = parent[vv];
          vv = nbr[vv * 6 + pd];
          steps++;
          if (vv < 0) ok = 0;
        end
        check(ok && steps <= int'(N) && int'(cid[p]) == vv + 1,
              $sformatf("vertex %0d parent chain broken", p + 1));
      end
    end
    foreach (edges[i]) begin
      v = int'(edge_growth[edges[i].a][edges[i].slot]);
      check(v == ref_growth[i],
            $sformatf("edge %0d-%0d growth %0d, reference %0d", edges[i].a + 1, edges[i].b + 1,
                      v, ref_growth[i]));
    end
    // a parent is only ever reached over a fully grown edge
    for (int p = 0; p < int'(N); p++) begin
      pd = parent[p];
      if (pd < 6) begin
        u = nbr[p * 6 + pd];
        foreach (edges[i]) begin
          if ((edges[i].a == p && u == edges[i].b) || (edges[i].b == p && u == edges[i].a))
            check(ref_growth[i] >= w[i], $sformatf("vertex %0d parent edge not grown", p + 1));
        end
      end
    end
    if (ref_iters >= 2) n_multi_iter++;
  endtask

  task automatic random_trials(input int trials, input int p_ppm, input int wmax);
    for (int t = 0; t < trials; t++) begin
      foreach (w[i]) w[i] = (wmax <= 2) ? 2 : 2 + int'($urandom % (wmax - 1));
      foreach (ppm[i]) ppm[i] = p_ppm;
      gen_syndrome(N, edges, ppm, syn);
      if (wmax > 2) n_weighted++;
      apply_and_decode(0, 0);
    end
  endtask

  initial begin
    build_graph(D, ROUNDS, edges);
    build_nbr(N, edges, nbr);
    w   = new[edges.size()];
    ppm = new[edges.size()];
    syn = new[N];
    foreach (prev_growth[p, e]) prev_growth[p][e] = '0;
    check(edges.size() == 15 * D + 12 * (D - 1), "edge count of the d=5 graph");
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);

    // empty syndrome: one growing stage, two wait cycles, terminate
    foreach (w[i]) w[i] = 2;
    foreach (syn[v]) syn[v] = 0;
    apply_and_decode(1, 4);
    n_empty++;

    // two defects on the ends of one unweighted edge (PE 1 and PE 3)
    foreach (syn[v]) syn[v] = 0;
    syn[0] = 1;
    syn[2] = 1;
    apply_and_decode(1, 8);

    // same pair on an edge of weight 3: grows 0 -> 2 -> 3 (capped), two iterations
    foreach (edges[i]) if (edges[i].a == 0 && edges[i].b == 2) w[i] = 3;
    apply_and_decode(0, 0);
    check(iteration_count == 2, "weight-3 edge needs two iterations");
    foreach (w[i]) w[i] = 2;

    random_trials(100, 1000, 2);    // p = 0.1 %
    random_trials(100, 20000, 2);   // p = 2 %
    random_trials(60, 60000, 2);    // p = 6 %
    random_trials(60, 20000, 8);    // weighted, w in 2..8
    random_trials(30, 40000, 16);   // weighted, w in 2..16

    $display("mechanisms: grow+2=%0d grow+1=%0d capped=%0d merged_vertices=%0d busy_wait_cycles=%0d multi_iteration=%0d empty=%0d weighted=%0d",
             n_grow2, n_grow1, n_capped, n_merge, n_wait_busy, n_multi_iter, n_empty, n_weighted);
    check(n_grow2 > 0, "double growth never happened");
    check(n_grow1 > 0, "single growth never happened");
    check(n_capped > 0, "growth capped at the weight never happened");
    check(n_merge > 0, "no merge happened");
    check(n_wait_busy > 0, "controller never waited for busy PEs");
    check(n_multi_iter > 0, "no multi-iteration decode");
    check(n_empty > 0, "no empty syndrome");
    check(n_weighted > 0, "no weighted decode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
