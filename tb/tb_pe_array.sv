// tb_pe_array: the PE grid at distance 7 (8 x 3 x 7 = 168 PEs) under a
// stage sequence generated by the testbench itself.
//
// The testbench plays the controller: one GROWING cycle, then MERGING until two
// cycles have passed and no PE is busy, then GROWING again while any PE is odd.
// For random phenomenological syndromes (uf_ref_pkg) it compares every PE's cid
// and every edge's growth with the serial Union-Find reference and checks that
// every parent pointer leads, across the grid links, to a PE of the same
// cluster. A directed case checks that a defect pair linked by a time-like
// edge merges, exercising the links between rounds.
module tb_pe_array;
  import helios_pkg::*;
  import uf_ref_pkg::*;

  localparam int unsigned D      = 7;
  localparam int unsigned ROUNDS = D;
  localparam int unsigned W_BITS = 4;
  localparam int unsigned N      = (D + 1) * ((D - 1) / 2) * ROUNDS;
  localparam int unsigned ID_W   = $clog2(N + 1);

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              load = 1'b0;
  logic [N-1:0]      syndrome = '0;
  global_stage_t     global_stage = GS_TERMINATE;
  logic [W_BITS-1:0] weight [N][NOWN];
  logic [ID_W-1:0]   pe_cid [N];
  dir_t              pe_parent [N];
  logic [N-1:0]      pe_odd;
  logic [N-1:0]      pe_busy;
  logic [W_BITS-1:0] edge_growth [N][NOWN];

  pe_array #(.D(D), .ROUNDS(ROUNDS), .W_BITS(W_BITS)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  edge_t edges[$];
  int    nbr[];
  int    w[];
  int    ppm[];
  bit    syn[];
  int    ref_cid[];
  int    ref_growth[];
  int    ref_iters;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic decode();
    int iters, guard, u, pd;
    for (int p = 0; p < int'(N); p++) begin
      syndrome[p] = syn[p];
      for (int e = 0; e < int'(NOWN); e++) weight[p][e] = W_BITS'(2);
    end
    foreach (edges[i]) weight[edges[i].a][edges[i].slot] = W_BITS'(w[i]);
    ref_decode(N, edges, w, syn, ref_cid, ref_growth, ref_iters);
    load = 1;
    @(negedge clk);
    load = 0;
    iters = 0;
    guard = 0;
    forever begin
      global_stage = GS_GROWING;
      iters++;
      @(negedge clk);
      global_stage = GS_MERGING;
      repeat (3) @(negedge clk);
      while (pe_busy != '0 && guard < 5000) begin
        @(negedge clk);
        guard++;
      end
      if (pe_odd == '0 || guard >= 5000) break;
    end
    global_stage = GS_TERMINATE;
    @(negedge clk);
    check(guard < 5000, "array never settled");
    check(iters == ((ref_iters == 0) ? 1 : ref_iters), $sformatf("iterations %0d, reference %0d", iters, ref_iters));
    for (int p = 0; p < int'(N); p++) begin
      check(int'(pe_cid[p]) == ref_cid[p], $sformatf("PE %0d cid %0d, reference %0d", p + 1, pe_cid[p], ref_cid[p]));
      pd = pe_parent[p];
      if (pd == 7) check(int'(pe_cid[p]) == p + 1, $sformatf("PE %0d without parent is not a root", p + 1));
      else begin
        u = (pd < 6) ? nbr[p * 6 + pd] : -1;
        check(u >= 0 && pe_cid[u] == pe_cid[p], $sformatf("PE %0d parent outside its cluster", p + 1));
      end
    end
    foreach (edges[i])
      check(int'(edge_growth[edges[i].a][edges[i].slot]) == ref_growth[i], "edge growth");
  endtask

  initial begin
    build_graph(D, ROUNDS, edges);
    build_nbr(N, edges, nbr);
    w   = new[edges.size()];
    ppm = new[edges.size()];
    syn = new[N];
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // time-like pair: the same ancilla in rounds 2 and 3
    foreach (w[i]) w[i] = 2;
    foreach (syn[v]) syn[v] = 0;
    syn[24 + 5] = 1;
    syn[48 + 5] = 1;
    decode();
    check(pe_cid[48 + 5] == 24 + 5 + 1 && pe_parent[48 + 5] == DIR_TD, "time-like merge");

    for (int t = 0; t < 120; t++) begin
      foreach (w[i]) w[i] = (t < 80) ? 2 : 2 + int'($urandom % 7);
      foreach (ppm[i]) ppm[i] = (t % 3 == 0) ? 2000 : 25000;
      gen_syndrome(N, edges, ppm, syn);
      decode();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
