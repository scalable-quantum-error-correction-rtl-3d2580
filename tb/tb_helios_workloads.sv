// tb_helios_workloads: the evaluation workloads, simulated at distance 7
// (7 rounds, 168 PEs; the published runs cover d = 3..21): phenomenological noise at error rates 0.05 %, 0.1 % and 0.5 %
// with unit (w = 2) weights, and non-identically distributed errors with
// maximum weights 4, 8 and 16.
//
// For the weighted runs every edge gets its own error probability p_i, drawn
// from a normal distribution of mean 0.001 and standard deviation 0.0005 and
// clipped to [0.0001, 0.0025]; its weight is -ln(p_i) mapped linearly onto
// 2..w_max over that range and rounded. Syndromes flip each edge with its p_i.
//
// Every decode is compared with the serial Union-Find reference (cid of every
// vertex, growth of every edge, number of growing iterations). The mean
// decoding time per round at 100 MHz (cycles x 10 ns / 7) is printed for each
// workload and checked against an upper bound taken from the published
// measurements (at d = 7 about 17.8, 20.0 and 30.8 ns per round for the three
// error rates; the weighted runs were published for d = 13 only, about 250,
// 320 and 490 ns per decode for w_max = 4, 8, 16, used here per decode). The
// published times include overheads outside the decoding array.
module tb_helios_workloads;
  import helios_pkg::*;
  import uf_ref_pkg::*;

  localparam int unsigned D      = 7;
  localparam int unsigned N      = (D + 1) * ((D - 1) / 2) * D;
  localparam int unsigned W_BITS = 5;
  localparam int unsigned CNT_W  = 16;
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

  helios_top #(.D(D), .ROUNDS(D), .W_BITS(W_BITS), .CNT_W(CNT_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  edge_t edges[$];
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

  task automatic decode(output int cycles);
    int timeout;
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
    while (!done && timeout < 20000) begin
      @(negedge clk);
      timeout++;
    end
    check(done, "decode did not finish");
    check(int'(iteration_count) == ((ref_iters == 0) ? 1 : ref_iters),
          $sformatf("iterations %0d, reference %0d", iteration_count, ref_iters));
    ok = 1;
    for (int p = 0; p < int'(N); p++) if (int'(cid[p]) != ref_cid[p]) ok = 0;
    check(ok, "cluster ids differ from the reference");
    ok = 1;
    foreach (edges[i]) if (int'(edge_growth[edges[i].a][edges[i].slot]) != ref_growth[i]) ok = 0;
    check(ok, "edge growth differs from the reference");
    cycles = int'(cycle_count);
  endtask

  // weights and per-edge error rates for w_max (2 = unweighted, rate p_ppm)
  task automatic set_weights(input int wmax, input int p_ppm);
    real u1, u2, pi, lmin, lmax, l;
    lmin = -$ln(0.0025);
    lmax = -$ln(0.0001);
    foreach (w[i]) begin
      if (wmax <= 2) begin
        w[i] = 2;
        ppm[i] = p_ppm;
      end else begin
        u1 = (real'($urandom % 1000000) + 1.0) / 1000001.0;
        u2 = real'($urandom % 1000000) / 1000000.0;
        pi = 0.001 + 0.0005 * $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307 * u2);
        if (pi < 0.0001) pi = 0.0001;
        if (pi > 0.0025) pi = 0.0025;
        l = -$ln(pi);
        w[i] = 2 + int'((real'(wmax - 2)) * (l - lmin) / (lmax - lmin));
        ppm[i] = int'(pi * 1.0e6);
      end
    end
  endtask

  task automatic run_rate(input int p_ppm, input int wmax, input int trials, input real bound_ns);
    int  cyc, total, worst;
    real ns_per_round;
    total = 0;
    worst = 0;
    for (int t = 0; t < trials; t++) begin
      set_weights(wmax, p_ppm);
      gen_syndrome(N, edges, ppm, syn);
      decode(cyc);
      total += cyc;
      if (cyc > worst) worst = cyc;
    end
    ns_per_round = real'(total) * 10.0 / real'(trials) / real'(D);
    $display("d=%0d p=%0.4f w_max=%0d: %0d trials, mean %0.2f cycles, worst %0d cycles, %0.2f ns per round at 100 MHz",
             D, real'(p_ppm) / 1.0e6, wmax, trials, real'(total) / real'(trials), worst, ns_per_round);
    check(ns_per_round <= bound_ns, "mean time per round above the published figure");
  endtask

  initial begin
    build_graph(D, D, edges);
    w   = new[edges.size()];
    ppm = new[edges.size()];
    syn = new[N];
    foreach (w[i]) w[i] = 2;
    check(dut.N == N, "array size is 8 x 3 x 7");
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    run_rate(500, 2, 100, 17.8);
    run_rate(1000, 2, 100, 20.0);
    run_rate(5000, 2, 100, 30.8);
    run_rate(1000, 4, 60, 250.0 / 7.0);
    run_rate(1000, 8, 60, 320.0 / 7.0);
    run_rate(1000, 16, 60, 490.0 / 7.0);
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
