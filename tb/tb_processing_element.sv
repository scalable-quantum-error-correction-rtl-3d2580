// tb_processing_element: one PE with every link and one with only some links,
// both driven with random neighbour state and compared every cycle with a
// model of the paper's FPGA PE algorithm (stage transition, growing, merging
// with parent selection, subtree parity, odd propagation and the busy rules).
// Directed steps first check loading, a double growth, a cid adoption with its
// parent, parity from a child, and that TERMINATE freezes the PE.
module tb_processing_element;
  import helios_pkg::*;

  localparam int unsigned ID_W   = 6;
  localparam int unsigned W_BITS = 4;
  localparam int unsigned MY_ID  = 20;
  localparam logic [5:0]  MASK_B = 6'b011010;   // UB, DA, DB only

  logic                clk = 1'b0;
  logic                rst_n = 1'b0;
  logic                load = 1'b0;
  logic                m_in = 1'b0;
  global_stage_t       global_stage = GS_TERMINATE;
  logic [W_BITS-1:0]   w_own     [NOWN];
  logic [ID_W-1:0]     nb_cid    [NDIR];
  logic                nb_odd    [NDIR];
  logic                nb_st_odd [NDIR];
  dir_t                nb_parent [NDIR];
  logic                in_full   [NOWN];

  // outputs of the two instances, index 0: all links, 1: MASK_B
  logic [ID_W-1:0]     cid       [2];
  logic                odd       [2];
  logic                st_odd    [2];
  dir_t                parent    [2];
  logic                busy      [2];
  logic [W_BITS-1:0]   own_growth[2][NOWN];
  logic                own_full  [2][NOWN];

  processing_element #(.ID_W(ID_W), .W_BITS(W_BITS), .ID(MY_ID), .NB_MASK(6'b111111)) dut_a (
    .clk, .rst_n, .load, .m_in, .global_stage, .w_own, .nb_cid, .nb_odd, .nb_st_odd,
    .nb_parent, .in_full, .cid(cid[0]), .odd(odd[0]), .st_odd(st_odd[0]),
    .parent(parent[0]), .busy(busy[0]), .own_growth(own_growth[0]), .own_full(own_full[0]));

  processing_element #(.ID_W(ID_W), .W_BITS(W_BITS), .ID(MY_ID), .NB_MASK(MASK_B)) dut_b (
    .clk, .rst_n, .load, .m_in, .global_stage, .w_own, .nb_cid, .nb_odd, .nb_st_odd,
    .nb_parent, .in_full, .cid(cid[1]), .odd(odd[1]), .st_odd(st_odd[1]),
    .parent(parent[1]), .busy(busy[1]), .own_growth(own_growth[1]), .own_full(own_full[1]));

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  // model state per instance
  int  m_m [2], m_stage [2], m_cid [2], m_parent [2], m_g [2][3];
  bit  m_odd [2], m_st [2], m_busy [2];

  function automatic int opp(int d);
    case (d)
      0: return 4;
      1: return 3;
      2: return 5;
      3: return 1;
      4: return 0;
      default: return 2;
    endcase
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic model_step(input int x, input logic [5:0] mask);
    bit nb [6];
    int best, bestd, s;
    bit sub, pod, eb;
    int ng [3];
    if (load) begin
      m_m[x] = m_in; m_stage[x] = 1; m_cid[x] = MY_ID; m_odd[x] = m_in; m_st[x] = m_in;
      m_parent[x] = 7; m_busy[x] = 0;
      for (int e = 0; e < 3; e++) m_g[x][e] = 0;
      return;
    end
    if (global_stage == GS_TERMINATE) return;
    for (int d = 0; d < 6; d++)
      nb[d] = mask[d] && ((d < 3) ? (m_g[x][d] >= int'(w_own[d])) : in_full[d-3]);
    // growing (stage 0 = growing)
    for (int e = 0; e < 3; e++) begin
      ng[e] = m_g[x][e];
      if (mask[e] && m_stage[x] == 0 && int'(nb_cid[e]) != m_cid[x] && m_g[x][e] < int'(w_own[e])) begin
        s = m_g[x][e] + int'(m_odd[x]) + int'(nb_odd[e]);
        ng[e] = (s < int'(w_own[e])) ? s : int'(w_own[e]);
      end
    end
    // subtree parity and checks from the present state
    sub = m_m[x][0];
    eb  = 0;
    best = m_cid[x];
    bestd = 7;
    for (int d = 0; d < 6; d++) begin
      if (nb[d] && int'(nb_parent[d]) == opp(d)) sub ^= nb_st_odd[d];
      if (nb[d] && (int'(nb_cid[d]) != m_cid[x] || nb_odd[d] != m_odd[x])) eb = 1;
      if (nb[d] && int'(nb_cid[d]) < best) begin best = nb_cid[d]; bestd = d; end
    end
    pod = (m_parent[x] == 7) ? m_st[x] : nb_odd[m_parent[x]];
    m_busy[x] = eb || (m_st[x] != sub) || (m_parent[x] == 7 && m_odd[x] != m_st[x]);
    m_odd[x]  = pod;
    m_st[x]   = sub;
    if (best < m_cid[x]) begin m_cid[x] = best; m_parent[x] = bestd; end
    for (int e = 0; e < 3; e++) m_g[x][e] = ng[e];
    if (global_stage == GS_GROWING) m_stage[x] = 0;
    else if (m_stage[x] == 0) m_stage[x] = 1;
  endtask

  task automatic step();
    model_step(0, 6'b111111);
    model_step(1, MASK_B);
    @(negedge clk);
    for (int x = 0; x < 2; x++) begin
      check(int'(cid[x]) == m_cid[x], $sformatf("pe%0d cid %0d, expected %0d", x, cid[x], m_cid[x]));
      check(int'(parent[x]) == m_parent[x], $sformatf("pe%0d parent %0d, expected %0d", x, parent[x], m_parent[x]));
      check(odd[x] == m_odd[x], $sformatf("pe%0d odd", x));
      check(st_odd[x] == m_st[x], $sformatf("pe%0d st_odd", x));
      check(busy[x] == m_busy[x], $sformatf("pe%0d busy %0d, expected %0d", x, busy[x], m_busy[x]));
      for (int e = 0; e < 3; e++)
        check(int'(own_growth[x][e]) == ((x == 1 && !MASK_B[e]) ? 0 : m_g[x][e]),
              $sformatf("pe%0d growth[%0d] %0d, expected %0d", x, e, own_growth[x][e], m_g[x][e]));
    end
  endtask

  task automatic quiet_neighbours();
    for (int d = 0; d < 6; d++) begin
      nb_cid[d] = ID_W'(40 + d); nb_odd[d] = 0; nb_st_odd[d] = 0; nb_parent[d] = DIR_SELF;
    end
    for (int e = 0; e < 3; e++) begin w_own[e] = 2; in_full[e] = 0; end
  endtask

  initial begin
    quiet_neighbours();
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // load a defect
    load = 1; m_in = 1; step(); load = 0;
    check(cid[0] == MY_ID && odd[0] && st_odd[0] && parent[0] == DIR_SELF && !busy[0], "load");
    // grow: UA neighbour odd (+2), UB even (+1), TU in my cluster (no growth)
    nb_odd[0] = 1; nb_cid[2] = ID_W'(MY_ID);
    global_stage = GS_GROWING; step();
    global_stage = GS_MERGING; step();
    check(own_growth[0][0] == 2 && own_growth[0][1] == 1 && own_growth[0][2] == 0, "growth step");
    step();
    check(own_growth[0][0] == 2 && own_growth[0][1] == 1, "growth only once per growing stage");
    // UA edge is now fully grown; its neighbour has a lower cid
    nb_cid[0] = 5; step();
    check(cid[0] == 5 && parent[0] == DIR_UA, "adopt lower cid and parent");
    // DA neighbour, also grown, is our child with odd subtree parity
    in_full[0] = 1; nb_cid[3] = 5; nb_parent[3] = DIR_UB; nb_st_odd[3] = 1; step(); step();
    check(st_odd[0] == 0, "subtree parity includes the child");
    // terminate freezes everything
    global_stage = GS_TERMINATE; nb_cid[4] = 1; in_full[1] = 1; step(); step();
    check(cid[0] == 5, "frozen in TERMINATE");

    for (int i = 0; i < 6000; i++) begin
      load = (($urandom % 40) == 0);
      m_in = $urandom % 2;
      case ($urandom % 8)
        0:       global_stage = GS_GROWING;
        1:       global_stage = GS_TERMINATE;
        default: global_stage = GS_MERGING;
      endcase
      for (int d = 0; d < 6; d++) begin
        nb_cid[d]    = ID_W'(($urandom % 2) ? MY_ID : $urandom % 30);
        nb_odd[d]    = $urandom % 2;
        nb_st_odd[d] = $urandom % 2;
        nb_parent[d] = dir_t'((($urandom % 3) == 0) ? opp(d) : $urandom % 8);
      end
      for (int e = 0; e < 3; e++) begin
        in_full[e] = $urandom % 2;
        if (load) w_own[e] = W_BITS'(1 + $urandom % 6);
      end
      step();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
