// tb_root_control_node: checks the controller's stage sequence and timing.
//
// Directed part: after start the stage is GROWING for exactly one cycle, then
// MERGING; busy is ignored for the two wait cycles; MERGING holds while any
// leaf reports busy; with no busy leaf it returns to GROWING if a leaf reports
// odd and goes to TERMINATE (done) otherwise; cycle and iteration counts are
// exact. Random part: random busy/odd per leaf and occasional restarts,
// compared cycle by cycle with a model of the controller algorithm.
module tb_root_control_node;
  import helios_pkg::*;

  localparam int unsigned N_LEAF = 5;
  localparam int unsigned CNT_W  = 16;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              start = 1'b0;
  logic [N_LEAF-1:0] leaf_busy = '0;
  logic [N_LEAF-1:0] leaf_odd = '0;
  global_stage_t     global_stage;
  logic              done;
  logic [CNT_W-1:0]  cycle_count;
  logic [CNT_W-1:0]  iteration_count;

  root_control_node #(.N_LEAF(N_LEAF), .CNT_W(CNT_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  // model state
  global_stage_t m_gs = GS_TERMINATE;
  int m_wait = 0, m_cyc = 0, m_it = 0;
  bit m_done = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic step();
    if (start) begin
      m_gs = GS_GROWING; m_wait = 0; m_done = 0; m_cyc = 0; m_it = 0;
    end else begin
      if (m_gs != GS_TERMINATE) m_cyc++;
      if (m_gs == GS_GROWING) begin
        m_gs = GS_MERGING; m_wait = 2; m_it++;
      end else if (m_gs == GS_MERGING) begin
        if (m_wait > 0) m_wait--;
        else if (leaf_busy == '0) begin
          if (leaf_odd == '0) begin m_gs = GS_TERMINATE; m_done = 1; end
          else m_gs = GS_GROWING;
        end
      end
    end
    @(negedge clk);
    check(global_stage == m_gs, $sformatf("stage %s, expected %s", global_stage.name(), m_gs.name()));
    check(done == m_done, "done");
    check(int'(cycle_count) == m_cyc, $sformatf("cycle_count %0d, expected %0d", cycle_count, m_cyc));
    check(int'(iteration_count) == m_it, "iteration_count");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(global_stage == GS_TERMINATE && !done, "idle after reset");

    // directed: start, growing lasts one cycle
    start = 1; step(); start = 0;
    check(global_stage == GS_GROWING, "GROWING after start");
    leaf_busy = '1; leaf_odd = '1;
    step(); check(global_stage == GS_MERGING, "MERGING one cycle after GROWING");
    leaf_busy = '0;           // ignored during the two wait cycles
    step(); check(global_stage == GS_MERGING, "wait cycle 1");
    leaf_busy = '1;
    step(); check(global_stage == GS_MERGING, "wait cycle 2");
    step(); check(global_stage == GS_MERGING, "held while busy");
    leaf_busy = '0;           // stable, still odd -> grow again
    step(); check(global_stage == GS_GROWING, "odd cluster left: GROWING again");
    leaf_odd = '0;
    step(); step(); step();
    step(); check(global_stage == GS_TERMINATE && done, "no odd cluster: TERMINATE");
    check(cycle_count == 9 && iteration_count == 2, "cycle and iteration count");
    step(); check(cycle_count == 9, "count frozen after done");

    for (int i = 0; i < 5000; i++) begin
      start     = (($urandom % 64) == 0);
      leaf_busy = N_LEAF'($urandom) & N_LEAF'($urandom);
      leaf_odd  = (($urandom % 3) == 0) ? N_LEAF'($urandom) : '0;
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
