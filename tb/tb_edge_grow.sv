// tb_edge_grow: random test of the edge growth register.
//
// Each cycle the inputs are randomised (clear rarely, weights 0..20 changed only
// after a clear) and the register is compared with an independent model of
// growth <= min(growth + odd_a + odd_b, w), applied only in Growing, only across
// two clusters and only below the weight. Directed steps check +2 from two odd
// ends, the cap at w, and that a fully grown edge stays put.
module tb_edge_grow;

  localparam int unsigned W_BITS = 5;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic              clear = 1'b0;
  logic              growing = 1'b0;
  logic              cid_differ = 1'b0;
  logic              odd_a = 1'b0;
  logic              odd_b = 1'b0;
  logic [W_BITS-1:0] w = W_BITS'(2);
  logic [W_BITS-1:0] growth;
  logic              full;

  edge_grow #(.W_BITS(W_BITS)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int model = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 20) $display("FAIL: %s", what);
    end
  endtask

  // one clock with the present inputs, then compare
  task automatic step();
    int s;
    if (clear) model = 0;
    else if (growing && cid_differ && model < int'(w)) begin
      s = model + int'(odd_a) + int'(odd_b);
      model = (s < int'(w)) ? s : int'(w);
    end
    @(negedge clk);
    check(int'(growth) == model, $sformatf("growth %0d, expected %0d", growth, model));
    check(full == (model >= int'(w)), "full flag");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(growth == '0, "growth after reset");

    // directed: w = 3, both ends odd: 0 -> 2 -> 3 (capped) -> stays 3
    w = 3; growing = 1; cid_differ = 1; odd_a = 1; odd_b = 1;
    step(); check(growth == 2, "two odd ends add 2");
    step(); check(growth == 3, "growth capped at w");
    step(); check(growth == 3 && full, "fully grown edge stays");
    // clear, then same cluster: no growth
    clear = 1; step(); clear = 0;
    cid_differ = 0; step(); check(growth == 0, "no growth inside a cluster");
    // not in Growing: no growth
    cid_differ = 1; growing = 0; step(); check(growth == 0, "no growth outside Growing");

    for (int i = 0; i < 3000; i++) begin
      clear      = (($urandom % 16) == 0);
      if (clear) w = W_BITS'($urandom % 21);
      growing    = $urandom % 2;
      cid_differ = ($urandom % 4) != 0;
      odd_a      = $urandom % 2;
      odd_b      = $urandom % 2;
      step();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
