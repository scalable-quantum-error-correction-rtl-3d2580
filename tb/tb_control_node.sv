// tb_control_node: checks the leaf node's two OR reductions on random vectors
// and on the all-zero and one-hot patterns.
module tb_control_node;

  localparam int unsigned N_IN = 12;

  logic [N_IN-1:0] pe_busy;
  logic [N_IN-1:0] pe_odd;
  logic            any_busy;
  logic            any_odd;

  control_node #(.N_IN(N_IN)) dut (.*);

  int checks = 0;
  int failures = 0;

  task automatic check_now();
    bit eb, eo;
    #1;
    eb = 0;
    eo = 0;
    for (int i = 0; i < int'(N_IN); i++) begin
      eb |= pe_busy[i];
      eo |= pe_odd[i];
    end
    checks += 2;
    if (any_busy != eb) begin failures++; $display("FAIL: any_busy for %b", pe_busy); end
    if (any_odd != eo) begin failures++; $display("FAIL: any_odd for %b", pe_odd); end
  endtask

  initial begin
    pe_busy = '0; pe_odd = '0; check_now();
    for (int i = 0; i < int'(N_IN); i++) begin
      pe_busy = '0; pe_odd = '0;
      pe_busy[i] = 1'b1; check_now();
      pe_busy = '0; pe_odd[i] = 1'b1; check_now();
    end
    for (int i = 0; i < 500; i++) begin
      pe_busy = N_IN'($urandom) & N_IN'($urandom) & N_IN'($urandom);
      pe_odd  = N_IN'($urandom) & N_IN'($urandom) & N_IN'($urandom);
      check_now();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
