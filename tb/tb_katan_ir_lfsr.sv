// tb_katan_ir_lfsr -- checks the round-constant generator against the stored
// 254-entry IR table of the cipher and the extended counter states, and that
// load restarts the sequence and step=0 holds it.
module tb_katan_ir_lfsr;
  import katan_ref_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, step = 0;
  logic ir;
  logic [7:0] t;
  int checks = 0, failures = 0;

  katan_ir_lfsr dut (.clk, .rst_n, .load, .step, .ir, .t);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int r = 0; r < 254; r++) begin
      #1 check(ir == IR_TABLE[r], $sformatf("IR round %0d", r));
      check(t == counter_state(r), $sformatf("state round %0d: %h", r, t));
      step <= 1;
      @(posedge clk);
    end
    // hold
    step <= 0;
    @(posedge clk); #1;
    check(t == counter_state(254), "hold after 254 steps");
    // restart mid-sequence
    load <= 1; step <= 1;
    @(posedge clk); #1;
    load <= 0; step <= 0;
    check(t == counter_state(0) && ir == IR_TABLE[0], "load restarts at round 0");
    repeat (10) begin step <= 1; @(posedge clk); end
    #1 check(ir == IR_TABLE[10], "round 10 after restart");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
