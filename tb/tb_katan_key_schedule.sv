// tb_katan_key_schedule -- runs the subkey generator in KATAN mode (80-bit
// LFSR, two steps per round) and KTANTAN mode (fixed key, selection by the
// counter state) for 254 rounds and compares ka/kb of every round with the
// fully expanded subkey array of the reference model.
module tb_katan_key_schedule;
  import katan_ref_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, step = 0;
  logic [79:0] key;
  logic [7:0]  t;
  logic ka0, kb0, ka1, kb1;
  int checks = 0, failures = 0;

  katan_key_schedule #(.KTANTAN(1'b0)) dut_katan (
    .clk, .rst_n, .load, .key, .step, .t, .ka(ka0), .kb(kb0));
  katan_key_schedule #(.KTANTAN(1'b1)) dut_ktantan (
    .clk, .rst_n, .load, .key, .step, .t, .ka(ka1), .kb(kb1));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] e0, e1;
    t = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 4; n++) begin
      key  <= (n == 0) ? {80{1'b1}} : {$urandom, $urandom, $urandom};
      load <= 1;
      @(posedge clk);
      load <= 0;
      for (int r = 0; r < 254; r++) begin
        t = counter_state(r);
        #1;
        e0 = subkeys(key, 1'b0, r);
        e1 = subkeys(key, 1'b1, r);
        checks += 2;
        if ({kb0, ka0} !== e0) begin
          failures++;
          if (failures < 10) $display("FAIL KATAN key %0d round %0d got %b%b exp %b", n, r, kb0, ka0, e0);
        end
        if ({kb1, ka1} !== e1) begin
          failures++;
          if (failures < 10) $display("FAIL KTANTAN key %0d round %0d", n, r);
        end
        step <= 1;
        @(posedge clk);
        step <= 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
