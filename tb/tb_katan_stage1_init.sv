// tb_katan_stage1_init -- stage 1 reads plaintext/key arrays held by the
// testbench and must deliver {key, L1, L2} for entries 0..count-1, in order,
// over channel 1 while the receiver's ready is random. Also checks that a
// word is offered every cycle when ready stays high, and that busy ends.
module tb_katan_stage1_init;
  localparam int BS = 48, NB = 8;
  logic clk = 0, rst_n = 0, start = 0;
  logic [3:0]  count;
  logic        busy;
  logic [2:0]  rd_addr;
  logic [BS-1:0] pts [NB];
  logic [79:0]   keys [NB];
  int checks = 0, failures = 0;
  bit rand_ready = 1;

  katan_chan_if #(.W(80 + BS)) ch (.clk, .rst_n);

  katan_stage1_init #(.BLOCK_BITS(BS), .NUM_BLOCKS(NB)) dut (
    .clk, .rst_n, .start, .count, .busy, .rd_addr,
    .plain_i(pts[rd_addr]), .key_i(keys[rd_addr]), .ch(ch));

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

  // Receiver: random or constant ready, records transfers.
  int got = 0;
  int first_cycle, last_cycle, cyc = 0;
  always @(posedge clk) cyc++;
  always @(negedge clk) ch.ready <= rand_ready ? 1'($urandom) : 1'b1;
  always @(posedge clk) if (rst_n && ch.valid && ch.ready) begin
    // The plaintext's low 29 bits are L2, the high 19 bits L1.
    check(ch.data == {keys[got], pts[got][47:29], pts[got][28:0]},
          $sformatf("entry %0d data %h", got, ch.data));
    if (got == 0) first_cycle = cyc;
    last_cycle = cyc;
    got++;
  end

  initial begin
    ch.ready = 0;
    for (int i = 0; i < NB; i++) begin
      pts[i]  = {$urandom, $urandom};
      keys[i] = {$urandom, $urandom, $urandom};
    end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int run = 0; run < 3; run++) begin
      rand_ready = (run != 1);
      count = (run == 2) ? 4'd3 : 4'd8;
      got = 0;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      while (busy) @(negedge clk);
      check(got == int'(count), $sformatf("run %0d delivered %0d of %0d", run, got, count));
      if (run == 1) check(last_cycle - first_cycle == 7, "one word per cycle at full rate");
      repeat (3) @(negedge clk);
      check(got == int'(count) && !ch.valid, "nothing more after the run");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
