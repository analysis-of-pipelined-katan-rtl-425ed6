// tb_katan_stage3_gen -- offers final {L1, L2} words on channel 2 and checks
// that stage 3 writes cipher[i] = L2[i], cipher[i+|L2|] = L1[i] to
// consecutive ciphertext-array entries, counts them, and that start rewinds
// the index.
module tb_katan_stage3_gen;
  localparam int BS = 64, NB = 8;
  logic clk = 0, rst_n = 0, start = 0;
  logic wr_en;
  logic [2:0] wr_addr;
  logic [BS-1:0] wr_data;
  logic [3:0] written;
  int checks = 0, failures = 0;

  katan_chan_if #(.W(BS)) ch (.clk, .rst_n);

  katan_stage3_gen #(.BLOCK_BITS(BS), .NUM_BLOCKS(NB)) dut (
    .clk, .rst_n, .start, .ch(ch), .wr_en, .wr_addr, .wr_data, .written);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [24:0] l1;
    logic [38:0] l2;
    logic [63:0] exp;
    ch.valid = 0; ch.data = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int run = 0; run < 2; run++) begin
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      #1 check(written == 0, "start clears the count");
      for (int i = 0; i < 6; i++) begin
        l1 = 25'($urandom);
        l2 = {7'($urandom), $urandom};
        for (int b = 0; b < 39; b++) exp[b] = l2[b];
        for (int b = 0; b < 25; b++) exp[39 + b] = l1[b];
        ch.valid = 1; ch.data = {l1, l2};
        #1;
        check(ch.ready && wr_en && wr_addr == 3'(i) && wr_data == exp,
              $sformatf("run %0d word %0d: we=%b addr=%0d data=%h exp %h", run, i, wr_en, wr_addr, wr_data, exp));
        @(negedge clk);
        ch.valid = 0;
        #1 check(!wr_en, "no write without valid");
        @(negedge clk);
      end
      check(written == 6, $sformatf("written = %0d", written));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
