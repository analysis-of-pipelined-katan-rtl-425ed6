// tb_katan_pp_top_full -- the processor at its default configuration
// (KATAN32, 8-entry arrays, no parameter overrides) encrypts a full array of
// 8 blocks with the full 254 rounds. Block 0 and 1 are the cipher's published
// known-answer vectors; the others are random and checked against the
// reference model. The run must take 8*255+3 cycles.
module tb_katan_pp_top_full;
  import katan_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic pt_we = 0, key_we = 0, start = 0, busy, done;
  logic [2:0]  wr_addr = 0, ct_raddr = 0;
  logic [31:0] pt_wdata = 0, ct_rdata;
  logic [79:0] key_wdata = 0;
  logic [3:0]  num_blocks = 0;
  logic [7:0]  rounds = 0;
  int checks = 0, failures = 0;

  katan_pp_top dut (
    .clk, .rst_n, .pt_we, .key_we, .wr_addr, .pt_wdata, .key_wdata,
    .start, .num_blocks, .rounds, .busy, .done, .ct_raddr, .ct_rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] pts [8], exp [8];
    logic [79:0] keys [8];
    int cycles;
    pts[0] = 32'h0;        keys[0] = '1;   exp[0] = 32'h7E1FF945;
    pts[1] = 32'hFFFFFFFF; keys[1] = '0;   exp[1] = 32'h432E61DA;
    for (int i = 2; i < 8; i++) begin
      pts[i]  = $urandom;
      keys[i] = {$urandom, $urandom, $urandom};
      exp[i]  = 32'(encrypt(32, 1'b0, 64'(pts[i]), keys[i], 254));
    end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 8; i++) begin
      @(negedge clk);
      pt_we = 1; key_we = 1; wr_addr = 3'(i); pt_wdata = pts[i]; key_wdata = keys[i];
    end
    @(negedge clk);
    pt_we = 0; key_we = 0;
    start = 1; num_blocks = 4'd8; rounds = 8'd254;
    @(negedge clk);
    start = 0;
    cycles = 0;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (cycles != 8 * 255 + 3) begin
      failures++;
      $display("FAIL run took %0d cycles, expected %0d", cycles, 8 * 255 + 3);
    end
    for (int i = 0; i < 8; i++) begin
      ct_raddr = 3'(i);
      #1;
      checks++;
      if (ct_rdata !== exp[i]) begin
        failures++;
        $display("FAIL block %0d: got %h expected %h", i, ct_rdata, exp[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
