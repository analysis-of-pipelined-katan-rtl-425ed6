// tb_katan_round -- compares one combinational round for 32-, 48- and 64-bit
// blocks (1, 2 and 3 applications of fa/fb) with the bit-array reference
// round on random states, subkey bits and IR values.
module tb_katan_round;
  import katan_ref_pkg::*;
  logic [63:0] st;
  logic ka, kb, ir;
  logic [31:0] o32;
  logic [47:0] o48;
  logic [63:0] o64;
  int checks = 0, failures = 0;

  katan_round #(.BLOCK_BITS(32)) d32 (.l1_i(st[31:19]), .l2_i(st[18:0]), .ka, .kb, .ir,
                                      .l1_o(o32[31:19]), .l2_o(o32[18:0]));
  katan_round #(.BLOCK_BITS(48)) d48 (.l1_i(st[47:29]), .l2_i(st[28:0]), .ka, .kb, .ir,
                                      .l1_o(o48[47:29]), .l2_o(o48[28:0]));
  katan_round #(.BLOCK_BITS(64)) d64 (.l1_i(st[63:39]), .l2_i(st[38:0]), .ka, .kb, .ir,
                                      .l1_o(o64[63:39]), .l2_o(o64[38:0]));

  task automatic check(input logic [63:0] got, input logic [63:0] exp, input int bs);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL bs=%0d st=%h got %h exp %h", bs, st, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      st = {$urandom, $urandom};
      {ka, kb, ir} = 3'($urandom);
      #1;
      check({32'h0, o32}, round(32, {32'h0, st[31:0]}, ka, kb, ir), 32);
      check({16'h0, o48}, round(48, {16'h0, st[47:0]}, ka, kb, ir), 48);
      check(o64,          round(64, st,                ka, kb, ir), 64);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
