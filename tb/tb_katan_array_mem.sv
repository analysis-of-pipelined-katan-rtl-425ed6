// tb_katan_array_mem -- writes random words to every entry, reads them back
// through the combinational port, and checks that a cycle without write
// enable changes nothing.
module tb_katan_array_mem;
  localparam int W = 80, D = 8;
  logic clk = 0, we = 0;
  logic [2:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  katan_array_mem #(.W(W), .DEPTH(D)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int pass = 0; pass < 3; pass++) begin
      for (int a = 0; a < D; a++) begin
        @(negedge clk);
        we = (pass != 2);
        waddr = 3'(a);
        wdata = {$urandom, $urandom, $urandom};
        if (we) model[a] = wdata;
      end
      @(negedge clk) we = 0;
      for (int a = D - 1; a >= 0; a--) begin
        raddr = 3'(a);
        #1;
        checks++;
        if (rdata !== model[a]) begin
          failures++;
          $display("FAIL pass %0d addr %0d got %h exp %h", pass, a, rdata, model[a]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
