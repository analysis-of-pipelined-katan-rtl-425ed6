// tb_ktantan_key_select -- compares the KTANTAN subkey selection with the
// reference formula for all 256 counter states and several keys, including
// one-hot keys that expose which key bit each state selects.
module tb_ktantan_key_select;
  import katan_ref_pkg::*;
  logic [79:0] key;
  logic [7:0]  t;
  logic        ka, kb;
  int checks = 0, failures = 0;

  ktantan_key_select dut (.key, .t, .ka, .kb);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] exp;
    for (int k = 0; k < 90; k++) begin
      if (k < 80) key = 80'h1 << k;
      else        key = {$urandom, $urandom, $urandom};
      for (int s = 0; s < 256; s++) begin
        t = s[7:0];
        #1;
        exp = ktantan_bits(key, t);
        checks++;
        if ({kb, ka} !== exp) begin
          failures++;
          if (failures < 10) $display("FAIL key=%h t=%h got %b%b exp %b", key, t, kb, ka, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
