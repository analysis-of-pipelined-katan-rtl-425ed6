// tb_katan_workloads -- the evaluation workload of the pipelined KATAN
// cores: one block of each of the six ciphers (KATAN and KTANTAN with 32,
// 48 and 64-bit blocks), 80-bit key, 254 rounds, encrypted by a core
// elaborated for that cipher. Checks the ciphertext (known-answer vectors
// where published, the reference model otherwise) and that one block takes
// 1*(254+1)+3 = 258 cycles, and prints the cycles and bits per cycle so the
// throughput can be worked out for any clock frequency.
module tb_katan_workloads;
  import katan_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, cfg_done = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NCFG = 6;
  localparam int CFG_BS [NCFG] = '{32, 48, 64, 32, 48, 64};
  localparam bit CFG_KT [NCFG] = '{1'b0, 1'b0, 1'b0, 1'b1, 1'b1, 1'b1};

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    localparam int BS = CFG_BS[c];
    localparam bit KT = CFG_KT[c];
    logic          pt_we = 0, key_we = 0, start = 0, busy, done;
    logic [2:0]    wr_addr = 0, ct_raddr = 0;
    logic [BS-1:0] pt_wdata = 0, ct_rdata;
    logic [79:0]   key_wdata = 0;
    logic [3:0]    num_blocks = 0;
    logic [7:0]    rounds = 0;

    katan_pp_top #(.BLOCK_BITS(BS), .KTANTAN(KT)) dut (
      .clk, .rst_n, .pt_we, .key_we, .wr_addr, .pt_wdata, .key_wdata,
      .start, .num_blocks, .rounds, .busy, .done, .ct_raddr, .ct_rdata);

    initial begin
      logic [BS-1:0] pt, exp;
      logic [79:0]   key;
      int cycles;
      pt  = '0;
      key = '1;
      exp = BS'(encrypt(BS, KT, 64'(pt), key, 254));
      // published answers for plaintext 0 and the all-ones key
      if (!KT && BS == 32) exp = BS'(64'h7E1FF945);
      if (!KT && BS == 48) exp = BS'(64'h4B7EFCFB8659);
      if (!KT && BS == 64) exp = BS'(64'h21F2E99C0FAB828A);
      if ( KT && BS == 32) exp = BS'(64'h22EA3988);
      wait (rst_n);
      @(negedge clk);
      pt_we = 1; key_we = 1; wr_addr = 0; pt_wdata = pt; key_wdata = key;
      @(negedge clk);
      pt_we = 0; key_we = 0;
      start = 1; num_blocks = 4'd1; rounds = 8'd254;
      @(negedge clk);
      start = 0;
      cycles = 0;
      while (!done) begin @(negedge clk); cycles++; end
      ct_raddr = 0;
      #1;
      checks += 2;
      if (ct_rdata !== exp) begin
        failures++;
        $display("FAIL %s%0d: got %h expected %h", KT ? "KTANTAN" : "KATAN", BS, ct_rdata, exp);
      end
      if (cycles != 258) begin
        failures++;
        $display("FAIL %s%0d: %0d cycles, expected 258", KT ? "KTANTAN" : "KATAN", BS, cycles);
      end
      $display("%s%0d: ciphertext %h, %0d cycles, %0.4f bits/cycle",
               KT ? "KTANTAN" : "KATAN", BS, ct_rdata, cycles, real'(BS) / real'(cycles));
      cfg_done++;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    wait (cfg_done == NCFG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
