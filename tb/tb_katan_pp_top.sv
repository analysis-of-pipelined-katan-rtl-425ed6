// tb_katan_pp_top -- end-to-end test of the pipelined processor for all six
// ciphers (KATAN and KTANTAN, 32/48/64-bit blocks). For each one the host
// fills the plaintext and key arrays, runs 8 blocks of 254 rounds and then 3
// blocks of 5 rounds, checks every ciphertext against the reference model and
// the run time against N*(rounds+1)+3 cycles. It also counts how often the
// pipeline's mechanisms occur and fails if one never does:
//   stall     - stage 1 holds a block on channel 1 that stage 2 cannot take
//   overlap   - stage 1 holds block n+1 while stage 2 runs rounds on block n
//   handover  - stage 2 takes a block in the same cycle its result leaves
//   short     - a run with a round count other than 254
//   repeat    - rounds with 2 or 3 applications of fa/fb (48/64-bit)
//   ktantan   - blocks encrypted with the KTANTAN key selection
module tb_katan_pp_top;
  import katan_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, cfg_done = 0;
  int n_stall = 0, n_overlap = 0, n_handover = 0, n_short = 0, n_repeat = 0, n_ktantan = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
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

    katan_pp_top #(.BLOCK_BITS(BS), .KTANTAN(KT), .NUM_BLOCKS(8)) dut (
      .clk, .rst_n, .pt_we, .key_we, .wr_addr, .pt_wdata, .key_wdata,
      .start, .num_blocks, .rounds, .busy, .done, .ct_raddr, .ct_rdata);

    always @(posedge clk) if (rst_n) begin
      if (dut.ch1.valid && !dut.ch1.ready) n_stall++;
      if (dut.ch1.valid && dut.u_s2.running) n_overlap++;
      if (dut.ch1.valid && dut.ch1.ready && dut.ch2.valid && dut.ch2.ready) n_handover++;
      if (dut.u_s2.running && BS != 32) n_repeat++;
    end

    task automatic run(input int nb, input int nr);
      logic [BS-1:0] pts [8];
      logic [79:0]   keys [8];
      int cycles;
      for (int i = 0; i < nb; i++) begin
        pts[i]  = BS'({$urandom, $urandom});
        keys[i] = {$urandom, $urandom, $urandom};
        if (i == 0) begin pts[i] = '0; keys[i] = '1; end
        @(negedge clk);
        pt_we = 1; key_we = 1; wr_addr = 3'(i); pt_wdata = pts[i]; key_wdata = keys[i];
      end
      @(negedge clk);
      pt_we = 0; key_we = 0;
      start = 1; num_blocks = 4'(nb); rounds = 8'(nr);
      @(negedge clk);
      start = 0;
      cycles = 0;
      while (!done) begin @(negedge clk); cycles++; end
      checks++;
      if (cycles != nb * (nr + 1) + 3) begin
        failures++;
        $display("FAIL cfg %0d: %0d blocks x %0d rounds took %0d cycles, expected %0d",
                 c, nb, nr, cycles, nb * (nr + 1) + 3);
      end
      for (int i = 0; i < nb; i++) begin
        logic [BS-1:0] e;
        e = BS'(encrypt(BS, KT, 64'(pts[i]), keys[i], nr));
        ct_raddr = 3'(i);
        #1;
        checks++;
        if (ct_rdata !== e) begin
          failures++;
          $display("FAIL cfg %0d block %0d: got %h expected %h", c, i, ct_rdata, e);
        end
      end
      if (nr != 254) n_short++;
      if (KT) n_ktantan += nb;
      checks++;
      if (busy) begin failures++; $display("FAIL cfg %0d busy after done", c); end
    endtask

    initial begin
      wait (rst_n);
      run(8, 254);
      run(3, 5);
      cfg_done++;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    wait (cfg_done == NCFG);
    $display("mechanisms: stall=%0d overlap=%0d handover=%0d short=%0d repeat=%0d ktantan=%0d",
             n_stall, n_overlap, n_handover, n_short, n_repeat, n_ktantan);
    checks += 6;
    if (n_stall == 0)    begin failures++; $display("FAIL no channel stall"); end
    if (n_overlap == 0)  begin failures++; $display("FAIL no stage overlap"); end
    if (n_handover == 0) begin failures++; $display("FAIL no handover"); end
    if (n_short == 0)    begin failures++; $display("FAIL no short run"); end
    if (n_repeat == 0)   begin failures++; $display("FAIL no repeated rounds"); end
    if (n_ktantan == 0)  begin failures++; $display("FAIL no KTANTAN block"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
