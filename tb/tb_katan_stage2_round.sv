// tb_katan_stage2_round -- feeds blocks into stage 2 over channel 1 and
// compares what leaves on channel 2 with the reference cipher, for KATAN32,
// KATAN64 and KTANTAN48 instances and several round counts (254, short and
// 0). Checks the timing: the result is offered rounds+1 cycles after the
// block is taken, and a new block is taken in the cycle the previous
// result leaves when one is waiting.
module tb_katan_stage2_round;
  import katan_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  int done_cfg = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NCFG = 3;
  localparam int CFG_BS [NCFG] = '{32, 64, 48};
  localparam bit CFG_KT [NCFG] = '{1'b0, 1'b0, 1'b1};

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    localparam int BS = CFG_BS[c];
    logic [7:0] rounds;
    logic       busy;
    katan_chan_if #(.W(80 + BS)) ci (.clk, .rst_n);
    katan_chan_if #(.W(BS))      co (.clk, .rst_n);

    katan_stage2_round #(.BLOCK_BITS(BS), .KTANTAN(CFG_KT[c])) dut (
      .clk, .rst_n, .rounds, .busy, .ch_in(ci), .ch_out(co));

    // expected results, in order
    logic [BS-1:0] exp_q [$];
    int            rnd_q [$];
    int cyc = 0, t_accept = 0, got = 0, back_to_back = 0;
    logic co_valid_d = 0;
    always @(posedge clk) begin
      if (rst_n) begin
        // first cycle a result is offered: rounds+1 cycles after the accept
        // edge (one cycle for rounds = 0)
        if (co.valid && !co_valid_d && rnd_q.size() > 0) begin
          checks++;
          if (cyc - t_accept != ((rnd_q[0] == 0) ? 1 : rnd_q[0] + 1)) begin
            failures++;
            $display("FAIL cfg %0d latency %0d for %0d rounds", c, cyc - t_accept, rnd_q[0]);
          end
        end
        if (co.valid && co.ready) begin
          logic [BS-1:0] e;
          int r;
          e = exp_q.pop_front();
          r = rnd_q.pop_front();
          checks++;
          if (co.data !== e) begin
            failures++;
            $display("FAIL cfg %0d block %0d rounds %0d got %h exp %h", c, got, r, co.data, e);
          end
          got++;
        end
        if (ci.valid && ci.ready) begin
          t_accept = cyc;
          if (co.valid && co.ready) back_to_back++;
        end
      end
      co_valid_d <= co.valid;
      cyc++;
    end

    initial begin
      logic [BS-1:0] pt;
      logic [79:0]   key;
      int nr;
      ci.valid = 0; ci.data = '0; co.ready = 1; rounds = 254;
      wait (rst_n);
      for (int b = 0; b < 8; b++) begin
        nr  = (b < 4) ? 254 : (b == 4) ? 0 : (b == 5) ? 1 : 17;
        pt  = BS'({$urandom, $urandom});
        key = {$urandom, $urandom, $urandom};
        if (b == 0 && BS == 32 && !CFG_KT[c]) begin pt = '0; key = '1; end
        exp_q.push_back(BS'(encrypt(BS, CFG_KT[c], 64'(pt), key, nr)));
        rnd_q.push_back(nr);
        @(negedge clk);
        ci.valid = 1; ci.data = {key, pt}; rounds = 8'(nr);
        @(posedge clk);
        while (!ci.ready) @(posedge clk);
        @(negedge clk);
        ci.valid = 0;
        if (b == 2) begin
          // slow receiver: block 2's result waits three cycles on channel 2
          co.ready = 0;
          wait (co.valid);
          repeat (3) @(negedge clk);
          co.ready = 1;
        end
      end
      wait (got == 8);
      checks++;
      if (back_to_back == 0) begin failures++; $display("FAIL cfg %0d never took a block while handing one over", c); end
      if (BS == 32 && !CFG_KT[c]) begin
        checks++;
        if (exp_q.size() != 0) failures++;
      end
      done_cfg++;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    wait (done_cfg == NCFG);
    // the KATAN32 known answer was encrypted by the model; also check model vs vector
    checks++;
    if (encrypt(32, 0, 64'h0, {80{1'b1}}, 254) != 64'h7E1FF945) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
