// katan_pp_top -- parallel-pipelined KATAN / KTANTAN encryption processor.
//
// A host fills an array of plaintexts and an array of keys, then pulses
// `start` with the number of blocks and the number of rounds. Three stages,
// joined by two unbuffered channels, encrypt the blocks as a pipeline:
//   stage 1 (katan_stage1_init)  loads plaintext into L1/L2 and the key,
//   stage 2 (katan_stage2_round) runs the key schedule and the rounds,
//   stage 3 (katan_stage3_gen)   forms each ciphertext and stores it.
// While stage 2 works on block n, stage 1 already holds block n+1 and stage 3
// stores block n-1. Stage 2 sets the pace: one block per rounds+1 cycles
// once the pipeline is full; a run of N blocks takes N*(rounds+1)+3 cycles
// from start to done (rounds >= 1).
// Host rules, checked by assertions: start only while not busy, with
// num_blocks <= NUM_BLOCKS and rounds <= 254.
// `done` rises when the last ciphertext is stored and stays high until the
// next start; the ciphertext array is then read through ct_raddr/ct_rdata.
// BLOCK_BITS (32, 48, 64) and KTANTAN select one of the six ciphers at
// elaboration time; the default is KATAN32. NUM_BLOCKS, the array depth, is
// not given in the paper and is this design's choice.
module katan_pp_top
  import katan_pkg::*;
#(
  parameter int unsigned BLOCK_BITS = 32,
  parameter bit          KTANTAN    = 1'b0,
  parameter int unsigned NUM_BLOCKS = 8,
  localparam int unsigned AW = (NUM_BLOCKS > 1) ? $clog2(NUM_BLOCKS) : 1,
  localparam int unsigned CW = $clog2(NUM_BLOCKS + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host access to the plaintext and key arrays
  input  logic                  pt_we,
  input  logic                  key_we,
  input  logic [AW-1:0]         wr_addr,
  input  logic [BLOCK_BITS-1:0] pt_wdata,
  input  key_t                  key_wdata,
  // run control
  input  logic                  start,
  input  logic [CW-1:0]         num_blocks,
  input  logic [7:0]            rounds,
  output logic                  busy,
  output logic                  done,
  // host access to the ciphertext array
  input  logic [AW-1:0]         ct_raddr,
  output logic [BLOCK_BITS-1:0] ct_rdata
);
  katan_chan_if #(.W(KEY_BITS + BLOCK_BITS)) ch1 (.clk, .rst_n);
  katan_chan_if #(.W(BLOCK_BITS))            ch2 (.clk, .rst_n);

  logic [AW-1:0]         rd_addr, ct_waddr;
  logic [BLOCK_BITS-1:0] plain;
  key_t                  key;
  logic                  ct_we, s1_busy, s2_busy, running;
  logic [BLOCK_BITS-1:0] ct_wdata;
  logic [CW-1:0]         written, total;
  logic [7:0]            rounds_q;

  katan_array_mem #(.W(BLOCK_BITS), .DEPTH(NUM_BLOCKS)) u_pt_mem (
    .clk, .we(pt_we), .waddr(wr_addr), .wdata(pt_wdata), .raddr(rd_addr), .rdata(plain)
  );

  katan_array_mem #(.W(KEY_BITS), .DEPTH(NUM_BLOCKS)) u_key_mem (
    .clk, .we(key_we), .waddr(wr_addr), .wdata(key_wdata), .raddr(rd_addr), .rdata(key)
  );

  katan_stage1_init #(.BLOCK_BITS(BLOCK_BITS), .NUM_BLOCKS(NUM_BLOCKS)) u_s1 (
    .clk, .rst_n, .start, .count(num_blocks), .busy(s1_busy),
    .rd_addr, .plain_i(plain), .key_i(key), .ch(ch1)
  );

  katan_stage2_round #(.BLOCK_BITS(BLOCK_BITS), .KTANTAN(KTANTAN)) u_s2 (
    .clk, .rst_n, .rounds(rounds_q), .busy(s2_busy), .ch_in(ch1), .ch_out(ch2)
  );

  katan_stage3_gen #(.BLOCK_BITS(BLOCK_BITS), .NUM_BLOCKS(NUM_BLOCKS)) u_s3 (
    .clk, .rst_n, .start, .ch(ch2),
    .wr_en(ct_we), .wr_addr(ct_waddr), .wr_data(ct_wdata), .written
  );

  katan_array_mem #(.W(BLOCK_BITS), .DEPTH(NUM_BLOCKS)) u_ct_mem (
    .clk, .we(ct_we), .waddr(ct_waddr), .wdata(ct_wdata), .raddr(ct_raddr), .rdata(ct_rdata)
  );

  // Run control: latch the run's size, finish when every ciphertext is stored.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running  <= 1'b0;
      done     <= 1'b0;
      total    <= '0;
      rounds_q <= '0;
    end else if (start) begin
      running  <= 1'b1;
      done     <= 1'b0;
      total    <= num_blocks;
      rounds_q <= rounds;
    end else if (running && written == total) begin
      running  <= 1'b0;
      done     <= 1'b1;
    end
  end

  assign busy = running || s1_busy || s2_busy;

  // Host rules: a run is started only when idle, with a block count the
  // arrays can hold and a round count the cipher defines (at most 254).
  a_start_idle : assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("start while busy");
  a_start_size : assert property (@(posedge clk) disable iff (!rst_n)
                                  start |-> (int'(num_blocks) <= int'(NUM_BLOCKS) && int'(rounds) <= int'(MAX_ROUNDS)))
    else $error("start with num_blocks=%0d rounds=%0d", num_blocks, rounds);
endmodule
