// katan_stage3_gen -- pipeline stage 3, ciphertext generation.
//
// Takes the final {L1, L2} from channel 2 and forms the ciphertext with the
// paper's two parallel loops, cipher[i] = L2[i] and cipher[i+|L2|] = L1[i]
// (bit 0 of L2 is the ciphertext LSB). The word is written into the
// ciphertext array at the next free index in the same cycle it is taken;
// the stage is ready in every cycle except one with `start`, which rewinds the index; `written` counts the
// ciphertexts stored since then.
module katan_stage3_gen
  import katan_pkg::*;
#(
  parameter int unsigned BLOCK_BITS = 32,
  parameter int unsigned NUM_BLOCKS = 8,
  localparam int unsigned AW = (NUM_BLOCKS > 1) ? $clog2(NUM_BLOCKS) : 1,
  localparam int unsigned CW = $clog2(NUM_BLOCKS + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  katan_chan_if.rx              ch,
  output logic                  wr_en,
  output logic [AW-1:0]         wr_addr,
  output logic [BLOCK_BITS-1:0] wr_data,
  output logic [CW-1:0]         written
);
  localparam int unsigned N1 = l1_len(BLOCK_BITS);
  localparam int unsigned N2 = l2_len(BLOCK_BITS);

  logic [N1-1:0] l1;
  logic [N2-1:0] l2;

  assign ch.ready = !start;
  assign {l1, l2} = ch.data;
  assign wr_en    = ch.valid && !start;
  assign wr_addr  = written[AW-1:0];

  always_comb begin
    for (int i = 0; i < N2; i++) wr_data[i]      = l2[i];
    for (int i = 0; i < N1; i++) wr_data[i + N2] = l1[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     written <= '0;
    else if (start) written <= '0;
    else if (wr_en) written <= written + 1'b1;
  end
endmodule
