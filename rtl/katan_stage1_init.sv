// katan_stage1_init -- pipeline stage 1, initialisation.
//
// After start it walks the plaintext and key arrays from index 0 to count-1.
// For each entry it loads the cipher state in one cycle, doing the paper's
// three independent initialisation loops at once: L2[i] = plain[i] for the
// low |L2| bits, L1[i] = plain[i+|L2|] for the rest, and the 80 key bits.
// The result {key, L1, L2} is offered on channel 1 and held until stage 2
// takes it; the next entry is fetched in the cycle of that transfer, so a new
// block is ready whenever stage 2 becomes free.
// Interface: rd_addr addresses both arrays (combinational read data on
// plain_i/key_i); busy is high from start until the last entry was taken.
module katan_stage1_init
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
  input  logic [CW-1:0]         count,
  output logic                  busy,
  output logic [AW-1:0]         rd_addr,
  input  logic [BLOCK_BITS-1:0] plain_i,
  input  key_t                  key_i,
  katan_chan_if.tx              ch
);
  localparam int unsigned N1 = l1_len(BLOCK_BITS);
  localparam int unsigned N2 = l2_len(BLOCK_BITS);

  logic [CW-1:0] idx;      // next array entry to load
  logic [CW-1:0] total;
  logic          active;   // entries left to load
  logic [N1-1:0] l1;
  logic [N2-1:0] l2;

  always_comb begin
    // Loops "L2[i] = plain[i]" and "L1[i] = plain[i + |L2|]" in parallel.
    for (int i = 0; i < N2; i++) l2[i] = plain_i[i];
    for (int i = 0; i < N1; i++) l1[i] = plain_i[i + N2];
  end

  assign rd_addr = idx[AW-1:0];
  assign busy    = active || ch.valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx      <= '0;
      total    <= '0;
      active   <= 1'b0;
      ch.valid <= 1'b0;
      ch.data  <= '0;
    end else if (start) begin
      idx      <= '0;
      total    <= count;
      active   <= (count != 0);
      ch.valid <= 1'b0;
    end else if (active && (!ch.valid || ch.ready)) begin
      ch.data  <= {key_i, l1, l2};
      ch.valid <= 1'b1;
      idx      <= idx + 1'b1;
      active   <= (idx + 1'b1 != total);
    end else if (ch.ready) begin
      ch.valid <= 1'b0;
    end
  end
endmodule
