// katan_round -- one KATAN round, combinational.
//
// Computes the two feedback bits of Equations (1) and (2) of the cipher,
//   fa = L1[x1]^L1[x2]^(L1[x3]&L1[x4])^(L1[x5]&IR)^ka
//   fb = L2[y1]^L2[y2]^(L2[y3]&L2[y4])^(L2[y5]&L2[y6])^kb,
// shifts both registers one place towards the MSB and inserts L1[0]=fb,
// L2[0]=fa. For 48- and 64-bit blocks this step is applied 2 or 3 times in
// the same round with the same ka, kb and IR, as the paper states.
// The paper's flowchart moves the register bits one per loop iteration; here
// the whole shift is one parallel update, so a round takes one clock cycle
// in the stage that registers the result. Both feedback bits are computed
// from the register contents before the update, and they enter the LSBs
// after the shift, as the paper's text states (its flowchart draws the
// insertion ahead of the shift loops).
module katan_round
  import katan_pkg::*;
#(
  parameter int unsigned BLOCK_BITS = 32
) (
  input  logic [l1_len(BLOCK_BITS)-1:0] l1_i,
  input  logic [l2_len(BLOCK_BITS)-1:0] l2_i,
  input  logic                          ka,
  input  logic                          kb,
  input  logic                          ir,
  output logic [l1_len(BLOCK_BITS)-1:0] l1_o,
  output logic [l2_len(BLOCK_BITS)-1:0] l2_o
);
  localparam int unsigned N1 = l1_len(BLOCK_BITS);
  localparam int unsigned N2 = l2_len(BLOCK_BITS);
  localparam int unsigned NR = reps(BLOCK_BITS);
  localparam int unsigned X1 = xtap(BLOCK_BITS, 1), X2 = xtap(BLOCK_BITS, 2),
                          X3 = xtap(BLOCK_BITS, 3), X4 = xtap(BLOCK_BITS, 4),
                          X5 = xtap(BLOCK_BITS, 5);
  localparam int unsigned Y1 = ytap(BLOCK_BITS, 1), Y2 = ytap(BLOCK_BITS, 2),
                          Y3 = ytap(BLOCK_BITS, 3), Y4 = ytap(BLOCK_BITS, 4),
                          Y5 = ytap(BLOCK_BITS, 5), Y6 = ytap(BLOCK_BITS, 6);

  logic [N1-1:0] a;
  logic [N2-1:0] b;
  logic          fa, fb;

  always_comb begin
    a = l1_i;
    b = l2_i;
    for (int s = 0; s < NR; s++) begin
      fa = a[X1] ^ a[X2] ^ (a[X3] & a[X4]) ^ (a[X5] & ir) ^ ka;
      fb = b[Y1] ^ b[Y2] ^ (b[Y3] & b[Y4]) ^ (b[Y5] & b[Y6]) ^ kb;
      a  = {a[N1-2:0], fb};
      b  = {b[N2-2:0], fa};
    end
    l1_o = a;
    l2_o = b;
  end
endmodule
