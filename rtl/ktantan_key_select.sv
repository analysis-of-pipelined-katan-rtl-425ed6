// ktantan_key_select -- subkey bit selection of the KTANTAN ciphers.
//
// In KTANTAN the 80-bit key is never clocked; each round picks its two subkey
// bits out of the fixed key, steered by the round-counter state T = t[7:0]
// of katan_ir_lfsr (Tj = t[j]; T0 is the IR bit of the same round).
// The key is viewed as five 16-bit words w0..w4 (w0 = key[15:0]).
//   a_i = w_i[T7 T6 T5 T4]                       (five 16:1 multiplexers)
//   ka  = (~T3 & ~T2 & a0) ^ ((T3 | T2)  & a[1 + {T1,T0}])
//   kb  = (~T3 &  T2 & a4) ^ ((T3 | ~T2) & a[3 - {T1,T0}])
// Purely combinational. The paper only says that the KTANTAN key is fixed
// and the subkey bits are chosen; this selection network is the one of the
// KTANTAN specification. The bit order inside the multiplexers could not be
// cross-checked with a published non-trivial test vector.
module ktantan_key_select
  import katan_pkg::*;
(
  input  key_t       key,
  input  logic [7:0] t,
  output logic       ka,
  output logic       kb
);
  logic [4:0] a;
  logic [1:0] sel;

  always_comb begin
    for (int i = 0; i < 5; i++) a[i] = key[16*i + int'(t[7:4])];
    sel = t[1:0];
    ka  = (~t[3] & ~t[2] & a[0]) ^ ((t[3] |  t[2]) & a[1 + int'(sel)]);
    kb  = (~t[3] &  t[2] & a[4]) ^ ((t[3] | ~t[2]) & a[3 - int'(sel)]);
  end
endmodule
