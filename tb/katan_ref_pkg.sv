// katan_ref_pkg -- bit-level reference model of KATAN / KTANTAN for the
// testbenches.
//
// Written independently of the RTL, in the style of the software model the
// pipeline was derived from: the subkey stream is expanded into a full array
// k[0..2*rounds-1], the round constant comes from a stored 254-entry IR table
// (bit i = IR of round i), and L1/L2 are plain bit arrays shifted one bit at a
// time.
package katan_ref_pkg;

  localparam logic [253:0] IR_TABLE =
    254'h1203b026835c2f238b24eb69edd1b396a5df730ca8afcf82843c6225337aac7f;

  // Round-counter sequence, extended past round 253 with the counter's
  // recurrence (needed by the KTANTAN selection, which looks 7 rounds ahead).
  function automatic bit seq(input int n);
    bit s[270];
    for (int i = 0; i < 254; i++) s[i] = IR_TABLE[i];
    for (int i = 254; i < 270; i++) s[i] = s[i-8] ^ s[i-7] ^ s[i-5] ^ s[i-3];
    return s[n];
  endfunction

  function automatic logic [7:0] counter_state(input int r);
    logic [7:0] t;
    for (int j = 0; j < 8; j++) t[j] = seq(r + j);
    return t;
  endfunction

  function automatic int n1_of(input int bs);
    return (bs == 64) ? 25 : (bs == 48) ? 19 : 13;
  endfunction

  // KTANTAN subkey pair for counter state t.
  function automatic logic [1:0] ktantan_bits(input logic [79:0] key, input logic [7:0] t);
    logic [15:0] w [5];
    logic        a [5];
    int          sel;
    logic        ka, kb;
    for (int i = 0; i < 5; i++) w[i] = key[16*i +: 16];
    for (int i = 0; i < 5; i++) a[i] = w[i][t[7:4]];
    sel = t[1:0];
    if (!t[3] && !t[2]) ka = a[0];
    else                ka = a[1 + sel];
    if (!t[3] && t[2])  kb = a[4];
    else                kb = a[3 - sel];
    return {kb, ka};
  endfunction

  // Subkey pair (kb,ka) of round r.
  function automatic logic [1:0] subkeys(input logic [79:0] key, input bit ktantan, input int r);
    bit k [508];
    if (ktantan) return ktantan_bits(key, counter_state(r));
    for (int i = 0; i < 80; i++) k[i] = key[i];
    for (int i = 80; i <= 2*r + 1; i++) k[i] = k[i-80] ^ k[i-61] ^ k[i-50] ^ k[i-13];
    return {k[2*r+1], k[2*r]};
  endfunction

  // One round (with its 1/2/3 repetitions) on L1/L2 packed as {L1, L2}.
  function automatic logic [63:0] round(input int bs, input logic [63:0] st,
                                        input bit ka, input bit kb, input bit ir);
    int x[5], y[6], n1, n2, reps;
    bit l1[25], l2[39], fa, fb;
    logic [63:0] o;
    case (bs)
      48: begin x = '{18,12,15,7,6}; y = '{28,19,21,13,15,6}; reps = 2; end
      64: begin x = '{24,15,20,11,9}; y = '{38,25,33,21,14,9}; reps = 3; end
      default: begin x = '{12,7,8,5,3}; y = '{18,7,12,10,8,3}; reps = 1; end
    endcase
    n1 = n1_of(bs); n2 = bs - n1;
    for (int i = 0; i < n2; i++) l2[i] = st[i];
    for (int i = 0; i < n1; i++) l1[i] = st[n2 + i];
    repeat (reps) begin
      fa = l1[x[0]] ^ l1[x[1]] ^ (l1[x[2]] & l1[x[3]]) ^ (l1[x[4]] & ir) ^ ka;
      fb = l2[y[0]] ^ l2[y[1]] ^ (l2[y[2]] & l2[y[3]]) ^ (l2[y[4]] & l2[y[5]]) ^ kb;
      for (int i = n1 - 1; i > 0; i--) l1[i] = l1[i-1];
      for (int i = n2 - 1; i > 0; i--) l2[i] = l2[i-1];
      l1[0] = fb;
      l2[0] = fa;
    end
    o = '0;
    for (int i = 0; i < n2; i++) o[i] = l2[i];
    for (int i = 0; i < n1; i++) o[n2 + i] = l1[i];
    return o;
  endfunction

  function automatic logic [63:0] encrypt(input int bs, input bit ktantan,
                                          input logic [63:0] pt, input logic [79:0] key,
                                          input int rounds);
    logic [63:0] st = pt;
    logic [1:0]  k;
    for (int r = 0; r < rounds; r++) begin
      k  = subkeys(key, ktantan, r);
      st = round(bs, st, k[0], k[1], IR_TABLE[r]);
    end
    return st;
  endfunction

endpackage
