// katan_pkg -- constants and types shared by the KATAN / KTANTAN pipeline.
//
// The KATAN family keeps its state in two shift registers L1 and L2 whose
// lengths depend on the block size (13+19, 19+29, 25+39 bits for 32, 48 and
// 64-bit blocks). Each round computes two nonlinear feedback bits
//   fa = L1[x1] ^ L1[x2] ^ (L1[x3] & L1[x4]) ^ (L1[x5] & IR) ^ ka
//   fb = L2[y1] ^ L2[y2] ^ (L2[y3] & L2[y4]) ^ (L2[y5] & L2[y6]) ^ kb
// and applies them 1, 2 or 3 times per round (32/48/64-bit block) with the
// same subkey bits. The equations, the 80-bit key and the 254 rounds follow
// the paper; the paper prints the tap positions only as symbols, so their
// values and the 48/64-bit register lengths are those of the KATAN cipher
// specification (checked against its published test vectors).
// The functions below are constant functions of the block size, used at
// elaboration time only.
package katan_pkg;

  localparam int unsigned KEY_BITS   = 80;
  localparam int unsigned MAX_ROUNDS = 254;

  typedef logic [KEY_BITS-1:0] key_t;

  // Length of register L1 for a block size (L2 holds the rest).
  function automatic int unsigned l1_len(input int unsigned block_bits);
    case (block_bits)
      48:      return 19;
      64:      return 25;
      default: return 13;
    endcase
  endfunction

  function automatic int unsigned l2_len(input int unsigned block_bits);
    return block_bits - l1_len(block_bits);
  endfunction

  // Number of fa/fb applications per round.
  function automatic int unsigned reps(input int unsigned block_bits);
    case (block_bits)
      48:      return 2;
      64:      return 3;
      default: return 1;
    endcase
  endfunction

  // Tap x1..x5 of L1 (index 1..5).
  function automatic int unsigned xtap(input int unsigned block_bits, input int unsigned n);
    int unsigned t32[5] = '{12, 7, 8, 5, 3};
    int unsigned t48[5] = '{18, 12, 15, 7, 6};
    int unsigned t64[5] = '{24, 15, 20, 11, 9};
    case (block_bits)
      48:      return t48[n-1];
      64:      return t64[n-1];
      default: return t32[n-1];
    endcase
  endfunction

  // Tap y1..y6 of L2 (index 1..6).
  function automatic int unsigned ytap(input int unsigned block_bits, input int unsigned n);
    int unsigned t32[6] = '{18, 7, 12, 10, 8, 3};
    int unsigned t48[6] = '{28, 19, 21, 13, 15, 6};
    int unsigned t64[6] = '{38, 25, 33, 21, 14, 9};
    case (block_bits)
      48:      return t48[n-1];
      64:      return t64[n-1];
      default: return t32[n-1];
    endcase
  endfunction

endpackage
