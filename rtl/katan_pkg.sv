// katan_pkg -- constants and helper functions shared by the KATAN pipeline.
//
// KATAN is a family of block ciphers with an 80-bit key and a 32, 48 or
// 64-bit block. The state is split over two shift registers L1 and L2; each
// of the 254 rounds computes two nonlinear functions fa (from L1) and fb
// (from L2), shifts both registers up by one place and inserts fb at L1[0]
// and fa at L2[0]. KATAN-48 and KATAN-64 apply that step two and three times
// per round with the same subkey bits.
//
// What follows the paper: 80-bit key, 254 rounds, register lengths 13/19 for
// KATAN-32, the form of fa and fb, and the key recurrence
// k[i] = k[i-80] ^ k[i-61] ^ k[i-50] ^ k[i-13] with ka = k[2i], kb = k[2i+1].
// Taken from the original KATAN cipher specification (the paper does not
// print them): the tap positions x1..x5 and y1..y6, the register lengths of
// KATAN-48/64, the number of steps per round, and the irregular-update bit IR,
// which is the MSB of an 8-bit LFSR (x^8 + x^7 + x^5 + x^3 + 1) that starts at
// 8'hFE, i.e. one step after the all-ones state.
//
// All functions are constant functions; they are evaluated at elaboration.
package katan_pkg;

  localparam int unsigned KEY_BITS    = 80;
  localparam int unsigned ROUNDS      = 254;
  localparam int unsigned SUBKEY_BITS = 2 * ROUNDS;  // 508 subkey bits k[0..507]

  // Tap indices of fa (into L1) and fb (into L2).
  typedef struct packed {
    int unsigned x1, x2, x3, x4, x5;
    int unsigned y1, y2, y3, y4, y5, y6;
  } katan_taps_t;

  // Length of L1 for a block size.
  function automatic int unsigned l1_len(int unsigned block);
    case (block)
      48:      return 19;
      64:      return 25;
      default: return 13;
    endcase
  endfunction

  // Length of L2 for a block size.
  function automatic int unsigned l2_len(int unsigned block);
    case (block)
      48:      return 29;
      64:      return 39;
      default: return 19;
    endcase
  endfunction

  // Number of fa/fb steps per round (same ka, kb and IR in every step).
  function automatic int unsigned steps_per_round(int unsigned block);
    case (block)
      48:      return 2;
      64:      return 3;
      default: return 1;
    endcase
  endfunction

  function automatic katan_taps_t taps(int unsigned block);
    katan_taps_t t;
    case (block)
      48: begin
        t.x1 = 18; t.x2 = 12; t.x3 = 15; t.x4 = 7;  t.x5 = 6;
        t.y1 = 28; t.y2 = 19; t.y3 = 21; t.y4 = 13; t.y5 = 15; t.y6 = 6;
      end
      64: begin
        t.x1 = 24; t.x2 = 15; t.x3 = 20; t.x4 = 11; t.x5 = 9;
        t.y1 = 38; t.y2 = 25; t.y3 = 33; t.y4 = 21; t.y5 = 14; t.y6 = 9;
      end
      default: begin
        t.x1 = 12; t.x2 = 7;  t.x3 = 8;  t.x4 = 5;  t.x5 = 3;
        t.y1 = 18; t.y2 = 7;  t.y3 = 12; t.y4 = 10; t.y5 = 8;  t.y6 = 3;
      end
    endcase
    return t;
  endfunction

  // IR bit of every round: bit r is the IR value used in round r.
  function automatic logic [ROUNDS-1:0] ir_sequence();
    logic [ROUNDS-1:0] ir;
    logic [7:0]        lfsr;
    lfsr = 8'hFE;
    for (int r = 0; r < ROUNDS; r++) begin
      ir[r] = lfsr[7];
      lfsr  = {lfsr[6:0], lfsr[7] ^ lfsr[6] ^ lfsr[4] ^ lfsr[2]};
    end
    return ir;
  endfunction

endpackage
