// katan_key_schedule -- KATAN key expansion, the key-scheduling loop of stage 2.
//
// Expands the 80-bit key into the 508 subkey bits used by the 254 rounds:
//   k[i] = key[i]                                    for i < 80
//   k[i] = k[i-80] ^ k[i-61] ^ k[i-50] ^ k[i-13]     for 80 <= i < 508
// Round r uses ka = k[2r] and kb = k[2r+1]. The recurrence is the one the
// paper prints in its flowchart; computing all 508 bits at once as a
// combinational XOR network (rather than as a serial 80-bit LFSR) is how the
// paper's pipeline finishes all rounds of a block in one stage.
//
// Purely combinational: subkeys follows key within the same cycle.
module katan_key_schedule
  import katan_pkg::*;
(
  input  logic [KEY_BITS-1:0]    key,
  output logic [SUBKEY_BITS-1:0] subkeys
);

  always_comb begin
    logic [SUBKEY_BITS-1:0] kx;
    kx = '0;
    kx[KEY_BITS-1:0] = key;
    for (int i = KEY_BITS; i < SUBKEY_BITS; i++)
      kx[i] = kx[i-80] ^ kx[i-61] ^ kx[i-50] ^ kx[i-13];
    subkeys = kx;
  end

endmodule
