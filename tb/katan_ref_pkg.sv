// katan_ref_pkg -- bit-serial reference model of KATAN for the testbenches.
//
// Written independently of the RTL: the key is run through an 80-bit shift
// register (k[i+80] = k[i] ^ k[i+19] ^ k[i+30] ^ k[i+67], the forward form of
// the key recurrence), the IR bits come from a stored 254-bit constant (bit
// r = IR of round r) instead of an LFSR, and the state is updated one step
// at a time. Known-answer vectors of the KATAN specification are included.
package katan_ref_pkg;

  localparam logic [253:0] IR_BITS =
    254'h1203b026835c2f238b24eb69edd1b396a5df730ca8afcf82843c6225337aac7f;

  function automatic int ref_n1(int block);
    return (block == 32) ? 13 : (block == 48) ? 19 : 25;
  endfunction

  function automatic int ref_n2(int block);
    return block - ref_n1(block);
  endfunction

  // Subkey bit i (0 <= i < 508) by running the forward key register.
  function automatic logic ref_subkey(logic [79:0] key, int i);
    logic [79:0] w;
    w = key;
    for (int j = 0; j < i; j++)
      w = {w[0] ^ w[19] ^ w[30] ^ w[67], w[79:1]};
    return w[0];
  endfunction

  // One fa/fb step on a state held as {L1, L2} in the low 'block' bits.
  function automatic logic [63:0] ref_step(int block, logic [63:0] s,
                                           logic ka, logic kb, logic ir);
    int n1, n2;
    logic [63:0] l1, l2;
    logic fa, fb;
    int x[5];
    int y[6];
    n1 = ref_n1(block);
    n2 = ref_n2(block);
    if (block == 32)      begin x = '{12, 7, 8, 5, 3};   y = '{18, 7, 12, 10, 8, 3};  end
    else if (block == 48) begin x = '{18, 12, 15, 7, 6}; y = '{28, 19, 21, 13, 15, 6}; end
    else                  begin x = '{24, 15, 20, 11, 9}; y = '{38, 25, 33, 21, 14, 9}; end
    l2 = s & ((64'd1 << n2) - 1);
    l1 = (s >> n2) & ((64'd1 << n1) - 1);
    fa = l1[x[0]] ^ l1[x[1]] ^ (l1[x[2]] & l1[x[3]]) ^ (l1[x[4]] & ir) ^ ka;
    fb = l2[y[0]] ^ l2[y[1]] ^ (l2[y[2]] & l2[y[3]]) ^ (l2[y[4]] & l2[y[5]]) ^ kb;
    l1 = ((l1 << 1) | 64'(fb)) & ((64'd1 << n1) - 1);
    l2 = ((l2 << 1) | 64'(fa)) & ((64'd1 << n2) - 1);
    return (l1 << n2) | l2;
  endfunction

  // Full 254-round encryption of the low 'block' bits of pt.
  function automatic logic [63:0] ref_encrypt(int block, logic [63:0] pt, logic [79:0] key);
    logic [63:0] s;
    logic [79:0] w;
    int          steps;
    steps = (block == 32) ? 1 : (block == 48) ? 2 : 3;
    s = pt;
    w = key;
    for (int r = 0; r < 254; r++) begin
      for (int t = 0; t < steps; t++)
        s = ref_step(block, s, w[0], w[1], IR_BITS[r]);
      w = {w[0] ^ w[19] ^ w[30] ^ w[67], w[79:1]};
      w = {w[0] ^ w[19] ^ w[30] ^ w[67], w[79:1]};
    end
    return s;
  endfunction

endpackage
