// katan_round -- one KATAN round: the two nonlinear functions and the shift.
//
//   fa = L1[x1] ^ L1[x2] ^ (L1[x3] & L1[x4]) ^ (L1[x5] & IR) ^ ka
//   fb = L2[y1] ^ L2[y2] ^ (L2[y3] & L2[y4]) ^ (L2[y5] & L2[y6]) ^ kb
//   L1 <= {L1[|L1|-2:0], fb};   L2 <= {L2[|L2|-2:0], fa}
// i.e. both registers shift towards their MSB, fb enters L1[0] and fa enters
// L2[0], as in the paper's round flowchart. For KATAN-48 and KATAN-64 the
// step is applied two or three times with the same ka, kb and IR, each step
// working on the result of the one before (from the KATAN specification;
// the paper says only that the larger ciphers "execute similarly").
// The taps are those of the KATAN specification (see katan_pkg).
//
// Purely combinational; the round stage chains 254 of these.
module katan_round
  import katan_pkg::*;
#(
  parameter  int unsigned BLOCK = 32,
  localparam int unsigned N1    = l1_len(BLOCK),
  localparam int unsigned N2    = l2_len(BLOCK)
) (
  input  logic [N1-1:0] l1_in,
  input  logic [N2-1:0] l2_in,
  input  logic          ka,
  input  logic          kb,
  input  logic          ir,
  output logic [N1-1:0] l1_out,
  output logic [N2-1:0] l2_out
);

  localparam katan_taps_t  T     = taps(BLOCK);
  localparam int unsigned  STEPS = steps_per_round(BLOCK);
  localparam int unsigned  X1 = T.x1, X2 = T.x2, X3 = T.x3, X4 = T.x4, X5 = T.x5;
  localparam int unsigned  Y1 = T.y1, Y2 = T.y2, Y3 = T.y3, Y4 = T.y4, Y5 = T.y5, Y6 = T.y6;

  always_comb begin
    logic [N1-1:0] a;
    logic [N2-1:0] b;
    logic          fa, fb;
    a = l1_in;
    b = l2_in;
    for (int s = 0; s < STEPS; s++) begin
      fa = a[X1] ^ a[X2] ^ (a[X3] & a[X4]) ^ (a[X5] & ir) ^ ka;
      fb = b[Y1] ^ b[Y2] ^ (b[Y3] & b[Y4]) ^ (b[Y5] & b[Y6]) ^ kb;
      a  = {a[N1-2:0], fb};
      b  = {b[N2-2:0], fa};
    end
    l1_out = a;
    l2_out = b;
  end

endmodule
