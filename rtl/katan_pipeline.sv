// katan_pipeline -- three-stage pipelined KATAN encryption core (top level).
//
// Encrypts one plaintext block per clock with an 80-bit key. The structure
// follows the paper's pipelined KATAN-32 (its RTL view, entities U0..U7):
//
//   plain,key1..3 -> U0 init stage (reg) -> U1/U2/U3 buffers (L1, L2, key)
//                 -> U4 round stage (254 rounds + key schedule, combinational)
//                 -> U5/U6 buffers (L1, L2) -> U7 generation -> cipher
//
// U7, the ciphertext generation stage, only re-assembles the state:
// cipher[i] = L2[i] for i < |L2| and cipher[i+|L2|] = L1[i]. It is a pure
// bit concatenation with no logic, so it is written here as wiring.
//
// Timing: a block on plain/key* at rising edge e is taken by U0; if load is
// high at edge e+1 it moves into U1..U3, and at the next edge with load high
// its result moves into U5/U6, where it appears on cipher. With load held
// high that is three clock edges from input to output (the paper's 3 clock
// cycles) and a new block can enter at every edge. load is the common enable
// of the buffer registers, as in the paper; while it is low U1..U6 hold and
// the pipeline stalls. U0 has no load input (as in the paper) and samples at
// every edge, so a source must keep its block on the inputs until an edge
// with load high has taken it on from U0. A block is delivered when
// cipher_valid is high at an edge with load high (it leaves U5/U6 then).
//
// plain_valid / cipher_valid are this design's addition and travel with the
// blocks through 1-bit buffer registers. reset is asynchronous and active
// high. BLOCK selects KATAN-32 (default, the paper's RTL view), -48 or -64.
module katan_pipeline
  import katan_pkg::*;
#(
  parameter  int unsigned BLOCK = 32,
  localparam int unsigned N1    = l1_len(BLOCK),
  localparam int unsigned N2    = l2_len(BLOCK)
) (
  input  logic             clk,
  input  logic             reset,
  input  logic             load,
  input  logic             plain_valid,
  input  logic [BLOCK-1:0] plain,
  input  logic [31:0]      key1,         // key bits 31..0
  input  logic [31:0]      key2,         // key bits 63..32
  input  logic [15:0]      key3,         // key bits 79..64
  output logic             cipher_valid,
  output logic [BLOCK-1:0] cipher
);

  // Stage 1 outputs (L11, L22, kk in the paper's port map).
  logic                v0;
  logic [N1-1:0]       l1_s1;
  logic [N2-1:0]       l2_s1;
  logic [KEY_BITS-1:0] k_s1;
  // First buffer registers (L11Reg, L22Reg, kkReg).
  logic                v1;
  logic [N1-1:0]       l1_b1;
  logic [N2-1:0]       l2_b1;
  logic [KEY_BITS-1:0] k_b1;
  // Stage 2 outputs (L111, L222) and second buffer registers.
  logic [N1-1:0]       l1_s2;
  logic [N2-1:0]       l2_s2;
  logic                v2;
  logic [N1-1:0]       l1_b2;
  logic [N2-1:0]       l2_b2;

  katan_init_stage #(.BLOCK(BLOCK)) u0 (
    .clk       (clk),
    .reset     (reset),
    .in_valid  (plain_valid),
    .plain     (plain),
    .key1      (key1),
    .key2      (key2),
    .key3      (key3),
    .out_valid (v0),
    .l1        (l1_s1),
    .l2        (l2_s1),
    .k         (k_s1)
  );

  katan_reg #(.WIDTH(N1))       u1  (.clk(clk), .rst(reset), .load(load), .din(l1_s1), .dout(l1_b1));
  katan_reg #(.WIDTH(N2))       u2  (.clk(clk), .rst(reset), .load(load), .din(l2_s1), .dout(l2_b1));
  katan_reg #(.WIDTH(KEY_BITS)) u3  (.clk(clk), .rst(reset), .load(load), .din(k_s1),  .dout(k_b1));
  katan_reg #(.WIDTH(1))        u1v (.clk(clk), .rst(reset), .load(load), .din(v0),    .dout(v1));

  katan_round_stage #(.BLOCK(BLOCK)) u4 (
    .l1_in  (l1_b1),
    .l2_in  (l2_b1),
    .k      (k_b1),
    .l1_out (l1_s2),
    .l2_out (l2_s2)
  );

  katan_reg #(.WIDTH(N1)) u5  (.clk(clk), .rst(reset), .load(load), .din(l1_s2), .dout(l1_b2));
  katan_reg #(.WIDTH(N2)) u6  (.clk(clk), .rst(reset), .load(load), .din(l2_s2), .dout(l2_b2));
  katan_reg #(.WIDTH(1))  u5v (.clk(clk), .rst(reset), .load(load), .din(v1),    .dout(v2));

  // U7: ciphertext generation.
  assign cipher       = {l1_b2, l2_b2};
  assign cipher_valid = v2;

endmodule
