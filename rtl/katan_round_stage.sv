// katan_round_stage -- stage 2 of the pipelined KATAN core (U4, Key Scheduler
// and Round).
//
// Takes the state (L1, L2) and the 80-bit key from the first buffer
// registers and produces the state after all 254 rounds. The key-scheduling
// loop and the round loop of the paper are both fully unrolled: one
// katan_key_schedule expands the key to 508 subkey bits, and a chain of 254
// katan_round instances applies round r with ka = k[2r], kb = k[2r+1] and the
// round's IR bit (a constant per round, from katan_pkg::ir_sequence).
//
// Purely combinational: the result is taken by the second buffer registers
// at the next clock edge. The paper's entity also has clk and reset ports;
// they would be unused here and are left out.
module katan_round_stage
  import katan_pkg::*;
#(
  parameter  int unsigned BLOCK = 32,
  localparam int unsigned N1    = l1_len(BLOCK),
  localparam int unsigned N2    = l2_len(BLOCK)
) (
  input  logic [N1-1:0]       l1_in,
  input  logic [N2-1:0]       l2_in,
  input  logic [KEY_BITS-1:0] k,
  output logic [N1-1:0]       l1_out,
  output logic [N2-1:0]       l2_out
);

  localparam logic [ROUNDS-1:0] IR = ir_sequence();

  logic [SUBKEY_BITS-1:0] subkeys;

  katan_key_schedule u_ks (
    .key     (k),
    .subkeys (subkeys)
  );

  for (genvar r = 0; r < ROUNDS; r++) begin : g_round
    logic [N1-1:0] l1_o;
    logic [N2-1:0] l2_o;
    logic [N1-1:0] l1_i;
    logic [N2-1:0] l2_i;
    if (r == 0) begin : g_first
      assign l1_i = l1_in;
      assign l2_i = l2_in;
    end else begin : g_next
      assign l1_i = g_round[r-1].l1_o;
      assign l2_i = g_round[r-1].l2_o;
    end
    katan_round #(.BLOCK(BLOCK)) u_round (
      .l1_in  (l1_i),
      .l2_in  (l2_i),
      .ka     (subkeys[2*r]),
      .kb     (subkeys[2*r+1]),
      .ir     (IR[r]),
      .l1_out (l1_o),
      .l2_out (l2_o)
    );
  end

  assign l1_out = g_round[ROUNDS-1].l1_o;
  assign l2_out = g_round[ROUNDS-1].l2_o;

endmodule
