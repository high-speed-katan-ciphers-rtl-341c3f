// katan_init_stage -- stage 1 of the pipelined KATAN core (U0, Initialization).
//
// Loads a plaintext block into the two state registers and the 80-bit key
// into the key register, the three concurrent loading loops of the paper's
// initialization flowchart done in one clock:
//   L2[i] = plain[i]          for i = 0 .. |L2|-1
//   L1[i] = plain[i + |L2|]   for i = 0 .. |L1|-1
//   K[i]  = key[i]            for i = 0 .. 79
// The key comes in as three words as in the paper's RTL view: key1 = bits
// 31..0, key2 = bits 63..32, key3 = bits 79..64.
//
// Timing: the stage has clk and reset but no load input, as in the paper's
// RTL view, so it samples its inputs at every rising edge; l1/l2/k and
// out_valid change one clock after the inputs. in_valid/out_valid are this
// design's addition: a flag that travels with each block so the pipeline
// output can be told apart from idle cycles. reset is asynchronous and
// active high (the paper does not give the reset style).
module katan_init_stage
  import katan_pkg::*;
#(
  parameter  int unsigned BLOCK = 32,
  localparam int unsigned N1    = l1_len(BLOCK),
  localparam int unsigned N2    = l2_len(BLOCK)
) (
  input  logic                clk,
  input  logic                reset,
  input  logic                in_valid,
  input  logic [BLOCK-1:0]    plain,
  input  logic [31:0]         key1,      // key bits 31..0
  input  logic [31:0]         key2,      // key bits 63..32
  input  logic [15:0]         key3,      // key bits 79..64
  output logic                out_valid,
  output logic [N1-1:0]       l1,
  output logic [N2-1:0]       l2,
  output logic [KEY_BITS-1:0] k
);

  if (!(BLOCK == 32 || BLOCK == 48 || BLOCK == 64)) begin : g_bad_block
    $error("katan_init_stage: BLOCK must be 32, 48 or 64");
  end

  always_ff @(posedge clk or posedge reset) begin
    if (reset) begin
      out_valid <= 1'b0;
      l1        <= '0;
      l2        <= '0;
      k         <= '0;
    end else begin
      out_valid <= in_valid;
      l2        <= plain[N2-1:0];
      l1        <= plain[BLOCK-1:N2];
      k         <= {key3, key2, key1};
    end
  end

endmodule
