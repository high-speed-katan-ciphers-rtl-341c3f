// katan_reg -- buffer register placed between two pipeline stages.
//
// The pipelined KATAN core separates its three stages with plain registers
// (U1, U2, U3 after the initialization stage and U5, U6 after the round
// stage). Each has the ports clk, rst, load, input and output, as in the
// paper's RTL view; one parameterized module replaces the separate
// 13-, 19- and 80-bit entities there. On a rising clock edge with load high
// the register takes din; with load low it holds. rst clears it at once
// (asynchronous, active high -- the paper does not give the reset style).
// dout is the register output, so din reaches dout one clock after it is
// taken. An assertion checks the hold rule in simulation; because it is
// disabled by rst, a linter may note that rst is used both asynchronously
// (the flop) and synchronously (the assertion), which is intended.
module katan_reg #(
  parameter int unsigned WIDTH = 13
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             load,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);

  always_ff @(posedge clk or posedge rst) begin
    if (rst)       dout <= '0;
    else if (load) dout <= din;
  end

  // Pipeline rule: a stage whose load is low holds its contents.
  a_hold_when_not_loaded: assert property (
    @(posedge clk) disable iff (rst) !load |=> $stable(dout)
  ) else $error("katan_reg: contents changed while load was low");

endmodule
