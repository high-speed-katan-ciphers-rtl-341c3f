// tb_katan_reg -- self-checking test of the inter-stage buffer register.
// Drives random data and load values and checks that the register takes din
// on edges with load high, holds otherwise, and clears on reset.
module tb_katan_reg;
  localparam int unsigned W = 19;
  logic clk = 1'b0, rst, load;
  logic [W-1:0] din, dout, model;
  int checks = 0, failures = 0;

  katan_reg #(.WIDTH(W)) dut (.clk(clk), .rst(rst), .load(load), .din(din), .dout(dout));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b1; load = 1'b0; din = '0; model = '0;
    @(negedge clk);
    rst = 1'b0;
    checks++; if (dout !== '0) begin failures++; $display("reset value wrong: %h", dout); end
    for (int i = 0; i < 500; i++) begin
      din  = W'($urandom);
      load = ($urandom % 3) != 0;
      @(posedge clk);
      if (load) model = din;
      @(negedge clk);
      checks++;
      if (dout !== model) begin failures++; $display("cycle %0d: dout %h expected %h", i, dout, model); end
    end
    // asynchronous reset in the middle of a cycle
    #2 rst = 1'b1; #1;
    checks++; if (dout !== '0) begin failures++; $display("async reset failed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
