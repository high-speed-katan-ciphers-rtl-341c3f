// tb_katan_init_stage -- self-checking test of the initialization stage.
// Applies random plaintexts and keys and checks one clock later that
// L2 = plain[18:0], L1 = plain[31:19], K = {key3, key2, key1} and that the
// valid flag follows; also checks the reset values.
module tb_katan_init_stage;
  logic clk = 1'b0, reset, in_valid, out_valid;
  logic [31:0] plain, key1, key2;
  logic [15:0] key3;
  logic [12:0] l1;
  logic [18:0] l2;
  logic [79:0] k;
  int checks = 0, failures = 0;

  katan_init_stage dut (.clk(clk), .reset(reset), .in_valid(in_valid), .plain(plain),
                        .key1(key1), .key2(key2), .key3(key3),
                        .out_valid(out_valid), .l1(l1), .l2(l2), .k(k));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reset = 1'b1; in_valid = 1'b1; plain = '1; key1 = '1; key2 = '1; key3 = '1;
    @(negedge clk);
    checks++;
    if (out_valid !== 1'b0 || l1 !== '0 || l2 !== '0 || k !== '0) begin
      failures++; $display("reset values wrong");
    end
    reset = 1'b0;
    for (int i = 0; i < 300; i++) begin
      logic [31:0] p;
      logic [79:0] key;
      logic        v;
      int          bad;
      p = $urandom; key = {16'($urandom), $urandom, $urandom}; v = 1'($urandom);
      plain = p; key1 = key[31:0]; key2 = key[63:32]; key3 = key[79:64]; in_valid = v;
      @(negedge clk);
      bad = 0;
      for (int b = 0; b < 19; b++) if (l2[b] !== p[b]) bad++;
      for (int b = 0; b < 13; b++) if (l1[b] !== p[b+19]) bad++;
      for (int b = 0; b < 80; b++) if (k[b] !== key[b]) bad++;
      if (out_valid !== v) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("block %0d: %0d bits wrong", i, bad); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
