// tb_katan_round_stage -- self-checking test of the 254-round stage.
// Checks the KATAN specification's known-answer vectors for KATAN-32, -48
// and -64 and random blocks against the bit-serial reference model.
module tb_katan_round_stage;
  import katan_ref_pkg::*;
  int checks = 0, failures = 0;

  logic [79:0] k;
  logic [12:0] a32_i, a32_o;  logic [18:0] b32_i, b32_o;
  logic [18:0] a48_i, a48_o;  logic [28:0] b48_i, b48_o;
  logic [24:0] a64_i, a64_o;  logic [38:0] b64_i, b64_o;

  katan_round_stage #(.BLOCK(32)) dut32 (.l1_in(a32_i), .l2_in(b32_i), .k(k), .l1_out(a32_o), .l2_out(b32_o));
  katan_round_stage #(.BLOCK(48)) dut48 (.l1_in(a48_i), .l2_in(b48_i), .k(k), .l1_out(a48_o), .l2_out(b48_o));
  katan_round_stage #(.BLOCK(64)) dut64 (.l1_in(a64_i), .l2_in(b64_i), .k(k), .l1_out(a64_o), .l2_out(b64_o));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(logic [63:0] pt, logic [79:0] key);
    {a32_i, b32_i} = pt[31:0];
    {a48_i, b48_i} = pt[47:0];
    {a64_i, b64_i} = pt;
    k = key;
    #1;
  endtask

  task automatic expect_eq(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h expected %h", what, got, exp); end
  endtask

  initial begin
    // known-answer vectors (KATAN specification)
    apply(64'h0, '1);
    expect_eq("KATAN32 KAT1", 64'({a32_o, b32_o}), 64'h7E1FF945);
    expect_eq("KATAN48 KAT1", 64'({a48_o, b48_o}), 64'h4B7EFCFB8659);
    expect_eq("KATAN64 KAT1", {a64_o, b64_o}, 64'h21F2E99C0FAB828A);
    apply('1, '0);
    expect_eq("KATAN32 KAT2", 64'({a32_o, b32_o}), 64'h432E61DA);
    // random blocks against the reference model
    for (int n = 0; n < 40; n++) begin
      logic [63:0] pt;
      logic [79:0] key;
      pt  = {$urandom, $urandom};
      key = {16'($urandom), $urandom, $urandom};
      apply(pt, key);
      expect_eq("KATAN32 random", 64'({a32_o, b32_o}), ref_encrypt(32, 64'(pt[31:0]), key));
      expect_eq("KATAN48 random", 64'({a48_o, b48_o}), ref_encrypt(48, 64'(pt[47:0]), key));
      expect_eq("KATAN64 random", {a64_o, b64_o}, ref_encrypt(64, pt, key));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
