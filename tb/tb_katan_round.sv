// tb_katan_round -- self-checking test of one KATAN round for all three
// block sizes: random states, subkey bits and IR values against the
// reference model's single step (applied 1, 2 or 3 times).
module tb_katan_round;
  import katan_ref_pkg::*;
  int checks = 0, failures = 0;

  logic ka, kb, ir;
  logic [12:0] a32_i, a32_o;  logic [18:0] b32_i, b32_o;
  logic [18:0] a48_i, a48_o;  logic [28:0] b48_i, b48_o;
  logic [24:0] a64_i, a64_o;  logic [38:0] b64_i, b64_o;

  katan_round #(.BLOCK(32)) dut32 (.l1_in(a32_i), .l2_in(b32_i), .ka(ka), .kb(kb), .ir(ir), .l1_out(a32_o), .l2_out(b32_o));
  katan_round #(.BLOCK(48)) dut48 (.l1_in(a48_i), .l2_in(b48_i), .ka(ka), .kb(kb), .ir(ir), .l1_out(a48_o), .l2_out(b48_o));
  katan_round #(.BLOCK(64)) dut64 (.l1_in(a64_i), .l2_in(b64_i), .ka(ka), .kb(kb), .ir(ir), .l1_out(a64_o), .l2_out(b64_o));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 1000; n++) begin
      logic [63:0] s, e;
      s = {$urandom, $urandom};
      ka = 1'($urandom); kb = 1'($urandom); ir = 1'($urandom);
      {a32_i, b32_i} = s[31:0];
      {a48_i, b48_i} = s[47:0];
      {a64_i, b64_i} = s[63:0];
      #1;
      e = ref_step(32, 64'(s[31:0]), ka, kb, ir);
      checks++; if ({a32_o, b32_o} !== e[31:0]) begin failures++; $display("32: %h -> %h exp %h", s[31:0], {a32_o, b32_o}, e[31:0]); end
      e = ref_step(48, ref_step(48, 64'(s[47:0]), ka, kb, ir), ka, kb, ir);
      checks++; if ({a48_o, b48_o} !== e[47:0]) begin failures++; $display("48 mismatch"); end
      e = ref_step(64, ref_step(64, ref_step(64, s, ka, kb, ir), ka, kb, ir), ka, kb, ir);
      checks++; if ({a64_o, b64_o} !== e) begin failures++; $display("64 mismatch"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
