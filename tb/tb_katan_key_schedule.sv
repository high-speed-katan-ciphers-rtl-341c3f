// tb_katan_key_schedule -- self-checking test of the key expansion.
// Compares every one of the 508 subkey bits with the reference model's
// forward key register, for fixed and random keys.
module tb_katan_key_schedule;
  import katan_ref_pkg::*;
  logic [79:0]  key;
  logic [507:0] subkeys;
  int checks = 0, failures = 0;

  katan_key_schedule dut (.key(key), .subkeys(subkeys));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_key(logic [79:0] kv);
    logic [79:0] w;
    int bad;
    key = kv;
    #1;
    w = kv;
    bad = 0;
    for (int i = 0; i < 508; i++) begin
      if (subkeys[i] !== w[0]) bad++;
      w = {w[0] ^ w[19] ^ w[30] ^ w[67], w[79:1]};
    end
    checks++;
    if (bad != 0) begin failures++; $display("key %h: %0d subkey bits wrong", kv, bad); end
    // spot-check against the standalone reference function
    for (int j = 0; j < 4; j++) begin
      int i;
      i = 80 + int'($urandom % 428);
      checks++;
      if (subkeys[i] !== ref_subkey(kv, i)) begin failures++; $display("k[%0d] wrong", i); end
    end
  endtask

  initial begin
    check_key('0);
    check_key('1);
    check_key(80'h1);
    check_key(80'h8000_0000_0000_0000_0000);
    for (int n = 0; n < 100; n++) check_key({16'($urandom), $urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
