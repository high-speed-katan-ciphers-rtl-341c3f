// katan_workload_run -- drives one katan_pipeline of a given block size with
// a back-to-back stream of random blocks (load held high), then a stream
// with random stalls, and checks every ciphertext in order against the
// reference model, the 3-edge latency and the one-block-per-clock rate.
// Reports its counts through its ports; used by tb_katan_workloads.
module katan_workload_run #(
  parameter int BLOCK   = 48,
  parameter int NBLOCKS = 100
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  import katan_ref_pkg::*;

  logic reset, load, plain_valid, cipher_valid;
  logic [BLOCK-1:0] plain, cipher;
  logic [31:0] key1, key2;
  logic [15:0] key3;

  katan_pipeline #(.BLOCK(BLOCK)) dut (
    .clk(clk), .reset(reset), .load(load), .plain_valid(plain_valid), .plain(plain),
    .key1(key1), .key2(key2), .key3(key3), .cipher_valid(cipher_valid), .cipher(cipher));

  logic [BLOCK-1:0] expq[$];
  logic [BLOCK-1:0] u0_exp, cur_exp;
  logic             u0_valid, cur_valid;

  task automatic new_block();
    logic [79:0] key;
    plain_valid = 1'b1;
    plain = BLOCK'({$urandom, $urandom});
    key   = {16'($urandom), $urandom, $urandom};
    {key3, key2, key1} = key;
    cur_exp   = BLOCK'(ref_encrypt(BLOCK, 64'(plain), key));
    cur_valid = 1'b1;
  endtask

  // One clock edge; called after a negedge.
  task automatic edge_with(logic ld);
    load = ld;
    #1;
    if (ld && cipher_valid) begin
      checks++;
      if (expq.size() == 0 || cipher !== expq[0]) begin
        failures++; $display("KATAN-%0d: cipher %h unexpected", BLOCK, cipher);
      end
      if (expq.size() != 0) void'(expq.pop_front());
    end
    @(posedge clk);
    @(negedge clk);
  endtask

  initial begin
    int first_out, edges;
    done = 1'b0; checks = 0; failures = 0;
    reset = 1'b1; load = 1'b0; plain_valid = 1'b0; plain = '0; {key3, key2, key1} = '0;
    u0_valid = 1'b0; u0_exp = '0; cur_valid = 1'b0; cur_exp = '0;
    @(negedge clk); @(negedge clk);
    reset = 1'b0;

    // known answer: key all ones, plaintext zero
    plain_valid = 1'b1; plain = '0; {key3, key2, key1} = '1; load = 1'b1;
    @(posedge clk); @(negedge clk);
    plain_valid = 1'b0;
    @(posedge clk); @(negedge clk);
    checks++;
    if (cipher_valid) begin failures++; $display("KATAN-%0d: output after 2 edges", BLOCK); end
    @(posedge clk); @(negedge clk);
    checks++;
    if (!cipher_valid || 64'(cipher) !== ((BLOCK == 48) ? 64'h4B7EFCFB8659 :
                                          (BLOCK == 64) ? 64'h21F2E99C0FAB828A : 64'h7E1FF945)) begin
      failures++; $display("KATAN-%0d: known answer %h valid %b after 3 edges", BLOCK, cipher, cipher_valid);
    end
    @(posedge clk); @(negedge clk);

    // back-to-back stream: block i enters U0 at edge i and is on cipher after
    // edge i+2, i.e. it is seen in iteration i+3; NBLOCKS blocks come out in
    // NBLOCKS consecutive iterations
    first_out = -1; edges = 0;
    for (int i = 0; i < NBLOCKS + 3; i++) begin
      if (u0_valid) expq.push_back(u0_exp);
      if (i < NBLOCKS) new_block(); else begin plain_valid = 1'b0; cur_valid = 1'b0; end
      #1;
      if (cipher_valid) begin if (first_out < 0) first_out = i; edges++; end
      edge_with(1'b1);
      u0_valid = cur_valid; u0_exp = cur_exp;
    end
    checks++;
    if (edges != NBLOCKS || first_out != 3) begin
      failures++; $display("KATAN-%0d: %0d outputs, first at %0d", BLOCK, edges, first_out);
    end

    // stream with stalls
    for (int i = 0; i < NBLOCKS; ) begin
      logic ld;
      ld = ($urandom % 4) != 0;
      if (ld) begin
        if (u0_valid) expq.push_back(u0_exp);
        new_block();
        i++;
      end
      edge_with(ld);
      u0_valid = cur_valid; u0_exp = cur_exp;
    end
    for (int i = 0; i < 4; i++) begin
      if (u0_valid) expq.push_back(u0_exp);
      plain_valid = 1'b0; cur_valid = 1'b0;
      edge_with(1'b1);
      u0_valid = 1'b0;
    end
    checks++;
    if (expq.size() != 0) begin failures++; $display("KATAN-%0d: %0d blocks lost", BLOCK, expq.size()); end
    done = 1'b1;
  end
endmodule
