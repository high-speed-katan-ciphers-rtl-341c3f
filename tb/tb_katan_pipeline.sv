// tb_katan_pipeline -- end-to-end test of the pipelined KATAN core at its
// default parameters (KATAN-32).
//
// Phases:
//  1. known-answer vectors of the KATAN specification, one block at a time,
//     with the input-to-output latency measured (must be 3 clock edges);
//  2. a back-to-back stream with load held high: one ciphertext per clock;
//  3. random stalls (load low) and bubbles (plain_valid low), with the
//     source holding its block while the pipeline is stalled;
//  4. a reset in the middle of a stream, after which the pipeline must be
//     empty and work again.
// Every delivered ciphertext is compared, in order, with the bit-serial
// reference model. Each mechanism is counted; one that never happened is
// counted as a failure.
module tb_katan_pipeline;
  import katan_ref_pkg::*;
  localparam int BLOCK = 32;

  logic clk = 1'b0, reset, load, plain_valid, cipher_valid;
  logic [BLOCK-1:0] plain, cipher;
  logic [31:0] key1, key2;
  logic [15:0] key3;
  int checks = 0, failures = 0;
  int n_back_to_back = 0, n_stall = 0, n_bubble = 0, n_reset = 0, n_latency = 0;

  katan_pipeline dut (.clk(clk), .reset(reset), .load(load), .plain_valid(plain_valid),
                      .plain(plain), .key1(key1), .key2(key2), .key3(key3),
                      .cipher_valid(cipher_valid), .cipher(cipher));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Scoreboard of blocks that have entered the buffer registers.
  logic [BLOCK-1:0] expq[$];
  logic [BLOCK-1:0] cur_exp;   // expected cipher of the block now on the inputs
  logic             cur_valid;
  int               delivered;
  bit               last_delivered;

  // Present a block (or a bubble) for the next clock edge.
  task automatic drive_block(logic v);
    logic [79:0] key;
    plain_valid = v;
    plain       = BLOCK'({$urandom, $urandom});
    key         = {16'($urandom), $urandom, $urandom};
    {key3, key2, key1} = key;
    cur_exp   = BLOCK'(ref_encrypt(BLOCK, 64'(plain), key));
    cur_valid = v;
  endtask

  // One clock edge with the given load. Called just after a negedge, with
  // the inputs for this edge already driven. Checks the output that leaves
  // the pipeline at this edge and records the block that enters it.
  task automatic step(logic ld, logic new_input_valid, bit hold);
    load = ld;
    #1;
    if (ld && cipher_valid) begin
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("%0t: unexpected output %h", $time, cipher);
      end else begin
        logic [BLOCK-1:0] e;
        e = expq.pop_front();
        if (cipher !== e) begin failures++; $display("%0t: cipher %h expected %h", $time, cipher, e); end
      end
      delivered++;
      if (last_delivered) n_back_to_back++;
      last_delivered = 1;
    end else if (ld) last_delivered = 0;
    if (!ld && expq.size() != 0) n_stall++;
    @(posedge clk);
    // U0 now holds what was on the inputs; if load was high, the block that
    // U0 held before has moved into U1..U3.
    @(negedge clk);
  endtask

  // Drive a stream of n blocks with the given probability (percent) of load
  // low and of bubbles.
  logic             u0_valid;   // model of what U0 holds
  logic [BLOCK-1:0] u0_exp;
  task automatic stream(int n, int p_stall, int p_bubble);
    int sent = 0;
    while (sent < n) begin
      logic ld;
      ld = ($urandom % 100) >= p_stall;
      if (ld) begin
        // the block in U0 moves on at this edge: present a new one
        if (u0_valid) expq.push_back(u0_exp);
        drive_block(($urandom % 100) >= p_bubble);
        if (!cur_valid) n_bubble++;
        sent++;
      end
      // with load low the inputs keep the block that U0 holds
      step(ld, cur_valid, !ld);
      u0_valid = cur_valid;
      u0_exp   = cur_exp;
    end
  endtask

  task automatic drain();
    for (int i = 0; i < 4; i++) begin
      if (u0_valid) expq.push_back(u0_exp);
      plain_valid = 1'b0; cur_valid = 1'b0;
      step(1'b1, 1'b0, 0);
      u0_valid = 1'b0;
    end
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d blocks never came out", expq.size()); end
  endtask

  initial begin
    reset = 1'b1; load = 1'b0; plain_valid = 1'b0; plain = '0; key1 = '0; key2 = '0; key3 = '0;
    u0_valid = 1'b0; u0_exp = '0; cur_valid = 1'b0; cur_exp = '0; delivered = 0; last_delivered = 0;
    repeat (2) @(negedge clk);
    reset = 1'b0;
    checks++; if (cipher_valid !== 1'b0) begin failures++; $display("valid after reset"); end

    // 1. known-answer vectors and latency
    for (int v = 0; v < 2; v++) begin
      int lat;
      load = 1'b1;
      plain_valid = 1'b1;
      if (v == 0) begin plain = '0; {key3, key2, key1} = '1; end
      else        begin plain = '1; {key3, key2, key1} = '0; end
      @(posedge clk);   // edge 1: U0 takes the block
      @(negedge clk);
      plain_valid = 1'b0;
      lat = 1;
      while (!cipher_valid && lat < 10) begin @(posedge clk); @(negedge clk); lat++; end
      checks++;
      if (lat != 3) begin failures++; $display("latency %0d edges, expected 3", lat); end
      else n_latency++;
      checks++;
      if (cipher !== ((v == 0) ? 32'h7E1FF945 : 32'h432E61DA)) begin
        failures++; $display("KAT %0d: cipher %h", v, cipher);
      end
      repeat (3) @(negedge clk);
    end

    // 2. back-to-back stream, one block per clock
    begin
      int d0, c0;
      d0 = delivered; c0 = 0;
      stream(200, 0, 0);
      drain();
      checks++;
      if (delivered - d0 != 200) begin failures++; $display("stream delivered %0d of 200", delivered - d0); end
    end

    // 3. stalls and bubbles
    stream(400, 30, 20);
    drain();

    // 4. reset in the middle of a stream
    stream(50, 10, 10);
    reset = 1'b1; #1;
    checks++;
    if (cipher_valid !== 1'b0) begin failures++; $display("valid during reset"); end
    n_reset++;
    expq.delete(); u0_valid = 1'b0;
    @(negedge clk);
    reset = 1'b0;
    stream(50, 10, 10);
    drain();

    // every mechanism must have happened
    checks++; if (n_latency == 0)      begin failures++; $display("latency never measured"); end
    checks++; if (n_back_to_back == 0) begin failures++; $display("no back-to-back outputs"); end
    checks++; if (n_stall == 0)        begin failures++; $display("no stall"); end
    checks++; if (n_bubble == 0)       begin failures++; $display("no bubble"); end
    checks++; if (n_reset == 0)        begin failures++; $display("no reset"); end
    $display("mechanisms: latency=%0d back_to_back=%0d stall=%0d bubble=%0d reset=%0d delivered=%0d",
             n_latency, n_back_to_back, n_stall, n_bubble, n_reset, delivered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
