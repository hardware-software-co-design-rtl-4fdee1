// tb_aes_enc_core -- self-checking testbench of the iterative AES-128 cipher.
//
// Checks: the FIPS-197 (Appendix B and C.1) and SP 800-38A ECB known-answer
// vectors; random keys and blocks against the reference model in
// aes_ref_pkg, with random gaps on the input and random back-pressure on the
// output; that a continuous stream is accepted exactly every 11 cycles and
// that out_valid rises 10 cycles after a block is accepted.
module tb_aes_enc_core;
  import aes_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [127:0] in_block = '0, key = '0, out_block;
  int checks = 0, failures = 0;
  int cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  aes_enc_core dut (.*);

  // scoreboard
  logic [127:0] exp_q[$];
  int           acc_cycle[$];
  int           last_acc = -1;
  int           intervals_ok = 0, intervals_bad = 0, lat_bad = 0;
  bit           stream_mode = 0;

  bit prev_valid = 0;
  always @(posedge clk) if (rst_n) begin
    // latency: out_valid is first sampled 11 edges after the accepting edge,
    // i.e. it rose 10 cycles after the accept
    if (out_valid && !prev_valid && acc_cycle.size() > 0 && cycle - acc_cycle[0] != 11)
      lat_bad++;
    prev_valid = out_valid;
    if (in_valid && in_ready) begin
      exp_q.push_back(encrypt(key, in_block));
      acc_cycle.push_back(cycle);
      if (stream_mode && last_acc >= 0) begin
        if (cycle - last_acc == 11) intervals_ok++; else intervals_bad++;
      end
      last_acc = cycle;
    end
    if (out_valid && out_ready) begin
      logic [127:0] e;
      checks++;
      e = exp_q.pop_front();
      void'(acc_cycle.pop_front());
      if (out_block !== e) begin
        failures++;
        $display("MISMATCH got %h exp %h", out_block, e);
      end
    end
  end


  task automatic send(input logic [127:0] k, input logic [127:0] d);
    @(negedge clk);
    key = k; in_block = d; in_valid = 1;
    do @(posedge clk); while (!in_ready);
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic kat(input logic [127:0] k, input logic [127:0] p, input logic [127:0] c);
    checks++;
    if (encrypt(k, p) !== c) begin
      failures++;
      $display("reference model disagrees with known answer %h", c);
    end
    send(k, p);
    wait (exp_q.size() == 0);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    out_ready = 1;
    kat(128'h000102030405060708090a0b0c0d0e0f, 128'h00112233445566778899aabbccddeeff,
        128'h69c4e0d86a7b0430d8cdb78070b4c55a);
    kat(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h3243f6a8885a308d313198a2e0370734,
        128'h3925841d02dc09fbdc118597196a0b32);
    kat(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h6bc1bee22e409f96e93d7e117393172a,
        128'h3ad77bb40d7a3660a89ecaf32466ef97);
    kat(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'hae2d8a571e03ac9c9eb76fac45af8e51,
        128'hf5d3d58503b9699de785895a96fdbaaf);
    kat(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h30c81c46a35ce411e5fbc1191a0a52ef,
        128'h43b1cd7f598ece23881b00e3ed030688);
    kat(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'hf69f2445df4f9b17ad2b417be66c3710,
        128'h7b0c785e27e8ad3f8223207104725dd4);

    // continuous stream, no back-pressure: one block every 11 cycles
    stream_mode = 1;
    last_acc = -1;
    @(negedge clk);
    in_valid = 1;
    for (int i = 0; i < 40; i++) begin
      key = rand_blk(); in_block = rand_blk();
      do @(posedge clk); while (!in_ready);
      @(negedge clk);
    end
    in_valid = 0;
    wait (exp_q.size() == 0);
    stream_mode = 0;

    // random gaps and back-pressure
    fork
      begin
        for (int i = 0; i < 200; i++) begin
          repeat ($urandom_range(0, 3)) @(negedge clk);
          send(rand_blk(), rand_blk());
        end
      end
      begin
        for (int i = 0; i < 4000; i++) begin
          @(negedge clk);
          out_ready = ($urandom_range(0, 3) != 0);
        end
        out_ready = 1;
      end
    join_any
    out_ready = 1;
    wait (exp_q.size() == 0);
    repeat (5) @(posedge clk);

    checks++;
    if (intervals_ok != 39 || intervals_bad != 0) begin
      failures++;
      $display("stream intervals: %0d of 11 cycles, %0d others", intervals_ok, intervals_bad);
    end
    checks++;
    if (lat_bad != 0) begin
      failures++;
      $display("latency not 10 cycles %0d times", lat_bad);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
