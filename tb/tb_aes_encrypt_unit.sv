// tb_aes_encrypt_unit -- self-checking testbench of the Encryption block.
//
// Checks: the SP 800-38A F.1.1 (ECB) and F.5.1 (CTR) AES-128 vectors, four
// blocks each; then random blocks with the mode switched at random, key
// changes, counter reloads, input gaps and output back-pressure, against the
// reference model in aes_ref_pkg plus a counter model kept here; out_mode
// follows each block; a continuous CTR stream is accepted every 11 cycles.
module tb_aes_encrypt_unit;
  import aes_pkg::*;
  import aes_ref_pkg::*;

  logic   clk = 0, rst_n = 0;
  mode_e  mode = MODE_ECB;
  logic [127:0] iv = '0, key = '0, in_block = '0, out_block;
  logic   ctr_load = 0, in_valid = 0, in_ready, out_valid, out_ready = 1;
  mode_e  out_mode;
  logic   busy;
  int checks = 0, failures = 0, cycle = 0;
  int n_ecb = 0, n_ctr = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  aes_encrypt_unit dut (.*);

  logic [127:0] ctr_model = '0;
  logic [127:0] exp_q[$];
  mode_e        mode_q[$];
  int           last_acc = -1, iv_ok = 0, iv_bad = 0;
  bit           stream_mode = 0;

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++;
      if (out_block !== exp_q[0] || out_mode !== mode_q[0]) begin
        failures++;
        $display("MISMATCH got %h/%0d exp %h/%0d", out_block, out_mode, exp_q[0], mode_q[0]);
      end
      void'(exp_q.pop_front());
      void'(mode_q.pop_front());
    end
    if (in_valid && in_ready) begin
      if (mode == MODE_CTR) begin
        exp_q.push_back(in_block ^ encrypt(key, ctr_model));
        ctr_model = ctr_model + 1;
        n_ctr++;
      end else begin
        exp_q.push_back(encrypt(key, in_block));
        n_ecb++;
      end
      mode_q.push_back(mode);
      if (stream_mode && last_acc >= 0) begin
        if (cycle - last_acc == 11) iv_ok++; else iv_bad++;
      end
      last_acc = cycle;
    end
    if (ctr_load) ctr_model = iv;
  end

  task automatic send(input mode_e m, input logic [127:0] d);
    @(negedge clk);
    mode = m; in_block = d; in_valid = 1;
    do @(posedge clk); while (!in_ready);
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic load_iv(input logic [127:0] v);
    wait (exp_q.size() == 0);
    @(negedge clk);
    iv = v; ctr_load = 1;
    @(negedge clk);
    ctr_load = 0;
  endtask

  task automatic expect_out(input logic [127:0] c);
    wait (exp_q.size() == 0);
    @(negedge clk);
    checks++;
    if (last_out !== c) begin
      failures++;
      $display("known answer: got %h exp %h", last_out, c);
    end
  endtask

  logic [127:0] last_out;
  always @(posedge clk) if (out_valid && out_ready) last_out <= out_block;

  logic [127:0] pt [4] = '{128'h6bc1bee22e409f96e93d7e117393172a,
                           128'hae2d8a571e03ac9c9eb76fac45af8e51,
                           128'h30c81c46a35ce411e5fbc1191a0a52ef,
                           128'hf69f2445df4f9b17ad2b417be66c3710};
  logic [127:0] ecb [4] = '{128'h3ad77bb40d7a3660a89ecaf32466ef97,
                            128'hf5d3d58503b9699de785895a96fdbaaf,
                            128'h43b1cd7f598ece23881b00e3ed030688,
                            128'h7b0c785e27e8ad3f8223207104725dd4};
  logic [127:0] ctr [4] = '{128'h874d6191b620e3261bef6864990db6ce,
                            128'h9806f66b7970fdff8617187bb9fffdff,
                            128'h5ae4df3edbd5d35e5b4f09020db03eab,
                            128'h1e031dda2fbe03d1792170a0f3009cee};

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    key = 128'h2b7e151628aed2a6abf7158809cf4f3c;
    for (int i = 0; i < 4; i++) begin send(MODE_ECB, pt[i]); expect_out(ecb[i]); end
    load_iv(128'hf0f1f2f3f4f5f6f7f8f9fafbfcfdfeff);
    for (int i = 0; i < 4; i++) begin send(MODE_CTR, pt[i]); expect_out(ctr[i]); end

    // continuous CTR stream
    load_iv(rand_blk());
    stream_mode = 1;
    last_acc = -1;
    @(negedge clk);
    mode = MODE_CTR; in_valid = 1;
    for (int i = 0; i < 30; i++) begin
      in_block = rand_blk();
      do @(posedge clk); while (!in_ready);
      @(negedge clk);
    end
    in_valid = 0;
    wait (exp_q.size() == 0);
    stream_mode = 0;

    // random traffic
    fork
      for (int i = 0; i < 300; i++) begin
        repeat ($urandom_range(0, 2)) @(negedge clk);
        if (i % 50 == 25) key = rand_blk();
        if (i % 60 == 30) load_iv(rand_blk());
        if (i == 150) load_iv({96'h0, 32'hffff_fffe} | {$urandom, 96'h0});
        send(mode_e'($urandom_range(0, 1)), rand_blk());
      end
      forever begin
        @(negedge clk);
        out_ready = ($urandom_range(0, 3) != 0);
      end
    join_any
    disable fork;
    out_ready = 1;
    wait (exp_q.size() == 0);
    repeat (5) @(posedge clk);

    checks++;
    if (iv_ok != 29 || iv_bad != 0) begin
      failures++;
      $display("stream intervals: %0d of 11, %0d others", iv_ok, iv_bad);
    end
    checks++;
    if (n_ecb < 50 || n_ctr < 50) begin
      failures++;
      $display("too few blocks per mode: ecb %0d ctr %0d", n_ecb, n_ctr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
