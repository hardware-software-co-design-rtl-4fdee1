// tb_aes_cosim_top -- end-to-end testbench of the image encryption pipeline,
// at the top's default parameters.
//
// A synthetic grey image (a smooth gradient, so neighbouring pixels are
// strongly correlated) is streamed in one pixel per cycle. For every block of
// 16 pixels the expected output is computed with the reference model in
// aes_ref_pkg: the ciphertext (ECB or CTR) when sel = 0, the original pixels
// when sel = 1. The run goes through: CTR and ECB encryption, the decrypted
// output path, a mode switch while blocks are in flight, a key change (which
// makes the ECB decryptor expand the key and stalls the pixel input), the key
// disabled through enable1, and a counter reload. Each of these is counted and
// must happen at least once. It also checks that a continuous stream yields
// one result every 16 cycles, and the latency from the clock edge that takes
// the last pixel of a block to the first edge that sees dout_valid: 13 cycles
// with sel = 0 and 24 with sel = 1 (1 in the packer, 11 in each AES unit and
// 1 in the output mux).
module tb_aes_cosim_top;
  import aes_pkg::*;
  import aes_ref_pkg::*;

  logic   clk = 0, rst_n = 0;
  logic   pix_valid = 0, pix_ready;
  logic [7:0] pix = '0;
  logic   enable1 = 1, sel = 0, ctr_load = 0, key_wr = 0;
  mode_e  mode = MODE_CTR;
  block_t iv = '0, key_wr_data = '0, dout;
  logic   dout_valid, idle, key_busy;
  int checks = 0, failures = 0, cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  aes_cosim_top dut (.*);

  // ---------------------------------------------------------------- model
  block_t key_model = 128'h2b7e151628aed2a6abf7158809cf4f3c;
  block_t ctr_model = '0;
  block_t exp_q[$];
  int     last_pix_cycle[$];
  logic [7:0] pend[$];
  int     n_px = 0;

  // mechanism counters
  int n_ctr = 0, n_ecb = 0, n_sel0 = 0, n_sel1 = 0, n_switch_inflight = 0;
  int n_keyexp = 0, n_stall = 0, n_disabled = 0, n_reload = 0;

  // latency / rate
  int lat_expect = -1, lat_seen = -1, gap_ok = 0, gap_bad = 0, last_out = -1;
  bit rate_mode = 0;

  always @(posedge clk) if (rst_n) begin
    if (dout_valid) begin
      checks++;
      if (exp_q.size() == 0 || dout !== exp_q[0]) begin
        failures++;
        $display("MISMATCH at %0d: got %h exp %h", cycle, dout,
                 exp_q.size() > 0 ? exp_q[0] : 128'h0);
      end
      if (lat_expect >= 0 && lat_seen < 0) lat_seen = cycle - last_pix_cycle[0];
      if (rate_mode && last_out >= 0) begin
        if (cycle - last_out == 16) gap_ok++; else gap_bad++;
      end
      last_out = cycle;
      if (exp_q.size() > 0) void'(exp_q.pop_front());
      void'(last_pix_cycle.pop_front());
    end
    if (pix_valid && !pix_ready) n_stall++;
    if (key_busy && !$past(key_busy)) n_keyexp++;
    if (ctr_load) begin ctr_model = iv; n_reload++; end
    if (pix_valid && pix_ready) begin
      pend.push_back(pix);
      if (pend.size() == 16) begin
        block_t p, k, c;
        for (int i = 0; i < 16; i++) p[127-8*i -: 8] = pend.pop_front();
        k = enable1 ? key_model : '0;
        if (!enable1) n_disabled++;
        if (mode == MODE_CTR) begin
          c = p ^ encrypt(k, ctr_model);
          ctr_model = ctr_model + 1;
          n_ctr++;
        end else begin
          c = encrypt(k, p);
          n_ecb++;
        end
        if (sel) n_sel1++; else n_sel0++;
        exp_q.push_back(sel ? p : c);
        last_pix_cycle.push_back(cycle);
      end
    end
  end

  // ---------------------------------------------------------------- stimulus
  function automatic logic [7:0] image_px(int n);
    int x, y;
    x = n % 440; y = n / 440;
    return 8'(40 + (x + y) / 4 + ((x * 7 + y * 3) % 5));
  endfunction

  task automatic stream(input int blocks);
    @(negedge clk);
    pix_valid = 1;
    for (int i = 0; i < 16 * blocks; i++) begin
      pix = image_px(n_px);
      do @(posedge clk); while (!pix_ready);
      n_px++;
      @(negedge clk);
    end
    pix_valid = 0;
  endtask

  task automatic drain();
    wait (exp_q.size() == 0);
    while (!idle) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic set_iv(input block_t v);
    drain();
    iv = v; ctr_load = 1;
    @(negedge clk);
    ctr_load = 0;
  endtask

  task automatic set_key(input block_t k);
    drain();
    key_wr_data = k; key_wr = 1;
    key_model = k;
    @(negedge clk);
    key_wr = 0;
  endtask

  task automatic latency_run(input int exp_lat);
    drain();
    lat_expect = exp_lat; lat_seen = -1;
    stream(1);
    drain();
    checks++;
    if (lat_seen != exp_lat) begin
      failures++;
      $display("latency sel=%0d: %0d cycles, expected %0d", sel, lat_seen, exp_lat);
    end
    lat_expect = -1;
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

    // CTR encryption, continuous stream: one result per 16 cycles
    set_iv(128'hf0f1f2f3f4f5f6f7f8f9fafbfcfdfeff);
    mode = MODE_CTR; sel = 0;
    rate_mode = 1; last_out = -1;
    stream(20);
    drain();
    rate_mode = 0;
    latency_run(13);

    // decrypted output path, CTR
    sel = 1;
    stream(10);
    latency_run(24);

    // ECB, both outputs
    drain();
    mode = MODE_ECB;
    sel = 0; stream(10);
    drain();
    sel = 1; stream(10);

    // mode switch while blocks are in flight (decrypted output must still
    // be the original pixels)
    for (int j = 0; j < 6; j++) begin
      fork
        stream(4);
        begin
          repeat (16 * 2 + 5) @(negedge clk);
          mode = (mode == MODE_ECB) ? MODE_CTR : MODE_ECB;
          n_switch_inflight++;
        end
      join
    end

    // key change: the ECB decryptor re-expands the key and stalls the input
    drain();
    mode = MODE_ECB;
    set_key(128'h2b7e151628aed2a6abf7158809cf4f3d);  // one bit flipped
    sel = 1; stream(6);
    drain();
    sel = 0; stream(4);

    // key disabled via enable1
    drain();
    enable1 = 0;
    stream(4);
    drain();
    sel = 1; stream(4);
    drain();
    enable1 = 1;

    // counter reload and CTR again
    mode = MODE_CTR;
    set_iv({$urandom, $urandom, $urandom, $urandom});
    sel = 0; stream(8);
    drain();
    repeat (5) @(negedge clk);

    checks++;
    if (gap_ok != 19 || gap_bad != 0) begin
      failures++;
      $display("rate: %0d results 16 cycles apart, %0d others", gap_ok, gap_bad);
    end
    $display("mechanisms: ctr=%0d ecb=%0d sel0=%0d sel1=%0d switch=%0d keyexp=%0d stall=%0d disabled=%0d reload=%0d",
             n_ctr, n_ecb, n_sel0, n_sel1, n_switch_inflight, n_keyexp, n_stall, n_disabled, n_reload);
    begin
      int m[9];
      m = '{n_ctr, n_ecb, n_sel0, n_sel1, n_switch_inflight, n_keyexp, n_stall,
                   n_disabled, n_reload};
      foreach (m[i]) begin
        checks++;
        if (m[i] == 0) begin
          failures++;
          $display("mechanism %0d never happened", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
