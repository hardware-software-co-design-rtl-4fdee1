// tb_image_workload -- whole images through the pipeline at default
// parameters, with the statistics used to judge an image cipher.
//
// Two synthetic grey images are used: 440 x 123 pixels, and 512 x 512 pixels
// shaped like a chest CT slice (black background, bright body, two darker
// lung fields with texture), so that large uniform areas exist. Each image is
// streamed one pixel per cycle, padded at the end with zero pixels to a whole
// number of 16-pixel blocks, and run three times: CTR with sel = 0
// (ciphertext), CTR with sel = 1 (decrypted), ECB with sel = 0.
// Checks: every ciphertext block against the reference model; the decrypted
// image equals the original; the CTR ciphertext has a grey-level entropy above
// 7.99 bit and horizontal, vertical and diagonal neighbour correlations below
// 0.02 in magnitude, while the original's correlations are above 0.9; the ECB
// ciphertext's entropy is below the CTR one (ECB leaks the uniform areas);
// for the CT-like image, encrypting again with one key bit flipped changes
// more than 99 % of the pixels (NPCR) by about a third of the range on
// average (UACI between 32 % and 35 %);
// a whole image takes no more than one cycle per pixel plus the pipeline
// latency. The statistics are printed for comparison with published figures.
module tb_image_workload;
  import aes_pkg::*;
  import aes_ref_pkg::*;

  logic   clk = 0, rst_n = 0;
  logic   pix_valid = 0, pix_ready;
  logic [7:0] pix = '0;
  logic   enable1 = 1, sel = 0, ctr_load = 0, key_wr = 0;
  mode_e  mode = MODE_CTR;
  block_t iv = 128'hf0f1f2f3f4f5f6f7f8f9fafbfcfdfeff, key_wr_data = '0, dout;
  logic   dout_valid, idle, key_busy;
  int checks = 0, failures = 0;
  longint cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  aes_cosim_top dut (.*);

  localparam block_t KEY = 128'h2b7e151628aed2a6abf7158809cf4f3c;

  int W, H, NPIX, NBLK;
  logic [7:0] img [];
  logic [7:0] out [];
  int n_out;

  always @(posedge clk) if (rst_n && dout_valid) begin
    for (int i = 0; i < 16; i++)
      if (n_out * 16 + i < out.size()) out[n_out * 16 + i] = dout[127-8*i -: 8];
    n_out++;
  end

  function automatic logic [7:0] noise(int x, int y);
    int unsigned h;
    h = x * 374761393 + y * 668265263;
    h = (h ^ (h >> 13)) * 1274126177;
    return 8'(h >> 24);
  endfunction

  // chest-CT-like test image
  function automatic logic [7:0] ct_px(int x, int y, int w, int h);
    real u, v, l1, l2, body;
    u = (2.0 * x - w) / w; v = (2.0 * y - h) / h;
    body = u * u / 0.85 + v * v / 0.55;
    l1 = (u + 0.4) * (u + 0.4) / 0.08 + v * v / 0.25;
    l2 = (u - 0.4) * (u - 0.4) / 0.08 + v * v / 0.25;
    if (body > 1.0) return 8'd0;
    if (l1 < 1.0 || l2 < 1.0) return 8'(40 + (int'(noise(x / 3, y / 3)) >> 4));
    return 8'(235 - int'(20.0 * body));
  endfunction

  task automatic run_pass(input mode_e m, input logic s, input block_t v, output longint cycles);
    longint t0;
    @(negedge clk);
    while (!idle) @(negedge clk);
    n_out = 0;
    out = new[NBLK * 16];
    mode = m; sel = s; iv = v;
    ctr_load = 1;
    @(negedge clk);
    ctr_load = 0;
    t0 = cycle;
    pix_valid = 1;
    for (int i = 0; i < NBLK * 16; i++) begin
      pix = (i < NPIX) ? img[i] : 8'h00;
      do @(posedge clk); while (!pix_ready);
      @(negedge clk);
    end
    pix_valid = 0;
    while (n_out < NBLK) @(negedge clk);
    cycles = cycle - t0;
  endtask

  function automatic real entropy(ref logic [7:0] a[], input int n);
    int hist [256];
    real e, p;
    foreach (hist[i]) hist[i] = 0;
    for (int i = 0; i < n; i++) hist[a[i]]++;
    e = 0.0;
    foreach (hist[i]) if (hist[i] > 0) begin
      p = real'(hist[i]) / n;
      e -= p * $ln(p) / $ln(2.0);
    end
    return e;
  endfunction

  // correlation of each pixel with its neighbour at (dx, dy)
  function automatic real corr(ref logic [7:0] a[], input int dx, input int dy);
    real sx, sy, sxx, syy, sxy, n, x, y;
    sx = 0; sy = 0; sxx = 0; syy = 0; sxy = 0; n = 0;
    for (int r = 0; r + dy < H; r++)
      for (int c = 0; c + dx < W; c++) begin
        x = a[r * W + c]; y = a[(r + dy) * W + c + dx];
        sx += x; sy += y; sxx += x * x; syy += y * y; sxy += x * y; n += 1;
      end
    return (n * sxy - sx * sy) / ($sqrt(n * sxx - sx * sx) * $sqrt(n * syy - sy * sy));
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_image(input int w, input int h, input string name, input bit with_keytest);
    longint cyc;
    block_t ctr0, p, c;
    real e_ctr, e_ecb, e_in;
    W = w; H = h; NPIX = w * h; NBLK = (NPIX + 15) / 16;
    img = new[NPIX];
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) img[y * w + x] = ct_px(x, y, w, h);

    // CTR, ciphertext
    run_pass(MODE_CTR, 0, rand_blk(), cyc);
    ctr0 = iv;
    for (int b = 0; b < NBLK; b++) begin
      for (int i = 0; i < 16; i++) begin
        p[127-8*i -: 8] = (b * 16 + i < NPIX) ? img[b * 16 + i] : 8'h00;
        c[127-8*i -: 8] = out[b * 16 + i];
      end
      checks++;
      if (c !== (p ^ encrypt(KEY, ctr0 + block_t'(b)))) begin
        failures++;
        if (failures < 5) $display("%s block %0d: ciphertext mismatch", name, b);
      end
    end
    check(cyc <= longint'(NBLK) * 16 + 30, $sformatf("%s: %0d cycles for %0d pixels", name, cyc, NBLK * 16));
    e_in  = entropy(img, NPIX);
    e_ctr = entropy(out, NPIX);
    $display("%s %0dx%0d: %0d cycles for %0d blocks", name, w, h, cyc, NBLK);
    $display("%s input : entropy %f  corr h %f v %f d %f", name, e_in,
             corr(img, 1, 0), corr(img, 0, 1), corr(img, 1, 1));
    $display("%s CTR   : entropy %f  corr h %f v %f d %f", name, e_ctr,
             corr(out, 1, 0), corr(out, 0, 1), corr(out, 1, 1));
    check(e_ctr > 7.99, $sformatf("%s CTR entropy %f", name, e_ctr));
    check(corr(img, 1, 0) > 0.9 && corr(img, 0, 1) > 0.9 && corr(img, 1, 1) > 0.9,
          $sformatf("%s input correlation", name));
    check(corr(out, 1, 0) < 0.02 && corr(out, 1, 0) > -0.02, $sformatf("%s CTR horizontal correlation", name));
    check(corr(out, 0, 1) < 0.02 && corr(out, 0, 1) > -0.02, $sformatf("%s CTR vertical correlation", name));
    check(corr(out, 1, 1) < 0.02 && corr(out, 1, 1) > -0.02, $sformatf("%s CTR diagonal correlation", name));

    // CTR, decrypted output
    run_pass(MODE_CTR, 1, rand_blk(), cyc);
    begin
      int bad = 0;
      for (int i = 0; i < NPIX; i++) if (out[i] !== img[i]) bad++;
      check(bad == 0, $sformatf("%s: %0d decrypted pixels differ", name, bad));
    end

    // ECB, ciphertext
    run_pass(MODE_ECB, 0, rand_blk(), cyc);
    e_ecb = entropy(out, NPIX);
    $display("%s ECB   : entropy %f  corr h %f v %f d %f", name, e_ecb,
             corr(out, 1, 0), corr(out, 0, 1), corr(out, 1, 1));
    check(e_ecb < e_ctr, $sformatf("%s ECB entropy %f not below CTR %f", name, e_ecb, e_ctr));
    for (int b = 0; b < 8; b++) begin
      for (int i = 0; i < 16; i++) begin
        p[127-8*i -: 8] = img[b * 16 + i];
        c[127-8*i -: 8] = out[b * 16 + i];
      end
      check(c === encrypt(KEY, p), $sformatf("%s ECB block %0d", name, b));
    end

    // key sensitivity: same image and counter, key with one bit flipped
    if (with_keytest) begin
      logic [7:0] ref_img [];
      int    diff;
      real   uaci, npcr;
      block_t v;
      v = rand_blk();
      run_pass(MODE_CTR, 0, v, cyc);
      ref_img = out;
      @(negedge clk);
      key_wr_data = KEY ^ 128'h1; key_wr = 1;
      @(negedge clk);
      key_wr = 0;
      run_pass(MODE_CTR, 0, v, cyc);
      diff = 0; uaci = 0.0;
      for (int i = 0; i < NPIX; i++) begin
        if (out[i] != ref_img[i]) diff++;
        uaci += (out[i] > ref_img[i] ? out[i] - ref_img[i] : ref_img[i] - out[i]) / 255.0;
      end
      npcr = 100.0 * diff / NPIX;
      uaci = 100.0 * uaci / NPIX;
      $display("%s one-bit key change: NPCR %f %%  UACI %f %%", name, npcr, uaci);
      check(npcr > 99.0, $sformatf("%s NPCR %f", name, npcr));
      check(uaci > 32.0 && uaci < 35.0, $sformatf("%s UACI %f", name, uaci));
      @(negedge clk);
      key_wr_data = KEY; key_wr = 1;
      @(negedge clk);
      key_wr = 0;
    end
  endtask

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_image(440, 123, "grey", 0);
    run_image(512, 512, "ct", 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
