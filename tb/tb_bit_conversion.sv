// tb_bit_conversion -- self-checking testbench of the 8-bit to 128-bit packer.
//
// Pixels are sent with random gaps and the output is taken with random
// back-pressure; every block must hold 16 consecutive pixels, the first one in
// the most significant byte. A continuous stream with the output always ready
// must give one block every 16 cycles, with the input never stalled.
module tb_bit_conversion;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [7:0]   in_data = '0;
  logic [127:0] out_data;
  int checks = 0, failures = 0, cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  bit_conversion dut (.*);

  logic [7:0] sent[$];
  int  last_out = -1, gap_ok = 0, gap_bad = 0, stalls = 0;
  bit  stream_mode = 0;

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      logic [127:0] e;
      for (int i = 0; i < 16; i++) e[127-8*i -: 8] = sent.pop_front();
      checks++;
      if (out_data !== e) begin
        failures++;
        $display("MISMATCH got %h exp %h", out_data, e);
      end
      if (stream_mode && last_out >= 0) begin
        if (cycle - last_out == 16) gap_ok++; else gap_bad++;
      end
      last_out = cycle;
    end
    if (in_valid && in_ready) sent.push_back(in_data);
    if (stream_mode && in_valid && !in_ready) stalls++;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // continuous stream
    stream_mode = 1;
    @(negedge clk);
    in_valid = 1;
    for (int i = 0; i < 16 * 20; i++) begin
      in_data = 8'(i * 7 + 3);
      @(negedge clk);
    end
    in_valid = 0;
    repeat (20) @(negedge clk);
    stream_mode = 0;
    // random gaps and back-pressure
    fork
      for (int i = 0; i < 16 * 100; i++) begin
        @(negedge clk);
        in_valid = 0;
        repeat ($urandom_range(0, 2)) @(negedge clk);
        in_data = 8'($urandom);
        in_valid = 1;
        do @(posedge clk); while (!in_ready);
      end
      forever begin
        @(negedge clk);
        out_ready = ($urandom_range(0, 2) != 0);
      end
    join_any
    disable fork;
    @(negedge clk);
    in_valid = 0;
    out_ready = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (sent.size() != 0) begin
      failures++;
      $display("%0d pixels left over", sent.size());
    end
    checks++;
    if (gap_ok != 19 || gap_bad != 0 || stalls != 0) begin
      failures++;
      $display("stream: %0d gaps of 16, %0d others, %0d stalls", gap_ok, gap_bad, stalls);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
