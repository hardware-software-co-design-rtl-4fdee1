// tb_user_key -- self-checking testbench of the key register.
//
// Checks the reset value (the default key), the zero output while enable1 is
// low, key writes including a one-bit change, and that the key holds when
// no write is given.
module tb_user_key;
  import aes_pkg::*;
  logic clk = 0, rst_n = 0, enable1 = 1, key_wr = 0;
  block_t key_wr_data = '0, key_user1;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  user_key dut (.*);

  task automatic chk(input block_t e, input string what);
    checks++;
    if (key_user1 !== e) begin
      failures++;
      $display("%s: got %h exp %h", what, key_user1, e);
    end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    block_t k;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(128'h2b7e151628aed2a6abf7158809cf4f3c, "reset key");
    enable1 = 0;
    #1 chk('0, "disabled");
    enable1 = 1;
    for (int i = 0; i < 20; i++) begin
      k = {$urandom, $urandom, $urandom, $urandom};
      key_wr_data = k; key_wr = 1;
      @(negedge clk);
      key_wr = 0; key_wr_data = ~k;
      chk(k, "after write");
      repeat (3) @(negedge clk);
      chk(k, "held");
      // one-bit change, as in a key-sensitivity test
      key_wr_data = k ^ (128'h1 << $urandom_range(0, 127)); key_wr = 1;
      @(negedge clk);
      key_wr = 0;
      chk(key_wr_data, "one-bit change");
      enable1 = 0;
      #1 chk('0, "disabled");
      enable1 = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
