// tb_out_mux -- self-checking testbench of the registered output multiplexer.
//
// Random inputs, valid flags and select; a model of one cycle of latency
// predicts dout_valid every cycle and dout whenever the selected input was
// valid, and dout must hold its value otherwise.
module tb_out_mux;
  logic clk = 0, rst_n = 0, sel = 0, d0_valid = 0, d1_valid = 0, dout_valid;
  logic [127:0] d0 = '0, d1 = '0, dout;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  out_mux dut (.*);

  logic         exp_v = 0;
  logic [127:0] exp_d = '0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      checks++;
      if (dout_valid !== exp_v || dout !== exp_d) begin
        failures++;
        $display("cycle %0d: got %b %h exp %b %h", i, dout_valid, dout, exp_v, exp_d);
      end
      sel = 1'($urandom); d0_valid = 1'($urandom); d1_valid = 1'($urandom);
      d0 = {$urandom, $urandom, $urandom, $urandom};
      d1 = {$urandom, $urandom, $urandom, $urandom};
      exp_v = sel ? d1_valid : d0_valid;
      if (exp_v) exp_d = sel ? d1 : d0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
