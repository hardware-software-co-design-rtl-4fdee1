// out_mux -- the output "Mux" of the co-simulation model: selects the
// encrypted block (d0) or the decrypted block (d1) for the output gateway.
//
// It is a two-input multiplexer with one register stage (latency z^-1, as
// marked on the block). Each input carries a valid flag: the output register
// loads the selected input when that input is valid, and dout_valid is the
// selected valid delayed by one cycle; dout holds its last value otherwise.
// The multiplexer, its ports sel/d0/d1 and its one-cycle latency are the
// paper's; the valid flags are this implementation's addition.
module out_mux #(
  parameter int unsigned W = 128
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         sel,
  input  logic         d0_valid,
  input  logic [W-1:0] d0,
  input  logic         d1_valid,
  input  logic [W-1:0] d1,
  output logic         dout_valid,
  output logic [W-1:0] dout
);

  logic         v;
  logic [W-1:0] d;

  always_comb begin
    v = sel ? d1_valid : d0_valid;
    d = sel ? d1 : d0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dout_valid <= 1'b0;
      dout       <= '0;
    end else begin
      dout_valid <= v;
      if (v) dout <= d;
    end
  end

endmodule
