// user_key -- the "User_key" block: holds the 128-bit AES key and supplies it
// to the Encryption and Decryption blocks.
//
// The key register resets to DEFAULT_KEY and can be rewritten at any time with
// key_wr / key_wr_data (this is how a different key, for instance one with a
// single bit flipped for a key-sensitivity test, is applied). key_user1
// carries the stored key while enable1 is high and is all zeros otherwise. In
// the co-simulation model enable1 is driven by a constant 1.
//
// The block's name and its enable1 / key_user1 ports are the paper's. The key
// value is not given there: DEFAULT_KEY is the FIPS-197 / SP 800-38A example
// key. The write port and the zero output when disabled are this
// implementation's choices. The output is combinational from the register.
module user_key
  import aes_pkg::*;
#(
  parameter block_t DEFAULT_KEY = 128'h2b7e151628aed2a6abf7158809cf4f3c
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   enable1,
  input  logic   key_wr,
  input  block_t key_wr_data,
  output block_t key_user1
);

  block_t key_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      key_q <= DEFAULT_KEY;
    else if (key_wr) key_q <= key_wr_data;
  end

  assign key_user1 = enable1 ? key_q : '0;

endmodule
