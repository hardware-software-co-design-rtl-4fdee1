// bit_conversion -- the "Bit Conversion" block: packs the 8-bit pixel stream
// (port m in the co-simulation model) into the 128-bit blocks (port n) that
// AES-128 works on.
//
// Pixels are shifted in one per accepted transfer; the first pixel of a block
// ends up in the most significant byte, which is AES byte 0, so a row of
// pixels maps onto a block in reading order. After OUT_W/IN_W pixels the block
// is offered on out_valid and held until taken. The input side stays ready in
// the cycle the full block is taken, so an uninterrupted pixel stream of one
// pixel per cycle is packed without a gap (one block every 16 cycles).
// Nothing is padded: an image whose size is not a multiple of 16 pixels must
// be padded by the sender.
//
// The 8-bit to 128-bit conversion is the paper's; byte order, the handshake
// and the absence of padding are this implementation's choices.
module bit_conversion #(
  parameter int unsigned IN_W  = 8,
  parameter int unsigned OUT_W = 128
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [IN_W-1:0]  in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [OUT_W-1:0] out_data
);

  localparam int unsigned WORDS = OUT_W / IN_W;
  localparam int unsigned CW    = $clog2(WORDS + 1);

  logic [OUT_W-1:0] buf_q;
  logic [CW-1:0]    cnt_q;   // pixels currently held
  logic             full_q;
  logic             in_fire, out_fire;

  assign out_valid = full_q;
  assign out_data  = buf_q;
  assign out_fire  = full_q && out_ready;
  assign in_ready  = !full_q || out_ready;
  assign in_fire   = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q  <= '0;
      cnt_q  <= '0;
      full_q <= 1'b0;
    end else begin
      if (in_fire) buf_q <= {buf_q[OUT_W-IN_W-1:0], in_data};
      unique case ({in_fire, out_fire})
        2'b10: begin
          cnt_q <= cnt_q + CW'(1);
          if (cnt_q == CW'(WORDS - 1)) full_q <= 1'b1;
        end
        2'b01: begin
          cnt_q  <= '0;
          full_q <= 1'b0;
        end
        2'b11: begin
          cnt_q  <= CW'(1);
          full_q <= 1'b0;
        end
        default: ;
      endcase
    end
  end

  initial assert (OUT_W % IN_W == 0 && OUT_W > IN_W)
    else $error("OUT_W must be a multiple of IN_W");

endmodule
