// Truncation decoder: turns the truncation pins into the Head vector.
//
// With trunc_enable high, Trunc+1 bits are truncated (Trunc = 0 truncates one
// bit, Trunc = 1 two bits, ...), so the MSB of the truncated field is bit
// Trunc:
//   word mode (byte_mode_enb = 1): Head<Trunc> = 1, all others 0;
//   byte mode (byte_mode_enb = 0): Head<8k + Trunc> = 1 in every byte k.
// With trunc_enable low every Head is 0 and nothing is truncated.
//
// The encoding of Trunc and the role of the three pins follow the paper's
// timing-diagram description. In byte mode a byte has only 8 columns; values
// of Trunc above 7 are this design's choice: they saturate to 8 truncated
// bits per byte. Purely combinational.
module trunc_decoder
  import trunmem_pkg::*;
#(
  parameter int unsigned W  = WIDTH,
  parameter int unsigned BW = BYTE_W,
  parameter int unsigned TW = $clog2(W)
) (
  input  logic          trunc_enable,   // 1: truncation on
  input  logic [TW-1:0] trunc,          // truncated bits minus one
  input  logic          byte_mode_enb,  // active low byte mode
  output logic [W-1:0]  head            // Head<W-1:0>
);

  localparam int unsigned NB  = W / BW;
  localparam int unsigned BTW = $clog2(BW);

  // Head position inside a byte, saturated to the byte's MSB.
  logic [BTW-1:0] byte_pos;
  always_comb begin
    if (trunc > TW'(BW - 1)) byte_pos = BTW'(BW - 1);
    else                     byte_pos = trunc[BTW-1:0];
  end

  always_comb begin
    head = '0;
    if (trunc_enable) begin
      if (byte_mode_enb) begin
        head[trunc] = 1'b1;
      end else begin
        for (int b = 0; b < NB; b++) head[b*BW + int'(byte_pos)] = 1'b1;
      end
    end
  end

endmodule
