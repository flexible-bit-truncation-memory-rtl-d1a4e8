// Truncation-manager array of the whole word.
//
// W/BW byte managers are placed in series, most significant byte first.
// The Tail into the word's MSB (Tail<m-1>) is tied low, and the Tail out of
// the word's LSB (Tail<0> output) is left unused. Between two bytes the Tail
// leaving the upper byte is ANDed with the active-low byte_mode_enb before it
// enters the lower byte's MSB:
//   byte_mode_enb = 1 (word mode): the 32 managers form one chain, so a single
//                                   Head truncates all bits below it;
//   byte_mode_enb = 0 (byte mode): the chain is cut at every byte boundary and
//                                   each byte is truncated by its own Head.
// The AND gates, their placement and the tied/unused chain ends follow the
// paper's memory structure figure and text. Purely combinational.
module trunc_manager_array
  import trunmem_pkg::*;
#(
  parameter int unsigned W  = WIDTH,
  parameter int unsigned BW = BYTE_W
) (
  input  logic [W-1:0] head,           // Head<W-1:0> from the decoder
  input  logic         byte_mode_enb,  // active low byte mode
  input  logic [W-1:0] read,           // Read<W-1:0> from the sense amplifiers
  output logic [W-1:0] data_out,       // Data_out<W-1:0>
  output logic [W-1:0] rail_en,        // per-column power state
  output tm_state_e    state [W]       // per-column manager state
);

  localparam int unsigned NB = W / BW;

  // byte_tail_in[b] enters byte b's MSB; byte_tail_out[b] leaves its LSB.
  logic [NB-1:0] byte_tail_in;
  logic [NB-1:0] byte_tail_out;

  for (genvar b = 0; b < NB; b++) begin : g_byte
    tm_state_e st [BW];

    if (b == NB - 1) begin : g_msb
      assign byte_tail_in[b] = 1'b0;  // Tail<m-1> tied to ground
    end else begin : g_and
      assign byte_tail_in[b] = byte_tail_out[b+1] & byte_mode_enb;
    end

    byte_trunc_manager #(.W(BW)) u_byte (
      .head    (head[b*BW +: BW]),
      .tail_in (byte_tail_in[b]),
      .read    (read[b*BW +: BW]),
      .data_out(data_out[b*BW +: BW]),
      .tail_out(byte_tail_out[b]),
      .rail_en (rail_en[b*BW +: BW]),
      .state   (st)
    );

    for (genvar i = 0; i < BW; i++) begin : g_st
      assign state[b*BW + i] = st[i];
    end
  end

  // byte_tail_out[0] is Tail<0> out of the LSB manager: unused, as in the paper.
  logic unused_tail0;
  assign unused_tail0 = byte_tail_out[0];

endmodule
