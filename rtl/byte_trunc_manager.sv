// Byte truncation manager: BYTE_W column managers in series.
//
// Bit BYTE_W-1 is the byte's MSB. Its manager takes the Tail coming into the
// byte (tail_in); every manager hands its Tail<i-1> to the manager below, and
// the Tail out of bit 0 leaves the byte (tail_out) for the next byte's MSB.
// With one Head set, that column reads 1, all columns below it read 0, and all
// of them have their rails disconnected. Purely combinational.
//
// The grouping of 8 managers into one byte manager follows the paper
// (32 managers "divided into 4 byte managers").
module byte_trunc_manager
  import trunmem_pkg::*;
#(
  parameter int unsigned W = BYTE_W
) (
  input  logic [W-1:0] head,      // Head<MSB:LSB> of this byte
  input  logic         tail_in,   // Tail into the byte's MSB manager
  input  logic [W-1:0] read,      // sensed column values
  output logic [W-1:0] data_out,  // DataOut of the byte
  output logic         tail_out,  // Tail out of the byte's LSB manager
  output logic [W-1:0] rail_en,   // per-column power state
  output tm_state_e    state [W]  // per-column manager state
);

  // tail[i] is the Tail input of column i; tail[W] enters the byte.
  logic [W:0] tail;
  assign tail[W] = tail_in;

  for (genvar i = 0; i < W; i++) begin : g_col
    logic t_out;
    trunc_manager u_tm (
      .head    (head[i]),
      .tail_in (tail[i+1]),
      .read    (read[i]),
      .data_out(data_out[i]),
      .tail_out(t_out),
      .rail_en (rail_en[i]),
      .state   (state[i])
    );
    assign tail[i] = t_out;
  end

  assign tail_out = tail[0];

endmodule
