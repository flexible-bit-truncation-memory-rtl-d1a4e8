// Truncation manager of one memory column.
//
// Head marks this column as the most significant truncated bit; Tail says
// that a more significant column of the same field is truncated. The truth
// table of the manager is:
//
//   Head Tail Read | rails     DataOut Tail<i-1>
//    0    0    r   | VCC/GND   r       0
//    0    1    x   | floating  0       1
//    1    x    x   | floating  1       1
//
// so a truncated field reads 10...0 and every truncated column has its
// virtual supply and ground rails disconnected. tail_out feeds the next less
// significant manager, which makes the managers of a field work in series
// from a single Head.
//
// The truth table and the three states follow the paper. The power-gate
// transistors themselves are analog switches; here they are represented by
// rail_en (1 = rails connected), which the SRAM model uses as the column's
// power state. Purely combinational.
module trunc_manager
  import trunmem_pkg::*;
(
  input  logic      head,      // Head<i>
  input  logic      tail_in,   // Tail<i>
  input  logic      read,      // Read<i> from the sense amplifier
  output logic      data_out,  // DataOut<i>
  output logic      tail_out,  // Tail<i-1>
  output logic      rail_en,   // 1: vcc_bl<i>/gnd_bl<i> connected
  output tm_state_e state      // operating state, for observation
);

  // Truncation unit: decode the state of this column.
  always_comb begin
    if (head)         state = TM_MSB_TRUNC;
    else if (tail_in) state = TM_LESSER_TRUNC;
    else              state = TM_NORMAL;
  end

  assign tail_out = (state != TM_NORMAL);
  assign rail_en  = (state == TM_NORMAL);

  // Output multiplexer: sensed value or the dummy bit of the truncated field.
  always_comb begin
    unique case (state)
      TM_NORMAL:       data_out = read;
      TM_MSB_TRUNC:    data_out = 1'b1;
      default:         data_out = 1'b0;
    endcase
  end

endmodule
