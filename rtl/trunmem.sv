// TrunMEM: a bit-truncation SRAM with run-time selectable truncation.
//
// A WORDS x WIDTH single-port SRAM whose read path passes through one
// truncation manager per column. The truncation decoder turns the pins
// trunc_enable, trunc and byte_mode_enb into the Head vector; the managers
// spread each Head down the Tail chain (cut at byte boundaries in byte mode),
// switch off the rails of every truncated column and substitute the dummy
// value 10...0 for the truncated field on data_out.
//
//   trunc_enable = 0                  : no truncation
//   trunc_enable = 1, byte_mode_enb=1 : the trunc+1 LSBs of the word truncated
//   trunc_enable = 1, byte_mode_enb=0 : the trunc+1 LSBs of every byte
//                                       truncated (at most 8)
//
// Timing: a read (word_enable & readen at a rising edge) updates the read
// latch after that edge; data_out is combinational from the latch and the
// truncation pins, so the pins must hold the read's setting while data_out is
// used. A write at a rising edge only reaches columns powered at that moment.
// A column that was truncated loses its data in every word (one gate serves
// the whole column): after lowering the truncation level a word must be
// rewritten before its newly untruncated bits are valid. The RTL array keeps
// the old bits; it does not model that loss.
//
// col_rail_en leaves the module to drive the per-column PMOS header and NMOS
// footer power-gate transistors, which are analog devices outside the RTL;
// inside, the same signal stands for the column's power state.
//
// The block structure, pin names and the truncation behaviour follow the
// paper; the address port and the one-cycle read latch are this design's own.
module trunmem
  import trunmem_pkg::*;
#(
  parameter int unsigned DEPTH = WORDS,
  parameter int unsigned W     = WIDTH,
  parameter int unsigned BW    = BYTE_W,
  parameter int unsigned AW    = $clog2(DEPTH),
  parameter int unsigned TW    = $clog2(W)
) (
  input  logic          clk,            // clock, doubles as precharge
  input  logic          word_enable,    // Word_enable
  input  logic          readen,         // Readen
  input  logic          writeen,        // Writeen
  input  logic [AW-1:0] addr,           // word address
  input  logic [W-1:0]  data_in,        // Data_in<W-1:0>
  input  logic          trunc_enable,   // Trunc_enable
  input  logic [TW-1:0] trunc,          // Trunc<TW-1:0>
  input  logic          byte_mode_enb,  // Byte_mode_enb, active low
  output logic [W-1:0]  data_out,       // Data_out<W-1:0>
  output logic [W-1:0]  col_rail_en     // to the column power gates
);

  logic [W-1:0] head;
  logic [W-1:0] read;
  logic [W-1:0] rail_en;
  tm_state_e    state [W];

  trunc_decoder #(.W(W), .BW(BW), .TW(TW)) u_dec (
    .trunc_enable (trunc_enable),
    .trunc        (trunc),
    .byte_mode_enb(byte_mode_enb),
    .head         (head)
  );

  sram_core #(.DEPTH(DEPTH), .W(W), .AW(AW)) u_sram (
    .clk        (clk),
    .word_enable(word_enable),
    .readen     (readen),
    .writeen    (writeen),
    .addr       (addr),
    .data_in    (data_in),
    .col_pwr    (rail_en),
    .read       (read)
  );

  trunc_manager_array #(.W(W), .BW(BW)) u_tma (
    .head         (head),
    .byte_mode_enb(byte_mode_enb),
    .read         (read),
    .data_out     (data_out),
    .rail_en      (rail_en),
    .state        (state)
  );

  assign col_rail_en = rail_en;

  // One Head per field: at most one MSB-truncated column in word mode, at
  // most one per byte in byte mode.
  logic [W-1:0] msb_col;
  for (genvar i = 0; i < W; i++) begin : g_msb
    assign msb_col[i] = (state[i] == TM_MSB_TRUNC);
  end

  a_one_head_per_field : assert property (@(posedge clk)
    $countones(msb_col) <= (byte_mode_enb ? 1 : int'(W / BW)))
    else $error("trunmem: more than one MSB-truncated column per field");

endmodule
