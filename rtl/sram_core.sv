// Single-port SRAM array with its peripherals and per-column power gating.
//
// Stands for the precharge, row decoder and word-line driver, bit-cell array,
// write driver and sense amplifier of the memory. It is written as an array
// of DEPTH words by W bits, accessed on the rising clock edge:
//   word_enable & writeen : data_in is written to word addr;
//   word_enable & readen  : word addr is sensed into the read latch, which
//                           drives read until the next read (one-cycle
//                           latency, one access per cycle).
// Reading and writing in the same cycle is not allowed (asserted).
//
// col_pwr[i] is the state of column i's virtual rails, set by its truncation
// manager. A gated column has its bit cells, write driver and sense amplifier
// unpowered: a write leaves the column untouched, and a read returns 0 on it
// (the manager replaces that bit anyway). The paper states that a gated column
// loses its contents and must be rewritten after truncation is lowered; this
// model does not corrupt the stored bits, so a column that is powered again
// returns its old value until rewritten. Note that a column's gate serves all
// words, so gating it drops that bit from every word of the array. The input
// register and word-line decoder of a real macro appear here as the sampling
// of address, data and commands at the clock edge and the array index. The
// pin names Word_enable, Readen, Writeen and Data_in follow the paper; the
// address port, the read latch, the 0 sensed on a gated column and the
// same-cycle rule are this design's choices. The clock doubles as the bit-line precharge (active low): the
// access happens in the high phase that follows the rising edge.
module sram_core
  import trunmem_pkg::*;
#(
  parameter int unsigned DEPTH = WORDS,
  parameter int unsigned W     = WIDTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,          // memory clock / precharge
  input  logic          word_enable,  // Word_enable: activate the word line
  input  logic          readen,       // Readen
  input  logic          writeen,      // Writeen
  input  logic [AW-1:0] addr,         // word address
  input  logic [W-1:0]  data_in,      // Data_in<W-1:0>
  input  logic [W-1:0]  col_pwr,      // 1: column rails connected
  output logic [W-1:0]  read          // Read<W-1:0> to the truncation managers
);

  logic [W-1:0] mem [DEPTH];

  // Write driver: only powered columns are driven.
  always_ff @(posedge clk) begin
    if (word_enable && writeen) begin
      for (int i = 0; i < int'(W); i++) begin
        if (col_pwr[i]) mem[addr][i] <= data_in[i];
      end
    end
  end

  // Sense amplifier and read latch: gated columns sense 0.
  always_ff @(posedge clk) begin
    if (word_enable && readen) read <= mem[addr] & col_pwr;
  end

  a_no_read_write : assert property (@(posedge clk) !(word_enable && readen && writeen))
    else $error("sram_core: read and write in the same cycle");

endmodule
