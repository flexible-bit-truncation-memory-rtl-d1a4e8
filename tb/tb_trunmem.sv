// End-to-end testbench of the truncation memory at its full 1024 x 32 size.
//
// 1. Replays the paper's timing-diagram sequence (100-unit clock): 0x55555555
//    written and read back untruncated and with 2, 3, 4 bits per byte, then
//    again in word mode with 0, 2, 3, 16 bits truncated; the read values are
//    those printed under the diagram.
// 2. Fills all 1024 words with random data, then rewrites and reads every
//    word back under a random truncation setting (both modes, every Trunc
//    value).
// 3. Writes while columns are truncated, then lowers truncation, rewrites and
//    reads, checking the powered columns and the rewritten word.
// 4. Lowers truncation without rewriting and reads: a monitor that tracks
//    which bits of every word have been lost to power gating must flag it.
// Each read is also checked for the one-cycle latency: data_out shows the new
// word right after the read edge. The monitor models the bit-cell data loss
// the RTL array does not model: a column gated at any edge loses its bit in
// every word until that word is written with the column powered; a read that
// returns an untruncated lost bit is a violation of the rewrite rule. Counts how often each mechanism ran (word
// truncation, byte truncation, untruncated read, whole-word truncation, byte
// saturation, gated write, rewrite after lowering, mode switch, flagged
// stale read) and fails a
// mechanism that never ran.
module tb_trunmem;
  import tb_ref_pkg::*;

  localparam int DEPTH = 1024;

  logic        clk = 1'b0;
  logic        word_enable = 1'b0, readen = 1'b0, writeen = 1'b0;
  logic [9:0]  addr = '0;
  logic [31:0] data_in = '0;
  logic        trunc_enable = 1'b0;
  logic [4:0]  trunc = '0;
  logic        byte_mode_enb = 1'b1;
  logic [31:0] data_out, col_rail_en;

  logic [31:0] model [DEPTH];
  int checks = 0, failures = 0, cycles = 0;
  int n_word = 0, n_byte = 0, n_plain = 0, n_full = 0, n_sat = 0;
  int n_gated_wr = 0, n_rewrite = 0, n_switch = 0, n_stale = 0;
  logic [31:0] fresh [DEPTH];   // bits of each word still held by the cells
  logic        expect_stale = 1'b0;
  logic last_bm = 1'b1;

  trunmem dut (.*);

  always #50 clk = ~clk;
  always @(posedge clk) cycles++;

  // rewrite-rule monitor
  initial foreach (fresh[i]) fresh[i] = '0;
  always @(posedge clk) begin
    if (word_enable && readen && ((col_rail_en & ~fresh[addr]) != '0)) begin
      if (expect_stale) n_stale++;
      else begin
        failures++;
        $display("FAIL read of lost data at %0d (columns %h)", addr, col_rail_en & ~fresh[addr]);
      end
    end
    if (word_enable && writeen) fresh[addr] = fresh[addr] | col_rail_en;
    if (col_rail_en != '1)
      for (int i = 0; i < DEPTH; i++) fresh[i] = fresh[i] & col_rail_en;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h (en=%b trunc=%0d bm=%b)", what, got, exp, trunc_enable,
               trunc, byte_mode_enb);
    end
  endtask

  task automatic set_trunc(input logic en, input int t, input logic bm);
    @(negedge clk);
    if (bm != last_bm) n_switch++;
    last_bm = bm;
    trunc_enable = en; trunc = 5'(t); byte_mode_enb = bm;
  endtask

  task automatic do_write(input int a, input logic [31:0] d);
    @(negedge clk);
    word_enable = 1; writeen = 1; readen = 0; addr = 10'(a); data_in = d;
    @(negedge clk);
    word_enable = 0; writeen = 0;
  endtask

  // Issue a read, check data_out one edge later against exp.
  task automatic do_read(input int a, input logic [31:0] exp, input string what);
    int c0;
    @(negedge clk);
    word_enable = 1; readen = 1; writeen = 0; addr = 10'(a);
    c0 = cycles;
    @(posedge clk); #1;
    check(32'(cycles - c0), 32'd1, "read latency");
    check(data_out, exp, what);
    check(col_rail_en, ref_powered(trunc_enable, int'(trunc), byte_mode_enb), "rail enables");
    if (!trunc_enable) n_plain++;
    else if (byte_mode_enb) begin
      n_word++;
      if (trunc == 5'd31) n_full++;
    end else begin
      n_byte++;
      if (trunc > 5'd7) n_sat++;
    end
    @(negedge clk);
    word_enable = 0; readen = 0;
  endtask

  initial begin
    int a, t;
    logic bm;
    logic [31:0] d;

    // 1. timing-diagram sequence
    set_trunc(0, 0, 0);
    do_write(37, 32'h5555_5555);
    do_read(37, 32'h5555_5555, "fig byte original");
    set_trunc(1, 1, 0); do_read(37, 32'h5656_5656, "fig byte 2-bit");
    set_trunc(1, 2, 0); do_read(37, 32'h5454_5454, "fig byte 3-bit");
    set_trunc(1, 3, 0); do_read(37, 32'h5858_5858, "fig byte 4-bit");
    set_trunc(0, 0, 1);
    do_write(37, 32'h5555_5555); n_rewrite++;
    do_read(37, 32'h5555_5555, "fig word original");
    set_trunc(1, 1, 1);  do_read(37, 32'h5555_5556, "fig word 2-bit");
    set_trunc(1, 2, 1);  do_read(37, 32'h5555_5554, "fig word 3-bit");
    set_trunc(1, 15, 1); do_read(37, 32'h5555_8000, "fig word 16-bit");
    set_trunc(1, 31, 1); do_read(37, 32'h8000_0000, "word 32-bit");

    // 2. whole memory, random settings
    set_trunc(0, 0, 1);
    for (a = 0; a < DEPTH; a++) begin
      model[a] = $urandom;
      do_write(a, model[a]);
    end
    for (a = 0; a < DEPTH; a++) begin
      // the previous setting may have gated columns of every word: rewrite first
      set_trunc(0, 0, 1);
      do_write(a, model[a]); n_rewrite++;
      bm = 1'($urandom);
      t  = $urandom_range(0, 31);
      set_trunc(($urandom_range(0, 7) != 0), t, bm);
      do_read(a, ref_trunc(model[a], trunc_enable, t, bm), "sweep");
    end

    // 3. writes into truncated columns, then lowering truncation and rewriting
    for (int k = 0; k < 100; k++) begin
      logic [31:0] pw;
      a  = $urandom_range(0, DEPTH - 1);
      bm = 1'($urandom);
      t  = $urandom_range(0, 31);
      d  = $urandom;
      set_trunc(1, t, bm);
      pw = ref_powered(1, t, bm);
      do_write(a, d); n_gated_wr++;
      // the powered columns took the new data; the read shows the truncated field
      do_read(a, ref_trunc(d, 1, t, bm), "read after gated write");
      // lower truncation: rewrite first, then the full word is back
      set_trunc(0, 0, bm);
      do_write(a, d); n_rewrite++;
      do_read(a, d, "read after rewrite");
      model[a] = d;
    end

    // 4. lowering truncation without a rewrite must be caught by the monitor
    a = 77;
    set_trunc(0, 0, 1);
    do_write(a, 32'h1234_5678);
    set_trunc(1, 7, 1);
    do_read(a, 32'h1234_5680, "read truncated before stale read");
    set_trunc(0, 0, 1);
    expect_stale = 1'b1;
    @(negedge clk);
    word_enable = 1; readen = 1; addr = 10'(a);
    @(negedge clk);
    word_enable = 0; readen = 0;
    expect_stale = 1'b0;

    $display("mechanisms: word=%0d byte=%0d plain=%0d full32=%0d byte_sat=%0d gated_wr=%0d rewrite=%0d switch=%0d stale_read_flagged=%0d",
             n_word, n_byte, n_plain, n_full, n_sat, n_gated_wr, n_rewrite, n_switch, n_stale);
    if (n_word == 0 || n_byte == 0 || n_plain == 0 || n_full == 0 || n_sat == 0 ||
        n_gated_wr == 0 || n_rewrite == 0 || n_switch == 0 || n_stale == 0) begin
      failures++;
      $display("FAIL a mechanism never ran");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
