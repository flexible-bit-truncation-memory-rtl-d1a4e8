// The paper's power-measurement access sequence, on the full-size memory.
//
// For every truncation level of both modes (word mode 0..32 bits, byte mode
// 0..8 bits per byte): a word is first written with 0xA5A5A5A5, then with
// 0xFF00FF00 while the level is applied, and finally read. The read must
// return the truncated value of 0xFF00FF00 and the column rail enables must
// switch off exactly the truncated columns. The number of gated columns is
// printed per level (the quantity power scales with).
module tb_power_sequence;
  import tb_ref_pkg::*;

  logic        clk = 1'b0;
  logic        word_enable = 1'b0, readen = 1'b0, writeen = 1'b0;
  logic [9:0]  addr = 10'd613;
  logic [31:0] data_in = '0;
  logic        trunc_enable = 1'b0;
  logic [4:0]  trunc = '0;
  logic        byte_mode_enb = 1'b1;
  logic [31:0] data_out, col_rail_en;
  int checks = 0, failures = 0;

  trunmem dut (.*);

  always #50 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cycle(input logic we, input logic re, input logic [31:0] d);
    @(negedge clk);
    word_enable = 1; writeen = we; readen = re; data_in = d;
    @(posedge clk); #1;
  endtask

  initial begin
    for (int bm = 1; bm >= 0; bm--) begin
      int maxbits;
      maxbits = (bm != 0) ? 32 : 8;
      for (int n = 0; n <= maxbits; n++) begin
        logic en;
        int t;
        en = (n != 0); t = en ? n - 1 : 0;
        @(negedge clk);
        trunc_enable = 1'b0; byte_mode_enb = 1'b1;
        cycle(1, 0, 32'hA5A5_A5A5);
        @(negedge clk);
        trunc_enable = en; trunc = 5'(t); byte_mode_enb = 1'(bm);
        cycle(1, 0, 32'hFF00_FF00);
        cycle(0, 1, '0);
        checks++;
        if (data_out !== ref_trunc(32'hFF00_FF00, en, t, 1'(bm)) ||
            col_rail_en !== ref_powered(en, t, 1'(bm))) begin
          failures++;
          $display("FAIL bm=%0d n=%0d got %h/%h", bm, n, data_out, col_rail_en);
        end
        $display("%s n=%0d: read %h, gated columns %0d", (bm != 0) ? "word" : "byte", n, data_out,
                 32 - $countones(col_rail_en));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
