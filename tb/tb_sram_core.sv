// Testbench of the SRAM core at its full 1024 x 32 size: fills every word with
// random data, reads it all back and checks it (one-cycle read latency); then
// writes with part of the columns gated and checks that gated columns keep
// their old contents and sense 0, and that the read latch holds between reads.
module tb_sram_core;
  localparam int DEPTH = 1024;
  logic        clk = 1'b0;
  logic        word_enable = 1'b0, readen = 1'b0, writeen = 1'b0;
  logic [9:0]  addr = '0;
  logic [31:0] data_in = '0, col_pwr = '1, read;
  logic [31:0] model [DEPTH];
  int checks = 0, failures = 0;

  sram_core dut (.*);

  always #50 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_write(input int a, input logic [31:0] d);
    @(negedge clk);
    word_enable = 1; writeen = 1; readen = 0; addr = 10'(a); data_in = d;
    @(negedge clk);
    word_enable = 0; writeen = 0;
  endtask

  task automatic do_read_check(input int a, input logic [31:0] exp);
    @(negedge clk);
    word_enable = 1; readen = 1; writeen = 0; addr = 10'(a);
    @(posedge clk); #1;
    checks++;
    if (read !== exp) begin
      failures++;
      $display("FAIL read addr=%0d got %h exp %h", a, read, exp);
    end
    @(negedge clk);
    word_enable = 0; readen = 0;
  endtask

  initial begin
    logic [31:0] d, pw;
    for (int a = 0; a < DEPTH; a++) begin
      model[a] = $urandom;
      do_write(a, model[a]);
    end
    for (int a = 0; a < DEPTH; a++) do_read_check(a, model[a]);

    // gated columns: writes dropped there, reads sense 0 there
    for (int k = 0; k < 200; k++) begin
      int a;
      a = $urandom_range(0, DEPTH - 1);
      pw = $urandom;
      d  = $urandom;
      col_pwr = pw;
      do_write(a, d);
      model[a] = (d & pw) | (model[a] & ~pw);
      do_read_check(a, model[a] & pw);
      col_pwr = '1;
      do_read_check(a, model[a]);
    end

    // read latch holds while no read is issued
    do_read_check(5, model[5]);
    do_write(5, ~model[5]);
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (read !== model[5]) begin
      failures++;
      $display("FAIL read latch changed without a read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
