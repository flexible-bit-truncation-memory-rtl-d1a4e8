// Deep-learning workload on the full-size memory in word mode.
//
// Fills all 1024 words with IEEE 754 single-precision weights (random sign,
// exponent 118..126, i.e. magnitudes between about 0.002 and 1, random
// fraction) and reads every weight back at 16, 17, 20, 21 and 22 truncated
// bits, the range in which classification and detection models still work.
// Checks for every read:
//   - bit-exact match with the arithmetic truncation (n LSBs -> 10..0);
//   - sign and exponent untouched, relative error at most 2^(n-24);
// and over the whole memory, that the mean error in units of the truncated
// field is close to zero, as the 10..0 fill is the expected-error minimiser,
// while a 00..0 fill would be biased by -(2^n-1)/2 units.
module tb_dnn_workload;
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

  logic [31:0] wt [DEPTH];
  int levels [5] = '{16, 17, 20, 21, 22};
  int checks = 0, failures = 0;

  trunmem dut (.*);

  always #50 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real pow2(input int e);
    real r;
    r = 1.0;
    for (int i = 0; i < e; i++) r = r * 2.0;
    for (int i = 0; i > e; i--) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp_value(input logic [31:0] b);
    real m;
    m = 1.0 + real'(b[22:0]) / 8388608.0;
    return (b[31] ? -m : m) * pow2(int'(b[30:23]) - 127);
  endfunction

  task automatic do_write(input int a, input logic [31:0] d);
    @(negedge clk);
    word_enable = 1; writeen = 1; readen = 0; addr = 10'(a); data_in = d;
    @(negedge clk);
    word_enable = 0; writeen = 0;
  endtask

  task automatic do_read(input int a, output logic [31:0] d);
    @(negedge clk);
    word_enable = 1; readen = 1; writeen = 0; addr = 10'(a);
    @(posedge clk); #1;
    d = data_out;
    @(negedge clk);
    word_enable = 0; readen = 0;
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      wt[a] = {1'($urandom), 8'($urandom_range(118, 126)), 23'($urandom)};
      do_write(a, wt[a]);
    end
    foreach (levels[li]) begin
      int n;
      real sum_units;
      n = levels[li];
      sum_units = 0.0;
      @(negedge clk);
      trunc_enable = 1'b1; trunc = 5'(n - 1); byte_mode_enb = 1'b1;
      for (int a = 0; a < DEPTH; a++) begin
        logic [31:0] d;
        real v, vt;
        do_read(a, d);
        checks++;
        if (d !== ref_trunc(wt[a], 1'b1, n - 1, 1'b1) || d[31:23] !== wt[a][31:23]) begin
          failures++;
          $display("FAIL n=%0d addr=%0d got %h exp %h", n, a, d, ref_trunc(wt[a], 1'b1, n - 1, 1'b1));
        end
        v  = fp_value(wt[a]);
        vt = fp_value(d);
        if ((vt - v) / v > pow2(n - 24) || (v - vt) / v > pow2(n - 24)) begin
          failures++;
          $display("FAIL n=%0d relative error too large at %0d", n, a);
        end
        // error of the fraction field, in units of its LSB
        sum_units += real'(int'(d[22:0]) - int'(wt[a][22:0]));
      end
      checks++;
      $display("n=%0d: mean fraction error %0.1f LSB (zero-fill bias would be %0.1f)", n,
               sum_units / DEPTH, -(pow2(n) - 1.0) / 2.0);
      if (sum_units / DEPTH > 0.1 * pow2(n) || -sum_units / DEPTH > 0.1 * pow2(n)) begin
        failures++;
        $display("FAIL n=%0d truncation error is biased", n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
