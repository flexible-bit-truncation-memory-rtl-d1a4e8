// Testbench of the truncation decoder: every value of Trunc, Trunc_enable and
// Byte_mode_enb; the Head vector must mark bit Trunc (word mode), bit
// min(Trunc,7) of every byte (byte mode), or nothing (truncation off).
module tb_trunc_decoder;
  logic        trunc_enable, byte_mode_enb;
  logic [4:0]  trunc;
  logic [31:0] head, exp;
  int checks = 0, failures = 0;

  trunc_decoder dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int en = 0; en < 2; en++)
      for (int bm = 0; bm < 2; bm++)
        for (int t = 0; t < 32; t++) begin
          trunc_enable = 1'(en); byte_mode_enb = 1'(bm); trunc = 5'(t);
          #1;
          if (en == 0)      exp = '0;
          else if (bm == 1) exp = 32'(1) << t;
          else              exp = 32'h0101_0101 << ((t > 7) ? 7 : t);
          checks++;
          if (head !== exp) begin
            failures++;
            $display("FAIL en=%0d bm=%0d trunc=%0d head=%h exp=%h", en, bm, t, head, exp);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
