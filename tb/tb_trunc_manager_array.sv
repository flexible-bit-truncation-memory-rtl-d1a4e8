// Testbench of the 32-column truncation-manager array.
//
// Word mode: one Head at every position, random data, compared with the
// arithmetic reference. Byte mode: every byte gets its own optional Head at a
// random position; each byte is checked on its own, which shows that the AND
// gates stop a truncation from spilling into the byte below. The rail enables
// are checked against the set of truncated columns. Also replays the Head
// patterns behind the read values printed in the paper's timing diagram.
module tb_trunc_manager_array;
  import trunmem_pkg::*;
  import tb_ref_pkg::*;

  logic [31:0] head, read, data_out, rail_en;
  logic byte_mode_enb;
  tm_state_e state [32];
  int checks = 0, failures = 0;

  trunc_manager_array dut (.*);

  task automatic expect_out(input logic [31:0] exp_d, input logic [31:0] exp_p, input string what);
    #1;
    checks++;
    if (data_out !== exp_d || rail_en !== exp_p) begin
      failures++;
      $display("FAIL %s head=%h bm=%b read=%h got %h/%h exp %h/%h", what, head, byte_mode_enb,
               read, data_out, rail_en, exp_d, exp_p);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp_d, exp_p;
    // values printed in the timing diagram, data 0x55555555
    read = 32'h5555_5555;
    byte_mode_enb = 1'b0; head = 32'h0202_0202; expect_out(32'h5656_5656, 32'hFCFC_FCFC, "fig byte 2b");
    byte_mode_enb = 1'b0; head = 32'h0404_0404; expect_out(32'h5454_5454, 32'hF8F8_F8F8, "fig byte 3b");
    byte_mode_enb = 1'b0; head = 32'h0808_0808; expect_out(32'h5858_5858, 32'hF0F0_F0F0, "fig byte 4b");
    byte_mode_enb = 1'b1; head = 32'h0000_0002; expect_out(32'h5555_5556, 32'hFFFF_FFFC, "fig word 2b");
    byte_mode_enb = 1'b1; head = 32'h0000_0004; expect_out(32'h5555_5554, 32'hFFFF_FFF8, "fig word 3b");
    byte_mode_enb = 1'b1; head = 32'h0000_8000; expect_out(32'h5555_8000, 32'hFFFF_0000, "fig word 16b");
    byte_mode_enb = 1'b1; head = 32'h0000_0000; expect_out(32'h5555_5555, 32'hFFFF_FFFF, "fig word 0b");

    for (int rep = 0; rep < 50; rep++) begin
      // word mode, one Head
      for (int pos = 0; pos < 32; pos++) begin
        read = $urandom; byte_mode_enb = 1'b1; head = 32'(1) << pos;
        expect_out(ref_trunc(read, 1'b1, pos, 1'b1), ref_powered(1'b1, pos, 1'b1), "word");
      end
      // byte mode, independent optional Head per byte
      for (int k = 0; k < 16; k++) begin
        read = $urandom; byte_mode_enb = 1'b0; head = '0;
        exp_d = read; exp_p = '1;
        for (int b = 0; b < 4; b++) begin
          if ($urandom_range(0, 3) != 0) begin
            int p;
            p = $urandom_range(0, 7);
            head[b*8+p] = 1'b1;
            exp_d[b*8 +: 8] = 8'(ref_trunc(32'(read[b*8 +: 8]), 1'b1, p, 1'b0));
            exp_p[b*8 +: 8] = 8'(ref_powered(1'b1, p, 1'b0));
          end
        end
        expect_out(exp_d, exp_p, "byte");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
