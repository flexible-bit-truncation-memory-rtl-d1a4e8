// Testbench of the byte truncation manager: for every Head position (and no
// Head), both values of the incoming Tail and random column data, compares the
// byte's outputs with the truncated value computed arithmetically.
module tb_byte_trunc_manager;
  import trunmem_pkg::*;

  logic [7:0] head, read, data_out, rail_en;
  logic tail_in, tail_out;
  tm_state_e state [8];
  int checks = 0, failures = 0;

  byte_trunc_manager dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] exp_d, exp_p;
    logic exp_t;
    for (int rep = 0; rep < 20; rep++) begin
      for (int pos = -1; pos < 8; pos++) begin
        for (int t = 0; t < 2; t++) begin
          read    = 8'($urandom);
          tail_in = 1'(t);
          head    = (pos < 0) ? 8'h00 : 8'(1 << pos);
          #1;
          if (t == 1) begin            // byte below a truncated bit: zeros, a Head still reads 1
            exp_d = (pos < 0) ? 8'h00 : 8'(1 << pos); exp_p = 8'h00; exp_t = 1'b1;
          end else if (pos < 0) begin  // untouched
            exp_d = read; exp_p = 8'hFF; exp_t = 1'b0;
          end else begin               // pos+1 LSBs truncated to 10..0
            exp_p = 8'hFF << (pos + 1);
            exp_d = (read & exp_p) | 8'(1 << pos);
            exp_t = 1'b1;
          end
          checks++;
          if (data_out !== exp_d || rail_en !== exp_p || tail_out !== exp_t) begin
            failures++;
            $display("FAIL pos=%0d tail=%0d read=%h got %h/%h/%b exp %h/%h/%b", pos, t, read,
                     data_out, rail_en, tail_out, exp_d, exp_p, exp_t);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
