// Testbench of one truncation manager: applies all eight input combinations
// and compares DataOut, Tail<i-1>, the rail state and the reported state with
// the rows of the manager truth table.
module tb_trunc_manager;
  import trunmem_pkg::*;

  logic head, tail_in, read;
  logic data_out, tail_out, rail_en;
  tm_state_e state;
  int checks = 0, failures = 0;

  trunc_manager dut (.*);

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s head=%0b tail=%0b read=%0b got=%0b exp=%0b", what, head, tail_in, read, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {head, tail_in, read} = 3'(v);
      #1;
      // truth table rows
      if (!head && !tail_in) begin
        check(data_out, read, "dataout normal");
        check(tail_out, 1'b0, "tail normal");
        check(rail_en, 1'b1, "rails normal");
        check(state == TM_NORMAL, 1'b1, "state normal");
      end else if (!head) begin
        check(data_out, 1'b0, "dataout lesser");
        check(tail_out, 1'b1, "tail lesser");
        check(rail_en, 1'b0, "rails lesser");
        check(state == TM_LESSER_TRUNC, 1'b1, "state lesser");
      end else begin
        check(data_out, 1'b1, "dataout msb");
        check(tail_out, 1'b1, "tail msb");
        check(rail_en, 1'b0, "rails msb");
        check(state == TM_MSB_TRUNC, 1'b1, "state msb");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
