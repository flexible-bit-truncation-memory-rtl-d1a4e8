// Reference arithmetic for the truncation testbenches.
//
// Computes what a truncated read must return straight from the definition of
// truncation, without modelling the Head/Tail chain: with n = trunc+1 bits
// truncated, the n LSBs of the word (word mode) or of every byte (byte mode,
// n capped at 8) are replaced by 1 followed by n-1 zeros.
package tb_ref_pkg;

  // Truncated value of a 32-bit word.
  function automatic logic [31:0] ref_trunc(input logic [31:0] d, input logic en,
                                            input int unsigned trunc, input logic byte_mode_enb);
    logic [31:0] r;
    int unsigned n;
    r = d;
    if (en) begin
      if (byte_mode_enb) begin
        n = trunc + 1;
        for (int i = 0; i < 32; i++) if (i < int'(n)) r[i] = (i == int'(n) - 1);
      end else begin
        n = (trunc + 1 > 8) ? 8 : trunc + 1;
        for (int b = 0; b < 4; b++)
          for (int i = 0; i < 8; i++)
            if (i < int'(n)) r[b*8+i] = (i == int'(n) - 1);
      end
    end
    return r;
  endfunction

  // Columns whose rails stay connected for a truncation setting.
  function automatic logic [31:0] ref_powered(input logic en, input int unsigned trunc,
                                              input logic byte_mode_enb);
    logic [31:0] p;
    int unsigned n;
    p = '1;
    if (en) begin
      n = byte_mode_enb ? trunc + 1 : ((trunc + 1 > 8) ? 8 : trunc + 1);
      for (int i = 0; i < 32; i++)
        if (byte_mode_enb ? (i < int'(n)) : ((i % 8) < int'(n))) p[i] = 1'b0;
    end
    return p;
  endfunction

endpackage
