// Video workload on the full-size memory in byte mode.
//
// A 64 x 64 tile of 8-bit luma pixels (4 pixels per word, 4096 pixels, which
// fills all 1024 words) is generated as a smooth gradient with textured
// regions and stored and read back under three viewer-aware truncation
// policies:
//   luminance-aware : 3 LSBs per pixel (overcast) and 4 LSBs (sunlight);
//   content-aware   : 0..4 LSBs per 16x16 macroblock, more for flatter blocks;
//   ROI-aware       : 0 LSBs inside a 32x32 region of interest, 3 outside.
// The macroblock rule and the ROI are stimulus choices of this testbench.
// Power gating switches a column off in every word at once, so a word is
// written under its own truncation level right before it is read: data
// stored under a higher level is never read under a lower one.
// Every pixel is compared with the arithmetic truncation (n LSBs replaced by
// 10..0) and with the error bound 2^(n-1); PSNR of each policy is printed.
module tb_video_workload;
  import tb_ref_pkg::*;

  localparam int DEPTH = 1024;
  localparam int SIDE  = 64;

  logic        clk = 1'b0;
  logic        word_enable = 1'b0, readen = 1'b0, writeen = 1'b0;
  logic [9:0]  addr = '0;
  logic [31:0] data_in = '0;
  logic        trunc_enable = 1'b0;
  logic [4:0]  trunc = '0;
  logic        byte_mode_enb = 1'b0;
  logic [31:0] data_out, col_rail_en;

  logic [7:0] pix [SIDE][SIDE];
  string names [4] = '{"luminance-overcast", "luminance-sunlight", "content-aware", "ROI-aware"};
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

  // word address of pixels (r, 4q .. 4q+3)
  function automatic int waddr(input int r, input int q);
    return r * (SIDE / 4) + q;
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

  // bits to truncate for pixel (r,c) under a policy
  function automatic int policy_bits(input int pol, input int r, input int c);
    int mb_r, mb_c, lo, hi;
    case (pol)
      0: return 3;                         // luminance, overcast
      1: return 4;                         // luminance, sunlight
      2: begin                             // content-aware, 16x16 macroblocks
        mb_r = (r / 16) * 16; mb_c = (c / 16) * 16; lo = 255; hi = 0;
        for (int i = 0; i < 16; i++)
          for (int j = 0; j < 16; j++) begin
            if (int'(pix[mb_r+i][mb_c+j]) < lo) lo = int'(pix[mb_r+i][mb_c+j]);
            if (int'(pix[mb_r+i][mb_c+j]) > hi) hi = int'(pix[mb_r+i][mb_c+j]);
          end
        if (hi - lo < 16)  return 4;
        if (hi - lo < 32)  return 3;
        if (hi - lo < 64)  return 2;
        if (hi - lo < 128) return 1;
        return 0;
      end
      default: return (r >= 16 && r < 48 && c >= 16 && c < 48) ? 0 : 3;  // ROI-aware
    endcase
  endfunction

  initial begin
    int used [5];
    // frame: gradient, plus texture in the upper-left quarter and a bright patch
    for (int r = 0; r < SIDE; r++)
      for (int c = 0; c < SIDE; c++) begin
        int v;
        v = r + 2 * c;
        if (r < 32 && c < 32) v = v + int'($urandom_range(0, 90));
        if (r >= 40 && c >= 40) v = 200 + int'($urandom_range(0, 6));
        pix[r][c] = 8'((v > 255) ? 255 : v);
      end
    for (int r = 0; r < SIDE; r++)
      for (int q = 0; q < SIDE / 4; q++)
        do_write(waddr(r, q), {pix[r][4*q+3], pix[r][4*q+2], pix[r][4*q+1], pix[r][4*q]});

    foreach (used[i]) used[i] = 0;
    for (int pol = 0; pol < 4; pol++) begin
      real se;
      se = 0.0;
      for (int r = 0; r < SIDE; r++)
        for (int q = 0; q < SIDE / 4; q++) begin
          logic [31:0] d, w;
          int n;
          // one truncation level per word: all four pixels share the macroblock
          n = policy_bits(pol, r, 4 * q);
          used[n]++;
          @(negedge clk);
          trunc_enable = (n != 0); trunc = 5'((n == 0) ? 0 : n - 1); byte_mode_enb = 1'b0;
          w = {pix[r][4*q+3], pix[r][4*q+2], pix[r][4*q+1], pix[r][4*q]};
          // store under this block's level, then read it back
          do_write(waddr(r, q), w);
          do_read(waddr(r, q), d);
          checks++;
          if (d !== ref_trunc(w, n != 0, (n == 0) ? 0 : n - 1, 1'b0)) begin
            failures++;
            $display("FAIL %s r=%0d q=%0d n=%0d got %h exp %h", names[pol], r, q, n, d,
                     ref_trunc(w, n != 0, (n == 0) ? 0 : n - 1, 1'b0));
          end
          for (int k = 0; k < 4; k++) begin
            int e;
            e = int'(d[8*k +: 8]) - int'(w[8*k +: 8]);
            se += real'(e * e);
            if (n > 0 && (e > (1 << (n - 1)) || -e > (1 << (n - 1)))) begin
              failures++;
              $display("FAIL error bound %s pixel error %0d n=%0d", names[pol], e, n);
            end
          end
        end
      if (se == 0.0) $display("%s: PSNR infinite", names[pol]);
      else $display("%s: PSNR %0.2f dB", names[pol], 10.0 * $log10(255.0 * 255.0 / (se / 4096.0)));
    end
    $display("words read per level 0..4: %0d %0d %0d %0d %0d", used[0], used[1], used[2], used[3], used[4]);
    // every level of the content-aware policy must occur at least once overall
    for (int i = 0; i < 5; i++) if (used[i] == 0) begin
      failures++;
      $display("FAIL truncation level %0d never used", i);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
