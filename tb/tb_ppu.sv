// tb_ppu: checks the post-processing unit against the requantisation formula
// y = clamp(((acc + bias) * M + 2^(shift-1)) >> shift + zp_out, -128, 127),
// evaluated here with 64-bit integers, for random accumulators, biases,
// multipliers, shifts and zero points, including saturating cases. The result
// must appear one cycle after the input.
module tb_ppu;
  import mm2im_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  cfg_t cfg;
  logic signed [31:0] bias, in_acc;
  logic in_valid, out_valid;
  logic signed [7:0] out_data;
  int checks = 0, failures = 0, sat = 0;

  ppu dut (.clk, .rst_n, .cfg, .bias, .in_valid, .in_acc, .out_valid, .out_data);

  function automatic int ref_y(int acc, int b, int m, int sh, int zp);
    longint p, y;
    p = (longint'(acc) + longint'(b)) * longint'(m);
    if (sh > 0) p += longint'(1) <<< (sh - 1);
    y = (p >>> sh) + zp;
    if (y > 127) y = 127;
    if (y < -128) y = -128;
    return int'(y);
  endfunction

  initial begin
    in_valid = 0; in_acc = 0; bias = 0; cfg = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      int e;
      @(negedge clk);
      in_acc = (n % 2) ? int'($urandom % 200001) - 100000 : int'($urandom % 4001) - 2000;
      bias   = int'($urandom % 2001) - 1000;
      cfg.ppu_mult  = 32'($urandom_range(32'h2000_0000, 32'h7fff_ffff));
      cfg.ppu_shift = 8'($urandom_range(30, 44));
      cfg.out_zp    = 8'($urandom_range(0, 40) - 20);
      in_valid = 1;
      e = ref_y(in_acc, bias, cfg.ppu_mult, int'(cfg.ppu_shift), int'(cfg.out_zp));
      if (e == 127 || e == -128) sat++;
      @(posedge clk); #1;
      checks++;
      if (!out_valid || int'(out_data) != e) begin
        failures++;
        if (failures < 10) $display("ERROR acc %0d bias %0d M %0d sh %0d: got %0d exp %0d", in_acc, bias,
                                   cfg.ppu_mult, cfg.ppu_shift, out_data, e);
      end
    end
    checks++; if (sat == 0) begin failures++; $display("ERROR no saturating case"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
