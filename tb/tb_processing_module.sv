// tb_processing_module: checks one processing module (compute unit, CU-AU
// FIFO, accumulation unit with out buf, PPU) end to end.
//
// A random filter and input row are loaded, random compute/output-map entries
// are streamed with random gaps, then the module is switched off (enable low)
// and more entries are offered, which it must accept and ignore. All output
// rows are drained and compared with requant(sum of dot products + bias)
// computed here; the result must come three cycles after the request.
module tb_processing_module;
  import mm2im_pkg::*;
  localparam int X = 1, UF = 16, FW = 64, RW = 64, R = 4, OWM = 8;
  localparam int KS = 3, IW = 4, IC = 32, ICW = IC / UF, NEN = 1;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  cfg_t cfg;
  logic [X-1:0] pm_enable;
  logic signed [31:0] bias [X];
  logic filt_we, row_we, in_valid, in_ready, drain_valid, out_valid, idle, init_done;
  logic [2:0] filt_pm;
  logic [5:0] filt_waddr, row_waddr;
  logic [UF*8-1:0] filt_wdata, row_wdata;
  cmap_t in_cmap; omap_t in_omap;
  logic [DIM_W-1:0] drain_oh, drain_ow;
  logic signed [7:0] out_data [X];
  int checks = 0, failures = 0;

  processing_module #(.UF(UF), .FILTER_WORDS(FW), .ROW_WORDS(RW), .OUT_ROWS(R), .OW_MAX(OWM)) dut (
    .clk, .rst_n, .cfg, .enable(pm_enable[0]), .bias(bias[0]), .filt_we, .filt_waddr, .filt_wdata,
    .row_we, .row_waddr, .row_wdata, .in_valid, .in_ready, .in_cmap, .in_omap,
    .drain_valid, .drain_oh, .drain_ow, .out_valid, .out_data(out_data[0]), .idle, .init_done);

  byte filt [X][KS*KS*IC];
  byte row  [IW*IC];
  longint acc [X][R][OWM];

  function automatic int requant(longint a);
    longint p, y;
    p = a * longint'(cfg.ppu_mult) + (longint'(1) <<< (cfg.ppu_shift - 1));
    y = (p >>> cfg.ppu_shift) + cfg.out_zp;
    if (y > 127) y = 127;
    if (y < -128) y = -128;
    return int'(y);
  endfunction

  initial begin
    filt_we = 0; row_we = 0; in_valid = 0; drain_valid = 0; filt_pm = 0; filt_waddr = 0; row_waddr = 0;
    filt_wdata = 0; row_wdata = 0; in_cmap = '0; in_omap = '0; drain_oh = 0; drain_ow = 0;
    cfg = '0; cfg.ic = IC; cfg.ks = KS; cfg.iw = IW; cfg.in_zp = 8'sd3; cfg.out_zp = -8'sd4;
    cfg.ppu_mult = 32'h4000_0000; cfg.ppu_shift = 8'd40;
    pm_enable = '0; for (int i = 0; i < NEN; i++) pm_enable[i] = 1'b1;
    for (int i = 0; i < X; i++) bias[i] = int'($urandom % 4001) - 2000;
    foreach (acc[i, r, w]) acc[i][r][w] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    wait (init_done);
    // filters
    for (int p = 0; p < X; p++) begin
      foreach (filt[p][k]) filt[p][k] = byte'($urandom);
      for (int a = 0; a < KS*KS*ICW; a++) begin
        @(negedge clk); filt_we = 1; filt_pm = 3'(p); filt_waddr = 6'(a);
        for (int b = 0; b < UF; b++) filt_wdata[8*b +: 8] = filt[p][a*UF + b];
      end
    end
    @(negedge clk); filt_we = 0;
    foreach (row[k]) row[k] = byte'($urandom);
    for (int a = 0; a < IW*ICW; a++) begin
      @(negedge clk); row_we = 1; row_waddr = 6'(a);
      for (int b = 0; b < UF; b++) row_wdata[8*b +: 8] = row[a*UF + b];
    end
    @(negedge clk); row_we = 0;
    // map entries
    for (int n = 0; n < 300; n++) begin
      int c, px, oh, ow;
      if (n == 200) pm_enable = '0;
      c = $urandom % (KS*KS); px = $urandom % IW; oh = $urandom % R; ow = $urandom % OWM;
      @(negedge clk);
      while ($urandom % 3 == 0) @(negedge clk);
      in_valid = 1; in_cmap.col = COL_W'(c); in_cmap.pix = DIM_W'(px);
      in_omap.oh = DIM_W'(oh); in_omap.ow = DIM_W'(ow);
      for (int p = 0; p < NEN && pm_enable[0]; p++)
        for (int k = 0; k < IC; k++)
          acc[p][oh][ow] += (longint'(row[px*IC + k]) - cfg.in_zp) * longint'(filt[p][c*IC + k]);
      @(posedge clk); while (!in_ready) @(posedge clk);
      #1; in_valid = 0;
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(negedge clk);
    wait (idle);
    // drain
    for (int r = 0; r < R; r++)
      for (int w = 0; w < OWM; w++) begin
        @(negedge clk); drain_valid = 1; drain_oh = DIM_W'(r); drain_ow = DIM_W'(w);
        @(negedge clk); drain_valid = 0;
        @(negedge clk); @(negedge clk);
        checks++;
        if (!out_valid) begin failures++; $display("ERROR drain result not valid after 3 cycles"); end
        for (int p = 0; p < X; p++) begin
          int e;
          e = requant(acc[p][r][w] + bias[p]);
          checks++;
          if (int'(out_data[p]) != e) begin
            failures++;
            if (failures < 10) $display("ERROR pm %0d out(%0d,%0d) = %0d, expected %0d", p, r, w, out_data[p], e);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
