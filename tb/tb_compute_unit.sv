// tb_compute_unit: checks the PE array of one compute unit.
//
// A random filter (Ks*Ks columns of Ic int8) and a random input row (Iw pixels
// of Ic int8) are written into the CU's buffers, then random compute-map
// entries are fed. Each partial sum must equal sum_ic (x - zp_in) * w of the
// selected pixel and filter column, computed here, and carry the entry's
// omap. Throughput: with out_ready high, N back-to-back entries must finish
// in N*Ic/UF + 3 cycles (Ic/UF cycles per dot product). A second phase drops
// out_ready at random to check that the issue stage pauses without losing
// results.
module tb_compute_unit;
  import mm2im_pkg::*;
  localparam int UF = 16, FW = 256, RW = 128;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  cfg_t cfg;
  logic filt_we, row_we, in_valid, in_ready, out_ready, out_valid, idle;
  logic [7:0] filt_waddr; logic [6:0] row_waddr;
  logic [UF*8-1:0] filt_wdata, row_wdata;
  cmap_t in_cmap; omap_t in_omap, out_omap;
  logic signed [31:0] out_psum;
  int checks = 0, failures = 0;

  compute_unit #(.UF(UF), .FILTER_WORDS(FW), .ROW_WORDS(RW)) dut (.clk, .rst_n, .cfg,
    .filt_we, .filt_waddr, .filt_wdata, .row_we, .row_waddr, .row_wdata,
    .in_valid, .in_ready, .in_cmap, .in_omap, .out_ready, .out_valid, .out_psum, .out_omap, .idle);

  byte filt [];  // [col][ic]
  byte row  [];  // [pix][ic]
  int exp_psum[$]; int exp_tag[$];
  int got = 0;

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++; got++;
    if (exp_psum.size() == 0) begin failures++; $display("ERROR unexpected psum"); end
    else begin
      int e, t;
      e = exp_psum.pop_front(); t = exp_tag.pop_front();
      if (out_psum != e || out_omap.ow != DIM_W'(t)) begin
        failures++; $display("ERROR psum %0d tag %0d, expected %0d tag %0d", out_psum, out_omap.ow, e, t);
      end
    end
  end

  task automatic setup(int ks, int iw, int ic, int zp);
    int icw = ic / UF;
    cfg = '0; cfg.ic = DIM_W'(ic); cfg.ks = KS_W'(ks); cfg.iw = DIM_W'(iw); cfg.in_zp = 8'(zp);
    filt = new[ks*ks*ic]; row = new[iw*ic];
    foreach (filt[i]) filt[i] = byte'($urandom);
    foreach (row[i])  row[i]  = byte'($urandom);
    for (int a = 0; a < ks*ks*icw; a++) begin
      @(negedge clk); filt_we = 1; filt_waddr = 8'(a);
      for (int b = 0; b < UF; b++) filt_wdata[8*b +: 8] = filt[a*UF + b];
    end
    @(negedge clk); filt_we = 0;
    for (int a = 0; a < iw*icw; a++) begin
      @(negedge clk); row_we = 1; row_waddr = 7'(a);
      for (int b = 0; b < UF; b++) row_wdata[8*b +: 8] = row[a*UF + b];
    end
    @(negedge clk); row_we = 0;
  endtask

  task automatic feed(int ks, int iw, int ic, int zp, int n, int rnd, output int cyc);
    int t0, c, p;
    t0 = $time / 10;
    for (int k = 0; k < n; k++) begin
      int acc = 0;
      c = $urandom % (ks*ks); p = $urandom % iw;
      for (int i = 0; i < ic; i++) acc += (int'(row[p*ic+i]) - zp) * int'(filt[c*ic+i]);
      exp_psum.push_back(acc); exp_tag.push_back(k);
      in_valid = 1; in_cmap.col = COL_W'(c); in_cmap.pix = DIM_W'(p); in_omap.oh = 0; in_omap.ow = DIM_W'(k);
      do @(posedge clk); while (!in_ready);
      #1;
    end
    in_valid = 0;
    while (exp_psum.size() > 0) @(posedge clk);
    cyc = $time / 10 - t0;
  endtask

  always @(posedge clk) out_ready <= (rnd_or == 0) ? 1'b1 : (($urandom % 100) >= rnd_or);
  int rnd_or = 0;

  initial begin
    int cyc;
    filt_we = 0; row_we = 0; in_valid = 0; filt_waddr = 0; row_waddr = 0; filt_wdata = 0; row_wdata = 0;
    in_cmap = '0; in_omap = '0; cfg = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    setup(3, 4, 64, 5);
    feed(3, 4, 64, 5, 20, 0, cyc);
    checks++; if (cyc > 20*4 + 3) begin failures++; $display("ERROR %0d cycles for 20 entries, Ic/UF=4", cyc); end
    $display("INFO 20 entries, Ic/UF=4: %0d cycles", cyc);
    setup(5, 6, 16, -3);
    feed(5, 6, 16, -3, 30, 0, cyc);
    checks++; if (cyc > 30*1 + 3) begin failures++; $display("ERROR %0d cycles for 30 entries, Ic/UF=1", cyc); end
    rnd_or = 50;
    setup(4, 3, 48, 0);
    feed(4, 3, 48, 0, 40, 1, cyc);
    checks++; if (!idle) begin failures++; $display("ERROR not idle at end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
