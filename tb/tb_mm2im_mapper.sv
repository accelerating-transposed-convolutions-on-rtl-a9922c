// tb_mm2im_mapper: checks the compute and output maps.
//
// For each layer shape the expected entry list of every MatMul row is built
// here by brute force: all Ks*Ks kernel positions, kept when the output
// coordinate S*h-pad+kh, S*w-pad+kw lies inside Oh x Ow. The mapper's
// entries must match in order. The worked example of the design,
// tconv(Ih=2, Iw=2, Ic=2, Ks=3, Oc=2, S=1), must give 16 kept products per
// filter, i.e. 72 - 2*16 = 40 dropped MatMul outputs and the published entry
// columns (input row 0: columns 4,5,7,8 -> outputs 0,1,2,3). With out_ready
// held high a MatMul row must take exactly Ks*Ks cycles.
module tb_mm2im_mapper;
  import mm2im_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  cfg_t cfg;
  logic start, busy, done, out_valid, out_ready;
  logic [DIM_W-1:0] start_h, start_w, num_rows;
  cmap_t cmap; omap_t omap;
  int checks = 0, failures = 0;
  int unsigned rnd_ready = 0;

  mm2im_mapper dut (.clk, .rst_n, .cfg, .start, .start_h, .start_w, .num_rows,
    .busy, .done, .out_valid, .out_ready, .cmap, .omap);

  typedef struct { int col; int pix; int oh; int ow; } ent_t;
  ent_t exp_q[$];

  always @(posedge clk) out_ready <= (rnd_ready == 0) ? 1'b1 : (($urandom % 100) >= rnd_ready);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("ERROR unexpected entry"); end
    else begin
      ent_t e;
      e = exp_q.pop_front();
      if (cmap.col != COL_W'(e.col) || cmap.pix != DIM_W'(e.pix) || omap.oh != DIM_W'(e.oh) || omap.ow != DIM_W'(e.ow)) begin
        failures++;
        $display("ERROR entry col %0d pix %0d (%0d,%0d), exp col %0d pix %0d (%0d,%0d)",
                 cmap.col, cmap.pix, omap.oh, omap.ow, e.col, e.pix, e.oh, e.ow);
      end
    end
  end

  task automatic run(int ih, int iw, int ks, int s, int h0, int nrows, output int kept, output int cyc);
    int pt = (ks > s) ? (ks - s) / 2 : 0;
    int h = h0, w = 0;
    cfg = '0; cfg.ih = DIM_W'(ih); cfg.iw = DIM_W'(iw); cfg.ks = KS_W'(ks); cfg.stride = KS_W'(s);
    cfg.oh = DIM_W'(s*ih); cfg.ow = DIM_W'(s*iw); cfg.pad_top = KS_W'(pt); cfg.pad_left = KS_W'(pt);
    kept = 0;
    for (int r = 0; r < nrows; r++) begin
      for (int kh = 0; kh < ks; kh++)
        for (int kw = 0; kw < ks; kw++) begin
          int oh = s*h - pt + kh, ow = s*w - pt + kw;
          if (oh >= 0 && oh < s*ih && ow >= 0 && ow < s*iw) begin
            ent_t e; e.col = kh*ks+kw; e.pix = w; e.oh = oh; e.ow = ow;
            exp_q.push_back(e); kept++;
          end
        end
      w++; if (w == iw) begin w = 0; h++; end
    end
    @(negedge clk); start = 1; start_h = DIM_W'(h0); start_w = 0; num_rows = DIM_W'(nrows);
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("ERROR %0d entries missing", exp_q.size()); exp_q = {}; end
  endtask

  initial begin
    int kept, cyc;
    start = 0; start_h = 0; start_w = 0; num_rows = 0; cfg = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // worked example: 2x2 input, Ks=3, S=1, all 4 MatMul rows
    exp_q = {};
    run(2, 2, 3, 1, 0, 4, kept, cyc);
    checks++; if (72 - 2*kept != 40) begin failures++; $display("ERROR dropped outputs %0d, expected 40", 72 - 2*kept); end
    checks++; if (cyc != 4*9 + 1) begin failures++; $display("ERROR cycles %0d, expected %0d", cyc, 4*9+1); end
    // the other shapes, one input row at a time and several rows at once
    run(4, 5, 5, 2, 0, 5, kept, cyc);
    run(4, 5, 5, 2, 3, 5, kept, cyc);
    run(2, 2, 4, 2, 0, 4, kept, cyc);
    run(7, 7, 7, 1, 2, 7, kept, cyc);
    checks++; if (cyc != 7*49 + 1) begin failures++; $display("ERROR cycles %0d", cyc); end
    rnd_ready = 40;
    run(3, 4, 3, 2, 0, 12, kept, cyc);
    run(9, 9, 5, 1, 4, 9, kept, cyc);
    run(1, 1, 4, 2, 0, 1, kept, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
