// tb_accumulation_unit: checks the Out Muxer and out buf.
//
// After the reset-time clear (which must take OUT_ROWS*OW_MAX cycles), random
// partial sums are sent to random output coordinates, often back to back to
// the same coordinate so that the read-modify-write forwarding is exercised.
// Each output row is then drained and must hold the sum of its partial sums
// (model kept here), output row oh being stored in slot oh mod OUT_ROWS; a
// second drain of the same row must return zeros (clear on drain). A drained
// value must appear two cycles after the request.
module tb_accumulation_unit;
  import mm2im_pkg::*;
  localparam int R = 4, OWM = 8;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic in_valid, in_ready, drain_valid, drain_out_valid, init_done, idle;
  logic signed [31:0] in_psum, drain_out_acc;
  omap_t in_omap;
  logic [DIM_W-1:0] drain_oh, drain_ow;
  int checks = 0, failures = 0, n_fwd = 0;
  longint model [R*4][OWM];   // output rows 0..15

  accumulation_unit #(.OUT_ROWS(R), .OW_MAX(OWM)) dut (.clk, .rst_n, .in_valid, .in_ready,
    .in_psum, .in_omap, .drain_valid, .drain_oh, .drain_ow, .drain_out_valid, .drain_out_acc,
    .init_done, .idle);

  always @(posedge clk) if (dut.s1_op == 2'd1 && dut.lw_valid && dut.lw_addr == dut.s1_addr) n_fwd++;

  task automatic drain_row(int oh, bit expect_zero);
    for (int w = 0; w < OWM; w++) begin
      @(negedge clk); drain_valid = 1; drain_oh = DIM_W'(oh); drain_ow = DIM_W'(w);
      @(negedge clk); drain_valid = 0;
      @(negedge clk);
      checks++;
      if (!drain_out_valid || drain_out_acc != (expect_zero ? 0 : 32'(model[oh][w]))) begin
        failures++;
        $display("ERROR row %0d col %0d: got %0d (v=%0d), exp %0d", oh, w, drain_out_acc, drain_out_valid,
                 expect_zero ? 0 : model[oh][w]);
      end
      if (!expect_zero) model[oh][w] = 0;
    end
  endtask

  initial begin
    int t0;
    in_valid = 0; drain_valid = 0; in_psum = 0; in_omap = '0; drain_oh = 0; drain_ow = 0;
    foreach (model[i, j]) model[i][j] = 0;
    repeat (3) @(posedge clk); rst_n = 1; t0 = $time / 10;
    wait (init_done); #1;
    checks++;
    if ($time / 10 - t0 < R*OWM - 1 || $time / 10 - t0 > R*OWM + 1) begin failures++; $display("ERROR clear took %0d cycles", $time/10 - t0); end
    // windows of R rows, as in operation: rows base..base+R-1 live, then drained
    for (int base = 0; base < 3*R; base += R) begin
      for (int n = 0; n < 300; n++) begin
        int oh, ow;
        @(negedge clk);
        if ($urandom % 3 == 0 && n > 0) begin oh = int'(in_omap.oh); ow = int'(in_omap.ow); end
        else begin oh = base + $urandom % R; ow = $urandom % OWM; end
        in_valid = ($urandom % 4) != 0;
        in_psum = 32'(int'($urandom % 2001) - 1000);
        in_omap.oh = DIM_W'(oh); in_omap.ow = DIM_W'(ow);
        if (in_valid) model[oh][ow] += in_psum;
      end
      @(negedge clk); in_valid = 0;
      repeat (3) @(negedge clk);
      checks++; if (!idle) begin failures++; $display("ERROR not idle"); end
      for (int r = base; r < base + R; r++) drain_row(r, 0);
      drain_row(base, 1);
    end
    checks++; if (n_fwd == 0) begin failures++; $display("ERROR forwarding never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
