// ppu: post-processing unit of one processing module.
//
// Turns a finished 32-bit accumulator into an int8 output, the post-layer
// quantisation step that the accelerator performs for the TCONV layers:
//   y = clamp( round((acc + bias) * M / 2^shift) + zp_out, -128, 127 )
// with M the signed 32-bit multiplier and shift the right shift of the
// layer configuration, rounding half up (add 2^(shift-1),
// then arithmetic shift). This is a simplified form of the TFLite int8
// requantisation (one multiplier per layer, one bias per output channel);
// the exact arithmetic is this design's choice.
//
// Timing: one value per clock, result registered (one cycle latency).
module ppu
  import mm2im_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  cfg_t                    cfg,
  input  logic signed [ACC_W-1:0] bias,
  input  logic                    in_valid,
  input  logic signed [ACC_W-1:0] in_acc,
  output logic                    out_valid,
  output logic signed [7:0]       out_data
);
  logic signed [ACC_W:0]   sum;
  logic signed [64:0]      prod, rounded, shifted;
  logic signed [64:0]      y;

  always_comb begin
    sum  = (ACC_W+1)'(in_acc) + (ACC_W+1)'(bias);
    prod = 65'(sum) * 65'(cfg.ppu_mult);
    if (cfg.ppu_shift == 8'd0) rounded = prod;
    else                       rounded = prod + (65'sd1 <<< (cfg.ppu_shift - 8'd1));
    shifted = rounded >>> cfg.ppu_shift;
    y = shifted + 65'(cfg.out_zp);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= in_valid;
      if (y > 65'sd127)       out_data <= 8'sd127;
      else if (y < -65'sd128) out_data <= -8'sd128;
      else                    out_data <= y[7:0];
    end
  end
endmodule
