// mm2im_mapper: generates the compute map (cmap) and output map (omap) of the
// MatMul rows of a transposed convolution, on the fly.
//
// A MatMul row is one input pixel (h, w) multiplied by all Ks*Ks*Oc filter
// columns. Kernel position (kh, kw) of that pixel contributes to output pixel
//   oh = S*h - pad_top  + kh,   ow = S*w - pad_left + kw.
// Positions that land outside the Oh x Ow output are cropped, so they are not
// emitted: the PMs never compute them (cmap) and every emitted partial result
// carries its final output coordinate (omap). This is the mapper loop of the
// MM2IM design; one candidate kernel position is examined per clock, so a
// MatMul row takes Ks*Ks cycles, and a valid entry waits while out_ready is
// low. The loop variables are updated incrementally (no multipliers in the
// loop).
//
// The MatMul row index is taken row-major (h = row / Iw, w = row % Iw), which
// is what the worked example of the design shows; the published pseudo-code
// swaps the two and is not followed here. Instead of a linear row index the
// start is given as (start_h, start_w) and num_rows MatMul rows follow it.
//
// Interface: pulse start with start_h/start_w/num_rows; entries appear on
// out_valid/out_ready with cmap (kernel column kh*Ks+kw, pixel w) and omap
// (oh, ow); done pulses for one cycle after the last candidate.
module mm2im_mapper
  import mm2im_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  input  logic             start,
  input  logic [DIM_W-1:0] start_h,
  input  logic [DIM_W-1:0] start_w,
  input  logic [DIM_W-1:0] num_rows,
  output logic             busy,
  output logic             done,
  output logic             out_valid,
  input  logic             out_ready,
  output cmap_t            cmap,
  output omap_t            omap
);
  localparam int SW = DIM_W + 3;  // signed coordinate width

  logic [DIM_W-1:0] w, rows_left;
  logic [KS_W-1:0]  kh, kw;
  logic [COL_W-1:0] col;
  logic signed [SW-1:0] hp, wp;   // S*h - pad_top, S*w - pad_left

  logic signed [SW-1:0] cand_h, cand_w;
  logic cand_ok, advance, last_k, last_row;

  assign cand_h  = hp + SW'(kh);
  assign cand_w  = wp + SW'(kw);
  assign cand_ok = (cand_h >= 0) && (cand_h < $signed({3'b0, cfg.oh})) &&
                   (cand_w >= 0) && (cand_w < $signed({3'b0, cfg.ow}));

  assign out_valid = busy && cand_ok;
  assign advance   = busy && (!cand_ok || out_ready);
  assign last_k    = (kw == cfg.ks - 1'b1) && (kh == cfg.ks - 1'b1);
  assign last_row  = (rows_left == DIM_W'(1));

  assign cmap.col = col;
  assign cmap.pix = w;
  assign omap.oh  = cand_h[DIM_W-1:0];
  assign omap.ow  = cand_w[DIM_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0;
      w <= '0; rows_left <= '0; kh <= '0; kw <= '0; col <= '0;
      hp <= '0; wp <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy      <= (num_rows != '0);
        done      <= (num_rows == '0);
        w         <= start_w;
        rows_left <= num_rows;
        kh <= '0; kw <= '0; col <= '0;
        hp <= $signed({3'b0, start_h}) * $signed({11'b0, cfg.stride}) - $signed({11'b0, cfg.pad_top});
        wp <= $signed({3'b0, start_w}) * $signed({11'b0, cfg.stride}) - $signed({11'b0, cfg.pad_left});
      end else if (advance) begin
        if (!last_k) begin
          col <= col + 1'b1;
          if (kw == cfg.ks - 1'b1) begin
            kw <= '0;
            kh <= kh + 1'b1;
          end else begin
            kw <= kw + 1'b1;
          end
        end else begin
          // next MatMul row
          kh <= '0; kw <= '0; col <= '0;
          rows_left <= rows_left - 1'b1;
          if (last_row) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
          if (w == cfg.iw - 1'b1) begin
            w  <= '0;
            wp <= -$signed({11'b0, cfg.pad_left});
            hp <= hp + $signed({11'b0, cfg.stride});
          end else begin
            w  <= w + 1'b1;
            wp <= wp + $signed({11'b0, cfg.stride});
          end
        end
      end
    end
  end
endmodule
