// compute_unit: the compute unit (CU) of one processing module.
//
// It holds the PM's filter (filter buf, Ks*Ks*Ic int8 weights stored as
// kernel-column-major words of UF channels) and the current input row (input
// row buf, Iw*Ic int8 activations stored pixel-major in words of UF
// channels). For each compute-map entry (kernel column col, pixel pix) the PE
// array forms the dot product over Ic of the selected pixel and the selected
// filter column with UF multiply-accumulators, one word of UF channels per
// clock, so an entry takes Ic/UF cycles. Kernel columns that the mapper left
// out of the cmap are never read: this is the "cmap check" that skips
// ineffectual (cropped) products.
//
// Activations are offset by the input zero point before the multiply
// (TFLite int8 convention, (x - zp_in) * w); weights are symmetric int8. The
// zero-point handling is this design's choice.
//
// Timing: an entry accepted in cycle t issues its first read in cycle t+1
// and its last in cycle t+Ic/UF; the partial sum appears on out_valid
// (registered) two cycles after the last read. Entries are accepted back to
// back. out_ready must mean "room for two more results"; the issue of reads
// pauses while it is low.
module compute_unit
  import mm2im_pkg::*;
#(
  parameter int unsigned UF           = 16,    // MACs per CU
  parameter int unsigned FILTER_WORDS = 2048,  // filter buf depth, UF-byte words
  parameter int unsigned ROW_WORDS    = 1024,  // input row buf depth, UF-byte words
  localparam int unsigned FAW = $clog2(FILTER_WORDS),
  localparam int unsigned RAW = $clog2(ROW_WORDS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  // filter buf write port (weight data loader)
  input  logic             filt_we,
  input  logic [FAW-1:0]   filt_waddr,
  input  logic [UF*8-1:0]  filt_wdata,
  // input row buf write port (row broadcast)
  input  logic             row_we,
  input  logic [RAW-1:0]   row_waddr,
  input  logic [UF*8-1:0]  row_wdata,
  // compute map in
  input  logic             in_valid,
  output logic             in_ready,
  input  cmap_t            in_cmap,
  input  omap_t            in_omap,
  // partial sums out
  input  logic             out_ready,
  output logic             out_valid,
  output logic signed [ACC_W-1:0] out_psum,
  output omap_t            out_omap,
  output logic             idle
);
  localparam int unsigned UFL = $clog2(UF);

  logic [DIM_W-1:0] icw;            // Ic / UF
  assign icw = cfg.ic >> UFL;

  // ---------------- issue stage ----------------
  logic busy;
  logic [DIM_W-1:0] cnt;
  logic [FAW-1:0] fbase;
  logic [RAW-1:0] ibase;
  omap_t omap_r;
  logic last_issue, issue, accept;

  assign last_issue = (cnt == icw - 1'b1);
  assign issue      = busy && out_ready;
  assign in_ready   = out_ready && (!busy || last_issue);
  assign accept     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cnt <= '0; fbase <= '0; ibase <= '0; omap_r <= '0;
    end else begin
      if (accept) begin
        busy   <= 1'b1;
        cnt    <= '0;
        fbase  <= FAW'(in_cmap.col * icw);
        ibase  <= RAW'(in_cmap.pix * icw);
        omap_r <= in_omap;
      end else if (issue) begin
        if (last_issue) busy <= 1'b0;
        else            cnt  <= cnt + 1'b1;
      end
    end
  end

  logic [UF*8-1:0] f_word, i_word;

  sdp_ram #(.WIDTH(UF*8), .DEPTH(FILTER_WORDS)) u_filter_buf (
    .clk, .we(filt_we), .waddr(filt_waddr), .wdata(filt_wdata),
    .re(issue), .raddr(fbase + FAW'(cnt)), .rdata(f_word));

  sdp_ram #(.WIDTH(UF*8), .DEPTH(ROW_WORDS)) u_input_row_buf (
    .clk, .we(row_we), .waddr(row_waddr), .wdata(row_wdata),
    .re(issue), .raddr(ibase + RAW'(cnt)), .rdata(i_word));

  // ---------------- PE array stage ----------------
  logic s1_valid, s1_first, s1_last;
  omap_t s1_omap;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_omap <= '0;
    end else begin
      s1_valid <= issue;
      s1_first <= (cnt == '0);
      s1_last  <= last_issue;
      s1_omap  <= omap_r;
    end
  end

  logic signed [ACC_W-1:0] dot, acc, acc_next;
  always_comb begin
    logic signed [9:0]  a;   // activation minus zero point
    logic signed [17:0] p;   // one product
    dot = '0;
    for (int i = 0; i < UF; i++) begin
      a   = $signed({{2{i_word[8*i+7]}}, i_word[8*i +: 8]}) - $signed({{2{cfg.in_zp[7]}}, cfg.in_zp});
      p   = a * $signed(f_word[8*i +: 8]);
      dot = dot + ACC_W'(p);
    end
  end
  assign acc_next = s1_first ? dot : acc + dot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; out_valid <= 1'b0; out_psum <= '0; out_omap <= '0;
    end else begin
      out_valid <= 1'b0;
      if (s1_valid) begin
        acc <= acc_next;
        if (s1_last) begin
          out_valid <= 1'b1;
          out_psum  <= acc_next;
          out_omap  <= s1_omap;
        end
      end
    end
  end

  assign idle = !busy && !s1_valid && !out_valid;
endmodule
