// mm2im_top: the MM2IM transposed-convolution accelerator.
//
// MM2IM computes a transposed convolution (TCONV) as a matrix multiplication
// (every input pixel times every filter column) followed by col2im, but fuses
// the two: the MM2IM mapper tells the processing modules which products
// survive the final crop (cmap) and where each one lands in the output
// (omap), so cropped products are never computed and partial sums are added
// straight into a small ring of output rows instead of being stored as a
// partial-output matrix.
//
// Blocks: instruction decoder, weight data loader with bias buffer, dynamic
// input loader with row buffer, scheduler, MM2IM mapper with CMap and OMap
// FIFOs, PM array (X processing modules of UF MACs each) and output
// crossbar. The host streams instructions and data in on s_axis_* and
// receives output rows on m_axis_* (32-bit AXI-Stream, one output row per
// packet, m_axis_tlast on its last word).
//
// Defaults: X = 8 PMs and UF = 16 MACs per PM (the published instance);
// FILTER_WORDS, ROW_WORDS, OUT_ROWS, OW_MAX and the FIFO depths are this
// design's choices (sizes of the filter buffer, row buffers and output
// buffer, see README). ready rises when the output buffers have been cleared
// after reset (OUT_ROWS*OW_MAX cycles); the stream is held off until then.
module mm2im_top
  import mm2im_pkg::*;
#(
  parameter int unsigned X            = 8,
  parameter int unsigned UF           = 16,
  parameter int unsigned FILTER_WORDS = 2048,
  parameter int unsigned ROW_WORDS    = 1024,
  parameter int unsigned OUT_ROWS     = 16,
  parameter int unsigned OW_MAX       = 512,
  parameter int unsigned MAP_DEPTH    = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              s_axis_tvalid,
  output logic              s_axis_tready,
  input  logic [AXIS_W-1:0] s_axis_tdata,
  output logic              m_axis_tvalid,
  input  logic              m_axis_tready,
  output logic [AXIS_W-1:0] m_axis_tdata,
  output logic              m_axis_tlast,
  output logic              ready,
  output logic [7:0]        bad_ops
);
  localparam int unsigned FAW = $clog2(FILTER_WORDS);
  localparam int unsigned RAW = $clog2(ROW_WORDS);
  localparam int unsigned XW  = (X > 1) ? $clog2(X) : 1;
  localparam int unsigned MCW = $clog2(MAP_DEPTH);

  cfg_t cfg;

  // ---------------- instruction decoder ----------------
  logic dec_valid, dec_ready;
  logic wdl_start, wdl_valid, wdl_ready, wdl_done;
  logic dil_start, dil_valid, dil_ready, dil_done;
  logic [AXIS_W-1:0] ld_data;
  logic sched_start, store_req, store_done;

  assign dec_valid     = s_axis_tvalid && ready;
  assign s_axis_tready = dec_ready && ready;

  instruction_decoder u_decoder (
    .clk, .rst_n, .s_valid(dec_valid), .s_ready(dec_ready), .s_data(s_axis_tdata),
    .cfg, .wdl_start, .wdl_valid, .wdl_ready, .wdl_done,
    .dil_start, .dil_valid, .dil_ready, .dil_done, .ld_data,
    .sched_start, .store_req, .store_done, .bad_ops);

  // ---------------- weight data loader + bias buffer ----------------
  logic [XW:0] nfilt;
  logic bias_we, filt_we;
  logic [XW-1:0] bias_idx, filt_pm;
  logic signed [ACC_W-1:0] bias_data;
  logic signed [ACC_W-1:0] bias [X];
  logic [FAW-1:0] filt_waddr;
  logic [UF*8-1:0] filt_wdata;

  weight_data_loader #(.X(X), .UF(UF), .FILTER_WORDS(FILTER_WORDS)) u_wdl (
    .clk, .rst_n, .cfg, .start(wdl_start),
    .s_valid(wdl_valid), .s_ready(wdl_ready), .s_data(ld_data), .done(wdl_done),
    .nfilt, .bias_we, .bias_idx, .bias_data,
    .filt_we, .filt_pm, .filt_waddr, .filt_wdata);

  bias_buffer #(.X(X)) u_bias_buf (
    .clk, .rst_n, .we(bias_we), .idx(bias_idx), .data(bias_data), .bias);

  // ---------------- dynamic input loader + row buffer ----------------
  logic row_valid, row_taken, rb_we, rb_re;
  logic [RAW-1:0] rb_waddr, rb_raddr;
  logic [UF*8-1:0] rb_wdata, rb_rdata;

  dynamic_input_loader #(.UF(UF), .ROW_WORDS(ROW_WORDS)) u_dil (
    .clk, .rst_n, .cfg, .start(dil_start),
    .s_valid(dil_valid), .s_ready(dil_ready), .s_data(ld_data), .done(dil_done),
    .row_valid, .row_taken, .rb_we, .rb_waddr, .rb_wdata);

  sdp_ram #(.WIDTH(UF*8), .DEPTH(ROW_WORDS)) u_row_buffer (
    .clk, .we(rb_we), .waddr(rb_waddr), .wdata(rb_wdata),
    .re(rb_re), .raddr(rb_raddr), .rdata(rb_rdata));

  // ---------------- scheduler ----------------
  logic [X-1:0] pm_enable;
  logic pm_row_we;
  logic [RAW-1:0] pm_row_waddr;
  logic map_start, map_done, map_busy, maps_empty, pm_idle;
  logic [DIM_W-1:0] map_h, map_rows, xbar_row, in_row;
  logic xbar_start, xbar_done, running;

  scheduler #(.X(X), .UF(UF), .ROW_WORDS(ROW_WORDS)) u_sched (
    .clk, .rst_n, .cfg, .sched_start, .store_req, .store_done, .nfilt, .pm_enable,
    .row_valid, .row_taken, .rb_re, .rb_raddr, .pm_row_we, .pm_row_waddr,
    .map_start, .map_h, .map_rows, .map_done, .maps_empty, .pm_idle,
    .xbar_start, .xbar_row, .xbar_done, .in_row, .running);

  // ---------------- MM2IM mapper + CMap / OMap buffers ----------------
  logic m_valid, m_ready;
  cmap_t m_cmap, q_cmap;
  omap_t m_omap, q_omap;
  logic c_in_ready, o_in_ready, c_out_valid, o_out_valid, pm_in_ready;
  logic [MCW:0] c_count, o_count;

  mm2im_mapper u_mapper (
    .clk, .rst_n, .cfg, .start(map_start), .start_h(map_h), .start_w('0),
    .num_rows(map_rows), .busy(map_busy), .done(map_done),
    .out_valid(m_valid), .out_ready(m_ready), .cmap(m_cmap), .omap(m_omap));

  assign m_ready = c_in_ready && o_in_ready;

  sync_fifo #(.WIDTH($bits(cmap_t)), .DEPTH(MAP_DEPTH)) u_cmap_buf (
    .clk, .rst_n, .in_valid(m_valid && m_ready), .in_ready(c_in_ready), .in_data(m_cmap),
    .out_valid(c_out_valid), .out_ready(pm_in_ready && o_out_valid), .out_data(q_cmap),
    .count(c_count));

  sync_fifo #(.WIDTH($bits(omap_t)), .DEPTH(MAP_DEPTH)) u_omap_buf (
    .clk, .rst_n, .in_valid(m_valid && m_ready), .in_ready(o_in_ready), .in_data(m_omap),
    .out_valid(o_out_valid), .out_ready(pm_in_ready && c_out_valid), .out_data(q_omap),
    .count(o_count));

  assign maps_empty = !c_out_valid && !o_out_valid && !map_busy;

  // ---------------- PM array ----------------
  logic drain_valid, pm_out_valid;
  logic [DIM_W-1:0] drain_oh, drain_ow;
  logic signed [7:0] pm_out [X];

  pm_array #(
    .X(X), .UF(UF), .FILTER_WORDS(FILTER_WORDS), .ROW_WORDS(ROW_WORDS),
    .OUT_ROWS(OUT_ROWS), .OW_MAX(OW_MAX)
  ) u_pm_array (
    .clk, .rst_n, .cfg, .pm_enable, .bias,
    .filt_we, .filt_pm, .filt_waddr, .filt_wdata,
    .row_we(pm_row_we), .row_waddr(pm_row_waddr), .row_wdata(rb_rdata),
    .in_valid(c_out_valid && o_out_valid), .in_ready(pm_in_ready),
    .in_cmap(q_cmap), .in_omap(q_omap),
    .drain_valid, .drain_oh, .drain_ow,
    .out_valid(pm_out_valid), .out_data(pm_out),
    .idle(pm_idle), .init_done(ready));

  // ---------------- output crossbar ----------------
  output_crossbar #(.X(X)) u_xbar (
    .clk, .rst_n, .cfg, .start(xbar_start), .row(xbar_row), .nact(nfilt), .done(xbar_done),
    .drain_valid, .drain_oh, .drain_ow, .pm_valid(pm_out_valid), .pm_data(pm_out),
    .m_valid(m_axis_tvalid), .m_ready(m_axis_tready), .m_data(m_axis_tdata), .m_last(m_axis_tlast));

  a_maps_in_step: assert property (@(posedge clk) disable iff (!rst_n) c_count == o_count);
endmodule
