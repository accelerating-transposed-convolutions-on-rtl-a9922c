// processing_module: one processing module (PM) of the MM2IM PM array.
//
// A PM computes one output channel of the transposed convolution. It holds
// one filter and, at any time, one input row. Its compute unit (CU) takes the
// broadcast compute map and forms one dot product per entry; the partial sums
// go through a FIFO stream to the accumulation unit (AU), whose Out Muxer adds
// each of them into the output buffer at the coordinate given by the output
// map. When the scheduler asks for a finished output row, the drain port reads
// (and clears) each accumulator and the post-processing unit (PPU) adds the
// bias and requantises it to int8. This CU - FIFO - AU - PPU structure is the
// one of the source design; the FIFO depth (8) is this design's choice.
//
// enable switches the PM off: it then takes no compute-map entries (in_ready
// stays high so it never holds up the others) and does no work.
//
// Timing: Ic/UF cycles per compute-map entry, partial sum written into out buf
// 4 cycles after the last MAC cycle; drain result (out_valid/out_data) 3
// cycles after drain_valid. idle is high when nothing is in flight.
module processing_module
  import mm2im_pkg::*;
#(
  parameter int unsigned UF           = 16,
  parameter int unsigned FILTER_WORDS = 2048,
  parameter int unsigned ROW_WORDS    = 1024,
  parameter int unsigned OUT_ROWS     = 16,
  parameter int unsigned OW_MAX       = 512,
  localparam int unsigned FAW = $clog2(FILTER_WORDS),
  localparam int unsigned RAW = $clog2(ROW_WORDS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  cfg_t                    cfg,
  input  logic                    enable,
  input  logic signed [ACC_W-1:0] bias,
  input  logic                    filt_we,
  input  logic [FAW-1:0]          filt_waddr,
  input  logic [UF*8-1:0]         filt_wdata,
  input  logic                    row_we,
  input  logic [RAW-1:0]          row_waddr,
  input  logic [UF*8-1:0]         row_wdata,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  cmap_t                   in_cmap,
  input  omap_t                   in_omap,
  input  logic                    drain_valid,
  input  logic [DIM_W-1:0]        drain_oh,
  input  logic [DIM_W-1:0]        drain_ow,
  output logic                    out_valid,
  output logic signed [7:0]       out_data,
  output logic                    idle,
  output logic                    init_done
);
  localparam int unsigned FIFO_DEPTH = 8;
  localparam int unsigned PSW = ACC_W + $bits(omap_t);

  logic cu_in_ready, cu_out_ready, cu_out_valid, cu_idle;
  logic signed [ACC_W-1:0] cu_psum, au_psum, drain_acc;
  omap_t cu_omap, au_omap;
  logic f_in_ready, f_out_valid, f_out_ready;
  logic [$clog2(FIFO_DEPTH):0] f_count;
  logic au_idle, drain_acc_valid;

  assign in_ready = enable ? cu_in_ready : 1'b1;

  compute_unit #(.UF(UF), .FILTER_WORDS(FILTER_WORDS), .ROW_WORDS(ROW_WORDS)) u_cu (
    .clk, .rst_n, .cfg,
    .filt_we, .filt_waddr, .filt_wdata,
    .row_we, .row_waddr, .row_wdata,
    .in_valid(in_valid && enable), .in_ready(cu_in_ready),
    .in_cmap, .in_omap,
    .out_ready(cu_out_ready), .out_valid(cu_out_valid),
    .out_psum(cu_psum), .out_omap(cu_omap), .idle(cu_idle));

  // room for the two results that may already be in the CU pipeline
  assign cu_out_ready = (f_count <= ($clog2(FIFO_DEPTH)+1)'(FIFO_DEPTH - 3));

  sync_fifo #(.WIDTH(PSW), .DEPTH(FIFO_DEPTH)) u_cu_au_fifo (
    .clk, .rst_n,
    .in_valid(cu_out_valid), .in_ready(f_in_ready), .in_data({cu_psum, cu_omap}),
    .out_valid(f_out_valid), .out_ready(f_out_ready), .out_data({au_psum, au_omap}),
    .count(f_count));

  accumulation_unit #(.OUT_ROWS(OUT_ROWS), .OW_MAX(OW_MAX)) u_au (
    .clk, .rst_n,
    .in_valid(f_out_valid), .in_ready(f_out_ready), .in_psum(au_psum), .in_omap(au_omap),
    .drain_valid, .drain_oh, .drain_ow,
    .drain_out_valid(drain_acc_valid), .drain_out_acc(drain_acc),
    .init_done, .idle(au_idle));

  ppu u_ppu (
    .clk, .rst_n, .cfg, .bias,
    .in_valid(drain_acc_valid), .in_acc(drain_acc),
    .out_valid, .out_data);

  assign idle = cu_idle && !f_out_valid && au_idle;

  a_fifo_never_full: assert property (@(posedge clk) disable iff (!rst_n) cu_out_valid |-> f_in_ready);
endmodule
