// pm_array: the array of X processing modules.
//
// Output channels are split across the PMs: PM i holds filter i of the current
// batch (filter_step = X). All PMs see the same broadcast input row, the same
// compute map and the same output map, and they work in lockstep: a map entry
// is taken only when every enabled PM can take it. pm_enable turns single PMs
// off (for a last batch with fewer than X filters). Filter words are written
// into the PM selected by filt_pm; a drain request goes to all PMs at once and
// returns one int8 output per PM.
//
// Timing: as processing_module. idle and init_done are the AND over the PMs.
module pm_array
  import mm2im_pkg::*;
#(
  parameter int unsigned X            = 8,
  parameter int unsigned UF           = 16,
  parameter int unsigned FILTER_WORDS = 2048,
  parameter int unsigned ROW_WORDS    = 1024,
  parameter int unsigned OUT_ROWS     = 16,
  parameter int unsigned OW_MAX       = 512,
  localparam int unsigned FAW = $clog2(FILTER_WORDS),
  localparam int unsigned RAW = $clog2(ROW_WORDS),
  localparam int unsigned XW  = (X > 1) ? $clog2(X) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  cfg_t                    cfg,
  input  logic [X-1:0]            pm_enable,
  input  logic signed [ACC_W-1:0] bias [X],
  input  logic                    filt_we,
  input  logic [XW-1:0]           filt_pm,
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
  output logic signed [7:0]       out_data [X],
  output logic                    idle,
  output logic                    init_done
);
  logic [X-1:0] rdy, idl, ini, ov;

  assign in_ready  = &rdy;
  assign idle      = &idl;
  assign init_done = &ini;
  assign out_valid = ov[0];

  for (genvar i = 0; i < X; i++) begin : g_pm
    processing_module #(
      .UF(UF), .FILTER_WORDS(FILTER_WORDS), .ROW_WORDS(ROW_WORDS),
      .OUT_ROWS(OUT_ROWS), .OW_MAX(OW_MAX)
    ) u_pm (
      .clk, .rst_n, .cfg,
      .enable(pm_enable[i]), .bias(bias[i]),
      .filt_we(filt_we && (filt_pm == XW'(i))), .filt_waddr, .filt_wdata,
      .row_we, .row_waddr, .row_wdata,
      .in_valid(in_valid && in_ready), .in_ready(rdy[i]), .in_cmap, .in_omap,
      .drain_valid, .drain_oh, .drain_ow,
      .out_valid(ov[i]), .out_data(out_data[i]),
      .idle(idl[i]), .init_done(ini[i]));
  end
endmodule
