// accumulation_unit: the accumulation unit (AU) of one processing module,
// made of the Out Muxer and the output buffer (out buf).
//
// Every partial sum from the compute unit arrives with its omap entry
// (final output coordinate oh, ow). The Out Muxer adds it to the value already
// held for that output, so overlapping sums of transposed convolution are
// coalesced in place and no partial-output matrix is ever stored. The out
// buf holds OUT_ROWS output rows of OW_MAX accumulators; output row oh lives
// in slot oh mod OUT_ROWS (OUT_ROWS is a power of two, at least Ks), because
// an input row only touches Ks consecutive output rows and finished rows are
// drained and cleared before their slot is reused. The ring of rows and its
// size are this design's choice; the source design only states that rows are
// sent out as soon as they are complete so that out buf stays small.
//
// The buffer is a registered-read RAM, so accumulation is a two-stage
// read-modify-write (read in cycle t, write in t+1) with forwarding of the
// previous write, giving one accumulation per clock with no hazard.
//
// Drain port: drain_valid with (drain_oh, drain_ow) reads an accumulator; its
// value appears on drain_out_valid/drain_out_acc two cycles later and the
// entry is cleared to zero. After reset the whole buffer is cleared, which
// takes OUT_ROWS*OW_MAX cycles; init_done rises when it is over. Partial sums
// and drains must not be presented in the same cycle (drain wins).
module accumulation_unit
  import mm2im_pkg::*;
#(
  parameter int unsigned OUT_ROWS = 16,
  parameter int unsigned OW_MAX   = 512,
  localparam int unsigned RL = $clog2(OUT_ROWS),
  localparam int unsigned WL = $clog2(OW_MAX),
  localparam int unsigned AW = RL + WL
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // partial sums from the compute unit
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic signed [ACC_W-1:0] in_psum,
  input  omap_t                   in_omap,
  // drain (read and clear) port
  input  logic                    drain_valid,
  input  logic [DIM_W-1:0]        drain_oh,
  input  logic [DIM_W-1:0]        drain_ow,
  output logic                    drain_out_valid,
  output logic signed [ACC_W-1:0] drain_out_acc,
  output logic                    init_done,
  output logic                    idle
);
  typedef enum logic [1:0] {OP_NONE, OP_ACC, OP_DRAIN} op_e;

  logic [AW-1:0] init_addr;
  logic          we, re;
  logic [AW-1:0] waddr, raddr;
  logic [ACC_W-1:0] wdata, rdata;

  op_e s0_op, s1_op;
  logic [AW-1:0] s1_addr;
  logic signed [ACC_W-1:0] s1_psum;

  logic lw_valid;
  logic [AW-1:0] lw_addr;
  logic signed [ACC_W-1:0] lw_data, cur;

  assign in_ready = init_done && !drain_valid;

  always_comb begin
    s0_op = OP_NONE;
    raddr = {in_omap.oh[RL-1:0], in_omap.ow[WL-1:0]};
    if (init_done) begin
      if (drain_valid) begin
        s0_op = OP_DRAIN;
        raddr = {drain_oh[RL-1:0], drain_ow[WL-1:0]};
      end else if (in_valid) begin
        s0_op = OP_ACC;
      end
    end
  end
  assign re = (s0_op != OP_NONE);

  // Out Muxer: current value with forwarding of the write of the last cycle.
  assign cur = (lw_valid && lw_addr == s1_addr) ? lw_data : $signed(rdata);

  always_comb begin
    we = 1'b0; waddr = s1_addr; wdata = '0;
    if (!init_done) begin
      we = 1'b1; waddr = init_addr; wdata = '0;
    end else if (s1_op == OP_ACC) begin
      we = 1'b1; wdata = ACC_W'(cur + s1_psum);
    end else if (s1_op == OP_DRAIN) begin
      we = 1'b1; wdata = '0;
    end
  end

  sdp_ram #(.WIDTH(ACC_W), .DEPTH(OUT_ROWS*OW_MAX)) u_out_buf (
    .clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_addr <= '0; init_done <= 1'b0;
      s1_op <= OP_NONE; s1_addr <= '0; s1_psum <= '0;
      lw_valid <= 1'b0; lw_addr <= '0; lw_data <= '0;
      drain_out_valid <= 1'b0; drain_out_acc <= '0;
    end else begin
      if (!init_done) begin
        init_addr <= init_addr + 1'b1;
        if (init_addr == AW'(OUT_ROWS*OW_MAX-1)) init_done <= 1'b1;
      end
      s1_op   <= s0_op;
      s1_addr <= raddr;
      s1_psum <= in_psum;
      lw_valid <= we;
      lw_addr  <= waddr;
      lw_data  <= $signed(wdata);
      drain_out_valid <= (s1_op == OP_DRAIN);
      if (s1_op == OP_DRAIN) drain_out_acc <= cur;
    end
  end

  assign idle = (s1_op == OP_NONE) && !in_valid;
endmodule
