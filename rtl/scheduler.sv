// scheduler: main controller of the MM2IM accelerator.
//
// A TCONV pass for one filter batch starts with sched_start (opcode 0x08):
// the input-row and output-row counters are cleared and the PMs that hold a
// filter (the first nfilt) are enabled, the others switched off. From then on
// the scheduler serves two kinds of work, one at a time:
//   * a new input row in the row buffer (row_valid): it copies the row, word
//     by word, into the input row buffer of every PM (broadcast), releases the
//     row buffer (row_taken) and starts the MM2IM mapper on the Iw MatMul rows
//     of that input row. The row is finished when the mapper is done, the map
//     FIFOs are empty and all PMs are idle; the input-row counter advances.
//   * a store request (opcode 0x10): once no row is being computed it starts
//     the output crossbar on the next output row, and answers store_done when
//     the crossbar has sent it; the output-row counter advances.
// The host driver sends exactly the input rows each output row needs before
// asking for it (tiled dataflow), so a store never waits for data that has not
// been sent. A waiting input row is served before a pending store, since the
// last row a store needs may still sit in the row buffer. This
// ordering and the word-by-word broadcast (instead of per-PM FIFOs) are this
// design's choices.
//
// Timing: broadcast takes Iw*Ic/UF + 1 cycles per input row; mapper start,
// row_taken and xbar_start are one-cycle pulses.
module scheduler
  import mm2im_pkg::*;
#(
  parameter int unsigned X         = 8,
  parameter int unsigned UF        = 16,
  parameter int unsigned ROW_WORDS = 1024,
  localparam int unsigned RAW = $clog2(ROW_WORDS),
  localparam int unsigned XW  = (X > 1) ? $clog2(X) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  input  logic             sched_start,
  input  logic             store_req,
  output logic             store_done,
  input  logic [XW:0]      nfilt,
  output logic [X-1:0]     pm_enable,
  // row buffer
  input  logic             row_valid,
  output logic             row_taken,
  output logic             rb_re,
  output logic [RAW-1:0]   rb_raddr,
  // broadcast into the PMs' input row buffers (data comes from the row buffer)
  output logic             pm_row_we,
  output logic [RAW-1:0]   pm_row_waddr,
  // mapper
  output logic             map_start,
  output logic [DIM_W-1:0] map_h,
  output logic [DIM_W-1:0] map_rows,
  input  logic             map_done,
  input  logic             maps_empty,
  input  logic             pm_idle,
  // output crossbar
  output logic             xbar_start,
  output logic [DIM_W-1:0] xbar_row,
  input  logic             xbar_done,
  // status
  output logic [DIM_W-1:0] in_row,
  output logic             running
);
  typedef enum logic [2:0] {S_IDLE, S_RUN, S_BCAST, S_BLAST, S_MAP, S_XBAR} state_e;
  state_e state;

  logic [RAW:0] cnt, rwords;
  logic store_pending, mapped;

  assign rwords   = (RAW+1)'(cfg.iw * (cfg.ic >> $clog2(UF)));
  assign rb_re    = (state == S_BCAST);
  assign rb_raddr = cnt[RAW-1:0];
  assign map_h    = in_row;
  assign map_rows = cfg.iw;
  assign running  = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cnt <= '0; store_pending <= 1'b0; mapped <= 1'b0;
      in_row <= '0; xbar_row <= '0; pm_enable <= '0;
      store_done <= 1'b0; row_taken <= 1'b0; map_start <= 1'b0; xbar_start <= 1'b0;
      pm_row_we <= 1'b0; pm_row_waddr <= '0;
    end else begin
      store_done <= 1'b0; row_taken <= 1'b0; map_start <= 1'b0; xbar_start <= 1'b0;
      pm_row_we    <= rb_re;
      pm_row_waddr <= rb_raddr;
      if (store_req) store_pending <= 1'b1;
      if (sched_start) begin
        state    <= S_RUN;
        in_row   <= '0;
        xbar_row <= '0;
        for (int i = 0; i < X; i++) pm_enable[i] <= ((XW+1)'(i) < nfilt);
      end else begin
        unique case (state)
          S_IDLE: ;
          S_RUN: begin
            if (row_valid) begin
              cnt   <= '0;
              state <= S_BCAST;
            end else if (store_pending || store_req) begin
              store_pending <= 1'b0;
              xbar_start    <= 1'b1;
              state         <= S_XBAR;
            end
          end
          S_BCAST: begin
            cnt <= cnt + 1'b1;
            if (cnt == rwords - 1'b1) state <= S_BLAST;
          end
          S_BLAST: begin      // last broadcast word is written this cycle
            row_taken <= 1'b1;
            map_start <= 1'b1;
            mapped    <= 1'b0;
            state     <= S_MAP;
          end
          S_MAP: begin
            if (map_done) mapped <= 1'b1;
            if (mapped && maps_empty && pm_idle) begin
              in_row <= in_row + 1'b1;
              state  <= S_RUN;
            end
          end
          S_XBAR: if (xbar_done) begin
            xbar_row   <= xbar_row + 1'b1;
            store_done <= 1'b1;
            state      <= S_RUN;
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end
endmodule
