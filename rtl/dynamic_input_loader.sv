// dynamic_input_loader: loads rows of input activations into the row buffer
// (opcode 0x04).
//
// Stream format after the opcode: one word with the number of input rows
// nrows, then nrows rows of Iw*Ic int8 activations in [iw][ic] order, four
// per 32-bit word, little-endian. Each group of UF/4 words is packed into one
// row-buffer word and written at address iw*Ic/UF + ic/UF. The row buffer
// holds a single input row: after the last word of a row row_valid is raised
// and the loader stops taking words (s_ready low) until the scheduler has
// copied the row out and pulses row_taken. Rows are thus loaded while the PMs
// compute the previous row. The operand format and the one-row buffer are this
// design's choice.
//
// Timing: one word per clock while the row buffer is free; done pulses one
// cycle after the last word of the last row.
module dynamic_input_loader
  import mm2im_pkg::*;
#(
  parameter int unsigned UF        = 16,
  parameter int unsigned ROW_WORDS = 1024,
  localparam int unsigned RAW = $clog2(ROW_WORDS),
  localparam int unsigned BPW = UF / BYTES_PER_BEAT
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  input  logic              start,
  input  logic              s_valid,
  output logic              s_ready,
  input  logic [AXIS_W-1:0] s_data,
  output logic              done,
  output logic              row_valid,
  input  logic              row_taken,
  output logic              rb_we,
  output logic [RAW-1:0]    rb_waddr,
  output logic [UF*8-1:0]   rb_wdata
);
  typedef enum logic [1:0] {S_IDLE, S_COUNT, S_ROW} state_e;
  state_e state;

  logic [DIM_W-1:0] rows_left;
  logic [RAW:0]     rwords, waddr;
  logic [$clog2(BPW+1)-1:0] beat;
  logic [UF*8-1:0] pack;

  assign s_ready = (state == S_COUNT) || (state == S_ROW && !row_valid);
  wire take = s_valid && s_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; rows_left <= '0; rwords <= '0; waddr <= '0; beat <= '0;
      pack <= '0; done <= 1'b0; row_valid <= 1'b0;
      rb_we <= 1'b0; rb_waddr <= '0; rb_wdata <= '0;
    end else begin
      done  <= 1'b0;
      rb_we <= 1'b0;
      if (row_taken) row_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state  <= S_COUNT;
          rwords <= (RAW+1)'(cfg.iw * (cfg.ic >> $clog2(UF)));
        end
        S_COUNT: if (take) begin
          rows_left <= s_data[DIM_W-1:0];
          waddr <= '0; beat <= '0;
          if (s_data[DIM_W-1:0] == '0) begin state <= S_IDLE; done <= 1'b1; end
          else state <= S_ROW;
        end
        S_ROW: if (take) begin
          pack[beat*AXIS_W +: AXIS_W] <= s_data;
          if (beat == ($clog2(BPW+1))'(BPW-1)) begin
            beat     <= '0;
            rb_we    <= 1'b1;
            rb_waddr <= waddr[RAW-1:0];
            rb_wdata <= {s_data, pack[(BPW-1)*AXIS_W-1:0]};
            if (waddr == rwords - 1'b1) begin
              waddr     <= '0;
              row_valid <= 1'b1;
              rows_left <= rows_left - 1'b1;
              if (rows_left == DIM_W'(1)) begin state <= S_IDLE; done <= 1'b1; end
            end else begin
              waddr <= waddr + 1'b1;
            end
          end else begin
            beat <= beat + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
