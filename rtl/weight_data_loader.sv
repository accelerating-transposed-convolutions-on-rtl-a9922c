// weight_data_loader: loads a batch of filters and biases (opcode 0x02).
//
// Stream format after the opcode (32-bit words, bytes little-endian):
//   nfilt                      number of filters in the batch, 1..X
//   then for each filter f = 0 .. nfilt-1:
//     bias                     signed 32-bit bias of output channel f
//     Ks*Ks*Ic/4 weight words  int8 weights in [kh][kw][ic] order
// Four stream words (UF bytes in general) are packed into one filter-buffer
// word and written into the filter buffer of PM f at address
// (kh*Ks+kw)*Ic/UF + ic/UF; the bias goes to entry f of the bias buffer.
// Writing filter f straight into PM f is how the batch is "allocated" across
// the PMs here; the word formats are this design's choice.
//
// nfilt is held after the load and drives which PMs the scheduler enables.
// Timing: one stream word per clock (s_ready is high while loading); done
// pulses one cycle after the last word.
module weight_data_loader
  import mm2im_pkg::*;
#(
  parameter int unsigned X            = 8,
  parameter int unsigned UF           = 16,
  parameter int unsigned FILTER_WORDS = 2048,
  localparam int unsigned FAW = $clog2(FILTER_WORDS),
  localparam int unsigned XW  = (X > 1) ? $clog2(X) : 1,
  localparam int unsigned BPW = UF / BYTES_PER_BEAT   // beats per filter word
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  input  logic              start,
  input  logic              s_valid,
  output logic              s_ready,
  input  logic [AXIS_W-1:0] s_data,
  output logic              done,
  output logic [XW:0]       nfilt,
  output logic              bias_we,
  output logic [XW-1:0]     bias_idx,
  output logic signed [ACC_W-1:0] bias_data,
  output logic              filt_we,
  output logic [XW-1:0]     filt_pm,
  output logic [FAW-1:0]    filt_waddr,
  output logic [UF*8-1:0]   filt_wdata
);
  typedef enum logic [1:0] {S_IDLE, S_COUNT, S_BIAS, S_FILT} state_e;
  state_e state;

  logic [XW:0]   f;
  logic [FAW:0]  fwords, waddr;
  logic [$clog2(BPW+1)-1:0] beat;
  logic [UF*8-1:0] pack;

  assign s_ready = (state != S_IDLE);
  wire take = s_valid && s_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; f <= '0; fwords <= '0; waddr <= '0; beat <= '0; pack <= '0;
      nfilt <= '0; done <= 1'b0;
      bias_we <= 1'b0; bias_idx <= '0; bias_data <= '0;
      filt_we <= 1'b0; filt_pm <= '0; filt_waddr <= '0; filt_wdata <= '0;
    end else begin
      done <= 1'b0; bias_we <= 1'b0; filt_we <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state  <= S_COUNT;
          fwords <= (FAW+1)'(cfg.ks * cfg.ks * (cfg.ic >> $clog2(UF)));
        end
        S_COUNT: if (take) begin
          nfilt <= s_data[XW:0];
          f     <= '0;
          if (s_data[XW:0] == '0) begin state <= S_IDLE; done <= 1'b1; end
          else state <= S_BIAS;
        end
        S_BIAS: if (take) begin
          bias_we   <= 1'b1;
          bias_idx  <= f[XW-1:0];
          bias_data <= s_data;
          waddr     <= '0;
          beat      <= '0;
          state     <= S_FILT;
        end
        S_FILT: if (take) begin
          pack[beat*AXIS_W +: AXIS_W] <= s_data;
          if (beat == ($clog2(BPW+1))'(BPW-1)) begin
            beat       <= '0;
            filt_we    <= 1'b1;
            filt_pm    <= f[XW-1:0];
            filt_waddr <= waddr[FAW-1:0];
            filt_wdata <= {s_data, pack[(BPW-1)*AXIS_W-1:0]};
            waddr      <= waddr + 1'b1;
            if (waddr == fwords - 1'b1) begin
              f <= f + 1'b1;
              if (f + 1'b1 == nfilt) begin state <= S_IDLE; done <= 1'b1; end
              else state <= S_BIAS;
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
