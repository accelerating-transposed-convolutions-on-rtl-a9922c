// output_crossbar: sends one finished output row of all active PMs to the
// output AXI-Stream (opcode 0x10).
//
// For each output column ow = 0 .. Ow-1 it issues one drain request to all
// PMs (which read, clear and requantise the accumulator of row `row`, column
// ow), collects the int8 result of every PM, and serialises the results of
// the nact active PMs, PM 0 first, into 32-bit words, four bytes per word,
// little-endian. The row is thus sent as Ow pixels of nact channels
// ([ow][channel] order, the channel-last layout of the output tensor slice).
// The last word of the row is padded with zero bytes and carries m_last.
// The byte order and padding are this design's choice.
//
// Timing: per pixel one drain cycle, three cycles of PM latency, then one cycle
// per byte, plus one cycle per output word (longer if m_ready is low). done
// pulses once the last word has been accepted.
module output_crossbar
  import mm2im_pkg::*;
#(
  parameter int unsigned X = 8,
  localparam int unsigned XW = (X > 1) ? $clog2(X) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  input  logic              start,
  input  logic [DIM_W-1:0]  row,
  input  logic [XW:0]       nact,
  output logic              done,
  // drain of the PM array
  output logic              drain_valid,
  output logic [DIM_W-1:0]  drain_oh,
  output logic [DIM_W-1:0]  drain_ow,
  input  logic              pm_valid,
  input  logic signed [7:0] pm_data [X],
  // output stream
  output logic              m_valid,
  input  logic              m_ready,
  output logic [AXIS_W-1:0] m_data,
  output logic              m_last
);
  typedef enum logic [2:0] {S_IDLE, S_DRAIN, S_WAIT, S_SER, S_EMIT} state_e;
  state_e state;

  logic [DIM_W-1:0] ow;
  logic [XW:0]      j;
  logic [1:0]       bc;
  logic [7:0]       pix [X];
  logic             last_pix, last_byte;

  assign drain_valid = (state == S_DRAIN);
  assign drain_oh    = row;
  assign drain_ow    = ow;
  assign m_valid     = (state == S_EMIT);
  assign last_pix    = (ow == cfg.ow - 1'b1);
  assign last_byte   = (j == nact - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; ow <= '0; j <= '0; bc <= '0; done <= 1'b0;
      m_data <= '0; m_last <= 1'b0;
      for (int i = 0; i < X; i++) pix[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          ow <= '0; bc <= '0; m_data <= '0; m_last <= 1'b0;
          state <= S_DRAIN;
        end
        S_DRAIN: state <= S_WAIT;
        S_WAIT: if (pm_valid) begin
          for (int i = 0; i < X; i++) pix[i] <= pm_data[i];
          j     <= '0;
          state <= S_SER;
        end
        S_SER: begin
          m_data[bc*8 +: 8] <= pix[j[XW-1:0]];
          bc <= bc + 1'b1;
          j  <= j + 1'b1;
          if (last_byte && last_pix) begin
            m_last <= 1'b1;
            state  <= S_EMIT;
          end else if (bc == 2'd3) begin
            state <= S_EMIT;
          end else if (last_byte) begin
            ow    <= ow + 1'b1;
            state <= S_DRAIN;
          end
        end
        S_EMIT: if (m_ready) begin
          m_data <= '0;
          bc     <= '0;
          m_last <= 1'b0;
          if (m_last) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else if (j == nact) begin   // pixel finished exactly at a word end
            ow    <= ow + 1'b1;
            state <= S_DRAIN;
          end else begin
            state <= S_SER;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_stable_while_stalled: assert property (@(posedge clk) disable iff (!rst_n)
    m_valid && !m_ready |=> m_valid && $stable(m_data) && $stable(m_last));
endmodule
