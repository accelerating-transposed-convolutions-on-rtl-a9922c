// instruction_decoder: reads the micro-ISA from the input AXI-Stream.
//
// The host driver sends a sequence of 32-bit words. A word in the fetch state
// is an instruction; bits [7:0] hold the opcode (mm2im_pkg::opcode_e), the
// other bits are ignored:
//   0x01 CONFIG   : the next CFG_WORDS words are loaded into the configuration
//                   registers (layout in mm2im_pkg), then fetch resumes.
//   0x02 LOAD_WGT : pulses wdl_start and hands the stream to the weight data
//                   loader until it pulses wdl_done.
//   0x04 LOAD_IN  : pulses dil_start and hands the stream to the dynamic input
//                   loader until it pulses dil_done.
//   0x08 SCHEDULE : pulses sched_start; fetch resumes at once.
//   0x10 STORE    : pulses store_req and holds the stream until the scheduler
//                   answers store_done (the output row has been sent).
// Any other opcode is dropped and counted in bad_ops. The opcode values come
// from the source design; the operand formats and the blocking STORE are this
// design's choice.
//
// Timing: one instruction or operand word per clock when the stream is
// valid; the routed stream (wdl_*/dil_*) is combinational (s_ready follows
// the loader's ready).
module instruction_decoder
  import mm2im_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              s_valid,
  output logic              s_ready,
  input  logic [AXIS_W-1:0] s_data,
  output cfg_t              cfg,
  output logic              wdl_start,
  output logic              wdl_valid,
  input  logic              wdl_ready,
  input  logic              wdl_done,
  output logic              dil_start,
  output logic              dil_valid,
  input  logic              dil_ready,
  input  logic              dil_done,
  output logic [AXIS_W-1:0] ld_data,
  output logic              sched_start,
  output logic              store_req,
  input  logic              store_done,
  output logic [7:0]        bad_ops
);
  typedef enum logic [2:0] {S_FETCH, S_CFG, S_WGT, S_IN, S_STORE} state_e;
  state_e state;
  logic [$clog2(CFG_WORDS)-1:0] cfg_idx;

  assign ld_data   = s_data;
  assign wdl_valid = (state == S_WGT) && s_valid;
  assign dil_valid = (state == S_IN)  && s_valid;

  always_comb begin
    unique case (state)
      S_FETCH, S_CFG: s_ready = 1'b1;
      S_WGT:          s_ready = wdl_ready;
      S_IN:           s_ready = dil_ready;
      default:        s_ready = 1'b0;
    endcase
  end

  wire take = s_valid && s_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_FETCH; cfg_idx <= '0; cfg <= '0; bad_ops <= '0;
      wdl_start <= 1'b0; dil_start <= 1'b0; sched_start <= 1'b0; store_req <= 1'b0;
    end else begin
      wdl_start <= 1'b0; dil_start <= 1'b0; sched_start <= 1'b0; store_req <= 1'b0;
      unique case (state)
        S_FETCH: if (take) begin
          unique case (s_data[7:0])
            OP_CONFIG:   begin state <= S_CFG; cfg_idx <= '0; end
            OP_LOAD_WGT: begin state <= S_WGT; wdl_start <= 1'b1; end
            OP_LOAD_IN:  begin state <= S_IN;  dil_start <= 1'b1; end
            OP_SCHEDULE: sched_start <= 1'b1;
            OP_STORE:    begin state <= S_STORE; store_req <= 1'b1; end
            default:     bad_ops <= bad_ops + 1'b1;
          endcase
        end
        S_CFG: if (take) begin
          unique case (cfg_idx)
            0: begin cfg.ih <= s_data[15:0]; cfg.iw <= s_data[31:16]; end
            1: begin cfg.ic <= s_data[15:0]; cfg.ks <= s_data[23:16]; cfg.stride <= s_data[31:24]; end
            2: begin cfg.oh <= s_data[15:0]; cfg.ow <= s_data[31:16]; end
            3: begin cfg.pad_top <= s_data[7:0]; cfg.pad_left <= s_data[15:8];
                     cfg.in_zp <= s_data[23:16]; cfg.out_zp <= s_data[31:24]; end
            4: cfg.ppu_mult <= s_data;
            default: cfg.ppu_shift <= s_data[7:0];
          endcase
          cfg_idx <= cfg_idx + 1'b1;
          if (cfg_idx == ($clog2(CFG_WORDS))'(CFG_WORDS-1)) state <= S_FETCH;
        end
        S_WGT:   if (wdl_done)   state <= S_FETCH;
        S_IN:    if (dil_done)   state <= S_FETCH;
        S_STORE: if (store_done) state <= S_FETCH;
        default: state <= S_FETCH;
      endcase
    end
  end

  a_cfg_ks_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_WGT || state == S_IN) |-> (cfg.ks != 0 && cfg.iw != 0));
endmodule
