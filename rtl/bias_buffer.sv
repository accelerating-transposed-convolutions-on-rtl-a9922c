// bias_buffer: holds the bias of each output channel of the current filter
// batch, one signed 32-bit entry per processing module.
//
// Written by the weight data loader (we, idx, data) while a batch is loaded;
// all entries are read in parallel by the PMs' post-processing units. Entries
// reset to zero. Timing: a write is visible on bias[] the next cycle.
module bias_buffer
  import mm2im_pkg::*;
#(
  parameter int unsigned X = 8,
  localparam int unsigned XW = (X > 1) ? $clog2(X) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    we,
  input  logic [XW-1:0]           idx,
  input  logic signed [ACC_W-1:0] data,
  output logic signed [ACC_W-1:0] bias [X]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < X; i++) bias[i] <= '0;
    end else if (we) begin
      bias[idx] <= data;
    end
  end
endmodule
