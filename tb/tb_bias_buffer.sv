// tb_bias_buffer: checks the per-channel bias registers.
//
// After reset every entry must read zero. Then random writes (random index,
// random data, random gaps) are applied; a reference array is updated with the
// same writes and all X entries are compared with it on every cycle, so a write
// must be visible exactly one cycle after it is presented and must not touch
// any other entry.
module tb_bias_buffer;
  import mm2im_pkg::*;
  localparam int X = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    we;
  logic [2:0]              idx;
  logic signed [ACC_W-1:0] data;
  logic signed [ACC_W-1:0] bias [X];
  logic signed [ACC_W-1:0] ref_b [X];

  bias_buffer #(.X(X)) dut (.clk, .rst_n, .we, .idx, .data, .bias);

  int checks = 0, failures = 0;

  task automatic compare(string what);
    for (int i = 0; i < X; i++) begin
      checks++;
      if (bias[i] !== ref_b[i]) begin
        failures++;
        if (failures < 10) $display("ERROR: %s entry %0d = %0d, expected %0d", what, i, bias[i], ref_b[i]);
      end
    end
  endtask

  initial begin
    we = 1'b0; idx = '0; data = '0;
    foreach (ref_b[i]) ref_b[i] = '0;
    repeat (3) @(negedge clk);
    compare("reset");
    rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      // the write presented in the previous cycle is now visible
      compare("write");
      we   = ($urandom % 3) != 0;
      idx  = 3'($urandom);
      data = $urandom;
      @(posedge clk);
      if (we) ref_b[idx] = data;
    end
    @(negedge clk);
    compare("final");
    // an asynchronous reset clears the entries again
    rst_n = 1'b0;
    #1;
    foreach (ref_b[i]) ref_b[i] = '0;
    compare("second reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
