// tb_sync_fifo: random push/pop traffic against a queue model. Checks data
// order, the fill count, that in_ready drops exactly when the FIFO is full,
// and first-word fall-through (a word pushed in one cycle is visible the
// next).
module tb_sync_fifo;
  localparam int W = 12, D = 4;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [2:0] count;
  int checks = 0, failures = 0, fulls = 0;
  logic [W-1:0] q[$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data, .count);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("ERROR %s at %0t", what, $time); end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      in_valid  = ($urandom % 100) < (n < 1000 ? 70 : 30);
      out_ready = ($urandom % 100) < (n < 1000 ? 30 : 70);
      in_data   = W'($urandom);
      #1;
      chk(count == 3'(q.size()), "count");
      chk(in_ready == (q.size() < D), "in_ready");
      chk(out_valid == (q.size() > 0), "out_valid");
      if (q.size() > 0) chk(out_data == q[0], "data");
      if (q.size() == D) fulls++;
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    chk(fulls > 0, "reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
