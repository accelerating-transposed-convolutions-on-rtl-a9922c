// tb_sdp_ram: checks the simple dual-port RAM: registered read (data one cycle
// after the address), read-before-write on a same-address collision, reads
// with re low hold the previous data, and random write/read traffic against
// an array model.
module tb_sdp_ram;
  localparam int W = 16, D = 64;
  logic clk = 0; always #5 clk = ~clk;
  logic we, re; logic [5:0] waddr, raddr; logic [W-1:0] wdata, rdata;
  int checks = 0, failures = 0;
  logic [W-1:0] model [D];

  sdp_ram #(.WIDTH(W), .DEPTH(D)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  task automatic chk(logic [W-1:0] got, logic [W-1:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("ERROR %s: got %h exp %h", what, got, exp); end
  endtask

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    // fill
    for (int i = 0; i < D; i++) begin
      @(negedge clk); we = 1; waddr = 6'(i); wdata = W'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    // read back: data appears one cycle after the address
    for (int i = 0; i < D; i++) begin
      @(negedge clk); re = 1; raddr = 6'(i);
      @(negedge clk); re = 0; chk(rdata, model[i], "readback");
    end
    // collision: read-before-write
    @(negedge clk); we = 1; re = 1; waddr = 6'd5; raddr = 6'd5; wdata = ~model[5];
    @(negedge clk); we = 0; re = 0; chk(rdata, model[5], "read-before-write"); model[5] = ~model[5];
    @(negedge clk); chk(rdata, model[5] ^ '1, "hold with re low");
    @(negedge clk); re = 1; raddr = 6'd5;
    @(negedge clk); re = 0; chk(rdata, model[5], "new value");
    // random traffic
    for (int n = 0; n < 500; n++) begin
      logic [W-1:0] e;
      @(negedge clk);
      we = $urandom % 2; waddr = 6'($urandom); wdata = W'($urandom);
      re = 1; raddr = 6'($urandom);
      e = model[raddr];
      if (we) model[waddr] = wdata;
      @(posedge clk); #1; chk(rdata, e, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
