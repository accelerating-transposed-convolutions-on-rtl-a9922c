// tb_dynamic_input_loader: checks the loading of input rows (opcode 0x04).
//
// The testbench sends a count word and nrows random rows of Iw*Ic int8 values
// and keeps its own copy of the row buffer, written from the loader's write
// port. Each time the loader raises row_valid the copy must hold exactly the
// row that was sent (four stream words per 128-bit buffer word, first word in
// the low bits); the testbench then waits a random time, like the scheduler
// copying the row out, and pulses row_taken. While row_valid is high the
// loader must not accept stream words. A second load without gaps and with an
// immediate row_taken checks the rate of one word per clock and that done
// comes one cycle after the last word.
module tb_dynamic_input_loader;
  import mm2im_pkg::*;
  localparam int UF = 16, RW = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t cfg;
  logic start, s_valid, s_ready, done, row_valid, row_taken, rb_we;
  logic [31:0]  s_data;
  logic [5:0]   rb_waddr;
  logic [127:0] rb_wdata;

  dynamic_input_loader #(.UF(UF), .ROW_WORDS(RW)) dut (
    .clk, .rst_n, .cfg, .start, .s_valid, .s_ready, .s_data, .done,
    .row_valid, .row_taken, .rb_we, .rb_waddr, .rb_wdata);

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  logic [31:0]  in_q[$];
  logic [31:0]  rows_q[$];        // stream words of the rows, for comparison
  logic [127:0] mem [RW];
  int gap_pct = 30, take_delay_max = 6, rwords = 0;
  longint first_take = -1, last_take = 0, done_at = 0;
  int n_done = 0, n_rows = 0, n_bp = 0;

  always @(negedge clk) begin
    bit hold;
    hold = s_valid && !s_ready;
    if (!hold) begin
      s_valid = (in_q.size() > 0) && (($urandom % 100) >= gap_pct);
      s_data  = (in_q.size() > 0) ? in_q[0] : 32'h0;
    end
    #1;
    if (s_valid && s_ready) begin
      void'(in_q.pop_front());
      if (first_take < 0) first_take = cycles;
      last_take = cycles;
      if (row_valid) begin
        failures++;
        $display("ERROR: word accepted while the row buffer is full");
      end
    end
    if (s_valid && !s_ready && row_valid) n_bp++;
  end

  // row buffer copy and a scheduler stand-in
  int wait_cnt = -1;
  always @(negedge clk) if (rst_n) begin
    row_taken = 1'b0;
    if (done) begin n_done++; done_at = cycles; end
    if (rb_we) mem[rb_waddr] = rb_wdata;
    if (row_valid && wait_cnt < 0) begin
      n_rows++;
      for (int a = 0; a < rwords; a++) begin
        logic [127:0] e;
        for (int k = 0; k < 4; k++) e[k*32 +: 32] = rows_q[a*4 + k];
        checks++;
        if (mem[a] !== e) begin
          failures++;
          if (failures < 10) $display("ERROR: row %0d word %0d = %h, expected %h", n_rows, a, mem[a], e);
        end
      end
      for (int k = 0; k < rwords * 4; k++) void'(rows_q.pop_front());
      wait_cnt = (take_delay_max > 0) ? int'($urandom % take_delay_max) : 0;
    end
    if (wait_cnt == 0) begin row_taken = 1'b1; wait_cnt = -1; end
    else if (wait_cnt > 0) wait_cnt--;
  end

  task automatic load(int nrows, int iw, int ic);
    int d0, r0;
    cfg.iw = 16'(iw); cfg.ic = 16'(ic);
    rwords = iw * ic / UF;
    in_q.push_back(32'(nrows));
    for (int i = 0; i < nrows * iw * ic / 4; i++) begin
      logic [31:0] v;
      v = $urandom;
      in_q.push_back(v);
      rows_q.push_back(v);
    end
    d0 = n_done; r0 = n_rows; first_take = -1;
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    while (n_done == d0) @(negedge clk);
    repeat (take_delay_max + 3) @(negedge clk);
    checks += 3;
    if (in_q.size() != 0) begin failures++; $display("ERROR: %0d words not taken", in_q.size()); end
    if (n_rows - r0 != nrows) begin failures++; $display("ERROR: %0d rows seen, expected %0d", n_rows - r0, nrows); end
    if (row_valid) begin failures++; $display("ERROR: row_valid not cleared by row_taken"); end
    if (gap_pct == 0 && take_delay_max == 0) begin
      // count word plus rwords*4 words per row, one per clock; between rows one
      // cycle is lost while row_valid is high (row_taken is given at once)
      checks += 2;
      if (last_take - first_take != longint'(nrows * rwords * 4 + (nrows - 1))) begin
        failures++;
        $display("ERROR: load took %0d cycles, expected %0d", last_take - first_take,
                 nrows * rwords * 4 + (nrows - 1));
      end
      if (done_at - last_take != 1) begin
        failures++;
        $display("ERROR: done %0d cycles after the last word", done_at - last_take);
      end
    end
  endtask

  initial begin
    cfg = '0; start = 1'b0; s_valid = 1'b0; s_data = '0; row_taken = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load(3, 5, 32);
    load(1, 16, 48);     // 48 buffer words
    gap_pct = 0; take_delay_max = 0;
    load(3, 4, 16);
    checks++;
    if (n_bp == 0) begin failures++; $display("ERROR: the full row buffer never held off the stream"); end
    $display("INFO rows %0d backpressure %0d", n_rows, n_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
