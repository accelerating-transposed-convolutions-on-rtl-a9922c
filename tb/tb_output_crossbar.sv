// tb_output_crossbar: checks that a finished output row is drained from the
// PMs and serialised onto the output stream.
//
// A stand-in for the PM array answers each drain request three cycles later
// (the latency of the real PMs) with one byte per PM that encodes the
// requested row, column and PM number, so a wrong coordinate or a wrong byte
// position shows in the data. The testbench predicts the words of the row
// (Ow pixels of nact bytes, PM 0 first, four bytes per word, little-endian,
// the last word zero-padded and marked with m_last) and compares the stream
// with them. Every column must be drained exactly once and in order. Runs
// with a stalling consumer check that a word is held until taken; runs with
// m_ready always high check the cycle count of a row:
// Ow * (1 drain + 3 wait + nact bytes) + one cycle per word, and done one
// cycle after the last word.
module tb_output_crossbar;
  import mm2im_pkg::*;
  localparam int X = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t cfg;
  logic start, done, drain_valid, pm_valid, m_valid, m_ready, m_last;
  logic [15:0] row, drain_oh, drain_ow;
  logic [2:0]  nact;
  logic signed [7:0] pm_data [X];
  logic [31:0] m_data;

  output_crossbar #(.X(X)) dut (
    .clk, .rst_n, .cfg, .start, .row, .nact, .done, .drain_valid, .drain_oh, .drain_ow,
    .pm_valid, .pm_data, .m_valid, .m_ready, .m_data, .m_last);

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  function automatic logic [7:0] pix_byte(int oh, int ow, int pm);
    return 8'(oh * 37 + ow * 5 + pm * 64 + 1);
  endfunction

  // PM array stand-in: result three cycles after the drain request
  logic d1 = 1'b0, d2 = 1'b0;
  logic [15:0] q1h, q1w, q2h, q2w;
  always @(posedge clk) begin
    d1 <= drain_valid; q1h <= drain_oh; q1w <= drain_ow;
    d2 <= d1;          q2h <= q1h;      q2w <= q1w;
    pm_valid <= d2;
    for (int i = 0; i < X; i++) pm_data[i] <= pix_byte(q2h, q2w, i);
  end

  logic [31:0] exp_q[$];
  logic        exp_last_q[$];
  int stall_pct = 40, next_ow = 0, n_stall = 0, n_done = 0;
  longint done_at = 0;

  always @(negedge clk) begin
    logic [31:0] pd; logic pl; bit pv;
    pv = m_valid && !m_ready; pd = m_data; pl = m_last;   // a word left waiting
    m_ready = ($urandom % 100) >= stall_pct;
    #1;
    if (rst_n) begin
      if (done) begin n_done++; done_at = cycles; end
      if (drain_valid) begin
        checks++;
        if (drain_oh != row || int'(drain_ow) != next_ow) begin
          failures++;
          $display("ERROR: drain of (%0d,%0d), expected (%0d,%0d)", drain_oh, drain_ow, row, next_ow);
        end
        next_ow++;
      end
      if (pv) begin
        n_stall++;
        checks++;
        if (!m_valid || m_data !== pd || m_last !== pl) begin
          failures++;
          $display("ERROR: word changed while stalled");
        end
      end
      if (m_valid && m_ready) begin
        checks++;
        if (exp_q.size() == 0) begin
          failures++;
          $display("ERROR: unexpected word %h", m_data);
        end else begin
          if (m_data !== exp_q[0] || m_last !== exp_last_q[0]) begin
            failures++;
            if (failures < 10) $display("ERROR: word %h last %0d, expected %h last %0d", m_data, m_last, exp_q[0], exp_last_q[0]);
          end
          void'(exp_q.pop_front()); void'(exp_last_q.pop_front());
        end
      end
    end
  end

  task automatic send_row(int r, int ow, int na);
    byte b[$];
    int d0, nwords;
    longint t0;
    cfg.ow = 16'(ow);
    for (int w = 0; w < ow; w++)
      for (int j = 0; j < na; j++) b.push_back(pix_byte(r, w, j));
    while (b.size() % 4 != 0) b.push_back(8'h00);
    nwords = b.size() / 4;
    for (int i = 0; i < b.size(); i += 4) begin
      exp_q.push_back({b[i+3], b[i+2], b[i+1], b[i]});
      exp_last_q.push_back(i + 4 >= b.size());
    end
    d0 = n_done; next_ow = 0;
    @(negedge clk); row = 16'(r); nact = 3'(na); start = 1'b1; t0 = cycles;
    @(negedge clk); start = 1'b0;
    while (n_done == d0) @(negedge clk);
    checks += 2;
    if (exp_q.size() != 0 || next_ow != ow) begin
      failures++;
      $display("ERROR: row %0d: %0d words missing, %0d columns drained", r, exp_q.size(), next_ow);
    end
    if (stall_pct == 0 && done_at - t0 != longint'(ow * (4 + na) + nwords + 1)) begin
      failures++;
      $display("ERROR: row of %0d pixels x %0d bytes took %0d cycles, expected %0d", ow, na,
               done_at - t0, ow * (4 + na) + nwords + 1);
    end
    repeat (2) @(negedge clk);
  endtask

  initial begin
    cfg = '0; start = 1'b0; row = '0; nact = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    send_row(0, 6, 4);
    send_row(5, 7, 3);
    send_row(2, 5, 1);
    send_row(9, 3, 2);
    stall_pct = 0;
    send_row(1, 6, 4);
    send_row(3, 7, 3);
    send_row(4, 1, 1);
    checks++;
    if (n_stall == 0) begin failures++; $display("ERROR: the stream never stalled"); end
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
