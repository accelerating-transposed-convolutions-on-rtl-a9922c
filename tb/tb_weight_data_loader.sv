// tb_weight_data_loader: checks the loading of a filter batch.
//
// The testbench builds the opcode-0x02 stream for a batch of random filters
// (count word, then per filter a bias word and Ks*Ks*Ic/4 weight words) and
// predicts, independently of the loader, every bias-buffer write (index,
// value) and every filter-buffer write (PM, address, 128-bit word made of
// four consecutive stream words, first word in the low bits). Writes seen on
// the outputs are compared with these lists in order, and nfilt must hold
// the batch size afterwards.
//
// Three loads are run: with random gaps on the stream, without gaps (the
// loader must take one word per clock, so done comes exactly one cycle after
// the last word was accepted), and a load of an empty batch.
module tb_weight_data_loader;
  import mm2im_pkg::*;
  localparam int X = 4, UF = 16, FW = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t cfg;
  logic start, s_valid, s_ready, done;
  logic [31:0] s_data;
  logic [2:0]  nfilt;
  logic        bias_we, filt_we;
  logic [1:0]  bias_idx, filt_pm;
  logic signed [31:0] bias_data;
  logic [5:0]  filt_waddr;
  logic [127:0] filt_wdata;

  weight_data_loader #(.X(X), .UF(UF), .FILTER_WORDS(FW)) dut (
    .clk, .rst_n, .cfg, .start, .s_valid, .s_ready, .s_data, .done, .nfilt,
    .bias_we, .bias_idx, .bias_data, .filt_we, .filt_pm, .filt_waddr, .filt_wdata);

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  logic [31:0]  in_q[$];
  logic [33:0]  exp_bias[$];          // {idx, data}
  logic [135:0] exp_filt[$];          // {pm, addr, data}
  int gap_pct = 30;
  longint last_take = 0, done_at = 0, first_take = -1;
  int n_done = 0;

  // stream driver: values for the coming edge are set at the falling edge
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
    end
  end

  // output monitor (outputs are registered, stable between rising edges)
  always @(negedge clk) if (rst_n) begin
    if (done) begin n_done++; done_at = cycles; end
    if (bias_we) begin
      checks++;
      if (exp_bias.size() == 0 || exp_bias[0] !== {bias_idx, bias_data}) begin
        failures++;
        $display("ERROR: bias write %0d <= %0d unexpected", bias_idx, bias_data);
      end
      if (exp_bias.size() > 0) void'(exp_bias.pop_front());
    end
    if (filt_we) begin
      checks++;
      if (exp_filt.size() == 0 || exp_filt[0] !== {filt_pm, filt_waddr, filt_wdata}) begin
        failures++;
        if (failures < 10) $display("ERROR: filter write pm %0d addr %0d data %h unexpected", filt_pm, filt_waddr, filt_wdata);
      end
      if (exp_filt.size() > 0) void'(exp_filt.pop_front());
    end
  end

  task automatic load(int nf, int ks, int ic);
    int words = ks * ks * ic / 4;
    int d0;
    cfg.ks = 8'(ks); cfg.ic = 16'(ic);
    in_q.push_back(32'(nf));
    for (int f = 0; f < nf; f++) begin
      logic [31:0] b;
      logic [127:0] w;
      b = $urandom;
      in_q.push_back(b);
      exp_bias.push_back({2'(f), b});
      for (int k = 0; k < words; k++) begin
        logic [31:0] v;
        v = $urandom;
        in_q.push_back(v);
        w[(k % 4)*32 +: 32] = v;
        if (k % 4 == 3) exp_filt.push_back({2'(f), 6'(k / 4), w});
      end
    end
    d0 = n_done;
    first_take = -1;
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    while (n_done == d0) @(negedge clk);
    checks += 4;
    if (in_q.size() != 0)    begin failures++; $display("ERROR: %0d words not taken", in_q.size()); end
    if (exp_bias.size() != 0) begin failures++; $display("ERROR: %0d bias writes missing", exp_bias.size()); end
    if (exp_filt.size() != 0) begin failures++; $display("ERROR: %0d filter writes missing", exp_filt.size()); end
    if (nfilt != 3'(nf))     begin failures++; $display("ERROR: nfilt %0d, expected %0d", nfilt, nf); end
    if (gap_pct == 0 && nf > 0) begin
      checks += 2;
      if (last_take - first_take != longint'(nf * (words + 1))) begin
        failures++;
        $display("ERROR: %0d words took %0d cycles, expected one per clock", nf * (words + 1) + 1, last_take - first_take + 1);
      end
      // done is registered in the edge after the last word: visible one cycle later
      if (done_at - last_take != 1) begin
        failures++;
        $display("ERROR: done %0d cycles after the last word, expected 1", done_at - last_take);
      end
    end
    repeat (3) @(negedge clk);
  endtask

  initial begin
    cfg = '0; start = 1'b0; s_valid = 1'b0; s_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load(3, 3, 32);      // 18 filter words per filter
    gap_pct = 0;
    load(4, 2, 16);      // no gaps: one word per clock
    load(0, 3, 16);      // empty batch
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
