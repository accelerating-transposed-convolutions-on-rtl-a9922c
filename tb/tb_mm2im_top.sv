// tb_mm2im_top: end-to-end test of the MM2IM accelerator at its default
// parameters (8 PMs, UF = 16).
//
// The testbench plays the host driver: it runs the tiled dataflow (for each
// batch of up to X output channels: load filters and biases, schedule, then
// for every output row send the input rows that row still needs and ask for
// the row) as one word stream on s_axis, and collects the output rows from
// m_axis. The expected output is computed here by a direct gather-form
// transposed convolution (each output pixel sums the input pixels and kernel
// taps that reach it), followed by the same requantisation formula, so it
// does not share the mapper's scatter arithmetic.
//
// Several layer shapes are run back to back: odd/even kernel sizes, strides 1
// and 2, a non-square input, a last batch with fewer than 8 filters, and
// random gaps on both streams. The test counts how often each mechanism
// happened and fails if one never did: cropped products skipped by the
// mapper, overlapping sums accumulated into an existing output, the
// PMs switched off, row-buffer
// back-pressure on the input stream, output-stream stalls, multi-batch runs.
module tb_mm2im_top;
  import mm2im_pkg::*;

  localparam int X  = 8;
  localparam int UF = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        s_valid, s_ready, m_valid, m_ready, m_last, ready;
  logic [31:0] s_data, m_data;
  logic [7:0]  bad_ops;

  mm2im_top dut (
    .clk, .rst_n,
    .s_axis_tvalid(s_valid), .s_axis_tready(s_ready), .s_axis_tdata(s_data),
    .m_axis_tvalid(m_valid), .m_axis_tready(m_ready), .m_axis_tdata(m_data),
    .m_axis_tlast(m_last), .ready, .bad_ops);

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  // ---------------- mechanism counters ----------------
  int n_skip = 0, n_overlap = 0, n_fwd = 0, n_pm_off = 0, n_row_bp = 0, n_out_stall = 0, n_batches = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_mapper.busy && !dut.u_mapper.cand_ok) n_skip++;
    if (dut.u_pm_array.g_pm[0].u_pm.u_au.s1_op == 2'd1 && dut.u_pm_array.g_pm[0].u_pm.u_au.cur != 0) n_overlap++;
    if (dut.u_pm_array.g_pm[0].u_pm.u_au.s1_op == 2'd1 && dut.u_pm_array.g_pm[0].u_pm.u_au.lw_valid &&
        dut.u_pm_array.g_pm[0].u_pm.u_au.lw_addr == dut.u_pm_array.g_pm[0].u_pm.u_au.s1_addr) n_fwd++;
    if (dut.u_sched.running && dut.pm_enable != '1) n_pm_off++;
    if (dut.u_dil.state == 2'd2 && dut.u_dil.row_valid && s_valid) n_row_bp++;
    if (m_valid && !m_ready) n_out_stall++;
    if (dut.sched_start) n_batches++;
  end

  // ---------------- stream driver / monitor ----------------
  logic [31:0] in_q[$];
  logic [31:0] exp_q[$];
  logic        exp_last_q[$];
  int gap_pct = 20, stall_pct = 30;

  initial begin
    bit fire;
    s_valid = 1'b0; s_data = '0;
    forever begin
      @(negedge clk);
      fire = s_valid && s_ready;       // handshake at the coming edge
      @(posedge clk); #1;
      if (fire) begin
        void'(in_q.pop_front());
        s_valid = 1'b0;
      end
      if (!s_valid && in_q.size() > 0 && ($urandom % 100) >= gap_pct) begin
        s_valid = 1'b1;
        s_data  = in_q[0];
      end
    end
  end

  // m_ready for the coming edge is set here, then the handshake it makes is
  // checked: the DUT outputs do not change before that edge.
  always @(negedge clk) begin
    m_ready = ($urandom % 100) >= stall_pct;
    #1;
    if (rst_n && m_valid && m_ready) begin
      logic [31:0] e; logic el;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("ERROR: unexpected output word %h", m_data);
      end else begin
        e = exp_q.pop_front(); el = exp_last_q.pop_front();
        if (e !== m_data || el !== m_last) begin
          failures++;
          if (failures < 10) $display("ERROR: output word %h last %0d, expected %h last %0d", m_data, m_last, e, el);
        end
      end
    end
  end

  // ---------------- layer model ----------------
  function automatic int pad_of(int ks, int s);
    return (ks > s) ? (ks - s) / 2 : 0;
  endfunction

  function automatic logic signed [7:0] requant(longint acc, int mult, int sh, int zp);
    longint p, y;
    p = acc * longint'(mult);
    if (sh > 0) p = p + (longint'(1) <<< (sh - 1));
    y = (p >>> sh) + zp;
    if (y > 127) y = 127;
    if (y < -128) y = -128;
    return 8'(y);
  endfunction

  task automatic push_bytes(ref byte b[$]);
    while (b.size() % 4 != 0) b.push_back(8'h00);
    for (int i = 0; i < b.size(); i += 4)
      in_q.push_back({b[i+3], b[i+2], b[i+1], b[i]});
  endtask

  task automatic run_layer(int ih, int iw, int ic, int ks, int s, int oc, int in_zp, int out_zp,
                           int mult, int sh);
    int oh = s * ih, ow = s * iw;
    int pt = pad_of(ks, s), pl = pad_of(ks, s);
    byte inp [];
    byte wgt [];
    int  bias [];
    int  i_end_row [];
    longint t0;
    inp  = new[ih*iw*ic];
    wgt  = new[oc*ks*ks*ic];
    bias = new[oc];
    i_end_row = new[oh];
    foreach (inp[i])  inp[i]  = byte'($urandom_range(0, 60)) - 8'sd30;
    foreach (wgt[i])  wgt[i]  = byte'($urandom_range(0, 60)) - 8'sd30;
    foreach (bias[i]) bias[i] = int'($urandom_range(0, 2000)) - 1000;
    for (int h = 0; h < oh; h++) begin
      i_end_row[h] = (h + pt) / s;
      if (i_end_row[h] > ih - 1) i_end_row[h] = ih - 1;
    end
    t0 = cycles;

    // configuration
    in_q.push_back(32'(OP_CONFIG));
    in_q.push_back({16'(iw), 16'(ih)});
    in_q.push_back({8'(s), 8'(ks), 16'(ic)});
    in_q.push_back({16'(ow), 16'(oh)});
    in_q.push_back({8'(out_zp), 8'(in_zp), 8'(pl), 8'(pt)});
    in_q.push_back(32'(mult));
    in_q.push_back(32'(sh));

    for (int c = 0; c < oc; c += X) begin
      int nf = (oc - c < X) ? oc - c : X;
      int starting = 0;
      byte b[$];
      in_q.push_back(32'(OP_LOAD_WGT));
      in_q.push_back(32'(nf));
      for (int f = 0; f < nf; f++) begin
        in_q.push_back(32'(bias[c+f]));
        b = {};
        for (int k = 0; k < ks*ks*ic; k++) b.push_back(wgt[(c+f)*ks*ks*ic + k]);
        push_bytes(b);
      end
      in_q.push_back(32'(OP_SCHEDULE));
      for (int h = 0; h < oh; h++) begin
        int rows = i_end_row[h] + 1 - starting;
        if (rows > 0) begin
          in_q.push_back(32'(OP_LOAD_IN));
          in_q.push_back(32'(rows));
          b = {};
          for (int r = starting; r < starting + rows; r++)
            for (int k = 0; k < iw*ic; k++) b.push_back(inp[r*iw*ic + k]);
          push_bytes(b);
        end
        in_q.push_back(32'(OP_STORE));
        starting = i_end_row[h] + 1;
        // expected row h of this batch: gather form
        b = {};
        for (int w = 0; w < ow; w++)
          for (int f = 0; f < nf; f++) begin
            longint acc = 0;
            for (int kh = 0; kh < ks; kh++)
              for (int kw = 0; kw < ks; kw++) begin
                int th = h + pt - kh, tw = w + pl - kw;
                if (th >= 0 && tw >= 0 && th % s == 0 && tw % s == 0 && th / s < ih && tw / s < iw)
                  for (int k = 0; k < ic; k++)
                    acc += (longint'(inp[((th/s)*iw + tw/s)*ic + k]) - in_zp) *
                           longint'(wgt[(((c+f)*ks + kh)*ks + kw)*ic + k]);
              end
            b.push_back(requant(acc + bias[c+f], mult, sh, out_zp));
          end
        while (b.size() % 4 != 0) b.push_back(8'h00);
        for (int i = 0; i < b.size(); i += 4) begin
          exp_q.push_back({b[i+3], b[i+2], b[i+1], b[i]});
          exp_last_q.push_back(i + 4 >= b.size());
        end
      end
    end
    // wait until everything is sent and received
    while (in_q.size() > 0 || exp_q.size() > 0) @(posedge clk);
    repeat (20) @(posedge clk);
    $display("layer tconv(Ih=%0d Iw=%0d Ic=%0d Ks=%0d Oc=%0d S=%0d): %0d cycles, failures so far %0d", ih, iw, ic, ks, oc, s,
             cycles - t0, failures);
  endtask

  // ---------------- test sequence ----------------
  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    wait (ready);
    // the worked example of the design: tconv(2,2,2,3,2,1), Ic padded to UF
    run_layer(2, 2, 16, 3, 1, 2, 0, 0, 32'h4000_0000, 38);
    run_layer(3, 3, 32, 3, 1, 10, 3, -2, 32'h4000_0000, 40);
    run_layer(4, 5, 16, 5, 2, 3, -5, 4, 32'h5000_0000, 39);
    run_layer(2, 2, 48, 4, 2, 8, 0, 0, 32'h4000_0000, 40);
    gap_pct = 0; stall_pct = 0;
    run_layer(3, 4, 16, 3, 2, 9, 1, 1, 32'h4000_0000, 38);
    run_layer(2, 3, 16, 7, 1, 1, 0, 0, 32'h4000_0000, 39);

    checks++;
    if (bad_ops != 0) begin failures++; $display("ERROR: %0d unknown opcodes", bad_ops); end
    $display("mechanisms: skipped=%0d overlap=%0d forward=%0d pm_off=%0d row_backpressure=%0d out_stall=%0d batches=%0d",
             n_skip, n_overlap, n_fwd, n_pm_off, n_row_bp, n_out_stall, n_batches);
    checks += 6;
    if (n_skip == 0)      begin failures++; $display("ERROR: no cropped product was skipped"); end
    if (n_overlap == 0)   begin failures++; $display("ERROR: no overlapping sum"); end
    if (n_pm_off == 0)    begin failures++; $display("ERROR: no PM was switched off"); end
    if (n_row_bp == 0)    begin failures++; $display("ERROR: row buffer never held off the stream"); end
    if (n_out_stall == 0) begin failures++; $display("ERROR: output stream never stalled"); end
    if (n_batches < 2)    begin failures++; $display("ERROR: fewer than two filter batches"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
