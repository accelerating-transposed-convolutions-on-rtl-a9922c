// tb_mm2im_workloads: runs layers of the generative models the accelerator
// was evaluated on, through the whole design at its default parameters.
//
// The host-driver part is the same as in tb_mm2im_top: the testbench sends
// the tiled instruction stream (per batch of up to 8 filters: load filters and
// biases, schedule, then per output row the input rows it still needs and a
// store) and compares every output word with a direct gather-form transposed
// convolution computed here, requantised with the same formula.
//
// Layers (Oc, Ks, Ih=Iw, Ic, S):
//   FCN             21, 4,  1,  21, 2   full size, Ic padded to 32
//   FSRCNN           2, 9, 32,  32, 2   full size
//   DCGAN_4          3, 5, 32, 128, 2   full size
//   DCGAN_1        512, 5,  4,1024, 2   full size (64 filter batches)
//   StyleTransfer_1 16, 3, 16, 128, 2   Ih=Iw cut from 64 to 16, Oc from 64 to 16
//   synthetic sweep 16, 7,  7,  32, 1 / 32, 5, 9, 64, 2 / 16, 3, 11, 256, 1
// The stride of these layers is not part of the published layer list; S = 2
// is the usual upsampling stride of these models. Channel padding for FCN is
// done here, as the host driver would: the extra input channels equal the
// input zero point and their weights are zero, so the result is that of the
// 21-channel layer. Per layer the cycle count and the number of useful MACs
// (non-cropped products times the real Ic) are printed, and the cycle count is checked against a lower
// bound: a PE array needs Ic/UF cycles per non-cropped product.
module tb_mm2im_workloads;
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

  task automatic run_layer(string name, int ih, int iw, int ic, int ks, int s, int oc, int in_zp, int out_zp,
                           int mult, int sh, int ic_real);
    int oh = s * ih, ow = s * iw;
    int pt = pad_of(ks, s), pl = pad_of(ks, s);
    byte inp [];
    byte wgt [];
    int  bias [];
    int  i_end_row [];
    longint t0, prods = 0, macs = 0;
    inp  = new[ih*iw*ic];
    wgt  = new[oc*ks*ks*ic];
    bias = new[oc];
    i_end_row = new[oh];
    // channels ic_real .. ic-1 are padding: input equal to the zero point
    // (so x - zp = 0) and zero weights
    foreach (inp[i])  inp[i]  = (i % ic < ic_real) ? byte'($urandom_range(0, 60)) - 8'sd30 : byte'(in_zp);
    foreach (wgt[i])  wgt[i]  = (i % ic < ic_real) ? byte'($urandom_range(0, 60)) - 8'sd30 : 8'sd0;
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
                if (th >= 0 && tw >= 0 && th % s == 0 && tw % s == 0 && th / s < ih && tw / s < iw) begin
                  if (f == 0) prods++;
                  macs += ic_real;
                  for (int k = 0; k < ic; k++)
                    acc += (longint'(inp[((th/s)*iw + tw/s)*ic + k]) - in_zp) *
                           longint'(wgt[(((c+f)*ks + kh)*ks + kw)*ic + k]);
                end
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
    $display("INFO %s: tconv(Ih=%0d Iw=%0d Ic=%0d Ks=%0d Oc=%0d S=%0d) %0d cycles, %0d MACs, failures so far %0d",
             name, ih, iw, ic, ks, oc, s, cycles - t0, macs, failures);
    // each product costs Ic/UF cycles of a PE array, once per batch
    checks++;
    if (cycles - t0 < prods * (ic / UF)) begin
      failures++;
      $display("ERROR: %s finished faster than the PE arrays can compute it", name);
    end
  endtask

  // ---------------- test sequence ----------------
  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    wait (ready);
    run_layer("FCN",             1,  1,   32, 4, 2, 21,  0,  0, 32'h4000_0000, 38, 21);
    run_layer("FSRCNN",         32, 32,   32, 9, 2,  2,  3, -1, 32'h4000_0000, 41, 32);
    run_layer("DCGAN_4",        32, 32,  128, 5, 2,  3, -4,  2, 32'h4000_0000, 42, 128);
    run_layer("DCGAN_1",         4,  4, 1024, 5, 2, 512,  0,  0, 32'h4000_0000, 45, 1024);
    run_layer("StyleTransfer_1",16, 16,  128, 3, 2, 16,  2,  0, 32'h4000_0000, 41, 128);
    // three points of the synthetic sweep (Oc, Ks, Ih, Ic, S permuted)
    run_layer("synthetic_a",     7,  7,   32, 7, 1, 16,  1,  0, 32'h4000_0000, 40, 32);
    run_layer("synthetic_b",     9,  9,   64, 5, 2, 32, -2,  1, 32'h4000_0000, 41, 64);
    run_layer("synthetic_c",    11, 11,  256, 3, 1, 16,  0,  0, 32'h4000_0000, 42, 256);
    checks++;
    if (bad_ops != 0) begin failures++; $display("ERROR: %0d unknown opcodes", bad_ops); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
