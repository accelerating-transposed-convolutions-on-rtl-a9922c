// tb_instruction_decoder: checks opcode decoding and stream routing.
//
// A word stream (with random gaps) holds: CONFIG with six configuration
// words, LOAD_WGT followed by words that must reach the weight loader port,
// LOAD_IN likewise for the input loader port, SCHEDULE, an unknown opcode and
// STORE. Simple responders stand in for the loaders (they take a fixed number
// of words, with random ready, then pulse done) and for the scheduler (it
// answers a store after a delay). Checks: every configuration field, the word
// counts and data seen by each loader, one pulse per start/schedule/store,
// that no word is taken while a store is pending, and the unknown-opcode
// count.
module tb_instruction_decoder;
  import mm2im_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic s_valid, s_ready; logic [31:0] s_data;
  cfg_t cfg;
  logic wdl_start, wdl_valid, wdl_ready, wdl_done, dil_start, dil_valid, dil_ready, dil_done;
  logic [31:0] ld_data;
  logic sched_start, store_req, store_done;
  logic [7:0] bad_ops;
  int checks = 0, failures = 0;

  instruction_decoder dut (.clk, .rst_n, .s_valid, .s_ready, .s_data, .cfg,
    .wdl_start, .wdl_valid, .wdl_ready, .wdl_done, .dil_start, .dil_valid, .dil_ready, .dil_done,
    .ld_data, .sched_start, .store_req, .store_done, .bad_ops);

  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("ERROR %s", what); end
  endtask

  logic [31:0] q[$];
  initial begin
    bit fire;
    s_valid = 0; s_data = 0;
    forever begin
      @(negedge clk);
      fire = s_valid && s_ready;       // handshake at the coming edge
      @(posedge clk); #1;
      if (fire) begin void'(q.pop_front()); s_valid = 0; end
      if (!s_valid && q.size() > 0 && $urandom % 4 != 0) begin s_valid = 1; s_data = q[0]; end
    end
  end

  // loader responders
  int wdl_n = 0, dil_n = 0, wdl_starts = 0, dil_starts = 0, scheds = 0, stores = 0;
  int wdl_left = 0, dil_left = 0;
  logic [31:0] wdl_sum = 0, dil_sum = 0;
  int store_wait = 0, taken_in_store = 0;
  bit wdl_fin = 0, dil_fin = 0;
  always @(negedge clk) begin
    // pulses and readies for the coming edge
    wdl_done = wdl_fin; dil_done = dil_fin; wdl_fin = 0; dil_fin = 0; store_done = 0;
    if (wdl_start) begin wdl_starts++; wdl_left = 5; end
    if (dil_start) begin dil_starts++; dil_left = 7; end
    if (sched_start) scheds++;
    if (store_req) begin stores++; store_wait = 20; end
    if (store_wait > 0) begin
      store_wait--;
      if (store_wait == 0) store_done = 1;
    end
    wdl_ready = (wdl_left > 0) && ($urandom % 3 != 0);
    dil_ready = (dil_left > 0) && ($urandom % 3 != 0);
    #1;
    if (store_wait > 0 && s_valid && s_ready) taken_in_store++;
    if (wdl_valid && wdl_ready) begin
      wdl_n++; wdl_sum += ld_data; wdl_left--; if (wdl_left == 0) wdl_fin = 1;
    end
    if (dil_valid && dil_ready) begin
      dil_n++; dil_sum += ld_data; dil_left--; if (dil_left == 0) dil_fin = 1;
    end
  end

  initial begin
    logic [31:0] ws, ds;
    repeat (3) @(posedge clk); rst_n = 1;
    q.push_back(32'h01);
    q.push_back({16'd9, 16'd7});           // Iw, Ih
    q.push_back({8'd2, 8'd5, 16'd128});    // S, Ks, Ic
    q.push_back({16'd18, 16'd14});         // Ow, Oh
    q.push_back({8'hfd, 8'h05, 8'd3, 8'd2}); // out_zp, in_zp, pad_left, pad_top
    q.push_back(32'h4321_8765);
    q.push_back(32'd37);
    q.push_back(32'h02);
    ws = 0; for (int i = 0; i < 5; i++) begin q.push_back(32'(1000 + i)); ws += 32'(1000 + i); end
    q.push_back(32'h04);
    ds = 0; for (int i = 0; i < 7; i++) begin q.push_back(32'(77 * i)); ds += 32'(77 * i); end
    q.push_back(32'h08);
    q.push_back(32'h33);                    // not an opcode
    q.push_back(32'h10);
    q.push_back(32'h08);
    while (q.size() > 0 || s_valid) @(posedge clk);
    repeat (30) @(posedge clk);
    chk(cfg.ih == 7 && cfg.iw == 9, "ih/iw");
    chk(cfg.ic == 128 && cfg.ks == 5 && cfg.stride == 2, "ic/ks/stride");
    chk(cfg.oh == 14 && cfg.ow == 18, "oh/ow");
    chk(cfg.pad_top == 2 && cfg.pad_left == 3 && cfg.in_zp == 5 && cfg.out_zp == -3, "pads/zero points");
    chk(cfg.ppu_mult == 32'h4321_8765 && cfg.ppu_shift == 37, "requant");
    $display("INFO wdl %0d %0d %0d dil %0d %0d %0d bad %0d", wdl_starts, wdl_n, wdl_sum, dil_starts, dil_n, dil_sum, bad_ops);
    chk(wdl_starts == 1 && wdl_n == 5 && wdl_sum == ws, "weight loader words");
    chk(dil_starts == 1 && dil_n == 7 && dil_sum == ds, "input loader words");
    chk(scheds == 2, "schedule pulses");
    chk(stores == 1, "store pulses");
    chk(taken_in_store == 0, "stream held during store");
    chk(bad_ops == 1, "unknown opcode count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
