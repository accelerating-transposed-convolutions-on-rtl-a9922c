// tb_scheduler: checks the controller that sequences one TCONV pass.
//
// Around the scheduler the testbench models the row buffer (row_valid raised
// by a host process, cleared by row_taken), the mapper (map_done a random time
// after map_start), the map FIFOs and PMs (maps_empty and pm_idle rise a random
// time after map_done; maps_empty is sometimes high already while the mapper
// runs) and the output crossbar (xbar_done a random time after xbar_start).
// The host process plays the tiled dataflow: for each output row it offers a
// few input rows and then a store request; the store request is often issued
// while the last input row is still waiting in the row buffer.
//
// Checked: the PMs enabled are exactly the first nfilt; each input row is
// broadcast as addresses 0..Iw*Ic/UF-1, each PM write one cycle after the
// matching row-buffer read; map_start comes Iw*Ic/UF+1 cycles after the first
// read, with the mapper told the input row index and Iw rows; nothing new
// starts before the mapper is done and the map FIFOs and PMs are idle; a store
// starts the crossbar only after every input row sent before it has been
// computed, with the right output row index; store_done follows xbar_done by
// one cycle; the counters restart with a new pass.
module tb_scheduler;
  import mm2im_pkg::*;
  localparam int X = 8, UF = 16, RW = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t cfg;
  logic sched_start, store_req, store_done, row_valid, row_taken, rb_re, pm_row_we;
  logic map_start, map_done, maps_empty, pm_idle, xbar_start, xbar_done, running;
  logic [3:0]  nfilt;
  logic [7:0]  pm_enable;
  logic [5:0]  rb_raddr, pm_row_waddr;
  logic [15:0] map_h, map_rows, xbar_row, in_row;

  scheduler #(.X(X), .UF(UF), .ROW_WORDS(RW)) dut (
    .clk, .rst_n, .cfg, .sched_start, .store_req, .store_done, .nfilt, .pm_enable,
    .row_valid, .row_taken, .rb_re, .rb_raddr, .pm_row_we, .pm_row_waddr,
    .map_start, .map_h, .map_rows, .map_done, .maps_empty, .pm_idle,
    .xbar_start, .xbar_row, .xbar_done, .in_row, .running);

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  task automatic err(string s);
    failures++;
    if (failures < 15) $display("ERROR: %s", s);
  endtask

  // ---------------- models and monitor ----------------
  int rwords = 0;
  int rows_sent = 0, rows_done = 0, stores_done = 0;
  int map_cnt = 0, tail = -1, xb_cnt = -1, words = 0;
  bit computing = 0, xbar_busy = 0, prev_re = 0, prev_rv = 0, prev_xd = 0, taken = 0;
  logic [5:0] prev_addr;
  longint first_re = -1;
  int n_early_empty = 0, n_store_waits = 0;

  always @(negedge clk) begin
    map_done = 1'b0; xbar_done = 1'b0;
    if (rst_n) begin
      // broadcast
      if (pm_row_we) begin
        checks++;
        if (!prev_re || pm_row_waddr != prev_addr || int'(pm_row_waddr) != words)
          err($sformatf("PM row write at %0d, expected %0d after read", pm_row_waddr, words));
        words++;
      end
      if (rb_re) begin
        if (first_re < 0) first_re = cycles;
        checks++;
        if (computing || xbar_busy) err("row broadcast while busy");
      end
      if (row_taken) begin
        taken = 1;
        row_valid = 1'b0;
      end
      // mapper, FIFOs, PMs
      if (map_start) begin
        checks += 4;
        if (computing || xbar_busy) err("map_start while busy");
        if (words != rwords || !taken) err($sformatf("map_start after %0d words", words));
        if (cycles - first_re != longint'(rwords + 1))
          err($sformatf("map_start %0d cycles after the first read, expected %0d", cycles - first_re, rwords + 1));
        if (int'(map_h) != rows_done || int'(map_rows) != int'(cfg.iw))
          err($sformatf("mapper told row %0d (%0d rows), expected %0d", map_h, map_rows, rows_done));
        computing = 1; map_cnt = 2 + $urandom % 8; tail = -1;
        words = 0; first_re = -1; taken = 0;
        maps_empty = ($urandom % 2) == 0;
        if (maps_empty) n_early_empty++;
        pm_idle = maps_empty;
      end else if (computing && map_cnt > 0) begin
        map_cnt--;
        if (map_cnt == 0) begin
          map_done = 1'b1; tail = $urandom % 6;
          maps_empty = 1'b0; pm_idle = 1'b0;
        end
      end else if (computing && tail >= 0) begin
        if (tail == 0) begin
          maps_empty = 1'b1; pm_idle = 1'b1; computing = 0; rows_done++; tail = -1;
        end else tail--;
      end
      // crossbar
      if (xbar_start) begin
        checks += 3;
        if (computing || xbar_busy) err("crossbar started while busy");
        if (rows_done != rows_sent) err($sformatf("store started with %0d of %0d rows computed", rows_done, rows_sent));
        if (int'(xbar_row) != stores_done) err($sformatf("crossbar row %0d, expected %0d", xbar_row, stores_done));
        xbar_busy = 1; xb_cnt = 1 + $urandom % 6;
      end else if (xbar_busy) begin
        xb_cnt--;
        if (xb_cnt == 0) begin xbar_done = 1'b1; xbar_busy = 0; end
      end
      if (store_done) begin
        checks++;
        if (!prev_xd) err("store_done not one cycle after xbar_done");
        stores_done++;
      end
      prev_xd = xbar_done;
    end
    prev_re = rb_re; prev_addr = rb_raddr; prev_rv = row_valid;
  end

  // ---------------- host ----------------
  task automatic pass(int nf, int iw, int ic, int oh);
    cfg.iw = 16'(iw); cfg.ic = 16'(ic);
    rwords = iw * ic / UF;
    rows_sent = 0; rows_done = 0; stores_done = 0;
    @(negedge clk); nfilt = 4'(nf); sched_start = 1'b1;
    @(negedge clk); sched_start = 1'b0;
    checks += 2;
    if (pm_enable != 8'((1 << nf) - 1)) err($sformatf("pm_enable %b for %0d filters", pm_enable, nf));
    if (in_row != 0 || xbar_row != 0) err("counters not cleared");
    for (int h = 0; h < oh; h++) begin
      int n = (h == 0) ? 2 : $urandom % 3;
      for (int r = 0; r < n; r++) begin
        while (row_valid) @(negedge clk);
        repeat ($urandom % 4) @(negedge clk);
        row_valid = 1'b1;
        rows_sent++;
      end
      // the store follows at once, often while the last row still waits
      repeat ($urandom % 2) @(negedge clk);
      if (row_valid || computing) n_store_waits++;
      store_req = 1'b1; @(negedge clk); store_req = 1'b0;
      while (stores_done != h + 1) @(negedge clk);
    end
    repeat (3) @(negedge clk);
    checks++;
    if (int'(in_row) != rows_sent) err($sformatf("in_row %0d after %0d rows", in_row, rows_sent));
  endtask

  initial begin
    cfg = '0; sched_start = 1'b0; store_req = 1'b0; row_valid = 1'b0; nfilt = '0;
    maps_empty = 1'b1; pm_idle = 1'b1; map_done = 1'b0; xbar_done = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    checks++;
    if (running) err("running after reset");
    pass(8, 4, 32, 6);
    pass(3, 5, 16, 8);
    pass(1, 2, 48, 5);
    checks += 2;
    if (n_early_empty == 0) err("maps_empty was never high while the mapper ran");
    if (n_store_waits == 0) err("no store arrived while a row was pending");
    $display("INFO early_empty %0d store_waits %0d", n_early_empty, n_store_waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
