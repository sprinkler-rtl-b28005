// End-to-end test of sprinkler_top on a small SSD: 2 channels x 2 chips,
// an 8-entry tag queue, 4 layout slots per chip and short flash timings, with
// the behavioural core model (ftl_model) translating addresses.
//
// A host process submits a fixed-seed mix of I/Os: a long sequential read and
// write that spread over every die and plane, short random reads and writes
// over a small address range (so reads and writes of one page meet in a chip),
// and one force-unit-access write. A core process fires readdressing
// callbacks for pages that only reads touch. The checks:
//   * every I/O completes exactly once, and only after all its payloads;
//   * read payloads of each I/O come out in index order with the right page;
//   * every write memory request is fetched from the host exactly once;
//   * no write is committed while a read of the same page from an earlier
//     I/O is still waiting in the layout (write-after-read hazard);
//   * fewer flash transactions than memory requests (over-commitment).
// Each mechanism is counted and must happen at least once: commits at each
// parallelism level (none, plane sharing, die interleaving, both), passing a
// busy chip, a write held for a hazard, bus contention, a FUA wait, a
// readdressed and an ignored callback, a full layout row, a full queue, and
// I/Os completing out of arrival order.
module tb_sprinkler_top;
  import sprinkler_pkg::*;

  localparam int unsigned NCH = 2, CPC = 2, NC = NCH * CPC, QD = 8, S = 4;
  localparam int unsigned NIO = 80;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              host_valid, host_ready, pay_valid, pay_ready, done_valid;
  io_req_t           host_req;
  logic [TAG_W-1:0]  host_tag, pay_tag, done_tag;
  logic [IDX_W-1:0]  pay_idx;
  logic [LPN_W-1:0]  pay_lpn, rel_lpn;
  group_t            wr_fetch;
  logic              xlat_valid, xlat_ready, xlat_rsp_valid, rel_valid, rel_ready;
  mreq_t             xlat_req;
  phys_t             xlat_rsp, rel_new;
  logic [NCH-1:0]    ch_bus_busy;
  logic [NC-1:0]     chip_rb_n;
  logic              ev_commit, ev_busy_skip, ev_war_hold, ev_bus_contention, ev_fua_wait;
  logic              ev_rel_moved, ev_rel_ignored, ev_layout_full, ev_queue_full;
  pal_e              ev_pal;
  logic [2:0]        ev_depth, ev_conn;

  sprinkler_top #(.NUM_CHANNELS(NCH), .CHIPS_PER_CHANNEL(CPC), .QUEUE_DEPTH(QD), .SLOTS(S),
                  .T_CMD(2), .T_XFER(6), .T_READ(30), .T_PROG_FAST(40), .T_PROG_SLOW(120)) dut (.*);

  ftl_model #(.NUM_CHIPS(NC), .LAT(2)) u_core (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // workload
  io_req_t ios [NIO];
  int      io_of_tag [256];
  int      next_pay  [NIO];
  int      wr_seen   [NIO][64];
  bit      io_done   [NIO];
  int      ndone = 0, last_done = -1, out_of_order = 0, total_mreq = 0;

  // event counters
  int n_pal [4];
  int n_commit = 0, n_skip = 0, n_war = 0, n_cont = 0, n_fua = 0, n_moved = 0, n_ign = 0;
  int n_lfull = 0, n_qfull = 0, n_pay = 0, n_wfetch = 0;

  // reads accepted from the host but not yet committed, per page
  int rd_wait [int];

  always @(posedge clk) if (rst_n) begin
    if (ev_commit) begin n_commit++; n_pal[int'(ev_pal)]++; end
    if (ev_busy_skip) n_skip++;
    if (ev_war_hold) n_war++;
    if (ev_bus_contention) n_cont++;
    if (ev_fua_wait) n_fua++;
    if (ev_rel_moved && rel_valid && rel_ready) n_moved++;
    if (ev_rel_ignored && rel_valid) n_ign++;
    if (ev_layout_full) n_lfull++;
    if (ev_queue_full) n_qfull++;
  end

  // host side: accept, payloads, completions, write fetches
  int accepted = 0;
  always @(posedge clk) if (rst_n) begin
    if (host_valid && host_ready) begin
      io_of_tag[host_tag] = accepted;
      accepted++;
      if (!host_req.wr)
        for (int i = 0; i < int'(host_req.len); i++) begin
          int l;
          l = int'(host_req.lpn) + i;
          if (rd_wait.exists(l)) rd_wait[l]++; else rd_wait[l] = 1;
        end
    end
    // commits of reads / writes seen through the issue fan-out
    if (ev_commit)
      for (int g = 0; g < GROUP; g++)
        if (dut.iss.vld[g]) begin
          int l;
          l = int'(dut.iss.m[g].lpn);
          if (!dut.iss.m[g].wr) rd_wait[l]--;
          else check(!rd_wait.exists(l) || rd_wait[l] == 0 ||
                     io_of_tag[dut.iss.m[g].tag] < 0,
                     $sformatf("write of page %0d committed past a waiting read", l));
        end
    if (pay_valid && pay_ready) begin
      int k;
      k = io_of_tag[pay_tag];
      n_pay++;
      check(k >= 0 && !ios[k].wr, "payload belongs to a read I/O");
      if (k >= 0) begin
        check(int'(pay_idx) == next_pay[k], $sformatf("io %0d payload %0d in order (exp %0d)", k, pay_idx, next_pay[k]));
        check(pay_lpn == ios[k].lpn + LPN_W'(pay_idx), "payload page");
        next_pay[k]++;
      end
    end
    for (int g = 0; g < GROUP; g++)
      if (wr_fetch.vld[g]) begin
        int k;
        k = io_of_tag[wr_fetch.m[g].tag];
        n_wfetch++;
        check(k >= 0 && ios[k].wr, "write fetch belongs to a write I/O");
        if (k >= 0) begin
          wr_seen[k][wr_fetch.m[g].idx]++;
          check(wr_seen[k][wr_fetch.m[g].idx] == 1, "write request fetched once");
          check(wr_fetch.m[g].lpn == ios[k].lpn + LPN_W'(wr_fetch.m[g].idx), "write fetch page");
        end
      end
    if (done_valid) begin
      int k;
      k = io_of_tag[done_tag];
      check(k >= 0 && !io_done[k], "completion of an outstanding I/O");
      if (k >= 0) begin
        if (!ios[k].wr) check(next_pay[k] == int'(ios[k].len), $sformatf("io %0d done after all payloads", k));
        else for (int i = 0; i < int'(ios[k].len); i++)
          check(wr_seen[k][i] == 1, $sformatf("io %0d done after all writes fetched", k));
        io_done[k] = 1;
        ndone++;
        if (k < last_done) out_of_order++;
        if (k > last_done) last_done = k;
        io_of_tag[done_tag] = -1;
      end
    end
    pay_ready <= ($urandom % 4) != 0;
  end

  // readdressing callbacks on the read-only page range 128..191
  initial begin
    rel_valid = 0; rel_lpn = '0; rel_new = '0;
    wait (rst_n);
    forever begin
      repeat (20 + $urandom % 40) @(negedge clk);
      rel_lpn = LPN_W'(128 + $urandom % 64);
      rel_new = '0;
      if ($urandom % 4 == 0) begin
        // same die and plane as the model's mapping: only the page changes
        rel_new = u_core.map(rel_lpn);
        rel_new.loc.page = rel_new.loc.page + 7'd1;
      end else begin
        rel_new.chip = CHIP_W'($urandom % NC);
        rel_new.loc.die = 1'($urandom); rel_new.loc.plane = 1'($urandom);
        rel_new.loc.page = PAGE_W'($urandom % 128);
      end
      rel_valid = 1;
      do @(posedge clk); while (!rel_ready);
      @(negedge clk); rel_valid = 0;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (%0d of %0d I/Os done)", ndone, NIO);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    void'($urandom(7));
    for (int t = 0; t < 256; t++) io_of_tag[t] = -1;
    for (int k = 0; k < NIO; k++) begin
      ios[k] = '0; next_pay[k] = 0; io_done[k] = 0;
      for (int i = 0; i < 64; i++) wr_seen[k][i] = 0;
      case ($urandom % 10)
        0, 1, 2: begin ios[k].lpn = LPN_W'(128 + $urandom % 64); ios[k].len = LEN_W'(1 + $urandom % 6); end
        3, 4, 5: begin ios[k].lpn = LPN_W'($urandom % 48); ios[k].len = LEN_W'(1 + $urandom % 4); end
        6:       begin ios[k].lpn = LPN_W'($urandom % 48); ios[k].len = 1; end
        default: begin ios[k].lpn = LPN_W'($urandom % 48); ios[k].len = LEN_W'(1 + $urandom % 4); ios[k].wr = 1; end
      endcase
    end
    ios[0].lpn = 128; ios[0].len = 16; ios[0].wr = 0;   // every die and plane of every chip
    ios[1].lpn = 64;  ios[1].len = 16; ios[1].wr = 1;
    ios[2].lpn = 0;   ios[2].len = 1;  ios[2].wr = 0;   // read then write of page 0
    ios[3].lpn = 0;   ios[3].len = 1;  ios[3].wr = 1;
    ios[40].lpn = 96; ios[40].len = 4; ios[40].wr = 1; ios[40].fua = 1;
    for (int k = 0; k < NIO; k++) total_mreq += int'(ios[k].len);
    host_valid = 0; host_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < NIO; k++) begin
      host_valid = 1; host_req = ios[k];
      do @(posedge clk); while (!host_ready);
      @(negedge clk); host_valid = 0;
      if ($urandom % 8 == 0) repeat ($urandom % 200) @(negedge clk);
    end
    while (ndone < NIO) @(negedge clk);
    repeat (5) @(negedge clk);
    check(!done_valid && !pay_valid && host_ready, "idle at the end");
    check(n_pay + n_wfetch == total_mreq, $sformatf("every request moved once (%0d+%0d of %0d)", n_pay, n_wfetch, total_mreq));
    check(n_commit < total_mreq, $sformatf("over-commitment: %0d transactions for %0d requests", n_commit, total_mreq));
    $display("commits=%0d non=%0d pal1=%0d pal2=%0d pal3=%0d skip=%0d war=%0d cont=%0d fua=%0d moved=%0d ignored=%0d lfull=%0d qfull=%0d ooo=%0d",
             n_commit, n_pal[0], n_pal[1], n_pal[2], n_pal[3], n_skip, n_war, n_cont, n_fua, n_moved, n_ign,
             n_lfull, n_qfull, out_of_order);
    check(n_pal[0] > 0, "NON-PAL commit seen");
    check(n_pal[1] > 0, "PAL1 (plane sharing) commit seen");
    check(n_pal[2] > 0, "PAL2 (die interleaving) commit seen");
    check(n_pal[3] > 0, "PAL3 commit seen");
    check(n_skip > 0, "busy chip passed over");
    check(n_war > 0, "write held behind a read");
    check(n_cont > 0, "channel bus contention");
    check(n_fua > 0, "FUA wait");
    check(n_moved > 0, "readdressing moved a request");
    check(n_ign > 0, "readdressing ignored");
    check(n_lfull > 0, "layout row full");
    check(n_qfull > 0, "tag queue full");
    check(out_of_order > 0, "I/Os completed out of order");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
