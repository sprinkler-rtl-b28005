// Full-size run of sprinkler_top with every parameter at its default:
// 8 channels x 8 chips, 32-entry tag queue, 16 layout slots per chip and the
// flash timings of a 100 MHz controller (read 20 us, program 200 us on even
// pages and 2.2 ms on odd pages, 2 KB transfers at 200 MB/s).
// Three I/Os go through the whole path with the behavioural core model:
//   1. a 64-page read striped over all 64 chips (one page each),
//   2. a 64-page write on the next stripe (even page: fast program),
//   3. a 1-page write to an odd page of chip 1 (slow program), which queues
//      behind chip 1's page of the fast write.
// Checks: payloads of the read come out in order with the right pages, every
// write request is fetched once, all three complete, and the completion
// times fit the timing: the read needs the cell read plus eight transfers on
// each channel bus; the slow write takes at least the slow program time.
module tb_sprinkler_full;
  import sprinkler_pkg::*;

  localparam int unsigned NC = 64;
  localparam int unsigned T_CMD = 8, T_XFER = 1024, T_READ = 2000, T_PF = 20000, T_PS = 220000;

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
  logic [7:0]        ch_bus_busy;
  logic [NC-1:0]     chip_rb_n;
  logic              ev_commit, ev_busy_skip, ev_war_hold, ev_bus_contention, ev_fua_wait;
  logic              ev_rel_moved, ev_rel_ignored, ev_layout_full, ev_queue_full;
  pal_e              ev_pal;
  logic [2:0]        ev_depth, ev_conn;

  sprinkler_top dut (.*);

  ftl_model #(.NUM_CHIPS(NC), .LAT(2)) u_core (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  io_req_t ios [3];
  int      tag_io [256];
  int      done_at [3];
  int      acc_at [3];
  int      next_pay = 0, nw = 0, ndone = 0, accepted = 0, cyc = 0;

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (host_valid && host_ready) begin tag_io[host_tag] = accepted; acc_at[accepted] = cyc; accepted++; end
      if (pay_valid && pay_ready) begin
        check(tag_io[pay_tag] == 0 && int'(pay_idx) == next_pay && pay_lpn == LPN_W'(pay_idx),
              $sformatf("read payload %0d in order", next_pay));
        next_pay++;
      end
      for (int g = 0; g < GROUP; g++)
        if (wr_fetch.vld[g]) begin
          nw++;
          check(tag_io[wr_fetch.m[g].tag] > 0, "write fetch belongs to a write I/O");
        end
      if (done_valid) begin
        done_at[tag_io[done_tag]] = cyc;
        ndone++;
      end
    end
  end

  assign pay_ready = 1'b1;
  assign rel_valid = 1'b0;
  assign rel_lpn   = '0;
  assign rel_new   = '0;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (%0d of 3 I/Os done)", ndone);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rd_lat, wr_lat;
    for (int t = 0; t < 256; t++) tag_io[t] = -1;
    for (int k = 0; k < 3; k++) begin ios[k] = '0; done_at[k] = -1; end
    ios[0].lpn = 0;            ios[0].len = 64;
    ios[1].lpn = 8 * NC;       ios[1].len = 64; ios[1].wr = 1;   // page 2 of every chip: fast program
    ios[2].lpn = 4 * NC + 1;   ios[2].len = 1;  ios[2].wr = 1;   // chip 1, page 1: slow program
    host_valid = 0; host_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < 3; k++) begin
      host_valid = 1; host_req = ios[k];
      do @(posedge clk); while (!host_ready);
      @(negedge clk); host_valid = 0;
    end
    while (ndone < 3) @(negedge clk);
    check(next_pay == 64, $sformatf("all 64 read payloads (%0d)", next_pay));
    check(nw == 65, $sformatf("all 65 write requests fetched (%0d)", nw));
    check(done_at[0] > 0 && done_at[1] > 0 && done_at[2] > 0, "all I/Os complete");
    rd_lat = done_at[0] - acc_at[0];
    wr_lat = done_at[2] - acc_at[2];
    $display("read I/O latency %0d cycles, fast write I/O %0d, slow write I/O %0d",
             rd_lat, done_at[1] - acc_at[1], wr_lat);
    // the 64-page read: 8 chips per channel share the bus for the data out
    check(rd_lat >= T_READ + 8 * T_XFER, "read latency covers cell read and eight bus transfers");
    check(rd_lat <= 64 * 4 + T_READ + 8 * (T_CMD + 1) + 8 * (T_XFER + 1) + 64 + 100,
          $sformatf("read latency bounded (%0d)", rd_lat));
    check(done_at[1] - acc_at[1] >= T_PF && done_at[1] - acc_at[1] < T_PS, "fast-page write time");
    // chip 1 first finishes its page of the fast write (no later than that
    // whole I/O), then takes the slow write's data and programs it
    check(wr_lat >= T_PS && wr_lat <= (done_at[1] - acc_at[2]) + T_CMD + T_XFER + T_PS + 100,
          $sformatf("slow-page write waits for chip 1, then programs (%0d)", wr_lat));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
