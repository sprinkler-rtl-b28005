// Self-checking test of flash_controller with short timings.
//
// Latency model checked cycle by cycle (n members, bus activities of L
// cycles cost L+1 cycles including arbitration, each state change one cycle):
//   read : n*(T_CMD+1) + 1 + T_READ + n*(T_XFER+1) + 1
//   write: n*(T_CMD+T_XFER+1) + 1 + max program time of the members
// Cases: a single read (no parallelism), a four-request read with die
// interleaving and plane sharing (one cell activity, four bus activities
// each way), a two-plane write on a fast and a slow page, and two chips
// sharing the bus (contention seen, second chip later, both complete with
// the groups they were given). Also checks chip_ready, R/B# and the
// completion handshake.
module tb_flash_controller;
  import sprinkler_pkg::*;

  localparam int unsigned N = 4, TC = 3, TX = 10, TR = 50, TPF = 100, TPS = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              cm_valid, cpl_valid, cpl_ready, bus_busy, bus_contention, txn_start;
  logic [CHIP_W-1:0] cm_off, bus_chip;
  group_t            cm_grp, cpl_grp;
  logic [N-1:0]      chip_ready, rb_n;
  pal_e              txn_pal;

  flash_controller #(.CHIPS_PER_CHANNEL(N), .T_CMD(TC), .T_XFER(TX), .T_READ(TR),
                     .T_PROG_FAST(TPF), .T_PROG_SLOW(TPS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic group_t mkg(logic [3:0] v, bit wr, int tag, int page0);
    group_t g;
    g = '0; g.vld = v;
    for (int i = 0; i < 4; i++) begin
      g.m[i].tag = TAG_W'(tag); g.m[i].idx = IDX_W'(i); g.m[i].wr = wr;
      g.m[i].loc.die = i[1]; g.m[i].loc.plane = i[0]; g.m[i].loc.page = PAGE_W'(page0 + i);
    end
    return g;
  endfunction

  int cont_cycles = 0, rb_low = 0;
  always @(posedge clk) begin
    if (bus_contention) cont_cycles++;
    if (rb_n != '1) rb_low++;
  end

  // commit at the next edge, return the number of cycles until the upcall
  task automatic run(int chip, group_t g, output int lat, output pal_e p);
    @(negedge clk);
    check(chip_ready[chip], "chip ready before commit");
    cm_valid = 1; cm_off = CHIP_W'(chip); cm_grp = g;
    #1 p = txn_pal;
    @(posedge clk); #1;
    cm_valid = 0;
    check(!chip_ready[chip], "chip busy after commit");
    lat = 0;
    while (!cpl_valid && lat < 5000) begin @(posedge clk); #1; lat++; end
    check(cpl_grp == g, "upcall carries the committed group");
    @(negedge clk); cpl_ready = 1; @(negedge clk); cpl_ready = 0;
    check(chip_ready[chip], "chip ready after upcall");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat, l0, l1, t;
    pal_e p;
    cm_valid = 0; cm_off = '0; cm_grp = '0; cpl_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // single read
    run(1, mkg(4'b0001, 0, 3, 8), lat, p);
    check(p == PAL_NON, "single read is NON-PAL");
    check(lat == (TC + 1) + 1 + TR + (TX + 1) + 1, $sformatf("single read latency %0d", lat));
    check(rb_low == TR, $sformatf("R/B# low for the read time (%0d)", rb_low));
    // four-way read
    run(2, mkg(4'b1111, 0, 4, 16), lat, p);
    check(p == PAL_3, "four-way group is PAL3");
    check(lat == 4 * (TC + 1) + 1 + TR + 4 * (TX + 1) + 1, $sformatf("four-way read latency %0d", lat));
    check(rb_low == 2 * TR, "one cell activity for four requests");
    // plane-sharing write, pages 10 (fast) and 11 (slow)
    run(3, mkg(4'b0011, 1, 5, 10), lat, p);
    check(p == PAL_1, "two-plane write is PAL1");
    check(lat == 2 * (TC + TX + 1) + 1 + TPS, $sformatf("two-plane write latency %0d", lat));
    // single write on a fast page
    run(0, mkg(4'b0100, 1, 6, 10), lat, p);
    check(lat == (TC + TX + 1) + 1 + TPF, $sformatf("fast-page write latency %0d", lat));
    // two chips share the bus
    @(negedge clk);
    cm_valid = 1; cm_off = 0; cm_grp = mkg(4'b0101, 0, 7, 0);
    #1 check(txn_pal == PAL_2, "two-die group is PAL2");
    @(negedge clk); cm_off = 1; cm_grp = mkg(4'b0011, 0, 8, 0);
    @(negedge clk); cm_valid = 0;
    l0 = -1; l1 = -1; t = 0;
    cpl_ready = 1;
    while ((l0 < 0 || l1 < 0) && t < 2000) begin
      @(posedge clk); #1; t++;
      if (cpl_valid && cpl_grp.m[0].tag == 7) l0 = t;
      if (cpl_valid && cpl_grp.m[0].tag == 8) l1 = t;
    end
    @(posedge clk); @(negedge clk); cpl_ready = 0;
    check(l0 > 0 && l1 > 0, "both chips complete");
    check(cont_cycles > 0, "bus contention observed");
    check(l1 > l0, "second chip finishes later");
    check(l1 <= 2 * (TC + 1) * 2 + TR + 2 * (TX + 1) * 2 + 8, $sformatf("cell work overlaps (%0d)", l1));
    @(negedge clk);
    check(chip_ready == '1 && rb_n == '1 && !bus_busy, $sformatf("all idle at the end %b %b %b", chip_ready, rb_n, bus_busy));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
