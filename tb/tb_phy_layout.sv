// Self-checking test of phy_layout: inserts fill a chip row slot by slot
// until it reports full, the visit port shows the row, clearing removes
// exactly the committed slots, and the readdressing callback
//   * ignores a migration inside the same die/plane,
//   * updates a request in place when it moves to another die/plane of the
//     same chip,
//   * moves requests to another chip (all matching reads, one per cycle),
//   * waits while the destination row is full,
//   * leaves pending writes alone.
module tb_phy_layout;
  import sprinkler_pkg::*;

  localparam int unsigned NC = 4, S = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              ins_valid, ins_ready, clr_valid, rel_valid, rel_ready, rel_moved, rel_ignored;
  logic [CHIP_W-1:0] ins_chip, rd_chip;
  mreq_t             ins_ent;
  mreq_t             rd_ent [S];
  logic [S-1:0]      rd_vld, clr_mask;
  logic [LPN_W-1:0]  rel_lpn;
  phys_t             rel_new;
  logic [NC-1:0]     row_full;
  logic              all_empty;

  phy_layout #(.NUM_CHIPS(NC), .SLOTS(S)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic mreq_t mk(int lpn, bit wr, bit die, bit plane, int page);
    mreq_t m;
    m = '0; m.lpn = LPN_W'(lpn); m.wr = wr; m.tag = TAG_W'(lpn % 7); m.idx = IDX_W'(lpn % 5);
    m.loc.die = die; m.loc.plane = plane; m.loc.page = PAGE_W'(page);
    return m;
  endfunction

  task automatic insert(int chip, mreq_t m);
    ins_valid = 1; ins_chip = CHIP_W'(chip); ins_ent = m;
    #1 check(ins_ready, $sformatf("insert into chip %0d accepted", chip));
    @(negedge clk); ins_valid = 0;
  endtask

  function automatic phys_t ph(int chip, bit die, bit plane, int page);
    phys_t p;
    p = '0; p.chip = CHIP_W'(chip); p.loc.die = die; p.loc.plane = plane; p.loc.page = PAGE_W'(page);
    return p;
  endfunction

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    ins_valid = 0; ins_chip = '0; ins_ent = '0; rd_chip = '0; clr_valid = 0; clr_mask = '0;
    rel_valid = 0; rel_lpn = '0; rel_new = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(all_empty && row_full == '0, "empty after reset");
    // fill chip 2
    for (int i = 0; i < S; i++) insert(2, mk(10 + i, 0, i[0], i[1], 3));
    check(row_full == 4'b0100 && !all_empty, "chip 2 full");
    ins_valid = 1; ins_chip = 2; ins_ent = mk(99, 0, 0, 0, 0);
    #1 check(!ins_ready, "insert into full row refused");
    ins_valid = 0;
    rd_chip = 2;
    #1 check(rd_vld == 4'hF && rd_ent[2].lpn == 12 && rd_ent[3].loc.plane == 1, "visit port shows row");
    // commit slots 0 and 3
    @(negedge clk); clr_valid = 1; clr_mask = 4'b1001;
    @(negedge clk); clr_valid = 0; clr_mask = '0;
    #1 check(rd_vld == 4'b0110, "clear removes committed slots");
    // callback: same die/plane, other page -> ignored
    rel_valid = 1; rel_lpn = 11; rel_new = ph(2, 1, 0, 9);
    #1 check(rel_ready && rel_ignored && !rel_moved, "same-resource migration ignored");
    @(negedge clk); rel_valid = 0;
    #1 check(rd_vld == 4'b0110 && rd_ent[1].loc.die == 1 && rd_ent[1].loc.plane == 0, "layout unchanged");
    // callback: other plane of the same chip -> in place
    rel_valid = 1; rel_lpn = 12; rel_new = ph(2, 0, 0, 44);
    #1 check(rel_ready && rel_moved && !rel_ignored, "in-chip migration handled");
    @(negedge clk); rel_valid = 0;
    #1 check(rd_vld == 4'b0110 && rd_ent[2].loc.plane == 0 && rd_ent[2].loc.die == 0 && rd_ent[2].loc.page == 44,
             "request updated in place");
    // two pending reads of lpn 50 in chips 0 and 1, one pending write of 50 in chip 3
    insert(0, mk(50, 0, 0, 0, 1));
    insert(1, mk(50, 0, 1, 1, 1));
    insert(3, mk(50, 1, 1, 1, 1));
    rel_valid = 1; rel_lpn = 50; rel_new = ph(2, 1, 1, 70);
    n = 0;
    while (!rel_ready) begin
      #1 if (!rel_ready) begin n++; @(negedge clk); end
      if (n > 5) break;
    end
    check(n == 1, $sformatf("two cross-chip moves take two cycles (%0d waits)", n));
    @(negedge clk); rel_valid = 0;
    rd_chip = 2;
    #1 check(rd_vld == 4'b1111, "both reads moved into chip 2");
    check(rd_ent[0].lpn == 50 && rd_ent[3].lpn == 50 && rd_ent[0].loc.page == 70 && rd_ent[3].loc.die == 1,
          "moved requests carry the new location");
    rd_chip = 0; #1 check(rd_vld == 4'b0000, "chip 0 left empty");
    rd_chip = 3; #1 check(rd_vld == 4'b0001 && rd_ent[0].wr && rd_ent[0].loc.page == 1, "pending write not readdressed");
    // destination full: callback waits
    insert(1, mk(60, 0, 0, 0, 2));
    rel_valid = 1; rel_lpn = 60; rel_new = ph(2, 0, 0, 5);
    repeat (3) begin #1 check(!rel_ready && !rel_moved, "waits for a free slot"); @(negedge clk); end
    rd_chip = 2; clr_valid = 1; clr_mask = 4'b0010;
    @(negedge clk); clr_valid = 0; clr_mask = '0;
    #1 check(rel_ready && rel_moved, "moves once a slot is free");
    @(negedge clk); rel_valid = 0;
    #1 check(rd_vld == 4'b1111 && rd_ent[1].lpn == 60, "request moved into freed slot");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
