// Self-checking test of rios_scheduler (with its FARO selector) on a
// 3-channel, 2-chips-per-channel layout modelled in the testbench.
// Checks: the visit order is chip 0,1,2 (offset 0 on channels 0,1,2), then
// 3,4,5 (offset 1), one chip per cycle, wrapping around; a visited chip with
// pending requests is committed only when its flash controller is ready, and
// passed over (busy_skip) otherwise; the commit goes to the right channel and
// offset with the FARO group and clears exactly those slots; requests left
// behind in a chip are committed on a later visit.
module tb_rios_scheduler;
  import sprinkler_pkg::*;

  localparam int unsigned NCH = 3, CPC = 2, S = 4, NC = NCH * CPC;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              enable, clr_valid, busy_skip, war_hold;
  logic [CHIP_W-1:0] rd_chip, cm_off;
  mreq_t             rd_ent [S];
  logic [S-1:0]      rd_vld, clr_mask;
  logic [NC-1:0]     chip_ready;
  logic [NCH-1:0]    cm_valid;
  group_t            cm_grp;
  pal_e              cm_pal;
  logic [2:0]        cm_depth, cm_conn;

  rios_scheduler #(.NUM_CHANNELS(NCH), .CHIPS_PER_CHANNEL(CPC), .SLOTS(S)) dut (.*);

  // layout table model
  mreq_t        tab [NC][S];
  logic [S-1:0] tv  [NC];
  always_comb begin
    for (int s = 0; s < S; s++) rd_ent[s] = tab[rd_chip][s];
    rd_vld = tv[rd_chip];
  end
  always @(posedge clk) if (clr_valid) tv[rd_chip] <= tv[rd_chip] & ~clr_mask;

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic mreq_t mk(int tag, bit die, bit plane, int page);
    mreq_t m;
    m = '0; m.tag = TAG_W'(tag); m.lpn = LPN_W'(tag * 100 + page * 4 + die * 2 + plane);
    m.loc.die = die; m.loc.plane = plane; m.loc.page = PAGE_W'(page);
    return m;
  endfunction

  // record commits
  int ncommit = 0, nskip = 0;
  int commit_chip [8];
  group_t commit_grp [8];
  always @(posedge clk) if (rst_n) begin
    if (cm_valid != '0) begin
      check($onehot(cm_valid), "one channel per commit");
      for (int c = 0; c < NCH; c++)
        if (cm_valid[c]) commit_chip[ncommit] = int'(cm_off) * NCH + c;
      check(commit_chip[ncommit] == int'(rd_chip), "commit goes to the visited chip");
      commit_grp[ncommit] = cm_grp;
      ncommit++;
    end
    if (busy_skip) nskip++;
  end

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    enable = 0; chip_ready = '1;
    for (int c = 0; c < NC; c++) begin tv[c] = '0; for (int s = 0; s < S; s++) tab[c][s] = '0; end
    // chip 4: two plane-sharing requests of tag 1 in die 0, one of tag 2 in die 1
    tab[4][0] = mk(1, 0, 0, 7); tab[4][1] = mk(2, 1, 1, 3); tab[4][3] = mk(1, 0, 1, 7);
    tv[4] = 4'b1011;
    // chip 0: busy at first, two requests in the same plane (two transactions)
    tab[0][2] = mk(3, 1, 0, 1); tab[0][3] = mk(4, 1, 0, 2);
    tv[0] = 4'b1100;
    chip_ready[0] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // visit order over two full rounds
    enable = 1;
    for (int k = 0; k < 2 * NC; k++) begin
      #1;
      check(int'(rd_chip) == (k % NC), $sformatf("visit %0d is chip %0d (saw %0d)", k, k % NC, rd_chip));
      if (k == 0) check(busy_skip && cm_valid == '0, "busy chip 0 passed over");
      if (k == 4) begin
        check(cm_valid == 3'b010 && cm_off == 1, "chip 4 committed on channel 1, offset 1");
        check(cm_depth == 3 && cm_pal == PAL_3 && clr_mask == 4'b1011, "chip 4 group: all three requests");
        check(cm_grp.vld == 4'b1011 && cm_grp.m[0].tag == 1 && cm_grp.m[1].tag == 1 && cm_grp.m[3].tag == 2,
              "chip 4 group members by die/plane");
      end
      @(negedge clk);
    end
    check(tv[4] == '0, "chip 4 emptied");
    check(tv[0] == 4'b1100 && ncommit == 1, "chip 0 still pending while busy");
    // chip 0 becomes ready: its two requests go in two separate visits
    chip_ready[0] = 1;
    repeat (2 * NC) @(negedge clk);
    check(ncommit == 3 && commit_chip[1] == 0 && commit_chip[2] == 0, "chip 0 served on two later visits");
    check(commit_grp[1].vld == 4'b0100 && commit_grp[2].vld == 4'b0100, "one request per transaction in one plane");
    check(tv[0] == '0, "chip 0 emptied");
    check(nskip == 2, $sformatf("chip 0 passed over once per round while busy (%0d)", nskip));
    // disabled: no visits advance
    enable = 0;
    begin
      logic [CHIP_W-1:0] c0;
      c0 = rd_chip;
      repeat (3) @(negedge clk);
      check(rd_chip == c0, "no visits while disabled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
