// Self-checking test of layout_builder. A small core model in the testbench
// answers translation requests after a random delay with a fixed mapping; the
// layout table accepts inserts at random. The test checks that every memory
// request of every I/O is filed once, in index order, under the chip and
// location the core gave, with the tag the queue granted; that at most one
// translation is outstanding; and that a force-unit-access I/O waits for an
// empty queue and holds later I/Os until the queue drains again.
module tb_layout_builder;
  import sprinkler_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              host_valid, host_ready, q_alloc_valid, q_alloc_ready, q_empty;
  io_req_t           host_req, q_alloc_req;
  logic [TAG_W-1:0]  q_alloc_tag;
  logic              xlat_valid, xlat_ready, xlat_rsp_valid;
  mreq_t             xlat_req;
  phys_t             xlat_rsp;
  logic              ins_valid, ins_ready;
  logic [CHIP_W-1:0] ins_chip;
  mreq_t             ins_ent;
  logic              busy, fua_wait;

  layout_builder dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic phys_t map(logic [LPN_W-1:0] lpn);
    phys_t p;
    p = '0;
    p.chip = CHIP_W'(lpn % 13);
    p.loc.die = lpn[4]; p.loc.plane = lpn[5]; p.loc.page = PAGE_W'(lpn >> 6);
    return p;
  endfunction

  // queue model: grants tags 0,1,2,...
  int granted = 0;
  assign q_alloc_ready = 1'b1;
  assign q_alloc_tag   = TAG_W'(granted);
  always @(posedge clk) if (q_alloc_valid && q_alloc_ready) granted <= granted + 1;

  // core model
  int pending = 0, delay = 0;
  logic [LPN_W-1:0] plpn;
  always @(posedge clk) begin
    xlat_rsp_valid <= 1'b0;
    if (pending > 0) begin
      if (delay == 0) begin xlat_rsp_valid <= 1'b1; xlat_rsp <= map(plpn); pending <= 0; end
      else delay <= delay - 1;
    end
    if (xlat_valid && xlat_ready) begin
      check(pending == 0, "one translation outstanding");
      pending <= 1; delay <= $urandom % 4; plpn <= xlat_req.lpn;
    end
    xlat_ready <= ($urandom % 2) == 0;
    ins_ready  <= ($urandom % 3) != 0;
  end

  // expected inserts
  io_req_t ios [6];
  int      io_tag [6];
  int      cur_io = 0, cur_idx = 0, ninserts = 0;
  always @(posedge clk) if (rst_n && ins_valid && ins_ready) begin
    ninserts++;
    check(ins_ent.tag == TAG_W'(io_tag[cur_io]) && int'(ins_ent.idx) == cur_idx,
          $sformatf("insert order io %0d idx %0d", cur_io, cur_idx));
    check(ins_ent.lpn == ios[cur_io].lpn + cur_idx && ins_ent.wr == ios[cur_io].wr, "insert request fields");
    check(ins_chip == map(ins_ent.lpn).chip && ins_ent.loc == map(ins_ent.lpn).loc, "insert location from core");
    if (cur_idx + 1 == int'(ios[cur_io].len)) begin cur_io++; cur_idx = 0; end
    else cur_idx++;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(int k);
    host_valid = 1; host_req = ios[k];
    do @(posedge clk); while (!host_ready);
    io_tag[k] = granted;
    @(negedge clk); host_valid = 0;
  endtask

  initial begin
    int t0;
    host_valid = 0; host_req = '0; q_empty = 0; xlat_rsp = '0;
    for (int k = 0; k < 6; k++) begin
      ios[k] = '0; ios[k].lpn = LPN_W'(1000 * k + 37); ios[k].len = 7'(1 + (k * 5) % 9); ios[k].wr = k[0];
    end
    ios[3].fua = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    send(0); send(1); send(2);
    wait (!busy); @(negedge clk);
    // FUA with a non-empty queue waits
    host_valid = 1; host_req = ios[3];
    repeat (20) begin #1 check(!host_ready && fua_wait, "FUA waits for empty queue"); @(negedge clk); end
    q_empty = 1;
    #1 check(host_ready, "FUA accepted once the queue is empty");
    @(posedge clk); io_tag[3] = granted; @(negedge clk); host_valid = 0; q_empty = 0;
    wait (!busy); @(negedge clk);
    // the next I/O waits until the FUA I/O is gone
    host_valid = 1; host_req = ios[4];
    repeat (10) begin #1 check(!host_ready, "I/O after FUA waits"); @(negedge clk); end
    q_empty = 1;
    #1 check(host_ready, "I/O after FUA accepted after drain");
    @(posedge clk); io_tag[4] = granted; @(negedge clk); host_valid = 0; q_empty = 0;
    send(5);
    t0 = 0;
    while (cur_io < 6 && t0 < 1000) begin @(negedge clk); t0++; end
    check(cur_io == 6, "all I/Os filed");
    check(ninserts == 1 + 6 + 2 + 7 + 3 + 8, $sformatf("insert count %0d", ninserts));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
