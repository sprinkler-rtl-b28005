// Self-checking test of tag_queue: allocation order and exhaustion, the
// issued bitmap set by commitment and cleared by completion upcalls, the done
// bitmap, round-robin service of simultaneous upcalls from several channels,
// and retirement. Expected values are kept in a scoreboard in the testbench.
module tb_tag_queue;
  import sprinkler_pkg::*;

  localparam int unsigned QD = 4, NCH = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             alloc_valid, alloc_ready;
  io_req_t          alloc_req;
  logic [TAG_W-1:0] alloc_tag;
  group_t           iss;
  logic [NCH-1:0]   cpl_valid, cpl_ready;
  group_t           cpl_grp [NCH];
  logic             free_valid;
  logic [TAG_W-1:0] free_tag;
  logic [QD-1:0]    ent_valid;
  io_req_t          ent_req [QD];
  logic [MAX_MREQ-1:0] ent_issued [QD], ent_done [QD];
  logic             empty, full;

  tag_queue #(.QUEUE_DEPTH(QD), .NUM_CHANNELS(NCH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic group_t one(int tag, int idx);
    group_t g;
    g = '0; g.vld[0] = 1; g.m[0].tag = TAG_W'(tag); g.m[0].idx = IDX_W'(idx);
    return g;
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alloc_valid = 0; alloc_req = '0; iss = '0; cpl_valid = '0; free_valid = 0; free_tag = '0;
    for (int c = 0; c < NCH; c++) cpl_grp[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(empty && !full && alloc_ready && alloc_tag == 0, "empty after reset");
    // allocate all four entries
    for (int i = 0; i < QD; i++) begin
      alloc_valid = 1; alloc_req = '0; alloc_req.lpn = LPN_W'(100 * i); alloc_req.len = 7'(4 + i);
      check(alloc_tag == TAG_W'(i), $sformatf("allocation %0d gets lowest free tag", i));
      @(negedge clk);
    end
    alloc_valid = 0;
    check(full && !alloc_ready, "full after four allocations");
    check(ent_req[2].lpn == 200 && ent_req[2].len == 6, "entry holds its request");
    // commit a group: tag 1 idx 0..3 spread over the four positions
    iss = '0;
    for (int g = 0; g < GROUP; g++) begin
      iss.vld[g] = 1; iss.m[g].tag = 1; iss.m[g].idx = IDX_W'(g);
    end
    @(negedge clk); iss = '0;
    check(ent_issued[1][3:0] == 4'hF && ent_issued[0] == '0, "commit sets issued bits");
    // commit two more single ones
    iss = one(2, 5); @(negedge clk);
    iss = one(3, 1); @(negedge clk); iss = '0;
    // three channels complete at once: served one per cycle, round-robin
    cpl_grp[0] = one(2, 5);
    cpl_grp[1] = '0; cpl_grp[1].vld = 4'b0011;
    cpl_grp[1].m[0].tag = 1; cpl_grp[1].m[0].idx = 0; cpl_grp[1].m[1].tag = 1; cpl_grp[1].m[1].idx = 1;
    cpl_grp[2] = one(3, 1);
    cpl_valid = 3'b111;
    #1 check(cpl_ready == 3'b001, "first upcall served: channel 0");
    @(negedge clk); cpl_valid[0] = 0;
    #1 check(cpl_ready == 3'b010, "second upcall served: channel 1");
    @(negedge clk); cpl_valid[1] = 0;
    #1 check(cpl_ready == 3'b100, "third upcall served: channel 2");
    @(negedge clk); cpl_valid = '0;
    check(ent_issued[1][3:0] == 4'b1100 && ent_done[1][3:0] == 4'b0011, "completion clears issued, sets done");
    check(ent_issued[2][5] == 0 && ent_done[2][5] == 1 && ent_done[3][1] == 1, "single completions");
    // round-robin continues from channel 0 after channel 2
    cpl_grp[0] = one(1, 2); cpl_grp[2] = one(1, 3); cpl_valid = 3'b101;
    #1 check(cpl_ready == 3'b001, "round robin wraps to channel 0");
    @(negedge clk); cpl_valid[0] = 0;
    #1 check(cpl_ready == 3'b100, "then channel 2");
    @(negedge clk); cpl_valid = '0;
    check(ent_done[1][3:0] == 4'hF && ent_issued[1] == '0, "all of tag 1 done");
    // retire tag 1 and reallocate it with cleared bitmaps
    free_valid = 1; free_tag = 1; @(negedge clk); free_valid = 0;
    check(!full && alloc_ready && alloc_tag == 1, "retired entry is free again");
    alloc_valid = 1; alloc_req.len = 7'd1; @(negedge clk); alloc_valid = 0;
    check(ent_done[1] == '0 && ent_issued[1] == '0 && ent_valid[1], "reallocated entry starts clean");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
