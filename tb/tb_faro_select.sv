// Self-checking test of faro_select.
//
// Directed cases: single request, plane sharing, die interleaving, both, a
// connectivity tie-break (two plane-sharing pairs of equal depth, the one
// whose members belong to one I/O wins), and write-after-read holding.
// Random cases: the chosen group is compared with a brute-force reference
// that enumerates every subset of the pending requests, keeps the ones that
// form a legal transaction (one request per die/plane, same operation, same
// page within a die, no write held by a read of the same page) and finds the
// highest overlap depth and, at that depth, the highest connectivity.
module tb_faro_select;
  import sprinkler_pkg::*;

  localparam int unsigned S = 8;

  mreq_t          ent [S];
  logic [S-1:0]   vld;
  logic           any;
  logic [S-1:0]   sel_mask, war_block;
  group_t         grp;
  logic [2:0]     depth, conn;
  pal_e           pal;

  int checks = 0, failures = 0;

  faro_select #(.SLOTS(S)) dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic mreq_t mk(int tag, int lpn, bit wr, bit die, bit plane, int page);
    mreq_t m;
    m = '0;
    m.tag = TAG_W'(tag); m.lpn = LPN_W'(lpn); m.wr = wr;
    m.loc.die = die; m.loc.plane = plane; m.loc.page = PAGE_W'(page);
    m.loc.block = BLOCK_W'(plane);
    return m;
  endfunction

  // Reference: legality of a subset.
  function automatic bit legal(logic [S-1:0] sub, output int d, output int c);
    bit   used [4];
    bit   wr_set, wr_v;
    int   pg [2];
    bit   pg_set [2];
    bit   blocked;
    d = 0; c = 0; wr_set = 0; wr_v = 0;
    for (int k = 0; k < 4; k++) used[k] = 0;
    pg_set[0] = 0; pg_set[1] = 0; pg[0] = 0; pg[1] = 0;
    if (sub == '0) return 0;
    for (int i = 0; i < S; i++) if (sub[i]) begin
      if (!vld[i]) return 0;
      blocked = 0;
      for (int j = 0; j < S; j++)
        if (vld[j] && ent[i].wr && !ent[j].wr && ent[j].lpn == ent[i].lpn) blocked = 1;
      if (blocked) return 0;
      if (used[ent[i].loc.die * 2 + ent[i].loc.plane]) return 0;
      used[ent[i].loc.die * 2 + ent[i].loc.plane] = 1;
      if (wr_set && wr_v != ent[i].wr) return 0;
      wr_set = 1; wr_v = ent[i].wr;
      if (pg_set[ent[i].loc.die] && pg[ent[i].loc.die] != int'(ent[i].loc.page)) return 0;
      pg_set[ent[i].loc.die] = 1; pg[ent[i].loc.die] = int'(ent[i].loc.page);
      d++;
    end
    for (int i = 0; i < S; i++) if (sub[i]) begin
      int n = 0;
      for (int j = 0; j < S; j++) if (sub[j] && ent[j].tag == ent[i].tag) n++;
      if (n > c) c = n;
    end
    return 1;
  endfunction

  task automatic ref_best(output int bd, output int bc);
    int d, c;
    bd = 0; bc = 0;
    for (int sub = 1; sub < (1 << S); sub++)
      if (legal(S'(sub), d, c))
        if (d > bd || (d == bd && c > bc)) begin bd = d; bc = c; end
  endtask

  task automatic clear_all();
    vld = '0;
    for (int i = 0; i < S; i++) ent[i] = '0;
  endtask

  initial begin
    #1ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bd, bc, d, c;
    // 1. single request
    clear_all();
    ent[3] = mk(1, 100, 0, 0, 1, 7); vld[3] = 1;
    #1;
    check(any && depth == 1 && pal == PAL_NON && sel_mask == 8'b0000_1000, "single request");
    check(grp.vld == 4'b0010 && grp.m[1].lpn == 100, "single request placed at die0/plane1");
    // 2. plane sharing
    clear_all();
    ent[0] = mk(1, 10, 0, 1, 0, 5); ent[5] = mk(2, 20, 0, 1, 1, 5);
    vld = 8'b0010_0001;
    #1;
    check(depth == 2 && pal == PAL_1 && sel_mask == 8'b0010_0001, "plane sharing");
    // different page: no plane sharing
    ent[5].loc.page = 6;
    #1;
    check(depth == 1 && pal == PAL_NON, "different pages cannot share planes");
    // 3. die interleaving
    clear_all();
    ent[1] = mk(1, 10, 1, 0, 0, 5); ent[2] = mk(1, 11, 1, 1, 0, 9);
    vld = 8'b0000_0110;
    #1;
    check(depth == 2 && pal == PAL_2 && conn == 2, "die interleaving");
    // read and write do not mix
    ent[2].wr = 0;
    #1;
    check(depth == 1, "read and write are not coalesced");
    // 4. both
    clear_all();
    ent[0] = mk(1, 1, 0, 0, 0, 5); ent[1] = mk(2, 2, 0, 0, 1, 5);
    ent[2] = mk(4, 3, 0, 1, 0, 9); ent[3] = mk(5, 4, 0, 1, 1, 9);
    ent[4] = mk(3, 5, 0, 1, 1, 12);
    vld = 8'b0001_1111;
    #1;
    check(depth == 4 && pal == PAL_3 && sel_mask == 8'b0000_1111, "die interleaving with plane sharing");
    check(grp.vld == 4'b1111 && grp.m[3].lpn == 4 && grp.m[2].lpn == 3, "group order by die/plane");
    // 5. connectivity tie-break
    clear_all();
    ent[0] = mk(1, 1, 0, 0, 0, 5); ent[1] = mk(5, 2, 0, 0, 1, 5);
    ent[2] = mk(3, 3, 0, 0, 0, 8); ent[3] = mk(3, 4, 0, 0, 1, 8);
    vld = 8'b0000_1111;
    #1;
    check(depth == 2 && conn == 2 && sel_mask == 8'b0000_1100, "connectivity breaks depth ties");
    // 6. write after read
    clear_all();
    ent[0] = mk(1, 77, 1, 0, 0, 5); ent[1] = mk(2, 77, 0, 1, 0, 5);
    vld = 8'b0000_0011;
    #1;
    check(war_block == 8'b0000_0001 && sel_mask == 8'b0000_0010, "read served before write of same page");
    // 7. random against the brute-force reference
    for (int t = 0; t < 300; t++) begin
      clear_all();
      for (int i = 0; i < S; i++) begin
        vld[i] = ($urandom % 4) != 0;
        ent[i] = mk($urandom % 3, $urandom % 6, ($urandom % 4) == 0, $urandom % 2, $urandom % 2,
                    $urandom % 3);
      end
      #1;
      ref_best(bd, bc);
      check(int'(depth) == bd && int'(conn) == bc,
            $sformatf("random %0d: depth %0d/%0d conn %0d/%0d", t, depth, bd, conn, bc));
      if (bd > 0) begin
        check(any && legal(sel_mask, d, c) && d == bd && c == bc,
              $sformatf("random %0d: chosen group is legal and matches its scores", t));
      end else begin
        check(!any, "random: nothing eligible");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
