// FARO selector: flash-level-parallelism-aware choice of the memory requests
// that are over-committed together to one chip.
//
// Input is the pending-request table of one chip (SLOTS entries with valid
// bits). Output is the group that becomes one flash transaction, as a slot
// mask and as a group_t ordered by die/plane, with its overlap depth,
// connectivity and parallelism level. Purely combinational.
//
// Following the paper: the overlap depth of a candidate is the number of its
// memory requests that target different dies and planes of the chip and can
// be served together; plane sharing needs the same die and page offset in
// different planes, die interleaving has no address condition. The candidate
// with the highest overlap depth wins; among equal depths the one with the
// highest connectivity (largest number of members belonging to one I/O
// request) wins. A write is held back while a read of the same logical page
// is pending in the chip, so that the read is served first (write-after-read).
//
// This design's own choices: a candidate is built from one "seed" request per
// die; the seed's plane partner is the lowest-slot eligible request in the
// same die, same page, other plane. All members of one transaction have the
// same operation (all reads or all writes). All seed pairs are evaluated
// exhaustively ((SLOTS+1)^2 candidates); remaining ties go to the lowest slot
// numbers.
module faro_select
  import sprinkler_pkg::*;
#(
  parameter int unsigned SLOTS = 16
) (
  input  mreq_t             ent [SLOTS],
  input  logic [SLOTS-1:0]  vld,
  output logic              any,        // a group was found
  output logic [SLOTS-1:0]  sel_mask,   // slots of the chosen group
  output group_t            grp,        // chosen group by die/plane
  output logic [2:0]        depth,      // overlap depth, 0..4
  output logic [2:0]        conn,       // connectivity, 0..4
  output pal_e              pal,
  output logic [SLOTS-1:0]  war_block   // writes held back by a pending read
);

  logic [SLOTS-1:0] elig;
  logic [SLOTS-1:0] has_p;
  int               partner [SLOTS];

  // Eligibility and plane partners.
  always_comb begin
    for (int i = 0; i < SLOTS; i++) begin
      war_block[i] = 1'b0;
      for (int j = 0; j < SLOTS; j++)
        if (vld[i] && vld[j] && ent[i].wr && !ent[j].wr && ent[j].lpn == ent[i].lpn)
          war_block[i] = 1'b1;
      elig[i] = vld[i] && !war_block[i];
    end
    for (int i = 0; i < SLOTS; i++) begin
      has_p[i]   = 1'b0;
      partner[i] = 0;
      for (int j = SLOTS - 1; j >= 0; j--)
        if (elig[i] && elig[j] && j != i &&
            ent[j].loc.die == ent[i].loc.die &&
            ent[j].loc.page == ent[i].loc.page &&
            ent[j].loc.plane != ent[i].loc.plane &&
            ent[j].wr == ent[i].wr) begin
          has_p[i]   = 1'b1;
          partner[i] = j;
        end
    end
  end

  // Exhaustive search over one seed per die (index SLOTS means "none").
  always_comb begin
    logic [2:0]       bd, bc, d, c, cnt;
    int               ba, bb;
    logic             found;
    logic [GROUP-1:0] mv;
    logic [TAG_W-1:0] mt [GROUP];
    logic             ok;
    bd = '0; bc = '0; ba = SLOTS; bb = SLOTS; found = 1'b0;
    for (int a = 0; a <= SLOTS; a++) begin
      for (int b = 0; b <= SLOTS; b++) begin
        ok = 1'b1;
        if (a < SLOTS) ok = ok && elig[a] && ent[a].loc.die == 1'b0;
        if (b < SLOTS) ok = ok && elig[b] && ent[b].loc.die == 1'b1;
        if (a < SLOTS && b < SLOTS) ok = ok && (ent[a].wr == ent[b].wr);
        if (a == SLOTS && b == SLOTS) ok = 1'b0;
        mv = '0;
        for (int g = 0; g < GROUP; g++) mt[g] = '0;
        if (ok && a < SLOTS) begin
          mv[0] = 1'b1; mt[0] = ent[a].tag;
          if (has_p[a]) begin mv[1] = 1'b1; mt[1] = ent[partner[a]].tag; end
        end
        if (ok && b < SLOTS) begin
          mv[2] = 1'b1; mt[2] = ent[b].tag;
          if (has_p[b]) begin mv[3] = 1'b1; mt[3] = ent[partner[b]].tag; end
        end
        d = 3'(mv[0]) + 3'(mv[1]) + 3'(mv[2]) + 3'(mv[3]);
        c = '0;
        for (int k = 0; k < GROUP; k++) begin
          cnt = '0;
          for (int l = 0; l < GROUP; l++)
            if (mv[k] && mv[l] && mt[k] == mt[l]) cnt = cnt + 3'd1;
          if (cnt > c) c = cnt;
        end
        if (ok && (!found || d > bd || (d == bd && c > bc))) begin
          found = 1'b1; bd = d; bc = c; ba = a; bb = b;
        end
      end
    end

    any      = found;
    depth    = bd;
    conn     = bc;
    sel_mask = '0;
    grp      = '0;
    if (found && ba < SLOTS) begin
      sel_mask[ba] = 1'b1;
      grp.vld[grp_pos(1'b0, ent[ba].loc.plane)] = 1'b1;
      grp.m[grp_pos(1'b0, ent[ba].loc.plane)]   = ent[ba];
      if (has_p[ba]) begin
        sel_mask[partner[ba]] = 1'b1;
        grp.vld[grp_pos(1'b0, ent[partner[ba]].loc.plane)] = 1'b1;
        grp.m[grp_pos(1'b0, ent[partner[ba]].loc.plane)]   = ent[partner[ba]];
      end
    end
    if (found && bb < SLOTS) begin
      sel_mask[bb] = 1'b1;
      grp.vld[grp_pos(1'b1, ent[bb].loc.plane)] = 1'b1;
      grp.m[grp_pos(1'b1, ent[bb].loc.plane)]   = ent[bb];
      if (has_p[bb]) begin
        sel_mask[partner[bb]] = 1'b1;
        grp.vld[grp_pos(1'b1, ent[partner[bb]].loc.plane)] = 1'b1;
        grp.m[grp_pos(1'b1, ent[partner[bb]].loc.plane)]   = ent[partner[bb]];
      end
    end
    pal = pal_e'({ found && ba < SLOTS && bb < SLOTS,
                   found && ((ba < SLOTS && has_p[ba]) || (bb < SLOTS && has_p[bb])) });
  end

endmodule
