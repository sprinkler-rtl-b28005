// Physical-layout table: pending memory requests filed per flash chip.
//
// This is the structure RIOS schedules from. Every memory request whose
// physical resource is known, but which has not yet been committed, sits in
// one of SLOTS entries of its chip's row (chip index implied by the row;
// die, plane, block and page stored with the request). The table has three
// ports, each acting at the next clock edge:
//   * insert: write a request into the lowest free slot of ins_chip; not ready
//     while the row is full or a readdressing callback is being served.
//   * visit:  the scheduler names rd_chip and sees that row combinationally on
//     rd_ent/rd_vld; clr_mask removes the slots it commits in that cycle.
//   * readdress: the callback from the FTL after a live data migration (garbage
//     collection, wear levelling, bad-block replacement). It carries a logical
//     page and its new physical location. A pending read of that page is moved
//     to the new location (every such read, if there are several); the callback is acknowledged (rel_ready) in the cycle
//     its last matching request is handled. As the paper prescribes, only a
//     move between different internal resources (chip, die or plane) changes
//     the table; a move inside the same resource is acknowledged and ignored
//     (rel_ignored). A move to another chip waits for a free slot there.
// Pending writes are not readdressed: their target page is chosen by the FTL
// at translation and is not live data yet (this design's reading).
module phy_layout
  import sprinkler_pkg::*;
#(
  parameter int unsigned NUM_CHIPS = 64,
  parameter int unsigned SLOTS     = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // insert
  input  logic              ins_valid,
  input  logic [CHIP_W-1:0] ins_chip,
  input  mreq_t             ins_ent,
  output logic              ins_ready,
  // visit
  input  logic [CHIP_W-1:0] rd_chip,
  output mreq_t             rd_ent [SLOTS],
  output logic [SLOTS-1:0]  rd_vld,
  input  logic              clr_valid,
  input  logic [SLOTS-1:0]  clr_mask,
  // readdressing callback
  input  logic              rel_valid,
  input  logic [LPN_W-1:0]  rel_lpn,
  input  phys_t             rel_new,
  output logic              rel_ready,
  output logic              rel_moved,    // a request changed resource this cycle
  output logic              rel_ignored,  // callback needed no change
  // occupancy
  output logic [NUM_CHIPS-1:0] row_full,
  output logic                 all_empty
);

  mreq_t            ent [NUM_CHIPS][SLOTS];
  logic [SLOTS-1:0] vld [NUM_CHIPS];

  // Visit port.
  always_comb begin
    for (int s = 0; s < SLOTS; s++) rd_ent[s] = ent[rd_chip][s];
    rd_vld = vld[rd_chip];
  end

  always_comb begin
    all_empty = 1'b1;
    for (int c = 0; c < NUM_CHIPS; c++) begin
      row_full[c] = (vld[c] == '1);
      if (vld[c] != '0) all_empty = 1'b0;
    end
  end

  // Readdressing. A matching pending read is "stale" when its resource
  // (chip, die, plane) differs from the new one. Stale reads already in the
  // destination chip are updated in place, all in one cycle; stale reads in
  // other chips are moved one per cycle.
  logic [SLOTS-1:0] match [NUM_CHIPS];
  logic [SLOTS-1:0] stale [NUM_CHIPS];
  logic             any_stale, far_found, dst_free;
  int unsigned      far_chip, far_slot, far_count, dst_slot;

  always_comb begin
    any_stale = 1'b0; far_found = 1'b0; far_chip = 0; far_slot = 0; far_count = 0;
    for (int c = NUM_CHIPS - 1; c >= 0; c--)
      for (int s = SLOTS - 1; s >= 0; s--) begin
        match[c][s] = rel_valid && vld[c][s] && !ent[c][s].wr && ent[c][s].lpn == rel_lpn &&
                      !(clr_valid && clr_mask[s] && rd_chip == CHIP_W'(c));
        stale[c][s] = match[c][s] &&
                      !(rel_new.chip == CHIP_W'(c) &&
                        rel_new.loc.die == ent[c][s].loc.die &&
                        rel_new.loc.plane == ent[c][s].loc.plane);
        if (stale[c][s]) any_stale = 1'b1;
        if (stale[c][s] && rel_new.chip != CHIP_W'(c)) begin
          far_found = 1'b1; far_chip = c; far_slot = s; far_count = far_count + 1;
        end
      end
    dst_free = 1'b0; dst_slot = 0;
    for (int s = SLOTS - 1; s >= 0; s--)
      if (!vld[rel_new.chip][s]) begin dst_free = 1'b1; dst_slot = s; end
  end

  logic rel_move;
  assign rel_move    = far_found && dst_free;
  assign rel_ready   = rel_valid && (far_count == 0 || (far_count == 1 && dst_free));
  assign rel_moved   = rel_move || (stale[rel_new.chip] != '0);
  assign rel_ignored = rel_valid && !any_stale;

  // Insert port (the callback has priority).
  logic        ins_free;
  int unsigned ins_slot;
  always_comb begin
    ins_free = 1'b0; ins_slot = 0;
    for (int s = SLOTS - 1; s >= 0; s--)
      if (!vld[ins_chip][s]) begin ins_free = 1'b1; ins_slot = s; end
    ins_ready = ins_free && !rel_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NUM_CHIPS; c++) begin
        vld[c] <= '0;
        for (int s = 0; s < SLOTS; s++) ent[c][s] <= '0;
      end
    end else begin
      if (clr_valid)
        vld[rd_chip] <= vld[rd_chip] & ~clr_mask;
      if (ins_valid && ins_ready) begin
        vld[ins_chip][ins_slot] <= 1'b1;
        ent[ins_chip][ins_slot] <= ins_ent;
      end
      // in-place update of every match in the destination chip
      for (int s = 0; s < SLOTS; s++)
        if (match[rel_new.chip][s])
          ent[rel_new.chip][s].loc <= rel_new.loc;
      if (rel_move) begin
        vld[far_chip][far_slot] <= 1'b0;
        vld[rel_new.chip][dst_slot] <= 1'b1;
        ent[rel_new.chip][dst_slot] <= ent[far_chip][far_slot];
        ent[rel_new.chip][dst_slot].loc <= rel_new.loc;
      end
    end
  end

endmodule
