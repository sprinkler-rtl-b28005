// Sprinkler: resource-driven NVMHC scheduler with per-channel flash controllers.
//
// Data flow:
//   host tag --> layout_builder --(translation by the core/FTL)--> phy_layout
//   rios_scheduler walks the chips, faro_select picks a group per chip,
//   the group is committed to the channel's flash_controller, marked issued
//   in tag_queue and (for writes) starts the host data fetch;
//   flash_controller upcalls --> tag_queue done bits --> dma_engine returns
//   read payloads in order and retires the I/O.
// Chip c sits on channel c % NUM_CHANNELS at offset c / NUM_CHANNELS.
//
// External parts that are not designed here connect through plain ports:
//   * core (FTL): xlat_* translates one memory request per handshake to a
//     chip/die/plane/block/page; rel_* is its readdressing callback after a
//     live data migration;
//   * host interface: host_* accepts I/O requests (valid/ready) and returns
//     the granted tag on host_tag, pay_* returns read payload descriptors in
//     order, done_* reports completed I/Os, wr_fetch asks the host for write
//     data of memory requests at the moment they are committed (data
//     movement is initiated per chip, not per I/O);
//   * NAND chips: the flash controllers expose channel bus activity and the
//     per-chip ready/busy state.
// The ev_* outputs are one-cycle event strobes for performance counters.
//
// Timing: everything runs on clk with an asynchronous active-low rst_n;
// scheduling runs continuously alongside arrivals, one chip visit per cycle.
// The structure (tag securing, per-chip layout, chip-order traversal, FARO
// choice, in-order return) follows the paper; the handshakes, the FUA drain,
// the sizes marked as assumed (queue depth, layout slots, bus timing, clock)
// and the even/odd fast/slow page split are this design's choices.
module sprinkler_top
  import sprinkler_pkg::*;
#(
  parameter int unsigned NUM_CHANNELS      = 8,
  parameter int unsigned CHIPS_PER_CHANNEL = 8,
  parameter int unsigned QUEUE_DEPTH       = 32,
  parameter int unsigned SLOTS             = 16,
  parameter int unsigned T_CMD             = 8,
  parameter int unsigned T_XFER            = 1024,
  parameter int unsigned T_READ            = 2000,
  parameter int unsigned T_PROG_FAST       = 20000,
  parameter int unsigned T_PROG_SLOW       = 220000,
  localparam int unsigned NUM_CHIPS        = NUM_CHANNELS * CHIPS_PER_CHANNEL
) (
  input  logic              clk,
  input  logic              rst_n,
  // host I/O requests
  input  logic              host_valid,
  input  io_req_t           host_req,
  output logic              host_ready,
  output logic [TAG_W-1:0]  host_tag,     // tag granted to the accepted I/O
  // read payloads, in order per I/O
  output logic              pay_valid,
  output logic [TAG_W-1:0]  pay_tag,
  output logic [IDX_W-1:0]  pay_idx,
  output logic [LPN_W-1:0]  pay_lpn,
  input  logic              pay_ready,
  // I/O completion
  output logic              done_valid,
  output logic [TAG_W-1:0]  done_tag,
  // write data movement initiated at commit
  output group_t            wr_fetch,
  // core (FTL) translation
  output logic              xlat_valid,
  output mreq_t             xlat_req,
  input  logic              xlat_ready,
  input  logic              xlat_rsp_valid,
  input  phys_t             xlat_rsp,
  // readdressing callback from the core
  input  logic              rel_valid,
  input  logic [LPN_W-1:0]  rel_lpn,
  input  phys_t             rel_new,
  output logic              rel_ready,
  // flash side
  output logic [NUM_CHANNELS-1:0] ch_bus_busy,
  output logic [NUM_CHIPS-1:0]    chip_rb_n,
  // events
  output logic              ev_commit,
  output pal_e              ev_pal,
  output logic [2:0]        ev_depth,
  output logic [2:0]        ev_conn,
  output logic              ev_busy_skip,
  output logic              ev_war_hold,
  output logic              ev_bus_contention,
  output logic              ev_fua_wait,
  output logic              ev_rel_moved,
  output logic              ev_rel_ignored,
  output logic              ev_layout_full,
  output logic              ev_queue_full
);

  // queue
  logic             q_alloc_valid, q_alloc_ready, q_empty, q_full;
  io_req_t          q_alloc_req;
  logic [TAG_W-1:0] q_alloc_tag;
  logic [QUEUE_DEPTH-1:0] ent_valid;
  io_req_t          ent_req    [QUEUE_DEPTH];
  logic [MAX_MREQ-1:0] ent_issued [QUEUE_DEPTH];
  logic [MAX_MREQ-1:0] ent_done   [QUEUE_DEPTH];
  group_t           iss;
  logic [NUM_CHANNELS-1:0] cpl_valid, cpl_ready;
  group_t           cpl_grp [NUM_CHANNELS];
  logic             free_valid;
  logic [TAG_W-1:0] free_tag;

  // layout
  logic              ins_valid, ins_ready;
  logic [CHIP_W-1:0] ins_chip;
  mreq_t             ins_ent;
  logic [CHIP_W-1:0] rd_chip;
  mreq_t             rd_ent [SLOTS];
  logic [SLOTS-1:0]  rd_vld, clr_mask;
  logic              clr_valid;
  logic [NUM_CHIPS-1:0] row_full;
  logic              layout_empty, rel_moved, rel_ignored;
  logic              builder_busy;

  // scheduler / controllers
  logic [NUM_CHIPS-1:0]    chip_ready;
  logic [NUM_CHANNELS-1:0] cm_valid, fc_contention, fc_txn;
  logic [CHIP_W-1:0]       cm_off;
  group_t                  cm_grp;
  pal_e                    cm_pal;
  logic [2:0]              cm_depth, cm_conn;
  logic                    busy_skip, war_hold;

  tag_queue #(.QUEUE_DEPTH(QUEUE_DEPTH), .NUM_CHANNELS(NUM_CHANNELS)) u_queue (
    .clk, .rst_n,
    .alloc_valid(q_alloc_valid), .alloc_req(q_alloc_req), .alloc_ready(q_alloc_ready),
    .alloc_tag(q_alloc_tag),
    .iss(iss),
    .cpl_valid(cpl_valid), .cpl_grp(cpl_grp), .cpl_ready(cpl_ready),
    .free_valid(free_valid), .free_tag(free_tag),
    .ent_valid(ent_valid), .ent_req(ent_req), .ent_issued(ent_issued), .ent_done(ent_done),
    .empty(q_empty), .full(q_full)
  );

  layout_builder u_builder (
    .clk, .rst_n,
    .host_valid, .host_req, .host_ready,
    .q_alloc_valid, .q_alloc_req, .q_alloc_ready, .q_alloc_tag, .q_empty,
    .xlat_valid, .xlat_req, .xlat_ready, .xlat_rsp_valid, .xlat_rsp,
    .ins_valid, .ins_chip, .ins_ent, .ins_ready,
    .busy(builder_busy), .fua_wait(ev_fua_wait)
  );

  phy_layout #(.NUM_CHIPS(NUM_CHIPS), .SLOTS(SLOTS)) u_layout (
    .clk, .rst_n,
    .ins_valid, .ins_chip, .ins_ent, .ins_ready,
    .rd_chip, .rd_ent, .rd_vld, .clr_valid, .clr_mask,
    .rel_valid, .rel_lpn, .rel_new, .rel_ready, .rel_moved, .rel_ignored,
    .row_full, .all_empty(layout_empty)
  );

  rios_scheduler #(.NUM_CHANNELS(NUM_CHANNELS), .CHIPS_PER_CHANNEL(CHIPS_PER_CHANNEL),
                   .SLOTS(SLOTS)) u_rios (
    .clk, .rst_n, .enable(1'b1),
    .rd_chip, .rd_ent, .rd_vld, .clr_valid, .clr_mask,
    .chip_ready, .cm_valid, .cm_off, .cm_grp, .cm_pal,
    .cm_depth, .cm_conn, .busy_skip, .war_hold
  );

  for (genvar ch = 0; ch < NUM_CHANNELS; ch++) begin : g_ch
    logic [CHIPS_PER_CHANNEL-1:0] rdy, rb;
    logic [CHIP_W-1:0]            bchip;
    pal_e                         tpal;
    flash_controller #(
      .CHIPS_PER_CHANNEL(CHIPS_PER_CHANNEL), .T_CMD(T_CMD), .T_XFER(T_XFER),
      .T_READ(T_READ), .T_PROG_FAST(T_PROG_FAST), .T_PROG_SLOW(T_PROG_SLOW)
    ) u_fc (
      .clk, .rst_n,
      .cm_valid(cm_valid[ch]), .cm_off(cm_off), .cm_grp(cm_grp), .chip_ready(rdy),
      .cpl_valid(cpl_valid[ch]), .cpl_grp(cpl_grp[ch]), .cpl_ready(cpl_ready[ch]),
      .bus_busy(ch_bus_busy[ch]), .bus_chip(bchip), .rb_n(rb),
      .bus_contention(fc_contention[ch]), .txn_start(fc_txn[ch]), .txn_pal(tpal)
    );
    for (genvar o = 0; o < CHIPS_PER_CHANNEL; o++) begin : g_chip
      assign chip_ready[o * NUM_CHANNELS + ch] = rdy[o];
      assign chip_rb_n[o * NUM_CHANNELS + ch]  = rb[o];
    end
  end

  dma_engine #(.QUEUE_DEPTH(QUEUE_DEPTH)) u_dma (
    .clk, .rst_n,
    .ent_valid, .ent_req, .ent_done,
    .pay_valid, .pay_tag, .pay_idx, .pay_lpn, .pay_ready,
    .free_valid, .free_tag
  );

  // commit fan-out
  always_comb begin
    iss      = cm_grp;
    wr_fetch = cm_grp;
    for (int g = 0; g < GROUP; g++)
      wr_fetch.vld[g] = cm_grp.vld[g] && cm_grp.m[g].wr;
  end

  assign host_tag          = q_alloc_tag;
  assign done_valid        = free_valid;
  assign done_tag          = free_tag;
  assign ev_commit         = (cm_valid != '0);
  assign ev_pal            = cm_pal;
  assign ev_depth          = cm_depth;
  assign ev_conn           = cm_conn;
  assign ev_busy_skip      = busy_skip;
  assign ev_war_hold       = war_hold;
  assign ev_bus_contention = (fc_contention != '0);
  assign ev_rel_moved      = rel_moved;
  assign ev_rel_ignored    = rel_ignored;
  assign ev_layout_full    = ins_valid && !ins_ready && !rel_valid;
  assign ev_queue_full     = host_valid && q_full;

endmodule
