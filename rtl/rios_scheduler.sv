// RIOS: resource-driven I/O scheduler with FARO over-commitment.
//
// The scheduler does not look at the order of I/O requests in the queue.
// It walks the flash chips instead, one chip per clock cycle, in the order
// the paper prescribes: first the chips with offset 0 in every channel
// (channel 0, 1, ... NUM_CHANNELS-1), then offset 1 in every channel, and so
// on, then it wraps around. Chip number = offset * NUM_CHANNELS + channel, so
// consecutive visits land on different channels and their bus work overlaps
// (channel striping, then channel pipelining).
//
// At each visited chip it reads that chip's row of the layout table, lets
// the FARO selector pick the group with the highest overlap depth (ties:
// highest connectivity), and, if the chip's flash controller can take a new
// transaction (the chip is ready, not busy), commits the whole group in that
// cycle: cm_valid with the group goes to the flash controller of the
// chip's channel, the same group marks the memory requests as issued in the
// queue bitmap and starts the host data movement of writes, and the group's
// slots are cleared in the layout table. A chip with pending requests that is
// still busy is simply passed over and served on a later visit.
//
// Timing: combinational from the visited row to the commit; one visit per
// cycle, a full round over all chips takes NUM_CHANNELS*CHIPS_PER_CHANNEL
// cycles. The visit order is the paper's; visiting one chip per cycle and
// skipping busy chips are this design's choices.
module rios_scheduler
  import sprinkler_pkg::*;
#(
  parameter int unsigned NUM_CHANNELS      = 8,
  parameter int unsigned CHIPS_PER_CHANNEL = 8,
  parameter int unsigned SLOTS             = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  // layout table visit port
  output logic [CHIP_W-1:0] rd_chip,
  input  mreq_t             rd_ent [SLOTS],
  input  logic [SLOTS-1:0]  rd_vld,
  output logic              clr_valid,
  output logic [SLOTS-1:0]  clr_mask,
  // flash controllers
  input  logic [NUM_CHANNELS*CHIPS_PER_CHANNEL-1:0] chip_ready,
  output logic [NUM_CHANNELS-1:0] cm_valid,     // one-hot on the visited channel
  output logic [CHIP_W-1:0] cm_off,             // chip offset within the channel
  output group_t            cm_grp,
  output pal_e              cm_pal,
  // statistics of the decision
  output logic [2:0]        cm_depth,
  output logic [2:0]        cm_conn,
  output logic              busy_skip,          // pending work but chip busy
  output logic              war_hold            // a write waited for a read
);

  localparam int unsigned CHW = (NUM_CHANNELS > 1) ? $clog2(NUM_CHANNELS) : 1;
  localparam int unsigned OFW = (CHIPS_PER_CHANNEL > 1) ? $clog2(CHIPS_PER_CHANNEL) : 1;

  logic [CHW-1:0] ch;
  logic [OFW-1:0] off;

  logic             any;
  logic [SLOTS-1:0] sel_mask, war_block;
  group_t           grp;
  pal_e             pal;
  logic [2:0]       depth, conn;
  logic             go;

  assign rd_chip = CHIP_W'(int'(off) * NUM_CHANNELS + int'(ch));

  faro_select #(.SLOTS(SLOTS)) u_faro (
    .ent(rd_ent), .vld(rd_vld), .any(any), .sel_mask(sel_mask), .grp(grp),
    .depth(depth), .conn(conn), .pal(pal), .war_block(war_block)
  );

  assign go        = enable && any && chip_ready[rd_chip];
  assign clr_valid = go;
  assign clr_mask  = go ? sel_mask : '0;
  assign cm_off    = CHIP_W'(off);
  assign cm_grp    = go ? grp : '0;
  assign cm_pal    = pal;
  assign cm_depth  = depth;
  assign cm_conn   = conn;
  assign busy_skip = enable && any && !chip_ready[rd_chip];
  assign war_hold  = enable && (war_block != '0);

  always_comb begin
    cm_valid     = '0;
    cm_valid[ch] = go;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ch  <= '0;
      off <= '0;
    end else if (enable) begin
      if (ch == CHW'(NUM_CHANNELS - 1)) begin
        ch  <= '0;
        off <= (off == OFW'(CHIPS_PER_CHANNEL - 1)) ? '0 : off + 1'b1;
      end else begin
        ch <= ch + 1'b1;
      end
    end
  end

endmodule
