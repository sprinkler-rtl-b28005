// Device-level command queue of the NVMHC (native-command-queue style).
//
// Each entry holds one host I/O request (its tag) and two bitmaps of
// MAX_MREQ bits, one bit per memory request of the I/O. The "issued" bitmap
// is the paper's eight-byte memory-request bitmap: a bit is set when the
// scheduler commits that memory request to a flash controller and cleared
// when the flash controller's completion upcall reports the transaction that
// carried it. The "done" bitmap, this design's addition, remembers which
// memory requests have completed so the DMA engine can return data to the
// host in order.
//
// Interface: alloc (valid/ready; the tag granted is the lowest free entry,
// shown combinationally on alloc_tag), iss (up to GROUP memory requests per
// cycle from the scheduler), one completion port per channel (valid/ready,
// served round-robin, one group per cycle), free (from the DMA engine,
// retires an entry in the cycle it is asserted). Entry state is visible on
// the ent_* outputs. All updates take effect at the next clock edge.
module tag_queue
  import sprinkler_pkg::*;
#(
  parameter int unsigned QUEUE_DEPTH  = 32,
  parameter int unsigned NUM_CHANNELS = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // allocation
  input  logic                  alloc_valid,
  input  io_req_t               alloc_req,
  output logic                  alloc_ready,
  output logic [TAG_W-1:0]      alloc_tag,
  // commitment of memory requests
  input  group_t                iss,
  // completion upcalls
  input  logic [NUM_CHANNELS-1:0] cpl_valid,
  input  group_t                cpl_grp [NUM_CHANNELS],
  output logic [NUM_CHANNELS-1:0] cpl_ready,
  // retirement
  input  logic                  free_valid,
  input  logic [TAG_W-1:0]      free_tag,
  // state
  output logic [QUEUE_DEPTH-1:0] ent_valid,
  output io_req_t               ent_req    [QUEUE_DEPTH],
  output logic [MAX_MREQ-1:0]   ent_issued [QUEUE_DEPTH],
  output logic [MAX_MREQ-1:0]   ent_done   [QUEUE_DEPTH],
  output logic                  empty,
  output logic                  full
);

  localparam int unsigned CW = (NUM_CHANNELS > 1) ? $clog2(NUM_CHANNELS) : 1;

  logic [CW-1:0] rr;
  logic          cpl_any;
  logic [CW-1:0] cpl_sel;

  assign empty = (ent_valid == '0);
  assign full  = (ent_valid == '1);

  always_comb begin
    alloc_ready = 1'b0;
    alloc_tag   = '0;
    for (int i = QUEUE_DEPTH - 1; i >= 0; i--)
      if (!ent_valid[i]) begin
        alloc_ready = 1'b1;
        alloc_tag   = TAG_W'(i);
      end
  end

  // Round-robin choice of one completion port.
  always_comb begin
    int unsigned c;
    cpl_any = 1'b0;
    cpl_sel = '0;
    cpl_ready = '0;
    for (int unsigned k = 0; k < NUM_CHANNELS; k++) begin
      c = (int'(rr) + k) % NUM_CHANNELS;
      if (!cpl_any && cpl_valid[c]) begin
        cpl_any = 1'b1;
        cpl_sel = CW'(c);
      end
    end
    if (cpl_any) cpl_ready[cpl_sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr        <= '0;
      ent_valid <= '0;
      for (int i = 0; i < QUEUE_DEPTH; i++) begin
        ent_req[i]    <= '0;
        ent_issued[i] <= '0;
        ent_done[i]   <= '0;
      end
    end else begin
      if (alloc_valid && alloc_ready) begin
        ent_valid[alloc_tag]  <= 1'b1;
        ent_req[alloc_tag]    <= alloc_req;
        ent_issued[alloc_tag] <= '0;
        ent_done[alloc_tag]   <= '0;
      end
      for (int g = 0; g < GROUP; g++)
        if (iss.vld[g])
          ent_issued[iss.m[g].tag][iss.m[g].idx] <= 1'b1;
      if (cpl_any) begin
        rr <= (cpl_sel == CW'(NUM_CHANNELS - 1)) ? '0 : cpl_sel + 1'b1;
        for (int g = 0; g < GROUP; g++)
          if (cpl_grp[cpl_sel].vld[g]) begin
            ent_issued[cpl_grp[cpl_sel].m[g].tag][cpl_grp[cpl_sel].m[g].idx] <= 1'b0;
            ent_done[cpl_grp[cpl_sel].m[g].tag][cpl_grp[cpl_sel].m[g].idx]   <= 1'b1;
          end
      end
      if (free_valid)
        ent_valid[free_tag] <= 1'b0;
    end
  end

  // Handshake rules of the bitmap.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int g = 0; g < GROUP; g++) begin
        assert (!iss.vld[g] || (ent_valid[iss.m[g].tag] && !ent_issued[iss.m[g].tag][iss.m[g].idx]))
          else $error("tag_queue: memory request committed twice or to a free entry");
      end
      if (cpl_any)
        for (int g = 0; g < GROUP; g++)
          assert (!cpl_grp[cpl_sel].vld[g] ||
                  ent_issued[cpl_grp[cpl_sel].m[g].tag][cpl_grp[cpl_sel].m[g].idx])
            else $error("tag_queue: completion of a memory request that was not issued");
      assert (!free_valid || ent_valid[free_tag])
        else $error("tag_queue: retiring a free entry");
    end
  end

endmodule
