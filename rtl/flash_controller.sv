// Flash controller of one channel.
//
// It receives committed groups (one per chip at a time) from the scheduler,
// executes each group as a single flash transaction on its chip and reports
// the completion with an upcall. The transaction type follows from the group:
// one request (no flash-level parallelism), two planes of one die at the same
// page (plane sharing), both dies (die interleaving), or both combined.
//
// As in the paper's timing example, every memory request of a transaction
// needs its own activity on the shared channel bus, while the flash cells of
// the chip work once for the whole transaction. The sequence per chip is:
//   BUS_IN  one bus activity per member: command and address (T_CMD cycles),
//           plus the page data for a write (T_XFER more cycles);
//   CELL    one cell activity, the chip is busy (R/B# low): T_READ for a read,
//           for a write the longest program time of its members;
//   BUS_OUT (reads only) one data-out bus activity per member (T_XFER);
//   DONE    completion upcall pending (valid/ready), then back to IDLE.
// The bus carries one activity at a time; chips that need it are served
// round-robin, so bus work of one chip overlaps cell work of others. A chip
// takes a new group only in IDLE: transactions are submitted only while the
// chip is not busy, as in the paper.
//
// Timing defaults assume a 100 MHz controller clock. From the paper: 20 us
// read, program time 200 us to 2200 us depending on the page address. This
// design's choices: even pages use the short and odd pages the long program
// time; the ONFI 2.x bus moves 200 MB/s, so a 2 KB page takes 1024 cycles;
// command and address take 8 cycles.
module flash_controller
  import sprinkler_pkg::*;
#(
  parameter int unsigned CHIPS_PER_CHANNEL = 8,
  parameter int unsigned T_CMD       = 8,
  parameter int unsigned T_XFER      = 1024,
  parameter int unsigned T_READ      = 2000,
  parameter int unsigned T_PROG_FAST = 20000,
  parameter int unsigned T_PROG_SLOW = 220000
) (
  input  logic              clk,
  input  logic              rst_n,
  // commitment
  input  logic              cm_valid,
  input  logic [CHIP_W-1:0] cm_off,
  input  group_t            cm_grp,
  output logic [CHIPS_PER_CHANNEL-1:0] chip_ready,
  // completion upcall
  output logic              cpl_valid,
  output group_t            cpl_grp,
  input  logic              cpl_ready,
  // channel and chip activity
  output logic              bus_busy,
  output logic [CHIP_W-1:0] bus_chip,
  output logic [CHIPS_PER_CHANNEL-1:0] rb_n,       // 0 while cells are busy
  output logic              bus_contention,         // a chip waits for the bus
  output logic              txn_start,              // a transaction entered the chip
  output pal_e              txn_pal
);

  localparam int unsigned N   = CHIPS_PER_CHANNEL;
  localparam int unsigned NW  = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned TW  = 20;

  typedef enum logic [2:0] {C_IDLE, C_BUS_IN, C_CELL, C_BUS_OUT, C_DONE} cstate_e;

  cstate_e          st   [N];
  group_t           grp  [N];
  logic [GROUP-1:0] todo [N];
  logic [TW-1:0]    tmr  [N];

  logic [TW-1:0]    bus_cnt;
  logic [NW-1:0]    bus_c;
  logic [1:0]       bus_m;
  logic [NW-1:0]    bus_rr, cpl_rr;

  // Bus arbitration.
  logic          want_any;
  logic [NW-1:0] want_c;
  logic [1:0]    want_m;
  logic          bus_end;
  always_comb begin
    int unsigned c;
    want_any = 1'b0; want_c = '0; want_m = '0;
    for (int unsigned k = 0; k < N; k++) begin
      c = (int'(bus_rr) + k) % N;
      if (!want_any && (st[c] == C_BUS_IN || st[c] == C_BUS_OUT) && todo[c] != '0) begin
        want_any = 1'b1;
        want_c   = NW'(c);
        for (int g = GROUP - 1; g >= 0; g--)
          if (todo[c][g]) want_m = 2'(g);
      end
    end
    bus_end = (bus_cnt == TW'(1));
  end

  function automatic logic [TW-1:0] prog_time(input logic [PAGE_W-1:0] page);
    return page[0] ? TW'(T_PROG_SLOW) : TW'(T_PROG_FAST);
  endfunction

  function automatic logic [TW-1:0] cell_time(input group_t gr);
    logic [TW-1:0] t;
    logic          w;
    t = '0; w = 1'b0;
    for (int g = 0; g < GROUP; g++)
      if (gr.vld[g]) begin
        w = gr.m[g].wr;
        if (gr.m[g].wr && prog_time(gr.m[g].loc.page) > t) t = prog_time(gr.m[g].loc.page);
      end
    return w ? t : TW'(T_READ);
  endfunction

  function automatic logic grp_wr(input group_t gr);
    logic w;
    w = 1'b0;
    for (int g = 0; g < GROUP; g++) if (gr.vld[g]) w = gr.m[g].wr;
    return w;
  endfunction

  // Completion arbitration.
  logic          cpl_any;
  logic [NW-1:0] cpl_c;
  always_comb begin
    int unsigned c;
    cpl_any = 1'b0; cpl_c = '0;
    for (int unsigned k = 0; k < N; k++) begin
      c = (int'(cpl_rr) + k) % N;
      if (!cpl_any && st[c] == C_DONE) begin cpl_any = 1'b1; cpl_c = NW'(c); end
    end
  end
  assign cpl_valid = cpl_any;
  assign cpl_grp   = cpl_any ? grp[cpl_c] : '0;

  always_comb begin
    for (int c = 0; c < N; c++) begin
      chip_ready[c] = (st[c] == C_IDLE);
      rb_n[c]       = (st[c] != C_CELL);
    end
  end
  assign bus_busy  = (bus_cnt != '0);
  assign bus_chip  = CHIP_W'(bus_c);
  assign bus_contention = bus_busy && want_any;
  assign txn_start = cm_valid && (st[cm_off[NW-1:0]] == C_IDLE);
  assign txn_pal   = pal_e'({ (cm_grp.vld[1:0] != '0) && (cm_grp.vld[3:2] != '0),
                              (cm_grp.vld[1:0] == 2'b11) || (cm_grp.vld[3:2] == 2'b11) });

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bus_cnt <= '0; bus_c <= '0; bus_m <= '0; bus_rr <= '0; cpl_rr <= '0;
      for (int c = 0; c < N; c++) begin
        st[c] <= C_IDLE; grp[c] <= '0; todo[c] <= '0; tmr[c] <= '0;
      end
    end else begin
      // channel bus
      if (bus_cnt != '0) begin
        bus_cnt <= bus_cnt - 1'b1;
        if (bus_end) todo[bus_c][bus_m] <= 1'b0;
      end else if (want_any) begin
        bus_c   <= want_c;
        bus_m   <= want_m;
        bus_rr  <= (want_c == NW'(N - 1)) ? '0 : want_c + 1'b1;
        if (st[want_c] == C_BUS_OUT)
          bus_cnt <= TW'(T_XFER);
        else
          bus_cnt <= grp[want_c].m[want_m].wr ? TW'(T_CMD + T_XFER) : TW'(T_CMD);
      end
      // chips
      for (int c = 0; c < N; c++) begin
        case (st[c])
          C_BUS_IN: if (todo[c] == '0 && !(bus_cnt != '0 && bus_c == NW'(c))) begin
            st[c]  <= C_CELL;
            tmr[c] <= cell_time(grp[c]);
          end
          C_CELL: begin
            tmr[c] <= tmr[c] - 1'b1;
            if (tmr[c] == TW'(1)) begin
              if (grp_wr(grp[c])) st[c] <= C_DONE;
              else begin
                st[c]   <= C_BUS_OUT;
                todo[c] <= grp[c].vld;
              end
            end
          end
          C_BUS_OUT: if (todo[c] == '0 && !(bus_cnt != '0 && bus_c == NW'(c)))
            st[c] <= C_DONE;
          C_DONE: if (cpl_ready && cpl_any && cpl_c == NW'(c)) begin
            st[c]  <= C_IDLE;
            cpl_rr <= (cpl_c == NW'(N - 1)) ? '0 : cpl_c + 1'b1;
          end
          default: ;
        endcase
      end
      if (txn_start) begin
        st[cm_off[NW-1:0]]   <= C_BUS_IN;
        grp[cm_off[NW-1:0]]  <= cm_grp;
        todo[cm_off[NW-1:0]] <= cm_grp.vld;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!cm_valid || st[cm_off[NW-1:0]] == C_IDLE)
        else $error("flash_controller: group committed to a busy chip");
      assert (!cm_valid || cm_grp.vld != '0)
        else $error("flash_controller: empty group committed");
    end
  end

endmodule
