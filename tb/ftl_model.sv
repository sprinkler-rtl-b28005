// Behavioural model of the core running the flash translation layer, for
// testbenches only (not synthesizable intent, not part of the design).
//
// It answers one translation request at a time, LAT cycles after accepting
// it, with a fixed page-level mapping that stripes logical pages over chips
// first, then dies, then planes, then pages:
//   chip  = lpn mod NUM_CHIPS
//   die   = (lpn / NUM_CHIPS) mod 2
//   plane = (lpn / (2*NUM_CHIPS)) mod 2
//   page  = (lpn / (4*NUM_CHIPS)) mod 128
//   block = (lpn / (512*NUM_CHIPS)) mod 8192
// so 4*NUM_CHIPS consecutive pages cover every die and plane of every chip
// at one page offset.
module ftl_model
  import sprinkler_pkg::*;
#(
  parameter int unsigned NUM_CHIPS = 64,
  parameter int unsigned LAT       = 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  xlat_valid,
  input  mreq_t xlat_req,
  output logic  xlat_ready,
  output logic  xlat_rsp_valid,
  output phys_t xlat_rsp
);

  function automatic phys_t map(input logic [LPN_W-1:0] lpn);
    phys_t p;
    p = '0;
    p.chip      = CHIP_W'(lpn % NUM_CHIPS);
    p.loc.die   = 1'((lpn / NUM_CHIPS) % 2);
    p.loc.plane = 1'((lpn / (2 * NUM_CHIPS)) % 2);
    p.loc.page  = PAGE_W'((lpn / (4 * NUM_CHIPS)) % 128);
    p.loc.block = BLOCK_W'((lpn / (512 * NUM_CHIPS)) % 8192);
    return p;
  endfunction

  int               cnt;
  logic             busy;
  logic [LPN_W-1:0] lpn_q;

  assign xlat_ready = !busy;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cnt <= 0; xlat_rsp_valid <= 1'b0; xlat_rsp <= '0; lpn_q <= '0;
    end else begin
      xlat_rsp_valid <= 1'b0;
      if (busy) begin
        if (cnt <= 1) begin
          busy <= 1'b0;
          xlat_rsp_valid <= 1'b1;
          xlat_rsp <= map(lpn_q);
        end else cnt <= cnt - 1;
      end else if (xlat_valid) begin
        busy <= 1'b1; cnt <= int'(LAT); lpn_q <= xlat_req.lpn;
      end
    end
  end

endmodule
