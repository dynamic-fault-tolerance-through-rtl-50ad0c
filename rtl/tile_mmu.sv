// tile_mmu: address translation and protection between a tile and the global
// interconnect.
//
// Every tile sees the same address map, so code and data structures can move between
// tiles unchanged. The MMU turns that uniform view into global physical addresses:
//   TA_PRIV_BASE + off  (off < SEG_BYTES)          -> own main-memory segment,
//                                                    GA_MAIN_BASE + tile_id*SEG_BYTES + off, read/write
//   TA_GLOB_BASE + off  (off < N_TILES*SEG_BYTES)  -> all of main memory, read-only
//   TA_RVMEM_BASE + off (off < N_TILES<<16)        -> validation memory of tile off>>16, read-only
//   TA_GSCRUB_BASE + off (off < 64 KiB)            -> global scrubber registers
//   TA_NV_BASE + off    (off < NV_BYTES)           -> shared non-volatile memory
// Anything else, and a write to a read-only region, is not forwarded: the MMU accepts
// it and answers with err one cycle later.
// Forwarded requests pass through combinationally (ready and response come from the
// global side), so the MMU adds no latency.
//
// From the paper: private segment at the same address on all tiles, main memory
// read-only system wide, validation memories read-only to other tiles, uniform
// address map. The concrete addresses and sizes are this design's choices.
module tile_mmu
  import rp_pkg::*;
#(
  parameter int unsigned N_TILES   = 6,
  parameter word_t       SEG_BYTES = 32'h0800_0000,  // 128 MiB per tile
  parameter word_t       NV_BYTES  = 32'h0100_0000   // 16 MiB
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] tile_id_i,
  input  bus_req_t   t_req_i,   // from the tile's local interconnect
  output bus_rsp_t   t_rsp_o,
  output bus_req_t   g_req_o,   // to the global interconnect
  input  bus_rsp_t   g_rsp_i
);
  localparam word_t MAIN_BYTES = word_t'(N_TILES) * SEG_BYTES;
  localparam word_t RVMEM_SPAN = word_t'(N_TILES) << VMEM_TILE_SHIFT;

  word_t a, phys;
  logic  hit, ro;

  always_comb begin
    a    = t_req_i.addr;
    phys = '0;
    hit  = 1'b0;
    ro   = 1'b0;
    if (a >= TA_PRIV_BASE && a - TA_PRIV_BASE < SEG_BYTES) begin
      hit  = 1'b1;
      phys = GA_MAIN_BASE + word_t'(tile_id_i) * SEG_BYTES + (a - TA_PRIV_BASE);
    end else if (a >= TA_GLOB_BASE && a - TA_GLOB_BASE < MAIN_BYTES) begin
      hit  = 1'b1;
      ro   = 1'b1;
      phys = GA_MAIN_BASE + (a - TA_GLOB_BASE);
    end else if (a >= TA_RVMEM_BASE && a - TA_RVMEM_BASE < RVMEM_SPAN) begin
      hit  = 1'b1;
      ro   = 1'b1;
      phys = GA_VMEM_BASE + (a - TA_RVMEM_BASE);
    end else if (a >= TA_GSCRUB_BASE && a - TA_GSCRUB_BASE < 32'h0001_0000) begin
      hit  = 1'b1;
      phys = GA_GSCRUB_BASE + (a - TA_GSCRUB_BASE);
    end else if (a - TA_NV_BASE < NV_BYTES) begin
      hit  = 1'b1;
      phys = GA_NV_BASE + (a - TA_NV_BASE);
    end
  end

  logic pass, fault_q;
  assign pass = hit && !(ro && t_req_i.we);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fault_q <= 1'b0;
    else        fault_q <= t_req_i.valid && !pass;
  end

  always_comb begin
    g_req_o       = t_req_i;
    g_req_o.valid = t_req_i.valid && pass;
    g_req_o.addr  = phys;
    t_rsp_o       = g_rsp_i;
    t_rsp_o.ready = pass ? g_rsp_i.ready : 1'b1;
    if (fault_q) begin
      t_rsp_o.valid = 1'b1;
      t_rsp_o.err   = 1'b1;
      t_rsp_o.rdata = '0;
    end
  end
endmodule
