// rp_mpsoc: top level of the tiled, fault-tolerant MPSoC.
//
// N_TILES identical tiles (rp_tile) share only a global crossbar, behind which sit the
// main-memory controller, the non-volatile memory, the global main-memory scrubber and
// the read-only ports of every tile's validation memory. Redundancy is not wired into
// the hardware: replicated threads run on any set of tiles in coarse-grain lockstep,
// compare checksums through each other's validation memories at checkpoints, and are
// re-mapped by the supervisor when a tile fails, so every tile, spare or not, is part
// of one pool. An I/O voter takes a majority decision for replicated low-speed
// interfaces.
//
// Global physical map (slaves of the global crossbar):
//   0x4000_0000 + t<<16  validation memory of tile t, read-only
//   0x5000_0000          global scrubber registers
//   0x8000_0000          main memory, N_TILES segments of SEG_BYTES (external controller)
//   0x0000_0000          non-volatile memory, NV_BYTES (external controller)
// Main-memory ECC and controller, NV memory, the processor cores, the peripheral
// controllers and the off-chip supervisor are outside this RTL; their connections are
// ports. The global scrubber reaches main memory through a raw-codeword port
// (mm_scrub_*) and reports to the supervisor (gscrub_irq_o).
//
// Six tiles is the configuration the paper draws and builds on its Kintex target; the
// bus, addresses and sizes are this design's choices.
module rp_mpsoc
  import rp_pkg::*;
#(
  parameter int unsigned N_TILES        = 6,
  parameter int unsigned VMEM_DEPTH     = 1024,
  parameter int unsigned SCRUB_INTERVAL = 256,
  parameter int unsigned CKPT_PERIOD    = 100_000_000,
  parameter word_t       SEG_BYTES      = 32'h0800_0000,
  parameter word_t       NV_BYTES       = 32'h0100_0000,
  parameter int unsigned IO_W           = 4,
  parameter int unsigned IO_DEPTH       = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  // per-tile processor cores
  input  bus_req_t            core_req_i   [N_TILES],
  output bus_rsp_t            core_rsp_o   [N_TILES],
  output logic [N_TILES-1:0]  core_irq_o,
  output logic [N_TILES-1:0]  core_rst_o,
  // per-tile peripheral interfaces
  output bus_req_t            periph_req_o [N_TILES],
  input  bus_rsp_t            periph_rsp_i [N_TILES],
  input  logic [2:0]          periph_irq_i [N_TILES],
  // off-chip supervisor, one debug link per tile
  input  dbg_cmd_t            dbg_cmd_i    [N_TILES],
  output dbg_rsp_t            dbg_rsp_o    [N_TILES],
  output logic [N_TILES-1:0]  ckpt_active_o,
  // shared memories
  output bus_req_t            mm_req_o,
  input  bus_rsp_t            mm_rsp_i,
  output scrub_req_t          mm_scrub_req_o,
  input  scrub_rsp_t          mm_scrub_rsp_i,
  output logic                gscrub_irq_o,
  output bus_req_t            nv_req_o,
  input  bus_rsp_t            nv_rsp_i,
  // replicated low-speed I/O
  input  logic [N_TILES-1:0]  io_member_i,
  input  logic [N_TILES-1:0]  io_push_i,
  input  logic [IO_W-1:0]     io_data_i    [N_TILES],
  output logic [IO_W-1:0]     io_pins_o,
  output logic                io_vote_o,
  output logic [N_TILES-1:0]  io_mismatch_o,
  output logic [N_TILES-1:0]  io_overflow_o
);
  localparam int unsigned NS = N_TILES + 3;
  localparam int unsigned S_GSCRUB = N_TILES;
  localparam int unsigned S_MAIN   = N_TILES + 1;
  localparam int unsigned S_NV     = N_TILES + 2;
  localparam int unsigned MAIN_WORDS = (N_TILES * SEG_BYTES) / 4;

  function automatic logic [NS-1:0][31:0] g_base();
    logic [NS-1:0][31:0] b;
    for (int t = 0; t < N_TILES; t++) b[t] = GA_VMEM_BASE + (32'(t) << VMEM_TILE_SHIFT);
    b[S_GSCRUB] = GA_GSCRUB_BASE;
    b[S_MAIN]   = GA_MAIN_BASE;
    b[S_NV]     = GA_NV_BASE;
    return b;
  endfunction

  function automatic logic [NS-1:0][31:0] g_mask();
    logic [NS-1:0][31:0] m;
    for (int t = 0; t < N_TILES; t++) m[t] = 32'hFFFF_0000;
    m[S_GSCRUB] = 32'hFFFF_0000;
    m[S_MAIN]   = 32'hC000_0000;
    m[S_NV]     = ~(NV_BYTES - 1);
    return m;
  endfunction

  bus_req_t g_mreq [N_TILES];
  bus_rsp_t g_mrsp [N_TILES];
  bus_req_t g_sreq [NS];
  bus_rsp_t g_srsp [NS];

  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    rp_tile #(
      .N_TILES(N_TILES), .VMEM_DEPTH(VMEM_DEPTH), .SCRUB_INTERVAL(SCRUB_INTERVAL),
      .CKPT_PERIOD(CKPT_PERIOD), .SEG_BYTES(SEG_BYTES), .NV_BYTES(NV_BYTES)
    ) u_tile (
      .clk, .rst_n,
      .tile_id_i    (8'(t)),
      .core_req_i   (core_req_i[t]),
      .core_rsp_o   (core_rsp_o[t]),
      .core_irq_o   (core_irq_o[t]),
      .core_rst_o   (core_rst_o[t]),
      .periph_req_o (periph_req_o[t]),
      .periph_rsp_i (periph_rsp_i[t]),
      .periph_irq_i (periph_irq_i[t]),
      .dbg_cmd_i    (dbg_cmd_i[t]),
      .dbg_rsp_o    (dbg_rsp_o[t]),
      .g_req_o      (g_mreq[t]),
      .g_rsp_i      (g_mrsp[t]),
      .vmem_req_i   (g_sreq[t]),
      .vmem_rsp_o   (g_srsp[t]),
      .ckpt_active_o(ckpt_active_o[t])
    );
  end

  bus_xbar #(.N_M(N_TILES), .N_S(NS), .S_BASE(g_base()), .S_MASK(g_mask())) u_gxbar (
    .clk, .rst_n, .m_req_i(g_mreq), .m_rsp_o(g_mrsp), .s_req_o(g_sreq), .s_rsp_i(g_srsp));

  mem_scrubber #(.DEPTH(MAIN_WORDS), .INTERVAL(SCRUB_INTERVAL)) u_gscrub (
    .clk, .rst_n, .cfg_req_i(g_sreq[S_GSCRUB]), .cfg_rsp_o(g_srsp[S_GSCRUB]),
    .scrub_req_o(mm_scrub_req_o), .scrub_rsp_i(mm_scrub_rsp_i), .irq_o(gscrub_irq_o));

  assign mm_req_o       = g_sreq[S_MAIN];
  assign g_srsp[S_MAIN] = mm_rsp_i;
  assign nv_req_o       = g_sreq[S_NV];
  assign g_srsp[S_NV]   = nv_rsp_i;

  io_voter #(.N_IN(N_TILES), .W(IO_W), .DEPTH(IO_DEPTH)) u_voter (
    .clk, .rst_n, .member_i(io_member_i), .push_i(io_push_i), .data_i(io_data_i),
    .pins_o(io_pins_o), .vote_o(io_vote_o), .mismatch_o(io_mismatch_o),
    .overflow_o(io_overflow_o));
endmodule
