// rp_tile: one tile of the MPSoC, an isolated SoC compartment around one processor
// core.
//
// Inside the tile a local crossbar connects two masters, the core (a port: the core is
// commodity IP outside this RTL) and the supervisor's debug bridge, to five slaves:
//   0x1000_0000 validation memory (read/write; its second port faces the other tiles)
//   0x1100_0000 interrupt controller with checkpoint timer
//   0x1200_0000 validation-memory scrubber registers
//   0x2000_0000 tile-private peripheral interfaces (a port: library IP outside this RTL)
//   anything else -> MMU -> global interconnect (main memory, NV memory, other tiles)
// The address map is identical on every tile; tile_id_i (strapped at the top level)
// only selects which main-memory segment the MMU maps in. Interrupt sources: checkpoint
// timer, supervisor-set checkpoint request, validation-memory syndromes (local and
// deferred remote), scrubber, and three peripheral lines (periph_irq_i).
//
// The set of blocks and their connections follow the paper's tile diagram (debug
// bridge, crossbar, validation memory with scrubber, IRQ, core, interfaces, MMU, and a
// read-only path into the validation memory from outside). Addresses, widths and the
// bus are this design's choices. Latency: local slaves answer one cycle after
// accepting; the MMU adds none.
module rp_tile
  import rp_pkg::*;
#(
  parameter int unsigned N_TILES        = 6,
  parameter int unsigned VMEM_DEPTH     = 1024,
  parameter int unsigned SCRUB_INTERVAL = 256,
  parameter int unsigned CKPT_PERIOD    = 100_000_000,
  parameter word_t       SEG_BYTES      = 32'h0800_0000,
  parameter word_t       NV_BYTES       = 32'h0100_0000
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] tile_id_i,
  // processor core (bus master)
  input  bus_req_t   core_req_i,
  output bus_rsp_t   core_rsp_o,
  output logic       core_irq_o,
  output logic       core_rst_o,
  // tile-private peripheral interfaces (bus slave)
  output bus_req_t   periph_req_o,
  input  bus_rsp_t   periph_rsp_i,
  input  logic [2:0] periph_irq_i,
  // off-chip supervisor
  input  dbg_cmd_t   dbg_cmd_i,
  output dbg_rsp_t   dbg_rsp_o,
  // global interconnect: master port and read-only validation-memory port
  output bus_req_t   g_req_o,
  input  bus_rsp_t   g_rsp_i,
  input  bus_req_t   vmem_req_i,
  output bus_rsp_t   vmem_rsp_o,
  output logic       ckpt_active_o
);
  localparam int unsigned NS = 5;
  localparam logic [NS-1:0][31:0] LBASE = {32'h0000_0000, TA_PERIPH_BASE, TA_SCRUB_BASE,
                                           TA_IRQ_BASE, TA_VMEM_BASE};
  localparam logic [NS-1:0][31:0] LMASK = {32'h0000_0000, 32'hF000_0000, 32'hFF00_0000,
                                           32'hFF00_0000, 32'hFF00_0000};

  bus_req_t m_req [2];
  bus_rsp_t m_rsp [2];
  bus_req_t s_req [NS];
  bus_rsp_t s_rsp [NS];

  assign m_req[0]   = core_req_i;
  assign core_rsp_o = m_rsp[0];

  bus_xbar #(.N_M(2), .N_S(NS), .S_BASE(LBASE), .S_MASK(LMASK)) u_xbar (
    .clk, .rst_n, .m_req_i(m_req), .m_rsp_o(m_rsp), .s_req_o(s_req), .s_rsp_i(s_rsp));

  debug_bridge u_dbg (
    .clk, .rst_n, .cmd_i(dbg_cmd_i), .rsp_o(dbg_rsp_o),
    .bus_req_o(m_req[1]), .bus_rsp_i(m_rsp[1]), .core_rst_o);

  scrub_req_t scrub_req;
  scrub_rsp_t scrub_rsp;
  logic       vmem_ecc, vmem_def, scrub_irq, ckpt_active;

  validation_mem #(.DEPTH(VMEM_DEPTH)) u_vmem (
    .clk, .rst_n, .ckpt_active_i(ckpt_active),
    .loc_req_i(s_req[0]), .loc_rsp_o(s_rsp[0]),
    .rem_req_i(vmem_req_i), .rem_rsp_o(vmem_rsp_o),
    .scrub_req_i(scrub_req), .scrub_rsp_o(scrub_rsp),
    .loc_ecc_o(vmem_ecc), .def_irq_o(vmem_def));

  logic [IRQ_N-1:0] src;
  always_comb begin
    src               = '0;
    src[IRQ_VMEM_ECC] = vmem_ecc;
    src[IRQ_VMEM_DEF] = vmem_def;
    src[IRQ_SCRUB]    = scrub_irq;
    src[IRQ_EXT0 +: 3] = periph_irq_i;
  end

  irq_ctrl #(.CKPT_PERIOD(CKPT_PERIOD)) u_irq (
    .clk, .rst_n, .req_i(s_req[1]), .rsp_o(s_rsp[1]), .src_i(src),
    .irq_o(core_irq_o), .ckpt_active_o(ckpt_active));

  mem_scrubber #(.DEPTH(VMEM_DEPTH), .INTERVAL(SCRUB_INTERVAL)) u_scrub (
    .clk, .rst_n, .cfg_req_i(s_req[2]), .cfg_rsp_o(s_rsp[2]),
    .scrub_req_o(scrub_req), .scrub_rsp_i(scrub_rsp), .irq_o(scrub_irq));

  assign periph_req_o = s_req[3];
  assign s_rsp[3]     = periph_rsp_i;

  tile_mmu #(.N_TILES(N_TILES), .SEG_BYTES(SEG_BYTES), .NV_BYTES(NV_BYTES)) u_mmu (
    .clk, .rst_n, .tile_id_i, .t_req_i(s_req[4]), .t_rsp_o(s_rsp[4]),
    .g_req_o, .g_rsp_i);

  assign ckpt_active_o = ckpt_active;
endmodule
