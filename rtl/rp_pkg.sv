// rp_pkg: types and constants shared by the tiled, resource-pooling MPSoC.
//
// The design uses one small memory-mapped bus everywhere (tile-local and global
// interconnect). A master raises req.valid with we/addr/wdata and holds them until
// the slave answers with rsp.ready in the same cycle (the request is accepted).
// Some cycles later (at least one) the slave returns rsp.valid with rdata and err.
// A master keeps at most one transaction outstanding. Words are 32 bits, every access
// is a whole aligned word. This bus is this design's own simplification of the AXI
// interconnect used by the original FPGA prototype.
//
// The address map (tile view and global physical view) is also this design's choice;
// the paper only states which regions exist and which are read-only.
package rp_pkg;

  localparam int unsigned XLEN  = 32;
  localparam int unsigned ECC_W = 39;   // 32 data bits + 6 Hamming bits + overall parity

  typedef logic [XLEN-1:0]  word_t;
  typedef logic [ECC_W-1:0] code_t;

  typedef struct packed {
    logic  valid;
    logic  we;
    word_t addr;
    word_t wdata;
  } bus_req_t;

  typedef struct packed {
    logic  ready;   // request accepted this cycle
    logic  valid;   // response valid this cycle
    logic  err;     // access refused (read-only region, decode error, uncorrectable ECC)
    word_t rdata;
  } bus_rsp_t;

  localparam bus_req_t BUS_REQ_IDLE = '{valid: 1'b0, we: 1'b0, addr: '0, wdata: '0};
  localparam bus_rsp_t BUS_RSP_IDLE = '{ready: 1'b0, valid: 1'b0, err: 1'b0, rdata: '0};

  // Raw codeword port used by a memory scrubber (bypasses ECC correction).
  typedef struct packed {
    logic  valid;
    logic  we;
    word_t addr;    // word index
    code_t wcode;
  } scrub_req_t;

  typedef struct packed {
    logic  ready;
    logic  valid;
    code_t rcode;
  } scrub_rsp_t;

  // Command link from the off-chip supervisor to a tile's debug bridge.
  typedef enum logic [1:0] {DBG_READ = 2'd0, DBG_WRITE = 2'd1, DBG_RESET = 2'd2} dbg_op_e;

  typedef struct packed {
    logic    valid;
    dbg_op_e op;
    word_t   addr;
    word_t   wdata;
  } dbg_cmd_t;

  typedef struct packed {
    logic  ready;   // command accepted this cycle
    logic  valid;   // result valid this cycle
    logic  err;
    word_t rdata;
  } dbg_rsp_t;

  // ---------------- tile-local address map (identical on every tile) ----------------
  localparam word_t TA_NV_BASE     = 32'h0000_0000;  // shared non-volatile memory (code)
  localparam word_t TA_VMEM_BASE   = 32'h1000_0000;  // own validation memory, read/write
  localparam word_t TA_IRQ_BASE    = 32'h1100_0000;  // interrupt controller
  localparam word_t TA_SCRUB_BASE  = 32'h1200_0000;  // tile memory scrubber
  localparam word_t TA_PERIPH_BASE = 32'h2000_0000;  // tile-private I/O interfaces
  localparam word_t TA_RVMEM_BASE  = 32'h4000_0000;  // other tiles' validation memory, read-only
  localparam word_t TA_GSCRUB_BASE = 32'h5000_0000;  // global memory scrubber
  localparam word_t TA_PRIV_BASE   = 32'h8000_0000;  // own main-memory segment, read/write
  localparam word_t TA_GLOB_BASE   = 32'hC000_0000;  // all of main memory, read-only

  // ---------------- global physical address map ----------------
  localparam word_t GA_NV_BASE     = 32'h0000_0000;
  localparam word_t GA_VMEM_BASE   = 32'h4000_0000;  // + tile << VMEM_TILE_SHIFT
  localparam word_t GA_GSCRUB_BASE = 32'h5000_0000;
  localparam word_t GA_MAIN_BASE   = 32'h8000_0000;  // + tile * segment size
  localparam int unsigned VMEM_TILE_SHIFT = 16;      // 64 KiB window per tile

  // interrupt sources of the tile interrupt controller
  localparam int unsigned IRQ_N         = 8;
  localparam int unsigned IRQ_CKPT_TMR  = 0;  // time-triggered checkpoint
  localparam int unsigned IRQ_CKPT_SUP  = 1;  // supervisor-induced checkpoint
  localparam int unsigned IRQ_VMEM_ECC  = 2;  // ECC syndrome from a local validation-memory read
  localparam int unsigned IRQ_VMEM_DEF  = 3;  // deferred syndromes from remote reads
  localparam int unsigned IRQ_SCRUB     = 4;  // scrubber found an error
  localparam int unsigned IRQ_EXT0      = 5;  // first peripheral interrupt line

  // SECDED (39,32) encoder. Bit layout of the codeword: [38] overall parity,
  // [37:32] Hamming check bits c5..c0, [31:0] data. Check bit i covers every data bit
  // whose Hamming position (the data bits take the non-power-of-two positions 3,5,6,7,9...)
  // has bit i set.
  function automatic logic [5:0] hamming_pos(input int unsigned d);
    logic [6:0] pos;
    int unsigned cnt;
    pos = '0; cnt = 0;
    for (int unsigned p = 1; p < 64; p++) begin
      if ((p & (p - 1)) != 0) begin
        if (cnt == d) pos = 7'(p);
        cnt++;
      end
    end
    return pos[5:0];
  endfunction

  typedef logic [5:0] hpos_t [32];

  function automatic hpos_t hamming_table();
    hpos_t t;
    for (int unsigned i = 0; i < 32; i++) t[i] = hamming_pos(i);
    return t;
  endfunction

  // Hamming position of each data bit, computed once at elaboration.
  localparam hpos_t HPOS = hamming_table();

  function automatic logic [5:0] ecc_check(input word_t d);
    logic [5:0] c;
    c = '0;
    for (int unsigned i = 0; i < 32; i++)
      if (d[i]) c ^= HPOS[i];
    return c;
  endfunction

  function automatic code_t ecc_encode(input word_t d);
    logic [5:0] c;
    c = ecc_check(d);
    return {^{c, d}, c, d};
  endfunction

endpackage
