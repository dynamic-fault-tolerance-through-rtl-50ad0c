// validation_mem: a tile's validation memory, the on-chip dual-port BRAM in which the
// tile's checkpoint handler stores the checksums of its threads so that sibling tiles
// can compare against them without touching main memory.
//
// Port A (loc_*) is the tile's own bus: read and write. Port B (rem_*) is reached
// from the global interconnect by the other tiles and is read-only: a write there is
// answered with err and changes nothing. Every word is stored as a SECDED codeword;
// reads return corrected data, and an uncorrectable word is answered with err.
// A memory scrubber reaches the raw codewords through the scrub_* port, which shares
// port A and is served only in cycles without a local request. A scrub write-back is
// dropped if the tile rewrote that word after the scrubber read it.
//
// ECC syndromes:
//  * from local reads: reported at once (loc_ecc_o pulse), counted in LOC_CNT;
//  * from remote reads while ckpt_active_i is high (a checkpoint is in progress):
//    recorded but held back; when the checkpoint ends they are reported with one
//    def_irq_o pulse. Outside a checkpoint a remote syndrome is reported at once.
// Status words sit at byte offset STATUS_OFS of the local window:
//   +0 DEF_CNT  deferred/remote syndromes since last clear (write clears)
//   +4 DEF_ADDR word index of the last one
//   +8 LOC_CNT  local-read syndromes since last clear (write clears)
//
// Timing: both ports accept a request every cycle (rsp.ready = 1; scrub port only when
// port A is free) and answer one cycle later.
//
// From the paper: dual port, local read/write, remote read-only, ECC, deferral of
// remote syndromes during a checkpoint. This design's choices: the depth, the
// status registers, the one-cycle timing and the scrub port on port A.
module validation_mem
  import rp_pkg::*;
#(
  parameter int unsigned DEPTH      = 1024,    // words
  parameter int unsigned STATUS_OFS = 32'h8000 // byte offset of the status words
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       ckpt_active_i,
  input  bus_req_t   loc_req_i,
  output bus_rsp_t   loc_rsp_o,
  input  bus_req_t   rem_req_i,
  output bus_rsp_t   rem_rsp_o,
  input  scrub_req_t scrub_req_i,
  output scrub_rsp_t scrub_rsp_o,
  output logic       loc_ecc_o,   // pulse: syndrome on a local read
  output logic       def_irq_o    // pulse: remote syndromes to be processed
);
  localparam int unsigned AW = $clog2(DEPTH);

  code_t mem [DEPTH];

  // FPGA block RAM comes out of configuration cleared; the all-zero word is a valid
  // codeword (data 0), so the scrubber finds no errors in unused words.
  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  // ---------------- port A: local bus or scrubber ----------------
  logic          loc_is_status;
  logic [AW-1:0] a_idx, b_idx;
  logic          a_we;
  code_t         a_wcode;
  logic          scrub_go;
  logic          scrub_stale;   // the word read by the scrubber was written since
  logic [AW-1:0] scrub_idx_q;

  assign loc_is_status = loc_req_i.addr[15:0] >= 16'(STATUS_OFS);
  assign scrub_go      = scrub_req_i.valid && !loc_req_i.valid;

  always_comb begin
    if (loc_req_i.valid) begin
      a_idx   = loc_req_i.addr[AW+1:2];
      a_we    = loc_req_i.we && !loc_is_status;
      a_wcode = ecc_encode(loc_req_i.wdata);
    end else begin
      a_idx   = scrub_req_i.addr[AW-1:0];
      a_we    = scrub_go && scrub_req_i.we && !scrub_stale;
      a_wcode = scrub_req_i.wcode;
    end
    b_idx = rem_req_i.addr[AW+1:2];
  end

  // A scrub write-back is dropped if the tile wrote the same word after the scrubber
  // read it, so a correction never overwrites newer data.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scrub_stale <= 1'b0;
      scrub_idx_q <= '0;
    end else if (scrub_go && !scrub_req_i.we) begin
      scrub_stale <= 1'b0;
      scrub_idx_q <= scrub_req_i.addr[AW-1:0];
    end else if (loc_req_i.valid && a_we && a_idx == scrub_idx_q) begin
      scrub_stale <= 1'b1;
    end
  end

  code_t a_rcode, b_rcode;
  always_ff @(posedge clk) begin
    a_rcode <= mem[a_idx];
    b_rcode <= mem[b_idx];
    if (a_we) mem[a_idx] <= a_wcode;
  end

  // ---------------- response bookkeeping ----------------
  logic       a_loc_rd, a_loc_wr, a_stat_rd, a_scrub_rd, a_scrub_wr, b_rd, b_wr;
  logic [1:0] a_stat_sel;
  logic [AW-1:0] b_idx_q;
  logic [31:0] def_cnt, loc_cnt;
  logic [AW-1:0] def_addr;
  logic        def_pending;
  logic        ckpt_q;

  word_t a_data, b_data;
  code_t a_fix_unused, b_fix_unused;
  logic  a_ce, a_ue, b_ce, b_ue;
  logic [5:0] a_syn_unused, b_syn_unused;

  secded_dec u_dec_a (.code_i(a_rcode), .data_o(a_data), .code_o(a_fix_unused),
                      .ce_o(a_ce), .ue_o(a_ue), .syndrome_o(a_syn_unused));
  secded_dec u_dec_b (.code_i(b_rcode), .data_o(b_data), .code_o(b_fix_unused),
                      .ce_o(b_ce), .ue_o(b_ue), .syndrome_o(b_syn_unused));

  logic loc_syn, rem_syn;
  assign loc_syn = a_loc_rd && (a_ce || a_ue);
  assign rem_syn = b_rd && (b_ce || b_ue);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_loc_rd <= 1'b0; a_loc_wr <= 1'b0; a_stat_rd <= 1'b0; a_stat_sel <= '0;
      a_scrub_rd <= 1'b0; a_scrub_wr <= 1'b0; b_rd <= 1'b0; b_wr <= 1'b0; b_idx_q <= '0;
      def_cnt <= '0; loc_cnt <= '0; def_addr <= '0; def_pending <= 1'b0; ckpt_q <= 1'b0;
    end else begin
      a_loc_rd   <= loc_req_i.valid && !loc_req_i.we && !loc_is_status;
      a_loc_wr   <= loc_req_i.valid &&  loc_req_i.we;
      a_stat_rd  <= loc_req_i.valid && !loc_req_i.we &&  loc_is_status;
      a_stat_sel <= loc_req_i.addr[3:2];
      a_scrub_rd <= scrub_go && !scrub_req_i.we;
      a_scrub_wr <= scrub_go &&  scrub_req_i.we;
      b_rd       <= rem_req_i.valid && !rem_req_i.we;
      b_wr       <= rem_req_i.valid &&  rem_req_i.we;
      b_idx_q    <= b_idx;
      ckpt_q     <= ckpt_active_i;

      if (loc_req_i.valid && loc_req_i.we && loc_is_status) begin
        if (loc_req_i.addr[3:2] == 2'd0) def_cnt <= '0;
        if (loc_req_i.addr[3:2] == 2'd2) loc_cnt <= '0;
      end
      if (loc_syn) loc_cnt <= loc_cnt + 1;
      if (rem_syn) begin
        def_cnt  <= def_cnt + 1;
        def_addr <= b_idx_q;
        if (ckpt_active_i) def_pending <= 1'b1;
      end
      if (ckpt_q && !ckpt_active_i) def_pending <= 1'b0;
    end
  end

  // deferred report when the checkpoint ends; immediate report outside a checkpoint
  assign def_irq_o = (def_pending && ckpt_q && !ckpt_active_i) ||
                     (rem_syn && !ckpt_active_i);
  assign loc_ecc_o = loc_syn;

  always_comb begin
    loc_rsp_o       = BUS_RSP_IDLE;
    loc_rsp_o.ready = 1'b1;
    loc_rsp_o.valid = a_loc_rd || a_loc_wr || a_stat_rd;
    if (a_loc_rd) begin
      loc_rsp_o.rdata = a_data;
      loc_rsp_o.err   = a_ue;
    end else if (a_stat_rd) begin
      unique case (a_stat_sel)
        2'd0:    loc_rsp_o.rdata = def_cnt;
        2'd1:    loc_rsp_o.rdata = word_t'(def_addr);
        2'd2:    loc_rsp_o.rdata = loc_cnt;
        default: loc_rsp_o.rdata = '0;
      endcase
    end

    rem_rsp_o       = BUS_RSP_IDLE;
    rem_rsp_o.ready = 1'b1;
    rem_rsp_o.valid = b_rd || b_wr;
    rem_rsp_o.err   = b_wr || (b_rd && b_ue);     // read-only for other tiles
    rem_rsp_o.rdata = b_rd ? b_data : '0;

    scrub_rsp_o.ready = !loc_req_i.valid;
    scrub_rsp_o.valid = a_scrub_rd || a_scrub_wr;
    scrub_rsp_o.rcode = a_rcode;
  end

  // a request must be held stable until accepted (ready is always 1 here, so every
  // request is a single cycle); the scrub port must hold while not ready
  property p_scrub_hold;
    @(posedge clk) disable iff (!rst_n)
      scrub_req_i.valid && !scrub_rsp_o.ready |=> scrub_req_i.valid && $stable(scrub_req_i.addr);
  endproperty
  a_scrub_hold: assert property (p_scrub_hold);
endmodule
