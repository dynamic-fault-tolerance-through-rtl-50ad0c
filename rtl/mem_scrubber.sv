// mem_scrubber: background scrubber for an ECC-protected memory.
//
// Every INTERVAL cycles (while enabled) it reads the raw codeword at the next word
// index through a scrub port, decodes it, and
//   * on a correctable (single-bit) error writes the corrected codeword back,
//   * on an uncorrectable error leaves the word alone and records it,
// then moves on, wrapping after DEPTH words. Each error found raises irq_o for one
// cycle and is counted. The memory decides when a scrub access is served (ready).
//
// Control/status bus slave (byte offsets):
//   0x00 CTRL     bit0 enable (reset value 1)
//   0x04 INTERVAL cycles between scrub steps (reset value INTERVAL)
//   0x08 CE_CNT   corrected words since reset (write clears)
//   0x0C UE_CNT   uncorrectable words since reset (write clears)
//   0x10 LAST     word index of the last error found
//   0x14 PASSES   completed passes over the memory
// The bus slave accepts every request at once and answers one cycle later.
//
// The paper's architecture figure shows a memory scrubber next to each tile's
// validation memory and next to main memory; it does not describe how it works.
// Everything here (walk order, interval, register map) is this design's choice.
module mem_scrubber
  import rp_pkg::*;
#(
  parameter int unsigned DEPTH    = 1024,
  parameter int unsigned INTERVAL = 256
) (
  input  logic       clk,
  input  logic       rst_n,
  input  bus_req_t   cfg_req_i,
  output bus_rsp_t   cfg_rsp_o,
  output scrub_req_t scrub_req_o,
  input  scrub_rsp_t scrub_rsp_i,
  output logic       irq_o
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  typedef enum logic [2:0] {S_WAIT, S_READ, S_RDRSP, S_WRITE, S_WRRSP} state_t;
  state_t state;

  logic          enable;
  logic [31:0]   interval, timer, ce_cnt, ue_cnt, passes;
  logic [AW-1:0] idx, last_err;
  code_t         fixed;

  code_t      dec_code;
  word_t      dec_data_unused;
  logic       dec_ce, dec_ue;
  logic [5:0] dec_syn_unused;
  secded_dec u_dec (.code_i(scrub_rsp_i.rcode), .data_o(dec_data_unused), .code_o(dec_code),
                    .ce_o(dec_ce), .ue_o(dec_ue), .syndrome_o(dec_syn_unused));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_WAIT;
      enable   <= 1'b1;
      interval <= INTERVAL;
      timer    <= '0;
      ce_cnt   <= '0;
      ue_cnt   <= '0;
      passes   <= '0;
      idx      <= '0;
      last_err <= '0;
      fixed    <= '0;
      irq_o    <= 1'b0;
    end else begin
      irq_o <= 1'b0;
      unique case (state)
        S_WAIT: begin
          if (enable) begin
            if (timer + 1 >= interval) begin
              timer <= '0;
              state <= S_READ;
            end else begin
              timer <= timer + 1;
            end
          end
        end
        S_READ:  if (scrub_rsp_i.ready) state <= S_RDRSP;
        S_RDRSP: if (scrub_rsp_i.valid) begin
          if (dec_ce) begin
            ce_cnt   <= ce_cnt + 1;
            last_err <= idx;
            fixed    <= dec_code;
            irq_o    <= 1'b1;
            state    <= S_WRITE;
          end else begin
            if (dec_ue) begin
              ue_cnt   <= ue_cnt + 1;
              last_err <= idx;
              irq_o    <= 1'b1;
            end
            state <= S_WAIT;
          end
          if (!dec_ce) begin
            if (idx == AW'(DEPTH - 1)) begin idx <= '0; passes <= passes + 1; end
            else idx <= idx + 1;
          end
        end
        S_WRITE: if (scrub_rsp_i.ready) state <= S_WRRSP;
        S_WRRSP: if (scrub_rsp_i.valid) begin
          state <= S_WAIT;
          if (idx == AW'(DEPTH - 1)) begin idx <= '0; passes <= passes + 1; end
          else idx <= idx + 1;
        end
        default: state <= S_WAIT;
      endcase

      // configuration writes (after the FSM so that a clear wins)
      if (cfg_req_i.valid && cfg_req_i.we) begin
        unique case (cfg_req_i.addr[4:2])
          3'd0: enable   <= cfg_req_i.wdata[0];
          3'd1: interval <= (cfg_req_i.wdata == 0) ? 32'd1 : cfg_req_i.wdata;
          3'd2: ce_cnt   <= '0;
          3'd3: ue_cnt   <= '0;
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    scrub_req_o       = '0;
    scrub_req_o.valid = (state == S_READ) || (state == S_WRITE);
    scrub_req_o.we    = (state == S_WRITE);
    scrub_req_o.addr  = word_t'(idx);
    scrub_req_o.wcode = fixed;
  end

  // configuration read port, one-cycle response
  logic        cfg_v, cfg_we_q;
  logic [2:0]  cfg_sel;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_v <= 1'b0; cfg_we_q <= 1'b0; cfg_sel <= '0;
    end else begin
      cfg_v    <= cfg_req_i.valid;
      cfg_we_q <= cfg_req_i.we;
      cfg_sel  <= cfg_req_i.addr[4:2];
    end
  end

  always_comb begin
    cfg_rsp_o       = BUS_RSP_IDLE;
    cfg_rsp_o.ready = 1'b1;
    cfg_rsp_o.valid = cfg_v;
    if (cfg_v && !cfg_we_q) begin
      unique case (cfg_sel)
        3'd0:    cfg_rsp_o.rdata = {31'd0, enable};
        3'd1:    cfg_rsp_o.rdata = interval;
        3'd2:    cfg_rsp_o.rdata = ce_cnt;
        3'd3:    cfg_rsp_o.rdata = ue_cnt;
        3'd4:    cfg_rsp_o.rdata = word_t'(last_err);
        3'd5:    cfg_rsp_o.rdata = passes;
        default: cfg_rsp_o.rdata = '0;
      endcase
    end
  end

  a_scrub_hold: assert property (@(posedge clk) disable iff (!rst_n)
    scrub_req_o.valid && !scrub_rsp_i.ready |=> scrub_req_o.valid && $stable(scrub_req_o.addr));
endmodule
