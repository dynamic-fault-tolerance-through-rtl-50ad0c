// irq_ctrl: a tile's interrupt controller and checkpoint timer.
//
// Checkpoints in this architecture are time-triggered, and the supervisor can also
// induce one through an interrupt (for instance after assigning new threads). This
// block provides both: a free-running timer that raises IRQ_CKPT_TMR every
// CKPT_PERIOD cycles, and a write-1-to-set register through which the supervisor
// (via the tile's debug bridge) raises IRQ_CKPT_SUP. Other sources (ECC syndromes,
// scrubber, peripheral lines) arrive as pulses on src_i and set their pending bit.
// irq_o = OR of pending & enable, a level to the core.
//
// The checkpoint handler writes CKPT_ACTIVE = 1 on entry and 0 on exit; the level is
// exported (ckpt_active_o) so that the validation memory can defer remote ECC
// syndromes until the checkpoint is over.
//
// Registers (byte offsets), one-cycle bus response:
//   0x00 PENDING      read; write 1 to clear a bit
//   0x04 ENABLE       read/write, reset all enabled
//   0x08 CKPT_PERIOD  timer period in cycles, 0 stops the timer
//   0x0C CKPT_ACTIVE  bit0, checkpoint in progress
//   0x10 SET          write 1 to set a pending bit (supervisor-induced checkpoint)
//   0x14 TIMER        current timer value, writing restarts it from 0
//
// The paper gives the two ways a checkpoint is triggered and the checkpoint periods
// (20 Hz in its benchmarks, 1 s to 5 s in orbit); the register map, the sources and
// the default period (1 s at an assumed 100 MHz clock) are this design's choices.
module irq_ctrl
  import rp_pkg::*;
#(
  parameter int unsigned CKPT_PERIOD = 100_000_000
) (
  input  logic             clk,
  input  logic             rst_n,
  input  bus_req_t         req_i,
  output bus_rsp_t         rsp_o,
  input  logic [IRQ_N-1:0] src_i,          // event pulses
  output logic             irq_o,
  output logic             ckpt_active_o
);
  logic [IRQ_N-1:0] pending, enable;
  logic [31:0]      period, timer;
  logic             tick;

  assign tick = (period != 0) && (timer + 1 >= period);

  // bits set and cleared in this cycle
  logic [IRQ_N-1:0] set, clr;
  always_comb begin
    set = src_i;
    clr = '0;
    set[IRQ_CKPT_TMR] = tick;
    if (req_i.valid && req_i.we) begin
      if (req_i.addr[4:2] == 3'd0) clr = req_i.wdata[IRQ_N-1:0];
      if (req_i.addr[4:2] == 3'd4) set = set | req_i.wdata[IRQ_N-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending       <= '0;
      enable        <= '1;
      period        <= CKPT_PERIOD;
      timer         <= '0;
      ckpt_active_o <= 1'b0;
    end else begin
      if (period == 0)   timer <= '0;
      else if (tick)     timer <= '0;
      else               timer <= timer + 1;
      if (req_i.valid && req_i.we) begin
        unique case (req_i.addr[4:2])
          3'd1: enable <= req_i.wdata[IRQ_N-1:0];
          3'd2: period <= req_i.wdata;
          3'd3: ckpt_active_o <= req_i.wdata[0];
          3'd5: timer <= '0;
          default: ;
        endcase
      end
      pending <= (pending & ~clr) | set;
    end
  end

  assign irq_o = |(pending & enable);

  logic       rv, rwe;
  logic [2:0] rsel;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rv <= 1'b0; rwe <= 1'b0; rsel <= '0;
    end else begin
      rv <= req_i.valid; rwe <= req_i.we; rsel <= req_i.addr[4:2];
    end
  end

  always_comb begin
    rsp_o       = BUS_RSP_IDLE;
    rsp_o.ready = 1'b1;
    rsp_o.valid = rv;
    if (rv && !rwe) begin
      unique case (rsel)
        3'd0:    rsp_o.rdata = word_t'(pending);
        3'd1:    rsp_o.rdata = word_t'(enable);
        3'd2:    rsp_o.rdata = period;
        3'd3:    rsp_o.rdata = {31'd0, ckpt_active_o};
        3'd5:    rsp_o.rdata = timer;
        default: rsp_o.rdata = '0;
      endcase
    end
  end
endmodule
