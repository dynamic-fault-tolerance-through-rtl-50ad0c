// debug_bridge: the off-chip supervisor's way into one tile.
//
// The supervisor sends commands (dbg_cmd_t): DBG_READ and DBG_WRITE become a bus
// transaction on the tile's local interconnect, so the supervisor can inspect and
// change anything the tile's core can reach (validation memory, interrupt
// controller, scrubber, and through the MMU main memory); DBG_RESET drives the core's
// reset line with wdata[0] (1 holds the core in reset). Every command gets exactly one
// result on dbg_rsp_o. One command is handled at a time: cmd.ready is high while the
// bridge is idle, a bus command finishes when the bus answers, a reset command one
// cycle after it is accepted. core_rst_o is 0 after reset.
//
// The paper says a debug bridge on each tile gives the supervisor access for
// introspection and to trigger a reset. The command format is this design's own
// parallel stand-in for the serial debug link (e.g. JTAG) of the FPGA prototype.
module debug_bridge
  import rp_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  dbg_cmd_t cmd_i,
  output dbg_rsp_t rsp_o,
  output bus_req_t bus_req_o,
  input  bus_rsp_t bus_rsp_i,
  output logic     core_rst_o
);
  typedef enum logic [1:0] {B_IDLE, B_REQ, B_WAIT, B_DONE} state_t;
  state_t state;
  logic   we_q, err_q;
  word_t  addr_q, wdata_q, rdata_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= B_IDLE;
      we_q       <= 1'b0;
      err_q      <= 1'b0;
      addr_q     <= '0;
      wdata_q    <= '0;
      rdata_q    <= '0;
      core_rst_o <= 1'b0;
    end else begin
      unique case (state)
        B_IDLE: if (cmd_i.valid) begin
          addr_q  <= cmd_i.addr;
          wdata_q <= cmd_i.wdata;
          we_q    <= (cmd_i.op == DBG_WRITE);
          rdata_q <= '0;
          err_q   <= 1'b0;
          if (cmd_i.op == DBG_RESET) begin
            core_rst_o <= cmd_i.wdata[0];
            state      <= B_DONE;
          end else if (cmd_i.op == DBG_READ || cmd_i.op == DBG_WRITE) begin
            state <= B_REQ;
          end else begin
            err_q <= 1'b1;             // unknown command
            state <= B_DONE;
          end
        end
        B_REQ:  if (bus_rsp_i.ready) state <= B_WAIT;
        B_WAIT: if (bus_rsp_i.valid) begin
          rdata_q <= bus_rsp_i.rdata;
          err_q   <= bus_rsp_i.err;
          state   <= B_DONE;
        end
        B_DONE: state <= B_IDLE;
        default: state <= B_IDLE;
      endcase
    end
  end

  always_comb begin
    bus_req_o.valid = (state == B_REQ);
    bus_req_o.we    = we_q;
    bus_req_o.addr  = addr_q;
    bus_req_o.wdata = wdata_q;
    rsp_o.ready     = (state == B_IDLE);
    rsp_o.valid     = (state == B_DONE);
    rsp_o.err       = err_q;
    rsp_o.rdata     = rdata_q;
  end
endmodule
