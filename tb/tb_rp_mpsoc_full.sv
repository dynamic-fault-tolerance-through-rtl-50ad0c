// tb_rp_mpsoc_full: the end-to-end scenario of tb_mpsoc_scenario.svh on the MPSoC with
// every parameter at its default (six tiles, 1024-word validation memories, 128 MiB
// main-memory segments, 1 s checkpoint period at 100 MHz). The scenario reprograms the
// checkpoint period register at run time, and checks the global scrubber on an upset
// planted just ahead of its walk position rather than waiting for a full pass.
module tb_rp_mpsoc_full;
  import rp_pkg::*;

  localparam int    N      = 6;
  localparam int    VMEM_D = 1024;
  localparam word_t SEG    = 32'h0800_0000;

  logic clk = 0, rst_n = 0;
  bus_req_t   core_req [N];  bus_rsp_t core_rsp [N];
  bus_req_t   per_req  [N];  bus_rsp_t per_rsp  [N];
  logic [2:0] periph_irq [N];
  dbg_cmd_t   dbg_cmd  [N];  dbg_rsp_t dbg_rsp  [N];
  logic [N-1:0] core_irq, core_rst, ckpt_active;
  bus_req_t mm_req, nv_req; bus_rsp_t mm_rsp, nv_rsp;
  scrub_req_t mm_sreq, no_sreq; scrub_rsp_t mm_srsp, nv_srsp_unused;
  scrub_rsp_t per_srsp_unused [N];
  logic gscrub_irq;
  logic [N-1:0] io_member, io_push, io_mismatch, io_overflow;
  logic [3:0] io_data [N];
  logic [3:0] io_pins;
  logic io_vote;

  assign no_sreq = '0;
  always #5 clk = ~clk;

  rp_mpsoc dut (
    .clk, .rst_n,
    .core_req_i(core_req), .core_rsp_o(core_rsp), .core_irq_o(core_irq), .core_rst_o(core_rst),
    .periph_req_o(per_req), .periph_rsp_i(per_rsp), .periph_irq_i(periph_irq),
    .dbg_cmd_i(dbg_cmd), .dbg_rsp_o(dbg_rsp), .ckpt_active_o(ckpt_active),
    .mm_req_o(mm_req), .mm_rsp_i(mm_rsp), .mm_scrub_req_o(mm_sreq), .mm_scrub_rsp_i(mm_srsp),
    .gscrub_irq_o(gscrub_irq), .nv_req_o(nv_req), .nv_rsp_i(nv_rsp),
    .io_member_i(io_member), .io_push_i(io_push), .io_data_i(io_data), .io_pins_o(io_pins),
    .io_vote_o(io_vote), .io_mismatch_o(io_mismatch), .io_overflow_o(io_overflow));

  tb_mem_model #(.SBASE(32'h8000_0000 / 4)) u_mm (.clk, .req_i(mm_req), .rsp_o(mm_rsp), .sreq_i(mm_sreq), .srsp_o(mm_srsp));
  tb_mem_model u_nv (.clk, .req_i(nv_req), .rsp_o(nv_rsp), .sreq_i(no_sreq), .srsp_o(nv_srsp_unused));
  for (genvar t = 0; t < N; t++) begin : g_per
    tb_mem_model u_per (.clk, .req_i(per_req[t]), .rsp_o(per_rsp[t]), .sreq_i(no_sreq),
                        .srsp_o(per_srsp_unused[t]));
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  `include "tb_mpsoc_scenario.svh"
endmodule
