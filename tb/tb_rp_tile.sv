// tb_rp_tile: self-checking test of one tile with its global side and peripherals
// replaced by behavioural memories.
//
// The core port (driven by the testbench in place of the processor) and the
// supervisor's debug link exercise: validation memory read/write and supervisor
// introspection of it; the read-only remote port; translation of the private segment
// and refusal of writes to the global read-only window; the peripheral window; the
// time-triggered checkpoint interrupt and the supervisor-induced one; core reset from
// the supervisor; and background correction of a validation-memory upset by the tile
// scrubber.
module tb_rp_tile;
  import rp_pkg::*;

  localparam word_t SEG = 32'h0000_1000;
  localparam int    TID = 4;

  logic clk = 0, rst_n = 0;
  bus_req_t creq, preq, greq, vreq;
  bus_rsp_t crsp, prsp, grsp, vrsp;
  dbg_cmd_t dcmd; dbg_rsp_t drsp;
  logic irq, crst, ckpt;
  scrub_req_t no_sreq = '0;
  scrub_rsp_t sr_unused [2];
  int checks = 0, failures = 0;

  rp_tile #(.N_TILES(6), .VMEM_DEPTH(64), .SCRUB_INTERVAL(8), .CKPT_PERIOD(200),
            .SEG_BYTES(SEG)) dut (
    .clk, .rst_n, .tile_id_i(8'(TID)),
    .core_req_i(creq), .core_rsp_o(crsp), .core_irq_o(irq), .core_rst_o(crst),
    .periph_req_o(preq), .periph_rsp_i(prsp), .periph_irq_i(3'b000),
    .dbg_cmd_i(dcmd), .dbg_rsp_o(drsp),
    .g_req_o(greq), .g_rsp_i(grsp), .vmem_req_i(vreq), .vmem_rsp_o(vrsp),
    .ckpt_active_o(ckpt));

  tb_mem_model #(.AW(32)) u_glob (.clk, .req_i(greq), .rsp_o(grsp), .sreq_i(no_sreq), .srsp_o(sr_unused[0]));
  tb_mem_model #(.AW(32)) u_per  (.clk, .req_i(preq), .rsp_o(prsp), .sreq_i(no_sreq), .srsp_o(sr_unused[1]));

  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic core(input logic we, input word_t a, input word_t wd, output word_t rd, output logic err);
    @(negedge clk);
    creq = '{valid: 1'b1, we: we, addr: a, wdata: wd};
    #1;
    while (!crsp.ready) begin @(negedge clk); #1; end
    @(negedge clk);
    creq = '0;
    while (!crsp.valid) @(negedge clk);
    rd = crsp.rdata; err = crsp.err;
  endtask

  task automatic sup(input dbg_op_e op, input word_t a, input word_t wd, output word_t rd, output logic err);
    @(negedge clk);
    while (!drsp.ready) @(negedge clk);
    dcmd = '{valid: 1'b1, op: op, addr: a, wdata: wd};
    @(negedge clk);
    dcmd = '0;
    while (!drsp.valid) @(negedge clk);
    rd = drsp.rdata; err = drsp.err;
  endtask

  task automatic remote(input logic we, input word_t a, output word_t rd, output logic err);
    @(negedge clk);
    vreq = '{valid: 1'b1, we: we, addr: a, wdata: 32'hBAD};
    @(negedge clk);
    vreq = '0;
    rd = vrsp.rdata; err = vrsp.err;
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t rd; logic err; int t0;
    creq = '0; dcmd = '0; vreq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // stop the scrubber during the functional part
    core(1, TA_SCRUB_BASE, 0, rd, err);
    // validation memory: core writes a checksum, supervisor and other tiles read it
    core(1, TA_VMEM_BASE + 16, 32'hC0FFEE01, rd, err);
    core(0, TA_VMEM_BASE + 16, 0, rd, err);
    check(rd == 32'hC0FFEE01 && !err, "core reads its validation memory");
    sup(DBG_READ, TA_VMEM_BASE + 16, 0, rd, err);
    check(rd == 32'hC0FFEE01 && !err, "supervisor introspection through the debug bridge");
    remote(0, 16, rd, err);
    check(rd == 32'hC0FFEE01 && !err, "other tiles read the checksum");
    remote(1, 16, rd, err);
    check(err, "other tiles cannot write");
    // private segment translation
    core(1, TA_PRIV_BASE + 32'h40, 32'h1111, rd, err);
    check(!err && u_glob.mem.exists((32'h8000_0000 + TID * SEG + 32'h40) >> 2), "private segment mapped by tile id");
    core(0, TA_GLOB_BASE + TID * SEG + 32'h40, 0, rd, err);
    check(rd == 32'h1111 && !err, "own data visible through global read-only window");
    core(1, TA_GLOB_BASE + 32'h40, 32'h2222, rd, err);
    check(err, "global window is read-only");
    core(0, 32'h3000_0000, 0, rd, err);
    check(err, "unmapped address refused");
    // peripherals
    core(1, TA_PERIPH_BASE + 8, 32'h77, rd, err);
    core(0, TA_PERIPH_BASE + 8, 0, rd, err);
    check(rd == 32'h77 && !err, "peripheral window");
    // checkpoint timer interrupt
    core(1, TA_IRQ_BASE + 0, 32'hFF, rd, err);
    t0 = $time;
    while (!irq) @(negedge clk);
    check(($time - t0) / 10 <= 201, "timer checkpoint within one period");
    core(0, TA_IRQ_BASE, 0, rd, err);
    check(rd[IRQ_CKPT_TMR], "timer checkpoint pending");
    core(1, TA_IRQ_BASE + 8, 0, rd, err);   // stop timer
    core(1, TA_IRQ_BASE, 32'hFF, rd, err);
    check(!irq, "interrupt cleared");
    // supervisor-induced checkpoint
    sup(DBG_WRITE, TA_IRQ_BASE + 16, 32'(1 << IRQ_CKPT_SUP), rd, err);
    @(negedge clk);
    check(irq, "supervisor-induced checkpoint interrupt");
    core(0, TA_IRQ_BASE, 0, rd, err);
    check(rd == 32'(1 << IRQ_CKPT_SUP), "supervisor checkpoint bit");
    core(1, TA_IRQ_BASE, 32'hFF, rd, err);
    // reset by the supervisor
    sup(DBG_RESET, 0, 1, rd, err);
    check(crst, "supervisor holds the core in reset");
    sup(DBG_RESET, 0, 0, rd, err);
    check(!crst, "supervisor releases the core");
    // scrubber corrects an upset in the background
    dut.u_vmem.mem[4] = dut.u_vmem.mem[4] ^ 39'h100;
    core(1, TA_SCRUB_BASE, 1, rd, err);
    repeat (64 * 12) @(negedge clk);
    check(dut.u_vmem.mem[4] == ecc_encode(32'hC0FFEE01), "scrubber repaired the word");
    core(0, TA_SCRUB_BASE + 8, 0, rd, err);
    check(rd == 1, "scrubber counted one correction");
    core(0, TA_IRQ_BASE, 0, rd, err);
    check(rd[IRQ_SCRUB], "scrubber interrupt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
