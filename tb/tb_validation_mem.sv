// tb_validation_mem: self-checking test of the validation memory.
//
// Checks: local write/read-back with a one-cycle response; remote reads see the data;
// remote writes are refused (err) and change nothing; a single-bit upset is corrected
// on read and reported (loc_ecc_o, LOC_CNT); a double-bit upset is answered with err;
// remote syndromes during a checkpoint are held back and reported by exactly one
// def_irq_o pulse when the checkpoint ends, and reported at once outside a checkpoint;
// the scrub port reads raw codewords, writes back, yields to local requests, and drops
// a write-back to a word the tile rewrote in between. Upsets are injected by flipping
// bits of the memory array directly. Expected values come from the words written and
// the encoder function of the package.
module tb_validation_mem;
  import rp_pkg::*;

  logic clk = 0, rst_n = 0, ckpt = 0;
  bus_req_t lreq, rreq;
  bus_rsp_t lrsp, rrsp;
  scrub_req_t sreq;
  scrub_rsp_t srsp;
  logic loc_ecc, def_irq;
  int checks = 0, failures = 0;
  int def_pulses = 0, ecc_pulses = 0;

  validation_mem #(.DEPTH(64)) dut (
    .clk, .rst_n, .ckpt_active_i(ckpt), .loc_req_i(lreq), .loc_rsp_o(lrsp),
    .rem_req_i(rreq), .rem_rsp_o(rrsp), .scrub_req_i(sreq), .scrub_rsp_o(srsp),
    .loc_ecc_o(loc_ecc), .def_irq_o(def_irq));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (def_irq) def_pulses++;
    if (loc_ecc) ecc_pulses++;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic loc(input logic we, input word_t addr, input word_t wd,
                     output word_t rd, output logic err);
    @(negedge clk);
    lreq = '{valid: 1'b1, we: we, addr: addr, wdata: wd};
    @(negedge clk);
    lreq = '0;
    check(lrsp.valid, "local response one cycle after request");
    rd = lrsp.rdata; err = lrsp.err;
  endtask

  task automatic rem(input logic we, input word_t addr, output word_t rd, output logic err);
    @(negedge clk);
    rreq = '{valid: 1'b1, we: we, addr: addr, wdata: 32'hDEAD_BEEF};
    @(negedge clk);
    rreq = '0;
    check(rrsp.valid, "remote response one cycle after request");
    rd = rrsp.rdata; err = rrsp.err;
  endtask

  task automatic scrub(input logic we, input int idx, input code_t wc, output code_t rc);
    @(negedge clk);
    sreq = '{valid: 1'b1, we: we, addr: word_t'(idx), wcode: wc};
    while (!srsp.ready) @(negedge clk);
    @(negedge clk);
    sreq = '0;
    check(srsp.valid, "scrub response");
    rc = srsp.rcode;
  endtask

  function automatic word_t pat(int i);
    return 32'h1234_0000 ^ (i * 32'h0101_0101);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t rd; logic err; code_t rc; int p0;
    lreq = '0; rreq = '0; sreq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) loc(1, TA_VMEM_BASE + 4 * i, pat(i), rd, err);
    for (int i = 0; i < 64; i++) begin
      loc(0, TA_VMEM_BASE + 4 * i, 0, rd, err);
      check(rd == pat(i) && !err, "local read-back");
    end
    for (int i = 0; i < 64; i += 7) begin
      rem(0, 4 * i, rd, err);
      check(rd == pat(i) && !err, "remote read");
    end
    rem(1, 4 * 3, rd, err);
    check(err, "remote write refused");
    loc(0, TA_VMEM_BASE + 12, 0, rd, err);
    check(rd == pat(3), "remote write left data unchanged");

    // single-bit upset, local read
    dut.mem[5] = dut.mem[5] ^ 39'h10;
    p0 = ecc_pulses;
    loc(0, TA_VMEM_BASE + 20, 0, rd, err);
    check(rd == pat(5) && !err, "single upset corrected on local read");
    @(negedge clk);
    check(ecc_pulses == p0 + 1, "local syndrome reported");
    loc(0, TA_VMEM_BASE + 32'h8008, 0, rd, err);
    check(rd == 1, "LOC_CNT counts the syndrome");

    // double-bit upset
    dut.mem[9] = dut.mem[9] ^ 39'h3;
    loc(0, TA_VMEM_BASE + 36, 0, rd, err);
    check(err, "double upset answered with err");

    // deferral during a checkpoint
    @(negedge clk); ckpt = 1;
    p0 = def_pulses;
    rem(0, 20, rd, err);
    check(rd == pat(5) && !err, "remote read corrected");
    rem(0, 20, rd, err);
    repeat (5) @(negedge clk);
    check(def_pulses == p0, "no report while checkpoint active");
    loc(0, TA_VMEM_BASE + 32'h8000, 0, rd, err);
    check(rd == 2, "DEF_CNT counts deferred syndromes");
    loc(0, TA_VMEM_BASE + 32'h8004, 0, rd, err);
    check(rd == 5, "DEF_ADDR holds the word index");
    @(negedge clk); ckpt = 0;
    repeat (4) @(negedge clk);
    check(def_pulses == p0 + 1, "one report when checkpoint ends");
    p0 = def_pulses;
    rem(0, 20, rd, err);
    @(negedge clk);
    check(def_pulses == p0 + 1, "immediate report outside a checkpoint");

    // scrub port: raw read, write-back of the corrected code
    scrub(0, 5, '0, rc);
    check(rc == (ecc_encode(pat(5)) ^ 39'h10), "scrub reads raw codeword");
    scrub(1, 5, ecc_encode(pat(5)), rc);
    p0 = ecc_pulses;
    loc(0, TA_VMEM_BASE + 20, 0, rd, err);
    @(negedge clk);
    check(rd == pat(5) && ecc_pulses == p0, "word clean after write-back");

    // scrub yields to a local request
    @(negedge clk);
    sreq = '{valid: 1'b1, we: 1'b0, addr: 7, wcode: '0};
    lreq = '{valid: 1'b1, we: 1'b0, addr: TA_VMEM_BASE + 28, wdata: 0};
    #1 check(!srsp.ready, "scrub not ready while local request");
    @(negedge clk); lreq = '0;
    @(negedge clk); sreq = '0;

    // stale write-back dropped
    scrub(0, 7, '0, rc);
    loc(1, TA_VMEM_BASE + 28, 32'hCAFE_F00D, rd, err);
    scrub(1, 7, rc, rc);
    loc(0, TA_VMEM_BASE + 28, 0, rd, err);
    check(rd == 32'hCAFE_F00D, "stale scrub write-back dropped");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
