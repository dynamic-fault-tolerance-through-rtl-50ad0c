// tb_irq_ctrl: self-checking test of the interrupt controller and checkpoint timer.
//
// Checks that the timer raises the checkpoint interrupt exactly every CKPT_PERIOD
// cycles (the period register is changed at run time too), that a period of 0 stops
// it, that the supervisor's write-1-to-set raises the supervisor checkpoint bit,
// that source pulses latch, that write-1-to-clear and ENABLE masking work on irq_o,
// and that CKPT_ACTIVE is exported.
module tb_irq_ctrl;
  import rp_pkg::*;

  logic clk = 0, rst_n = 0;
  bus_req_t req; bus_rsp_t rsp;
  logic [IRQ_N-1:0] src;
  logic irq, ckpt;
  int checks = 0, failures = 0;
  int cyc = 0, ticks = 0, first_tick = -1, last_tick = -1, bad_gap = 0, gap_expect = 10;

  irq_ctrl #(.CKPT_PERIOD(10)) dut (.clk, .rst_n, .req_i(req), .rsp_o(rsp), .src_i(src),
                                    .irq_o(irq), .ckpt_active_o(ckpt));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && dut.tick) begin
      ticks++;
      if (last_tick >= 0 && cyc - last_tick != gap_expect) bad_gap++;
      if (first_tick < 0) first_tick = cyc;
      last_tick = cyc;
    end
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic acc(input logic we, input int ofs, input word_t wd, output word_t rd);
    @(negedge clk);
    req = '{valid: 1'b1, we: we, addr: TA_IRQ_BASE + ofs, wdata: wd};
    @(negedge clk);
    req = '0;
    check(rsp.valid, "response one cycle later");
    rd = rsp.rdata;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t rd;
    req = '0; src = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (55) @(negedge clk);
    check(ticks == 5, "five ticks in 55 cycles at period 10");
    check(bad_gap == 0, "ticks exactly 10 cycles apart");
    acc(0, 0, 0, rd);
    check(rd[IRQ_CKPT_TMR] && irq, "timer interrupt pending");
    acc(1, 8, 0, rd);                       // stop the timer
    acc(1, 0, 32'hFF, rd);                  // clear all
    repeat (30) @(negedge clk);
    acc(0, 0, 0, rd);
    check(rd == 0 && !irq, "period 0 stops the timer, W1C clears");
    // supervisor-induced checkpoint
    acc(1, 16, 32'(1 << IRQ_CKPT_SUP), rd);
    acc(0, 0, 0, rd);
    check(rd == 32'(1 << IRQ_CKPT_SUP) && irq, "supervisor set raises checkpoint interrupt");
    // masking
    acc(1, 4, ~(32'(1 << IRQ_CKPT_SUP)), rd);
    #1 check(!irq, "ENABLE masks irq_o");
    acc(1, 4, 32'hFF, rd);
    #1 check(irq, "unmask");
    acc(1, 0, 32'(1 << IRQ_CKPT_SUP), rd);
    #1 check(!irq, "W1C");
    // source pulse
    @(negedge clk); src[IRQ_SCRUB] = 1; @(negedge clk); src = '0;
    acc(0, 0, 0, rd);
    check(rd == 32'(1 << IRQ_SCRUB) && irq, "source pulse latched");
    acc(1, 0, 32'hFF, rd);
    // checkpoint active flag
    acc(1, 12, 1, rd);
    check(ckpt, "CKPT_ACTIVE set");
    acc(1, 12, 0, rd);
    check(!ckpt, "CKPT_ACTIVE cleared");
    // new period 7
    ticks = 0; last_tick = -1; gap_expect = 7;
    acc(1, 8, 7, rd);
    acc(1, 20, 0, rd);
    repeat (71) @(negedge clk);
    check(ticks == 10 && bad_gap == 0, "period 7 after reprogramming");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
