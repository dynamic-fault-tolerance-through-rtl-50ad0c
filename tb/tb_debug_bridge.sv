// tb_debug_bridge: self-checking test of the supervisor debug bridge.
//
// A behavioural bus slave (a small word memory with random ready and random response
// delay, err for addresses with bit 31 set) sits behind the bridge. The supervisor
// side writes and reads words, checks that each command returns exactly one result
// with the right data and err, that cmd.ready is low while a command is in flight, and
// that DBG_RESET drives the core reset line.
module tb_debug_bridge;
  import rp_pkg::*;

  logic clk = 0, rst_n = 0;
  dbg_cmd_t cmd; dbg_rsp_t rsp;
  bus_req_t breq; bus_rsp_t brsp;
  logic core_rst;
  word_t smem [16];
  int checks = 0, failures = 0, results = 0;

  debug_bridge dut (.clk, .rst_n, .cmd_i(cmd), .rsp_o(rsp), .bus_req_o(breq),
                    .bus_rsp_i(brsp), .core_rst_o(core_rst));

  always #5 clk = ~clk;

  // behavioural slave
  logic rdy; int delay; logic pend; word_t prd; logic perr;
  always @(negedge clk) rdy = ($urandom_range(2) != 0);
  always_comb begin
    brsp = BUS_RSP_IDLE;
    brsp.ready = rdy && !pend;
    brsp.valid = pend && delay == 0;
    brsp.err   = perr;
    brsp.rdata = prd;
  end
  always @(posedge clk) begin
    if (rsp.valid) results++;
    if (pend) begin
      if (delay == 0) pend <= 0; else delay <= delay - 1;
    end else if (breq.valid && rdy) begin
      pend  <= 1;
      delay <= $urandom_range(3);
      perr  <= breq.addr[31];
      prd   <= breq.we ? 32'h0 : smem[breq.addr[5:2]];
      if (breq.we && !breq.addr[31]) smem[breq.addr[5:2]] <= breq.wdata;
    end
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic sup(input dbg_op_e op, input word_t addr, input word_t wd,
                     output word_t rd, output logic err);
    int r0;
    r0 = results;
    @(negedge clk);
    while (!rsp.ready) @(negedge clk);
    cmd = '{valid: 1'b1, op: op, addr: addr, wdata: wd};
    @(negedge clk);
    cmd = '0;
    #1 check(!rsp.ready || rsp.valid, "busy after accepting");
    while (!rsp.valid) @(negedge clk);
    rd = rsp.rdata; err = rsp.err;
    @(negedge clk);
    check(results == r0 + 1, "exactly one result per command");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t rd; logic err;
    cmd = '0; pend = 0; delay = 0; prd = '0; perr = 0;
    for (int i = 0; i < 16; i++) smem[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(!core_rst, "core reset released after reset");
    for (int i = 0; i < 16; i++) sup(DBG_WRITE, 4 * i, 32'h5000 + i * 3, rd, err);
    for (int i = 0; i < 16; i++) begin
      sup(DBG_READ, 4 * i, 0, rd, err);
      check(rd == 32'h5000 + i * 3 && !err, "supervisor read-back");
    end
    sup(DBG_READ, 32'h8000_0000, 0, rd, err);
    check(err, "bus error passed to supervisor");
    sup(DBG_RESET, 0, 1, rd, err);
    check(core_rst && !err, "reset asserted");
    sup(DBG_RESET, 0, 0, rd, err);
    check(!core_rst, "reset released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
