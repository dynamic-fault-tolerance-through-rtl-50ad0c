// tb_bus_xbar: self-checking test of the crossbar.
//
// Three masters and three slaves (0x1xxx_xxxx, 0x2xxx_xxxx, and 0x3xxx_xxxx with
// 0x4... and up left unmapped). Slaves are behavioural word memories with random
// ready and random response delay; each flags any request that arrives while it still
// owes a response (the crossbar must keep one transaction per slave in flight).
// Every master writes its own words in every slave and reads them back; a reference
// memory in the testbench gives the expected data. Unmapped accesses must get err.
// Under permanent contention for one slave, round robin must never let a master wait
// for more than two other grants.
module tb_bus_xbar;
  import rp_pkg::*;

  localparam int NM = 3, NS = 3;
  logic clk = 0, rst_n = 0;
  bus_req_t mreq [NM]; bus_rsp_t mrsp [NM];
  bus_req_t sreq [NS]; bus_rsp_t srsp [NS];
  int checks = 0, failures = 0, overlap = 0;
  int grants [NM];
  int since [NM];
  int worst_wait = 0, cgrants = 0;
  logic contention = 0;

  bus_xbar #(.N_M(NM), .N_S(NS),
             .S_BASE({32'h3000_0000, 32'h2000_0000, 32'h1000_0000}),
             .S_MASK({32'hF000_0000, 32'hF000_0000, 32'hF000_0000})) dut (
    .clk, .rst_n, .m_req_i(mreq), .m_rsp_o(mrsp), .s_req_o(sreq), .s_rsp_i(srsp));

  always #5 clk = ~clk;

  // behavioural slaves
  word_t smem [NS][64];
  logic  srdy [NS], spend [NS];
  int    sdel [NS];
  word_t srd  [NS];
  for (genvar s = 0; s < NS; s++) begin : g_s
    always @(negedge clk) srdy[s] = ($urandom_range(3) != 0);
    always_comb begin
      srsp[s] = BUS_RSP_IDLE;
      srsp[s].ready = srdy[s];
      srsp[s].valid = spend[s] && sdel[s] == 0;
      srsp[s].rdata = srd[s];
    end
    always @(posedge clk) begin
      if (spend[s]) begin
        if (sreq[s].valid) overlap++;
        if (sdel[s] == 0) spend[s] <= 0; else sdel[s] <= sdel[s] - 1;
      end else if (sreq[s].valid && srdy[s]) begin
        spend[s] <= 1;
        sdel[s]  <= $urandom_range(2);
        srd[s]   <= sreq[s].we ? 32'h0 : smem[s][sreq[s].addr[7:2]];
        if (sreq[s].we) smem[s][sreq[s].addr[7:2]] <= sreq[s].wdata;
      end
    end
  end

  // grant monitor for the fairness check (slave 0 under contention)
  always @(posedge clk) begin
    if (contention && sreq[0].valid && srsp[0].ready) begin
      cgrants++;
      for (int m = 0; m < NM; m++) begin
        if (m == int'(dut.gnt[0])) since[m] = 0;
        else begin
          since[m]++;
          if (since[m] > worst_wait) worst_wait = since[m];
        end
      end
    end
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic acc(input int m, input logic we, input word_t a, input word_t wd,
                     output word_t rd, output logic err);
    @(negedge clk);
    mreq[m] = '{valid: 1'b1, we: we, addr: a, wdata: wd};
    #1;
    while (!mrsp[m].ready) begin @(negedge clk); #1; end
    @(negedge clk);
    mreq[m] = '0;
    while (!mrsp[m].valid) @(negedge clk);
    rd = mrsp[m].rdata; err = mrsp[m].err;
  endtask

  function automatic word_t addr_of(int s, int m, int i);
    return 32'h1000_0000 * (s + 1) + 4 * (m * 16 + i);
  endfunction

  initial begin
    repeat (40000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar m = 0; m < NM; m++) begin : g_m
    initial begin
      word_t rd; logic err;
      mreq[m] = '0;
      @(posedge rst_n);
      for (int r = 0; r < 3; r++)
        for (int i = 0; i < 16; i++)
          for (int s = 0; s < NS; s++)
            acc(m, 1, addr_of((s + m + r) % NS, m, i), {8'(m), 8'((s + m + r) % NS), 16'(i + r)}, rd, err);
      for (int i = 0; i < 16; i++)
        for (int s = 0; s < NS; s++) begin
          acc(m, 0, addr_of(s, m, i), 0, rd, err);
          check(!err && rd == {8'(m), 8'(s), 16'(i + 2)}, "read-back through crossbar");
        end
      acc(m, 0, 32'h4000_0000 + 4 * m, 0, rd, err);
      check(err, "unmapped address answered with err");
      done[m] = 1;
    end
  end

  logic done [NM];
  initial begin
    for (int m = 0; m < NM; m++) begin done[m] = 0; grants[m] = 0; since[m] = 0; end
    for (int s = 0; s < NS; s++) begin spend[s] = 0; sdel[s] = 0; srd[s] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done[0] && done[1] && done[2]);
    // contention phase: all masters hammer slave 0
    contention = 1;
    fork
      for (int m = 0; m < NM; m++) begin
        automatic int mm = m;
        fork
          begin
            word_t rd; logic err;
            for (int k = 0; k < 20; k++) acc(mm, 0, 32'h1000_0000, 0, rd, err);
          end
        join_none
      end
    join_none
    repeat (1500) @(negedge clk);
    contention = 0;
    check(worst_wait <= NM - 1, "round robin: no master waits more than N_M-1 grants");
    check(cgrants == 3 * 20, "all contending requests granted");
    check(overlap == 0, "one transaction per slave in flight");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
