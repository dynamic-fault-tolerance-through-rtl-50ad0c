// tb_mem_scrubber: self-checking test of the memory scrubber.
//
// A behavioural ECC memory in the testbench serves the scrub port with a random
// ready and a one-cycle read latency. Single-bit upsets and double-bit upsets are
// planted; after a full pass every single-bit word must hold its clean codeword again,
// double-bit words must be untouched, CE_CNT/UE_CNT/LAST/PASSES must match, one irq
// pulse per error must have been seen, successive reads must be at least INTERVAL
// cycles apart, and clearing enable must stop all scrub traffic.
module tb_mem_scrubber;
  import rp_pkg::*;

  localparam int DEPTH = 32, INTERVAL = 4;

  logic clk = 0, rst_n = 0;
  bus_req_t creq; bus_rsp_t crsp;
  scrub_req_t sreq; scrub_rsp_t srsp;
  logic irq;
  code_t mem [DEPTH];
  int checks = 0, failures = 0, irqs = 0, reads = 0, min_gap = 1 << 30, last_rd = -1, cyc = 0;

  mem_scrubber #(.DEPTH(DEPTH), .INTERVAL(INTERVAL)) dut (
    .clk, .rst_n, .cfg_req_i(creq), .cfg_rsp_o(crsp), .scrub_req_o(sreq),
    .scrub_rsp_i(srsp), .irq_o(irq));

  always #5 clk = ~clk;

  // behavioural memory: random ready, response one cycle after acceptance
  logic rdy, v_q; code_t r_q;
  always @(negedge clk) rdy = ($urandom_range(3) != 0);
  always_comb begin
    srsp.ready = rdy;
    srsp.valid = v_q;
    srsp.rcode = r_q;
  end
  always @(posedge clk) begin
    cyc++;
    v_q <= 1'b0;
    if (irq) irqs++;
    if (sreq.valid && rdy) begin
      v_q <= 1'b1;
      r_q <= mem[sreq.addr];
      if (sreq.we) mem[sreq.addr] <= sreq.wcode;
      else begin
        reads++;
        if (last_rd >= 0 && cyc - last_rd < min_gap) min_gap = cyc - last_rd;
        last_rd = cyc;
      end
    end
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic cfg(input logic we, input int ofs, input word_t wd, output word_t rd);
    @(negedge clk);
    creq = '{valid: 1'b1, we: we, addr: word_t'(ofs), wdata: wd};
    @(negedge clk);
    creq = '0;
    check(crsp.valid, "config response one cycle later");
    rd = crsp.rdata;
  endtask

  function automatic word_t pat(int i); return 32'hA5A5_0000 + i * 77; endfunction

  initial begin
    repeat (50000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t rd; int r0;
    creq = '0; v_q = 0; r_q = '0;
    for (int i = 0; i < DEPTH; i++) mem[i] = ecc_encode(pat(i));
    mem[3]  ^= 39'h1;            // data bit
    mem[10] ^= 39'h40_0000_0000 >> 2;  // a check bit
    mem[31] ^= 39'h40_0000_0000; // overall parity bit
    mem[17] ^= 39'h0000_0000_11; // double
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (last_rd < 0 || dut.passes == 0) @(negedge clk);
    repeat (20) @(negedge clk);
    for (int i = 0; i < DEPTH; i++)
      if (i == 17) check(mem[i] == (ecc_encode(pat(i)) ^ 39'h11), "double-error word untouched");
      else         check(mem[i] == ecc_encode(pat(i)), "word clean after a pass");
    cfg(0, 8, 0, rd);  check(rd == 3, "CE_CNT");
    cfg(0, 12, 0, rd); check(rd == 1, "UE_CNT");
    cfg(0, 20, 0, rd); check(rd >= 1, "PASSES");
    check(irqs == 4, "one irq per error found in the first pass");
    check(min_gap >= INTERVAL, "reads at least INTERVAL cycles apart");
    cfg(1, 8, 0, rd);
    cfg(0, 8, 0, rd);  check(rd == 0, "CE_CNT cleared");
    cfg(1, 0, 0, rd);
    repeat (5) @(negedge clk);
    r0 = reads;
    repeat (200) @(negedge clk);
    check(reads == r0, "disabled scrubber is silent");
    cfg(0, 0, 0, rd);  check(rd == 0, "CTRL reads back");
    cfg(1, 0, 1, rd);
    repeat (100) @(negedge clk);
    check(reads > r0, "re-enabled scrubber runs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
