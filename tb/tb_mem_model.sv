// tb_mem_model: behavioural memory standing in for a memory controller outside the
// RTL (main memory with ECC, non-volatile memory, peripherals) in the testbenches.
//
// Bus port: random ready (when RANDOM is set), response 1..3 cycles after acceptance,
// words stored as SECDED codewords in a sparse array; reads return the data corrected
// by brute force (the single flip that yields a valid codeword), uncorrectable words
// answer err. Addresses are taken modulo 2**AW bytes. Scrub port: raw codeword access,
// same timing, word index counted from word SBASE. inject() flips bits of a stored word. Counts stalls
// (cycles with a request but no ready) for the mechanism counters of the top test.
module tb_mem_model
  import rp_pkg::*;
#(
  parameter int unsigned AW     = 32,
  parameter bit          RANDOM = 1,
  parameter int unsigned SBASE  = 0    // word index of scrub-port word 0
) (
  input  logic       clk,
  input  bus_req_t   req_i,
  output bus_rsp_t   rsp_o,
  input  scrub_req_t sreq_i,
  output scrub_rsp_t srsp_o
);
  code_t mem [int unsigned];
  int    stalls = 0, accesses = 0;

  function automatic int unsigned widx(word_t a);
    return (AW >= 32) ? a >> 2 : (a & ((32'd1 << AW) - 1)) >> 2;
  endfunction

  function automatic code_t rd(int unsigned i);
    return mem.exists(i) ? mem[i] : ecc_encode('0);
  endfunction

  function automatic logic fix(input code_t c, output word_t d);
    if (ecc_encode(c[31:0]) == c) begin d = c[31:0]; return 1'b1; end
    for (int b = 0; b < ECC_W; b++) begin
      code_t t;
      t = c ^ (code_t'(1) << b);
      if (ecc_encode(t[31:0]) == t) begin d = t[31:0]; return 1'b1; end
    end
    d = '0;
    return 1'b0;
  endfunction

  task automatic inject(input int unsigned word_index, input code_t flips);
    mem[word_index] = rd(word_index) ^ flips;
  endtask

  logic  rdy, pend, perr;
  int    del;
  word_t prd;
  logic  srdy, spend;
  int    sdel;
  code_t srd;

  initial begin pend = 0; spend = 0; del = 0; sdel = 0; perr = 0; prd = '0; srd = '0; end
  always @(negedge clk) begin
    rdy  = RANDOM ? ($urandom_range(3) != 0) : 1'b1;
    srdy = RANDOM ? ($urandom_range(1) != 0) : 1'b1;
  end

  always_comb begin
    rsp_o       = BUS_RSP_IDLE;
    rsp_o.ready = rdy && !pend;
    rsp_o.valid = pend && del == 0;
    rsp_o.err   = perr;
    rsp_o.rdata = prd;
    srsp_o.ready = srdy && !spend;
    srsp_o.valid = spend && sdel == 0;
    srsp_o.rcode = srd;
  end

  always @(posedge clk) begin
    if (req_i.valid && !rsp_o.ready) stalls++;
    if (pend) begin
      if (del == 0) pend <= 0; else del <= del - 1;
    end else if (req_i.valid && rdy) begin
      word_t d; logic ok;
      accesses++;
      pend <= 1;
      del  <= RANDOM ? $urandom_range(2) : 0;
      if (req_i.we) begin
        mem[widx(req_i.addr)] = ecc_encode(req_i.wdata);
        perr <= 0; prd <= '0;
      end else begin
        ok = fix(rd(widx(req_i.addr)), d);
        perr <= !ok; prd <= d;
      end
    end
    if (spend) begin
      if (sdel == 0) spend <= 0; else sdel <= sdel - 1;
    end else if (sreq_i.valid && srdy) begin
      spend <= 1;
      sdel  <= RANDOM ? $urandom_range(1) : 0;
      srd   <= rd(SBASE + sreq_i.addr);
      if (sreq_i.we) mem[SBASE + sreq_i.addr] = sreq_i.wcode;
    end
  end
endmodule
