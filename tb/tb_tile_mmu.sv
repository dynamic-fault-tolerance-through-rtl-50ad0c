// tb_tile_mmu: self-checking test of the tile MMU.
//
// For two tile ids, random offsets in each window are sent through the MMU; a
// behavioural global slave records the translated address and answers one cycle
// later. Expected physical addresses are computed in the testbench from the address
// map. Writes to read-only windows and accesses outside every window must be answered
// with err without reaching the global side.
module tb_tile_mmu;
  import rp_pkg::*;

  localparam word_t SEG = 32'h0800_0000, NV = 32'h0100_0000;
  localparam int    NT  = 6;

  logic clk = 0, rst_n = 0;
  logic [7:0] tid;
  bus_req_t treq, greq; bus_rsp_t trsp, grsp;
  int checks = 0, failures = 0, fwd = 0;
  word_t last_addr;
  logic  gv;

  tile_mmu #(.N_TILES(NT), .SEG_BYTES(SEG), .NV_BYTES(NV)) dut (
    .clk, .rst_n, .tile_id_i(tid), .t_req_i(treq), .t_rsp_o(trsp), .g_req_o(greq), .g_rsp_i(grsp));

  always #5 clk = ~clk;
  always_comb begin
    grsp = BUS_RSP_IDLE;
    grsp.ready = 1'b1;
    grsp.valid = gv;
    grsp.rdata = 32'h600D;
  end
  always @(posedge clk) begin
    gv <= greq.valid;
    if (greq.valid) begin fwd++; last_addr <= greq.addr; end
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // expect_phys = 0 means "must be refused"
  task automatic acc(input logic we, input word_t a, input logic ok, input word_t phys, input string what);
    int f0;
    f0 = fwd;
    @(negedge clk);
    treq = '{valid: 1'b1, we: we, addr: a, wdata: 0};
    #1 check(trsp.ready, {what, ": accepted"});
    @(negedge clk);
    treq = '0;
    check(trsp.valid, {what, ": one-cycle response"});
    if (ok) check(!trsp.err && fwd == f0 + 1 && last_addr == phys && trsp.rdata == 32'h600D, what);
    else    check(trsp.err && fwd == f0, {what, " refused"});
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t off;
    treq = '0; gv = 0; tid = 3;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (tid_list[k]) begin
      tid = tid_list[k];
      for (int n = 0; n < 20; n++) begin
        off = $urandom_range(SEG / 4 - 1) * 4;
        acc(1, TA_PRIV_BASE + off, 1, 32'h8000_0000 + tid * SEG + off, "private write");
        acc(0, TA_PRIV_BASE + off, 1, 32'h8000_0000 + tid * SEG + off, "private read");
        off = $urandom_range(NT * SEG / 4 - 1) * 4;
        acc(0, TA_GLOB_BASE + off, 1, 32'h8000_0000 + off, "global read");
        acc(1, TA_GLOB_BASE + off, 0, 0, "global write");
        off = $urandom_range(NT * 16384 - 1) * 4;
        acc(0, TA_RVMEM_BASE + off, 1, 32'h4000_0000 + off, "remote vmem read");
        acc(1, TA_RVMEM_BASE + off, 0, 0, "remote vmem write");
        off = $urandom_range(NV / 4 - 1) * 4;
        acc(1, off, 1, off, "nv write");
      end
      acc(0, TA_PRIV_BASE + SEG, 0, 0, "beyond private segment");
      acc(0, TA_GLOB_BASE + NT * SEG, 0, 0, "beyond main memory");
      acc(0, TA_RVMEM_BASE + (NT << 16), 0, 0, "beyond last tile");
      acc(0, NV, 0, 0, "beyond nv");
      acc(1, TA_GSCRUB_BASE + 8, 1, 32'h5000_0008, "global scrubber");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] tid_list [2] = '{8'd3, 8'd5};
endmodule
