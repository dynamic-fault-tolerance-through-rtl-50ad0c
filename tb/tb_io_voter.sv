// tb_io_voter: self-checking test of the replicated-I/O majority voter.
//
// Phase 1 (TMR, tiles 0..2): each tile pushes the same 40-sample sequence with its own
// random timing; tile 1 corrupts sample 5. The voted sequence must equal the reference,
// only tile 1 may be flagged, and only once. Phase 2 checks the latency: the vote
// appears two clock edges after the slowest replica's push. Phase 3 (DMR, tiles 3 and
// 4): a disagreement is a tie and the lines keep their previous level. Phase 4: a
// replica that runs DEPTH+2 samples ahead overflows its FIFO. Pushes from non-members
// are ignored throughout.
module tb_io_voter;
  localparam int N = 6, W = 4, D = 8, LEN = 40;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] member, push, mism, ovf;
  logic [W-1:0] data [N];
  logic [W-1:0] pins;
  logic vote;
  int checks = 0, failures = 0, votes = 0, flags1 = 0, flags_other = 0, bad_seq = 0;
  logic [W-1:0] ref_seq [LEN];
  logic phase1 = 0;

  io_voter #(.N_IN(N), .W(W), .DEPTH(D)) dut (
    .clk, .rst_n, .member_i(member), .push_i(push), .data_i(data), .pins_o(pins),
    .vote_o(vote), .mismatch_o(mism), .overflow_o(ovf));

  always #5 clk = ~clk;

  always @(posedge clk) if (phase1 && vote) begin
    if (votes < LEN && pins != ref_seq[votes]) bad_seq++;
    votes++;
    if (mism[1]) flags1++;
    if (mism & ~6'b000010) flags_other++;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // replica driver: pushes the reference sequence with random gaps
  task automatic replica(input int t, input int corrupt_at);
    for (int k = 0; k < LEN; k++) begin
      repeat ($urandom_range(3)) @(negedge clk);
      @(negedge clk);
      push[t] = 1;
      data[t] = (k == corrupt_at) ? ref_seq[k] ^ 4'b0100 : ref_seq[k];
      @(negedge clk);
      push[t] = 0;
    end
  endtask

  initial begin
    member = '0; push = '0;
    for (int i = 0; i < N; i++) data[i] = '0;
    for (int k = 0; k < LEN; k++) ref_seq[k] = W'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;

    // phase 1
    member = 6'b000111;
    phase1 = 1;
    fork
      replica(0, -1);
      replica(1, 5);
      replica(2, -1);
      begin   // a non-member pushing garbage
        repeat (30) begin @(negedge clk); push[5] = 1; data[5] = 4'hF; @(negedge clk); push[5] = 0; end
      end
    join
    repeat (4) @(negedge clk);
    phase1 = 0;
    check(votes == LEN, "one vote per sample");
    check(bad_seq == 0, "voted sequence equals reference");
    check(flags1 == 1, "corrupted replica flagged once");
    check(flags_other == 0, "healthy replicas not flagged");

    // phase 2: latency
    @(negedge clk); push[0] = 1; push[1] = 1; data[0] = 4'h9; data[1] = 4'h9;
    @(negedge clk); push[0] = 0; push[1] = 0;
    repeat (3) @(negedge clk);
    check(!vote, "no vote before the last replica");
    push[2] = 1; data[2] = 4'h9;
    @(negedge clk); push[2] = 0;
    check(!vote, "vote not yet one edge after the push");
    @(negedge clk);
    check(vote && pins == 4'h9, "vote two edges after the slowest push");

    // phase 3: DMR tie holds the lines
    member = 6'b011000;
    @(negedge clk);
    push[3] = 1; push[4] = 1; data[3] = 4'h3; data[4] = 4'h3;
    @(negedge clk); push[3] = 0; push[4] = 0;
    repeat (2) @(negedge clk);
    check(pins == 4'h3, "DMR agreement drives the lines");
    push[3] = 1; push[4] = 1; data[3] = 4'hC; data[4] = 4'h3;
    @(negedge clk); push[3] = 0; push[4] = 0;
    @(negedge clk);
    check(vote && pins == 4'h3 && mism[3], "DMR disagreement: bits in dispute keep their level");
    push[3] = 1; push[4] = 1; data[3] = 4'h7; data[4] = 4'h5;
    @(negedge clk); push[3] = 0; push[4] = 0;
    @(negedge clk);
    check(pins == 4'h7,
          "agreeing bits follow, disputed bit holds");

    // phase 4: overflow
    check(ovf == '0, "no overflow so far");
    member = 6'b000011;
    for (int k = 0; k < D + 2; k++) begin
      push[0] = 1; data[0] = 4'h1; @(negedge clk);
    end
    push[0] = 0;
    @(negedge clk);
    check(ovf[0] && !ovf[1], "replica running ahead overflows its FIFO");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
