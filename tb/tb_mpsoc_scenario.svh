// tb_mpsoc_scenario.svh: end-to-end scenario shared by the MPSoC testbenches.
//
// The including module declares N, VMEM_D, SEG, the clock/reset, the DUT and its port
// signals. The testbench plays the processor cores (one process per tile) and the
// off-chip supervisor, following the fault-handling loop of the architecture:
//  1. Tiles 0..2 run the high-criticality threads in TMR, tiles 3..5 the others.
//     Tile 0 stores a state word in its validation memory and state in its segment.
//  2. Checkpoint 1 (time triggered): every tile writes {epoch, checksum} into its
//     validation memory, reads its siblings' through the read-only window, writes a
//     disagreement mask and waits for its siblings (barrier) before leaving the
//     checkpoint. Tile 2 has a corrupted checksum; tile 0's state word has an upset.
//  3. The supervisor reads the decisions through the debug bridges: tile 2 is the
//     odd one out. It holds tile 2 in reset and migrates its threads to tile 5, which
//     copies tile 0's state through the global read-only window (Fig. 3 strategy:
//     the lower-criticality pair 3,4 continues in DMR).
//  4. Checkpoint 2 (supervisor induced): groups {0,1,5} and {3,4} all agree.
//  Along the way: a write into another tile's validation memory is refused, an
//  unmapped access is refused, replicated I/O is voted, a tile scrubber and (small
//  global scrubber repair upsets, and the global interconnect
//  stalls under contention. Each of these is counted; one that never happened is a
//  failure.

  int checks = 0, failures = 0;
  int n_ckpt_timer = 0, n_ckpt_sup = 0, n_remote_read = 0, n_ro_refused = 0,
      n_deferred = 0, n_tile_scrub = 0, n_glob_scrub = 0, n_vote_mismatch = 0,
      n_xbar_stall = 0, n_dbg_reset = 0, n_decode_err = 0, n_migrated = 0;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(posedge clk) begin
    for (int t = 0; t < N; t++)
      if (dut.g_mreq[t].valid && !dut.g_mrsp[t].ready) n_xbar_stall++;
    if (rst_n && io_vote && io_mismatch != 0) n_vote_mismatch++;
    if (rst_n && gscrub_irq) n_glob_scrub++;
  end

  task automatic core(input int t, input logic we, input word_t a, input word_t wd,
                      output word_t rd, output logic err);
    @(negedge clk);
    core_req[t] = '{valid: 1'b1, we: we, addr: a, wdata: wd};
    #1;
    while (!core_rsp[t].ready) begin @(negedge clk); #1; end
    @(negedge clk);
    core_req[t] = '0;
    while (!core_rsp[t].valid) @(negedge clk);
    rd = core_rsp[t].rdata; err = core_rsp[t].err;
  endtask

  task automatic sup(input int t, input dbg_op_e op, input word_t a, input word_t wd,
                     output word_t rd, output logic err);
    @(negedge clk);
    while (!dbg_rsp[t].ready) @(negedge clk);
    dbg_cmd[t] = '{valid: 1'b1, op: op, addr: a, wdata: wd};
    @(negedge clk);
    dbg_cmd[t] = '0;
    while (!dbg_rsp[t].valid) @(negedge clk);
    rd = dbg_rsp[t].rdata; err = dbg_rsp[t].err;
  endtask

  function automatic word_t sibling_vmem(int s, int word);
    return TA_RVMEM_BASE + (word_t'(s) << VMEM_TILE_SHIFT) + 4 * word;
  endfunction

  // one checkpoint as seen by one tile's handler
  task automatic checkpoint(input int t, input int epoch, input logic [N-1:0] grp,
                            input word_t checksum);
    word_t rd; logic err; logic [N-1:0] disagree;
    while (!core_irq[t]) @(negedge clk);
    core(t, 1, TA_IRQ_BASE + 12, 1, rd, err);          // CKPT_ACTIVE = 1
    core(t, 0, TA_IRQ_BASE, 0, rd, err);
    if (rd[IRQ_CKPT_TMR]) n_ckpt_timer++;
    if (rd[IRQ_CKPT_SUP]) n_ckpt_sup++;
    core(t, 1, TA_IRQ_BASE, 32'h3, rd, err);           // clear the checkpoint sources
    core(t, 1, TA_VMEM_BASE + 0, {8'(epoch), checksum[23:0]}, rd, err);
    disagree = '0;
    for (int s = 0; s < N; s++) if (grp[s] && s != t) begin
      do core(t, 0, sibling_vmem(s, 0), 0, rd, err); while (rd[31:24] != 8'(epoch));
      n_remote_read++;
      if (rd[23:0] != checksum[23:0]) disagree[s] = 1'b1;
      core(t, 0, sibling_vmem(s, 2), 0, rd, err);      // sibling's state word
      check(!err && rd == 32'h5747_E000 + s, "sibling state word readable (corrected)");
    end
    core(t, 1, TA_VMEM_BASE + 4, {8'(epoch), 24'(disagree)}, rd, err);
    for (int s = 0; s < N; s++) if (grp[s] && s != t)  // barrier
      do core(t, 0, sibling_vmem(s, 1), 0, rd, err); while (rd[31:24] != 8'(epoch));
    core(t, 1, TA_IRQ_BASE + 12, 0, rd, err);          // CKPT_ACTIVE = 0
  endtask

  initial begin
    word_t rd; logic err;
    logic [N-1:0] grp_a, grp_b;
    word_t cs [N];
    int faulty;
    for (int t = 0; t < N; t++) begin core_req[t] = '0; dbg_cmd[t] = '0; periph_irq[t] = '0; io_data[t] = '0; end
    io_member = '0; io_push = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- setup: state words, scrubbers off, checkpoint period ----
    for (int t = 0; t < N; t++) begin
      core(t, 1, TA_SCRUB_BASE, 0, rd, err);
      core(t, 1, TA_VMEM_BASE + 8, 32'h5747_E000 + t, rd, err);
      core(t, 1, TA_IRQ_BASE + 8, 0, rd, err);
    end
    for (int i = 0; i < 8; i++) core(0, 1, TA_PRIV_BASE + 4 * i, 32'hE57A_7E00 + i, rd, err);
    core(1, 1, TA_PRIV_BASE, 32'h0000_1111, rd, err);
    // refused accesses
    core(1, 1, sibling_vmem(0, 0), 32'hBAD, rd, err);
    if (err) n_ro_refused++;
    core(1, 1, TA_GLOB_BASE, 32'hBAD, rd, err);
    if (err) n_ro_refused++;
    core(1, 0, TA_PRIV_BASE + SEG, 0, rd, err);
    if (err) n_decode_err++;
    core(0, 0, TA_PRIV_BASE, 0, rd, err);
    check(rd == 32'hE57A_7E00, "private segments are separate");
    // contention: all tiles hit main memory at once
    for (int t = 0; t < N; t++) begin
      automatic int tt = t;
      fork begin word_t r; logic e;
        for (int k = 0; k < 4; k++) core(tt, 0, TA_GLOB_BASE + 4 * k, 0, r, e);
      end join_none
    end
    wait fork;
    // upset in tile 0's state word: siblings read it during the checkpoint
    dut.g_tile[0].u_tile.u_vmem.mem[2] = dut.g_tile[0].u_tile.u_vmem.mem[2] ^ 39'h8;

    // ---- checkpoint 1, time triggered on all tiles at once ----
    grp_a = 'b000111; grp_b = 'b111000;
    for (int t = 0; t < N; t++) cs[t] = (t < 3) ? 24'hA11CE : 24'hB0B;
    cs[2] = 24'hA11CF;                                  // tile 2's threads diverged
    for (int t = 0; t < N; t++) core(t, 1, TA_IRQ_BASE + 20, 0, rd, err);
    for (int t = 0; t < N; t++) core(t, 1, TA_IRQ_BASE + 8, 400, rd, err);
    for (int t = 0; t < N; t++) begin
      automatic int tt = t;
      fork checkpoint(tt, 1, (tt < 3) ? grp_a : grp_b, cs[tt]); join_none
    end
    wait fork;
    for (int t = 0; t < N; t++) core(t, 1, TA_IRQ_BASE + 8, 0, rd, err);   // timers off
    repeat (4) @(negedge clk);
    core(0, 0, TA_IRQ_BASE, 0, rd, err);
    if (rd[IRQ_VMEM_DEF]) n_deferred++;
    core(0, 0, TA_VMEM_BASE + 32'h8000, 0, rd, err);
    check(rd == 2, "tile 0 recorded the two remote syndromes");

    // ---- supervisor: read the majority decision ----
    faulty = -1;
    begin
      int votes [N];
      for (int t = 0; t < N; t++) votes[t] = 0;
      for (int t = 0; t < N; t++) begin
        sup(t, DBG_READ, TA_VMEM_BASE + 4, 0, rd, err);
        check(rd[31:24] == 1, "decision of epoch 1");
        for (int s = 0; s < N; s++) if (rd[s]) votes[s]++;
      end
      for (int s = 0; s < N; s++) if (votes[s] >= 2) faulty = s;
    end
    check(faulty == 2, "majority decision names tile 2");
    sup(2, DBG_RESET, 0, 1, rd, err);
    if (core_rst[2]) n_dbg_reset++;

    // ---- migration: tile 5 takes over tile 2's threads from tile 0's state ----
    for (int i = 0; i < 8; i++) begin
      core(5, 0, TA_GLOB_BASE + 0 * SEG + 4 * i, 0, rd, err);
      core(5, 1, TA_PRIV_BASE + 4 * i, rd, rd, err);
    end
    core(5, 0, TA_PRIV_BASE + 4 * 7, 0, rd, err);
    if (rd == 32'hE57A_7E07) n_migrated++;
    check(rd == 32'hE57A_7E07, "state copied into tile 5's segment");

    // ---- checkpoint 2, induced by the supervisor after the new assignment ----
    grp_a = 'b100011; grp_b = 'b011000;
    for (int t = 0; t < N; t++) cs[t] = (grp_a[t]) ? 24'hA11D0 : 24'hB0C;
    for (int t = 0; t < N; t++) if (t != 2) sup(t, DBG_WRITE, TA_IRQ_BASE + 16, 32'(1 << IRQ_CKPT_SUP), rd, err);
    for (int t = 0; t < N; t++) if (t != 2) begin
      automatic int tt = t;
      fork checkpoint(tt, 2, grp_a[tt] ? grp_a : grp_b, cs[tt]); join_none
    end
    wait fork;
    for (int t = 0; t < N; t++) if (t != 2) begin
      sup(t, DBG_READ, TA_VMEM_BASE + 4, 0, rd, err);
      check(rd == {8'd2, 24'd0}, "all siblings agree after migration");
    end

    // ---- replicated I/O through the voter, tile 1 emits one bad sample ----
    io_member = 'b100011;
    for (int k = 0; k < 6; k++) begin
      for (int t = 0; t < N; t++) io_data[t] = 4'(k);
      io_data[1] = (k == 3) ? 4'hF : 4'(k);
      io_push = 'b100011;
      @(negedge clk);
      io_push = '0;
      @(negedge clk);
      @(negedge clk);
      check(io_pins == 4'(k), "voted pins");
    end

    // ---- tile scrubber repairs an upset ----
    dut.g_tile[3].u_tile.u_vmem.mem[7] = dut.g_tile[3].u_tile.u_vmem.mem[7] ^ 39'h2;
    core(3, 1, TA_SCRUB_BASE + 4, 1, rd, err);
    core(3, 1, TA_SCRUB_BASE, 1, rd, err);
    repeat (VMEM_D * 8) @(negedge clk);
    core(3, 0, TA_SCRUB_BASE + 8, 0, rd, err);
    if (rd >= 1) n_tile_scrub++;
    core(3, 1, TA_SCRUB_BASE, 0, rd, err);

    // ---- global scrubber repairs an upset just ahead of its walk position ----
    begin
      int unsigned w; code_t good; int c0;
      core(0, 0, TA_GSCRUB_BASE + 8, 0, rd, err);
      c0 = rd;
      w = dut.u_gscrub.idx + 8;
      good = u_mm.rd(32'h8000_0000 / 4 + w);
      u_mm.inject(32'h8000_0000 / 4 + w, 39'h20);
      core(0, 1, TA_GSCRUB_BASE + 4, 1, rd, err);
      repeat (200) @(negedge clk);
      check(u_mm.rd(32'h8000_0000 / 4 + w) == good, "global scrubber repaired main memory");
      core(0, 0, TA_GSCRUB_BASE + 8, 0, rd, err);
      check(rd == c0 + 1, "global scrubber counted the correction");
    end

    $display("mechanisms: ckpt_timer=%0d ckpt_sup=%0d remote_read=%0d ro_refused=%0d deferred=%0d tile_scrub=%0d glob_scrub=%0d vote_mismatch=%0d xbar_stall=%0d dbg_reset=%0d decode_err=%0d migrated=%0d",
             n_ckpt_timer, n_ckpt_sup, n_remote_read, n_ro_refused, n_deferred, n_tile_scrub,
             n_glob_scrub, n_vote_mismatch, n_xbar_stall, n_dbg_reset, n_decode_err, n_migrated);
    check(n_ckpt_timer > 0, "time-triggered checkpoint happened");
    check(n_ckpt_sup > 0, "supervisor-induced checkpoint happened");
    check(n_remote_read > 0, "remote validation-memory reads happened");
    check(n_ro_refused > 0, "read-only refusal happened");
    check(n_deferred > 0, "deferred syndrome report happened");
    check(n_tile_scrub > 0, "tile scrubber correction happened");
    check(n_glob_scrub > 0, "global scrubber correction happened");
    check(n_vote_mismatch > 0, "voter mismatch happened");
    check(n_xbar_stall > 0, "interconnect stall happened");
    check(n_dbg_reset > 0, "supervisor reset happened");
    check(n_decode_err > 0, "decode error happened");
    check(n_migrated > 0, "thread state migration happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
