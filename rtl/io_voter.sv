// io_voter: majority decision per I/O line for a low-speed interface (SPI, I2C, ...)
// that several tiles drive as replicas.
//
// Replicated threads run in coarse-grain lockstep: they reach the same state at each
// checkpoint, but not in the same clock cycle. Each replica tile therefore pushes the
// line levels it wants to drive (one W-bit sample per push) into its own FIFO. When
// every member tile (member_i) has at least one sample queued, the voter pops one
// sample from each member and drives, for each line, the value held by more than
// half of the members. On a tie (possible with an even number of members, e.g. two
// tiles in DMR) the line keeps its previous level. A member whose sample differs from
// the voted value is flagged on mismatch_o for that cycle, so that the fault can be
// attributed. Samples from non-members are discarded (their FIFOs are held empty).
//
// Timing: a vote happens in the cycle after the slowest member's sample arrives;
// pins_o and mismatch_o are registered, vote_o pulses with each new value.
// A FIFO that is full drops further samples and sets its bit in overflow_o (sticky
// until reset).
//
// The paper only says that interfaces such as I2C and SPI allow a simple majority
// decision per I/O line, implementable on-chip through FIFO buffers. Widths, depth,
// the tie rule and the mismatch/overflow outputs are this design's choices.
module io_voter #(
  parameter int unsigned N_IN  = 6,
  parameter int unsigned W     = 4,
  parameter int unsigned DEPTH = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N_IN-1:0]     member_i,
  input  logic [N_IN-1:0]     push_i,
  input  logic [W-1:0]        data_i [N_IN],
  output logic [W-1:0]        pins_o,
  output logic                vote_o,
  output logic [N_IN-1:0]     mismatch_o,
  output logic [N_IN-1:0]     overflow_o
);
  localparam int unsigned CW = $clog2(N_IN + 1);

  logic [W-1:0]    head  [N_IN];
  logic [N_IN-1:0] empty, full_unused, ovf;
  logic            fire;

  assign fire = (member_i != '0) && ((~empty & member_i) == member_i);

  for (genvar i = 0; i < N_IN; i++) begin : g_fifo
    sync_fifo #(.W(W), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .flush_i    (!member_i[i]),
      .push_i     (push_i[i] && member_i[i]),
      .data_i     (data_i[i]),
      .pop_i      (fire),
      .data_o     (head[i]),
      .empty_o    (empty[i]),
      .full_o     (full_unused[i]),
      .overflow_o (ovf[i])
    );
  end

  logic [W-1:0]    voted;
  logic [N_IN-1:0] diff;
  logic [CW-1:0]   members;

  always_comb begin
    members = '0;
    for (int i = 0; i < N_IN; i++) members += CW'(member_i[i]);
    for (int b = 0; b < W; b++) begin
      logic [CW-1:0] ones;
      ones = '0;
      for (int i = 0; i < N_IN; i++) ones += CW'(member_i[i] && head[i][b]);
      if ({1'b0, ones} << 1 > {1'b0, members})      voted[b] = 1'b1;
      else if ({1'b0, ones} << 1 < {1'b0, members}) voted[b] = 1'b0;
      else                                          voted[b] = pins_o[b];   // tie
    end
    for (int i = 0; i < N_IN; i++) diff[i] = member_i[i] && (head[i] != voted);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pins_o     <= '0;
      vote_o     <= 1'b0;
      mismatch_o <= '0;
      overflow_o <= '0;
    end else begin
      vote_o     <= fire;
      mismatch_o <= fire ? diff : '0;
      if (fire) pins_o <= voted;
      overflow_o <= overflow_o | ovf;
    end
  end
endmodule
