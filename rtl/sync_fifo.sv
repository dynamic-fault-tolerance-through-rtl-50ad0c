// sync_fifo: small synchronous first-in first-out buffer (helper).
//
// push_i writes data_i when not full; pop_i removes the head when not empty. data_o
// is the head (show-ahead). A push while full is dropped and reported on
// overflow_o for that cycle. flush_i empties the buffer. Depth is a power of two.
module sync_fifo #(
  parameter int unsigned W     = 4,
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         flush_i,
  input  logic         push_i,
  input  logic [W-1:0] data_i,
  input  logic         pop_i,
  output logic [W-1:0] data_o,
  output logic         empty_o,
  output logic         full_o,
  output logic         overflow_o
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wptr, rptr;

  assign empty_o    = (wptr == rptr);
  assign full_o     = (wptr[AW] != rptr[AW]) && (wptr[AW-1:0] == rptr[AW-1:0]);
  assign overflow_o = push_i && full_o && !pop_i;
  assign data_o     = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push_i && (!full_o || pop_i)) mem[wptr[AW-1:0]] <= data_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else if (flush_i) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (push_i && (!full_o || pop_i)) wptr <= wptr + 1'b1;
      if (pop_i && !empty_o)            rptr <= rptr + 1'b1;
    end
  end
endmodule
