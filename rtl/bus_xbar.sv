// bus_xbar: crossbar for the rp_pkg bus, used both as a tile's local interconnect and
// as the global interconnect between tiles and the shared memories.
//
// Slave s owns the addresses a with (a & S_MASK[s]) == S_BASE[s]; the first match wins.
// Each slave has its own arbiter, so masters that address different slaves proceed in
// parallel. An arbiter grants one requesting master (round robin, starting after the
// master served last) and stays locked to it until the slave's response has returned;
// each slave thus has at most one transaction in flight. Requests and the ready
// signal pass combinationally, responses are routed back combinationally to the
// owner, so the crossbar adds no cycles. A request that matches no slave is accepted
// and answered with err one cycle later.
//
// The paper's prototype uses an AXI interconnect (and plans a NoC); this simpler
// single-outstanding crossbar with round-robin arbitration is this design's choice.
module bus_xbar
  import rp_pkg::*;
#(
  parameter int unsigned N_M = 2,
  parameter int unsigned N_S = 2,
  parameter logic [N_S-1:0][31:0] S_BASE = {32'h1000_0000, 32'h0000_0000},
  parameter logic [N_S-1:0][31:0] S_MASK = {32'hF000_0000, 32'hF000_0000}
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t m_req_i [N_M],
  output bus_rsp_t m_rsp_o [N_M],
  output bus_req_t s_req_o [N_S],
  input  bus_rsp_t s_rsp_i [N_S]
);
  localparam int unsigned MW = (N_M > 1) ? $clog2(N_M) : 1;

  // ---------------- address decode ----------------
  logic [N_S-1:0] sel  [N_M];
  logic [N_M-1:0] miss;

  always_comb begin
    for (int m = 0; m < N_M; m++) begin
      sel[m]  = '0;
      miss[m] = m_req_i[m].valid;
      for (int s = 0; s < N_S; s++) begin
        if (miss[m] && ((m_req_i[m].addr & S_MASK[s]) == S_BASE[s])) begin
          sel[m][s] = 1'b1;
          miss[m]   = 1'b0;
        end
      end
    end
  end

  // ---------------- per-slave arbitration ----------------
  logic [N_S-1:0] busy;
  logic [MW-1:0]  owner [N_S];
  logic [MW-1:0]  rr    [N_S];
  logic [N_S-1:0] gnt_v;
  logic [MW-1:0]  gnt   [N_S];

  always_comb begin
    for (int s = 0; s < N_S; s++) begin
      gnt_v[s] = 1'b0;
      gnt[s]   = '0;
      for (int k = 0; k < N_M; k++) begin
        logic [MW:0] cand;               // rr + k, wrapped into 0..N_M-1
        cand = {1'b0, rr[s]} + (MW+1)'(k);
        if (cand >= (MW+1)'(N_M)) cand = cand - (MW+1)'(N_M);
        if (!busy[s] && !gnt_v[s] && sel[cand[MW-1:0]][s]) begin
          gnt_v[s] = 1'b1;
          gnt[s]   = cand[MW-1:0];
        end
      end
    end
  end

  for (genvar s = 0; s < N_S; s++) begin : g_sreq
    bus_req_t fwd;
    assign fwd = m_req_i[gnt[s]];
    assign s_req_o[s] = '{valid: gnt_v[s], we: fwd.we, addr: fwd.addr, wdata: fwd.wdata};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= '0;
      for (int s = 0; s < N_S; s++) begin
        owner[s] <= '0;
        rr[s]    <= '0;
      end
    end else begin
      for (int s = 0; s < N_S; s++) begin
        if (busy[s] && s_rsp_i[s].valid) busy[s] <= 1'b0;
        if (gnt_v[s] && s_rsp_i[s].ready) begin
          busy[s]  <= 1'b1;
          owner[s] <= gnt[s];
          rr[s]    <= (int'(gnt[s]) == N_M - 1) ? '0 : gnt[s] + 1'b1;
        end
      end
    end
  end

  // ---------------- responses ----------------
  logic [N_M-1:0] miss_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) miss_q <= '0;
    else        miss_q <= miss;
  end

  always_comb begin
    for (int m = 0; m < N_M; m++) begin
      m_rsp_o[m] = BUS_RSP_IDLE;
      if (miss[m]) m_rsp_o[m].ready = 1'b1;
      if (miss_q[m]) begin
        m_rsp_o[m].valid = 1'b1;
        m_rsp_o[m].err   = 1'b1;
      end
      for (int s = 0; s < N_S; s++) begin
        if (gnt_v[s] && int'(gnt[s]) == m) m_rsp_o[m].ready = s_rsp_i[s].ready;
        if (busy[s] && int'(owner[s]) == m && s_rsp_i[s].valid) begin
          m_rsp_o[m].valid = 1'b1;
          m_rsp_o[m].err   = s_rsp_i[s].err;
          m_rsp_o[m].rdata = s_rsp_i[s].rdata;
        end
      end
    end
  end

  // A master keeps its request stable until it is accepted.
  for (genvar m = 0; m < N_M; m++) begin : g_chk
    a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
      m_req_i[m].valid && !m_rsp_o[m].ready |=>
        m_req_i[m].valid && $stable(m_req_i[m].addr) && $stable(m_req_i[m].we));
  end
endmodule
