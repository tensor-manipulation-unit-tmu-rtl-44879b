// tmu_mem_arb -- shares one DMA memory port between the two TMU cores.
//
// Read requests and write beats of N requesters are granted round-robin, one
// per cycle and channel, with a sticky grant: the pointer stays on the
// requester that was last served, so a core that keeps requesting keeps the
// channel for its whole burst (a segment load or a store), and the channel
// passes to the next requester in order when it stops. A burst is at most
// one segment, so no core waits longer than one segment of the other. Each read request carries the requester's index as
// its id; the memory returns responses in request order with that id, and the
// arbiter steers each response back to its requester. Because a core only
// issues reads while it is loading and only writes while it is storing, one
// core's load overlaps with the other's manipulation or store, which is the
// double-buffering (tensor prefetch) arrangement of the two TMUs. Serving
// whole bursts (rather than alternating beats) is what lets the two cores
// fall into that alternation instead of loading in lockstep at half rate.
// This arbiter is this design's own: the SoC it stands for connects both TMUs
// to one DMA engine without saying how the two are multiplexed.
//
// Timing: combinational grant (valid/ready passes through in the same cycle);
// the pointer follows the granted requester on each transfer.
module tmu_mem_arb
  import tmu_pkg::*;
#(
  parameter int N = 2,
  localparam int IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // requesters
  input  logic [N-1:0]     rq_valid,
  output logic [N-1:0]     rq_ready,
  input  addr_t            rq_addr [N],
  output logic [N-1:0]     rsp_valid,
  input  logic [N-1:0]     wq_valid,
  output logic [N-1:0]     wq_ready,
  input  addr_t            wq_addr [N],
  input  beat_t            wq_data [N],
  input  strb_t            wq_strb [N],
  // shared port
  output logic             m_rd_req_valid,
  input  logic             m_rd_req_ready,
  output addr_t            m_rd_req_addr,
  output logic [IW-1:0]    m_rd_req_id,
  input  logic             m_rd_rsp_valid,
  input  logic [IW-1:0]    m_rd_rsp_id,
  output logic             m_wr_valid,
  input  logic             m_wr_ready,
  output addr_t            m_wr_addr,
  output beat_t            m_wr_data,
  output strb_t            m_wr_strb,
  output logic             conflict     // more than one requester waiting on a channel
);
  logic [IW-1:0] rptr, wptr, rsel, wsel;
  logic          rany, wany;

  // first valid requester at or after the round-robin pointer
  function automatic logic [IW:0] pick(logic [N-1:0] v, logic [IW-1:0] ptr);
    logic [IW:0] r;
    r = '0;
    for (int k = N - 1; k >= 0; k--) begin
      if (v[(int'(ptr) + k) % N]) r = {1'b1, IW'((int'(ptr) + k) % N)};
    end
    return r;
  endfunction

  always_comb begin
    {rany, rsel} = pick(rq_valid, rptr);
    {wany, wsel} = pick(wq_valid, wptr);
  end

  assign m_rd_req_valid = rany;
  assign m_rd_req_addr  = rq_addr[rsel];
  assign m_rd_req_id    = rsel;
  assign m_wr_valid     = wany;
  assign m_wr_addr      = wq_addr[wsel];
  assign m_wr_data      = wq_data[wsel];
  assign m_wr_strb      = wq_strb[wsel];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      rq_ready[i]  = rany && (rsel == IW'(i)) && m_rd_req_ready;
      wq_ready[i]  = wany && (wsel == IW'(i)) && m_wr_ready;
      rsp_valid[i] = m_rd_rsp_valid && (m_rd_rsp_id == IW'(i));
    end
  end

  assign conflict = ($countones(rq_valid) > 1) || ($countones(wq_valid) > 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rptr <= '0; wptr <= '0;
    end else begin
      if (rany && m_rd_req_ready) rptr <= rsel;
      if (wany && m_wr_ready)     wptr <= wsel;
    end
  end
endmodule
