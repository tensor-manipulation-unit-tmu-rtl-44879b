// tmu_system -- the TMU subsystem of the AI SoC: two TMUs in a double-buffering pair.
//
// Two TMU cores, each with its own tensor buffer, sit next to the SoC's DMA
// engine and share its memory port through a round-robin arbiter. Software
// gives the two cores alternate segments (or alternate operators) of the
// work; while one core manipulates its buffered segment or stores it, the
// other loads the next one, so DRAM transfers overlap with manipulation
// (tensor prefetch). Each core also has an output-forwarding input, through
// which the TPU streams partial output tensors into the core's tensor buffer
// before its own computation has finished, and a forwarding output that sends
// manipulated datastreams to the TPU threads instead of DRAM.
//
// Follows the paper: two TMUs, two tensor buffers in a ping-pong arrangement,
// the DMA port, output forwarding towards and from the TPU. Own choices: the
// arbiter and the memory port protocol. The DMA, the DDR controller and PHY,
// the TPU and the SoC instruction fetch are outside this module; their
// signals are its ports.
//
// Memory port: a read request (valid/ready, addr, id) is answered, in request
// order, by one response (valid, data, id) that is always accepted; writes are
// posted (valid/ready with addr, data, byte strobe). Addresses are byte
// addresses of 16-byte beats.
module tmu_system
  import tmu_pkg::*;
#(
  parameter int N_TMU        = 2,
  parameter int INST_DEPTH   = 16,
  parameter int BUF_DEPTH    = 64,
  parameter int COMMIT_DEPTH = 16,
  localparam int IAW = $clog2(INST_DEPTH),
  localparam int IW  = (N_TMU > 1) ? $clog2(N_TMU) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // host / SoC control
  input  logic [N_TMU-1:0] inst_wr_en,
  input  logic [IAW-1:0]   inst_wr_addr,
  input  inst_t            inst_wr_data,
  input  logic [N_TMU-1:0] start,
  output logic [N_TMU-1:0] done,
  output fsm_state_e       state [N_TMU],
  // DMA memory port
  output logic             m_rd_req_valid,
  input  logic             m_rd_req_ready,
  output addr_t            m_rd_req_addr,
  output logic [IW-1:0]    m_rd_req_id,
  input  logic             m_rd_rsp_valid,
  input  logic [IW-1:0]    m_rd_rsp_id,
  input  beat_t            m_rd_rsp_data,
  output logic             m_wr_valid,
  input  logic             m_wr_ready,
  output addr_t            m_wr_addr,
  output beat_t            m_wr_data,
  output strb_t            m_wr_strb,
  output logic             m_conflict,
  // TPU output forwarding into each TMU's tensor buffer
  input  logic [N_TMU-1:0] fwd_in_valid,
  output logic [N_TMU-1:0] fwd_in_ready,
  input  beat_t            fwd_in_data [N_TMU],
  // manipulated datastreams forwarded to the TPU
  output logic [N_TMU-1:0] fwd_out_valid,
  input  logic [N_TMU-1:0] fwd_out_ready,
  output addr_t            fwd_out_addr [N_TMU],
  output beat_t            fwd_out_data [N_TMU],
  output strb_t            fwd_out_strb [N_TMU]
);
  logic [N_TMU-1:0] rq_valid, rq_ready, rsp_valid, wq_valid, wq_ready;
  addr_t            rq_addr [N_TMU];
  addr_t            wq_addr [N_TMU];
  beat_t            wq_data [N_TMU];
  strb_t            wq_strb [N_TMU];

  for (genvar t = 0; t < N_TMU; t++) begin : g_tmu
    tmu_core #(
      .INST_DEPTH(INST_DEPTH), .BUF_DEPTH(BUF_DEPTH), .COMMIT_DEPTH(COMMIT_DEPTH)
    ) u_core (
      .clk, .rst_n,
      .inst_wr_en(inst_wr_en[t]), .inst_wr_addr, .inst_wr_data,
      .start(start[t]), .done(done[t]), .state(state[t]),
      .rd_req_valid(rq_valid[t]), .rd_req_ready(rq_ready[t]), .rd_req_addr(rq_addr[t]),
      .rd_rsp_valid(rsp_valid[t]), .rd_rsp_data(m_rd_rsp_data),
      .wr_valid(wq_valid[t]), .wr_ready(wq_ready[t]), .wr_addr(wq_addr[t]),
      .wr_data(wq_data[t]), .wr_strb(wq_strb[t]),
      .fwd_in_valid(fwd_in_valid[t]), .fwd_in_ready(fwd_in_ready[t]), .fwd_in_data(fwd_in_data[t]),
      .fwd_out_valid(fwd_out_valid[t]), .fwd_out_ready(fwd_out_ready[t]),
      .fwd_out_addr(fwd_out_addr[t]), .fwd_out_data(fwd_out_data[t]), .fwd_out_strb(fwd_out_strb[t])
    );
  end

  tmu_mem_arb #(.N(N_TMU)) u_arb (
    .clk, .rst_n,
    .rq_valid, .rq_ready, .rq_addr, .rsp_valid,
    .wq_valid, .wq_ready, .wq_addr, .wq_data, .wq_strb,
    .m_rd_req_valid, .m_rd_req_ready, .m_rd_req_addr, .m_rd_req_id,
    .m_rd_rsp_valid, .m_rd_rsp_id,
    .m_wr_valid, .m_wr_ready, .m_wr_addr, .m_wr_data, .m_wr_strb,
    .conflict(m_conflict)
  );
endmodule
