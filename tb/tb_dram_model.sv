// tb_dram_model -- behavioural model of the off-chip DRAM behind the DMA port.
//
// Behavioural only (not synthesizable intent): a beat-wide memory with a fixed
// read latency, in-order responses carrying the request id, posted writes with
// byte strobes, and optional pseudo-random back-pressure on both request
// channels. Addresses are byte addresses; the low 4 bits are ignored.
module tb_dram_model
  import tmu_pkg::*;
#(
  parameter int DEPTH   = 8192,        // beats
  parameter int LATENCY = 6,
  parameter int IW      = 1,
  parameter bit STALLS  = 1'b1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          rd_req_valid,
  output logic          rd_req_ready,
  input  addr_t         rd_req_addr,
  input  logic [IW-1:0] rd_req_id,
  output logic          rd_rsp_valid,
  output logic [IW-1:0] rd_rsp_id,
  output beat_t         rd_rsp_data,
  input  logic          wr_valid,
  output logic          wr_ready,
  input  addr_t         wr_addr,
  input  beat_t         wr_data,
  input  strb_t         wr_strb
);
  beat_t mem [DEPTH];
  logic [LATENCY-1:0]          pv;
  logic [LATENCY-1:0][IW-1:0]  pid;
  beat_t                       pdat [LATENCY];
  int unsigned                 lfsr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lfsr <= 32'h1234_5678;
    else        lfsr <= {lfsr[30:0], lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0]};
  end

  assign rd_req_ready = !STALLS || (lfsr[3:0] != 4'h0);
  assign wr_ready     = !STALLS || (lfsr[7:4] != 4'h0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pv <= '0;
    end else begin
      pv     <= {pv[LATENCY-2:0], rd_req_valid && rd_req_ready};
      pid    <= {pid[LATENCY-2:0], rd_req_id};
    end
  end

  always_ff @(posedge clk) begin
    pdat[0] <= mem[(rd_req_addr >> 4) % DEPTH];
    for (int i = 1; i < LATENCY; i++) pdat[i] <= pdat[i-1];
    if (wr_valid && wr_ready)
      for (int i = 0; i < BUS_BYTES; i++)
        if (wr_strb[i]) mem[(wr_addr >> 4) % DEPTH][8*i +: 8] <= wr_data[8*i +: 8];
  end

  assign rd_rsp_valid = pv[LATENCY-1];
  assign rd_rsp_id    = pid[LATENCY-1];
  assign rd_rsp_data  = pdat[LATENCY-1];
endmodule
