// tmu_tensor_buf -- Tensor BUF: on-chip storage for one loaded tensor segment.
//
// DEPTH beats of 16 bytes, one write port (filled by the Tensor Load stage from
// DRAM or from the TPU forwarding stream) and two synchronous read ports, so
// that the element-wise stage can read both operands of a two-tensor operator
// (kept in the lower and upper half) in the same cycle. A read port's data
// appears the cycle after its enable and then holds until the next read.
// The paper describes the buffer's role (segments are loaded into on-chip
// buffers and reshaped there); depth and porting are this design's choices.
module tmu_tensor_buf
  import tmu_pkg::*;
#(
  parameter int DEPTH = 64,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  beat_t         wdata,
  input  logic          re0,
  input  logic [AW-1:0] raddr0,
  output beat_t         rdata0,
  input  logic          re1,
  input  logic [AW-1:0] raddr1,
  output beat_t         rdata1
);
  beat_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)  mem[waddr] <= wdata;
    if (re0) rdata0 <= mem[raddr0];
    if (re1) rdata1 <= mem[raddr1];
  end
endmodule
