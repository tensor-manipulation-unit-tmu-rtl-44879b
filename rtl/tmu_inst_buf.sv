// tmu_inst_buf -- INST BUF, the TMU's local instruction storage.
//
// A small register-file memory of DEPTH TM instructions. The host (standing in
// for the SoC instruction fetch unit) writes instructions through the write
// port before starting the TMU; the TMU's fetch unit reads them back in
// program order. The paper names this buffer and says that the TMU fetches
// its instructions from local storage; depth and port timing are this design's
// choices.
//
// Interface and timing: write on the rising edge when wr_en is high. Reads are
// synchronous: rd_data holds the instruction at the rd_addr presented while
// rd_en was high, from the next cycle on.
module tmu_inst_buf
  import tmu_pkg::*;
#(
  parameter int DEPTH = 16,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  inst_t         wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output inst_t         rd_data
);
  inst_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
