// tmu_fetch_decode -- INST Fetch & Decode Unit of the TMU.
//
// Holds the program counter. When the FSM asks for an instruction
// (fetch_req, one cycle), the unit reads the INST BUF at the program counter;
// one cycle later it presents the instruction with dec_valid and classifies
// its opcode into the dataflow class that the execution model branches on:
// assemble or evaluate (fine-grained, handled by the RME), element-wise, or
// coarse-grained (address generator only), or halt. The program counter
// advances on every fetch and returns to 0 on start.
//
// The paper gives the stage's function (fetch, then decode the operator type
// and operand configuration) and the mapping of operators to dataflows in its
// execution-model figure; the opcode encoding is this design's own.
module tmu_fetch_decode
  import tmu_pkg::*;
#(
  parameter int DEPTH = 16,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,        // restart program at instruction 0
  input  logic          fetch_req,    // FSM Fetch stage
  output logic          ib_rd_en,
  output logic [AW-1:0] ib_rd_addr,
  input  inst_t         ib_rd_data,
  output logic          dec_valid,    // one cycle after fetch_req
  output inst_t         dec_inst,
  output class_e        dec_class,
  output logic [AW-1:0] pc
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc        <= '0;
      dec_valid <= 1'b0;
    end else begin
      dec_valid <= fetch_req;
      if (start)          pc <= '0;
      else if (fetch_req) pc <= pc + 1'b1;
    end
  end

  assign ib_rd_en   = fetch_req;
  assign ib_rd_addr = pc;
  assign dec_inst   = ib_rd_data;
  assign dec_class  = op_class(ib_rd_data.op);
endmodule
