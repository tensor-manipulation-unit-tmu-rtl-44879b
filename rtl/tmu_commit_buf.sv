// tmu_commit_buf -- Commit BUF: queue of manipulated output beats.
//
// Every beat leaving the datapath is written here together with the
// destination address computed by the address generator and a byte strobe.
// The Tensor Store stage drains it, in order, to the DMA write channel or to
// the forwarding output. A plain synchronous FIFO of DEPTH entries; `count`
// lets the FSM reserve room for beats still in the address pipeline. The paper
// describes the buffer's role; its depth and FIFO organisation are this
// design's choices.
//
// Timing: push and pop take effect on the clock edge; pop_* shows the oldest
// entry whenever empty is low. Pushing when full or popping when empty is a
// usage error, flagged by assertions.
module tmu_commit_buf
  import tmu_pkg::*;
#(
  parameter int DEPTH = 16,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        push,
  input  addr_t       push_addr,
  input  beat_t       push_data,
  input  strb_t       push_strb,
  input  logic        pop,
  output addr_t       pop_addr,
  output beat_t       pop_data,
  output strb_t       pop_strb,
  output logic        empty,
  output logic        full,
  output logic [AW:0] count
);
  typedef struct packed { addr_t addr; strb_t strb; beat_t data; } ent_t;
  ent_t mem [DEPTH];
  logic [AW-1:0] wp, rp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) if (push) mem[wp] <= '{addr: push_addr, strb: push_strb, data: push_data};

  assign {pop_addr, pop_strb, pop_data} = mem[rp];
  assign empty = (count == 0);
  assign full  = (count == (AW+1)'(DEPTH));

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
