// tmu_cfg_regs -- Configurable REGs: the decoded fields of the running TM instruction.
//
// On load (Decode stage) the register set captures the decoded instruction and
// its dataflow class, and derives the quantities the rest of the TMU uses for
// the whole instruction: the number of 16-byte input beats (wi * hi * cb) and
// the effective segment length (seg_len, 0 meaning as large as possible,
// limited to what the tensor buffer can hold: half the buffer for
// two-operand element-wise operators). The matrices A and B of the address
// generator live here, as the paper describes ("decoded and loaded into
// dedicated configuration registers"); the segment rules are this design's.
//
// Timing: outputs change on the clock edge after load; total and seg are
// valid from then on.
module tmu_cfg_regs
  import tmu_pkg::*;
#(
  parameter int BUF_DEPTH = 64
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  inst_t         inst_in,
  input  class_e        cls_in,
  output inst_t         cfg,
  output class_e        cls,
  output logic [31:0]   total_beats,
  output logic [7:0]    seg_beats
);
  function automatic logic [7:0] eff_seg(logic [SEG_W-1:0] s, class_e c);
    int lim;
    lim = (c == CLS_ELEM) ? BUF_DEPTH / 2 : BUF_DEPTH;
    if (s == 0 || int'(s) > lim) return 8'(lim);
    return 8'(s);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg         <= '0;
      cls         <= CLS_HALT;
      total_beats <= '0;
      seg_beats   <= '0;
    end else if (load) begin
      cfg         <= inst_in;
      cls         <= cls_in;
      total_beats <= 32'(inst_in.wi) * 32'(inst_in.hi) * 32'(inst_in.cb);
      seg_beats   <= eff_seg(inst_in.seg_len, cls_in);
    end
  end
endmodule
