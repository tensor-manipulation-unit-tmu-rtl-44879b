// tmu_seg_mask_cnt -- Segment Read Masking Counters of the RME.
//
// Decides which bus transfers of a fine-grained load are acquired into the
// tensor buffer. A modulo counter runs over the incoming beats of the
// instruction; within every period of `period` beats the first `keep` beats
// are acquired and the rest are dropped (period 0 acquires every beat). This
// lets a fine-grained operator read, for instance, only every other image row
// of a stream. The paper says the RME "utilizes segment masking counters to
// acquire valid bus transfers into the tensor buffer"; the period/keep rule
// is this design's interpretation.
//
// Timing: acquire is combinational for the beat presented with step; the
// counter advances on the clock edge of that beat. clear restarts the count.
module tmu_seg_mask_cnt
  import tmu_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             step,
  input  logic [SEG_W-1:0] period,
  input  logic [SEG_W-1:0] keep,
  output logic             acquire
);
  logic [SEG_W-1:0] cnt;

  assign acquire = (period == '0) || (cnt < keep);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                cnt <= '0;
    else if (clear)            cnt <= '0;
    else if (step) begin
      if (period == '0 || cnt == period - 1'b1) cnt <= '0;
      else                                      cnt <= cnt + 1'b1;
    end
  end
endmodule
