// tmu_cal_unit -- one calculation unit (Cal Unit) of the RME evaluate scheme.
//
// The byte destination register routes some bytes of every incoming beat to
// this unit (sel, one bit per byte lane). Over a window of beats the unit
// reduces the signed int8 values it receives: maximum, minimum, sum, or
// average (sum shifted right by avg_shift, i.e. divided by a power of two).
// The 8-bit result saturates. `seen` tells whether any byte reached the unit.
// The paper shows three such units fed by the byte destination register and
// names maximum/minimum retrieval and Bboxcal thresholding as their uses; the
// set of operations and the saturation are this design's choices.
//
// Timing: clear starts a new window; each beat with in_valid is folded into
// the accumulator on the clock edge; result reflects all beats accepted so far.
module tmu_cal_unit
  import tmu_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              in_valid,
  input  beat_t             in_beat,
  input  strb_t             sel,
  input  cal_op_e           op,
  input  logic [2:0]        avg_shift,
  output logic signed [7:0] result,
  output logic              seen
);
  logic signed [17:0] acc;      // running max/min or sum
  logic signed [17:0] acc_n;
  logic               seen_n;

  // fold the selected byte lanes of the beat into the running value
  logic signed [17:0] lane [BUS_BYTES];
  always_comb
    for (int i = 0; i < BUS_BYTES; i++) lane[i] = 18'(signed'(in_beat[8*i +: 8]));

  always_comb begin
    acc_n  = acc;
    seen_n = seen;
    for (int i = 0; i < BUS_BYTES; i++) begin
      if (sel[i]) begin
        case (op)
          CAL_MAX: acc_n = (!seen_n || lane[i] > acc_n) ? lane[i] : acc_n;
          CAL_MIN: acc_n = (!seen_n || lane[i] < acc_n) ? lane[i] : acc_n;
          default: acc_n = (seen_n ? acc_n : 18'sd0) + lane[i];
        endcase
        seen_n = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc  <= '0;
      seen <= 1'b0;
    end else if (clear) begin
      acc  <= '0;
      seen <= 1'b0;
    end else if (in_valid) begin
      acc  <= acc_n;
      seen <= seen_n;
    end
  end

  always_comb begin
    case (op)
      CAL_AVG: result = sat8(acc >>> avg_shift);
      default: result = sat8(acc);
    endcase
  end
endmodule
