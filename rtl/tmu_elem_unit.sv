// tmu_elem_unit -- element-wise processing stage of the TMU.
//
// Combines two 16-byte beats lane by lane as signed int8 values: Add, Sub, or
// Mul (product shifted right by mul_shift), each saturated to int8. The paper
// lists vectorized Add, Sub and Mul for this stage and INT8-quantised models;
// saturation and the Mul shift are this design's choices. Purely
// combinational; the result is registered by the address generator pipeline
// that follows.
module tmu_elem_unit
  import tmu_pkg::*;
(
  input  beat_t      a,
  input  beat_t      b,
  input  eop_e       eop,
  input  logic [2:0] mul_shift,
  output beat_t      y
);
  always_comb begin
    for (int i = 0; i < BUS_BYTES; i++) begin
      logic signed [17:0] va, vb, r;
      va = 18'(signed'(a[8*i +: 8]));
      vb = 18'(signed'(b[8*i +: 8]));
      case (eop)
        EOP_SUB: r = va - vb;
        EOP_MUL: r = (va * vb) >>> mul_shift;
        default: r = va + vb;
      endcase
      y[8*i +: 8] = sat8(r);
    end
  end
endmodule
