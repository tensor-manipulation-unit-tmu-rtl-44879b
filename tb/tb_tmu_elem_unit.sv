// tb_tmu_elem_unit -- random beats through the element-wise unit; every byte lane
// of Add, Sub and Mul (with shifts) is compared with a saturating int8 reference.
module tb_tmu_elem_unit;
  import tmu_pkg::*;
  beat_t a, b, y;
  eop_e eop;
  logic [2:0] mul_shift;
  int checks = 0, failures = 0;

  tmu_elem_unit dut (.*);

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int j = 0; j < 4; j++) begin a[32*j +: 32] = $urandom; b[32*j +: 32] = $urandom; end
      eop = eop_e'(t % 3);
      mul_shift = 3'($urandom % 8);
      #1;
      for (int i = 0; i < 16; i++) begin
        int va, vb, r;
        va = int'(signed'(a[8*i +: 8])); vb = int'(signed'(b[8*i +: 8]));
        r = (eop == EOP_ADD) ? va + vb : (eop == EOP_SUB) ? va - vb : ((va * vb) >>> mul_shift);
        r = (r > 127) ? 127 : (r < -128) ? -128 : r;
        checks++;
        if (y[8*i +: 8] !== 8'(r)) begin failures++; if (failures < 10) $display("FAIL: t=%0d lane %0d", t, i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
