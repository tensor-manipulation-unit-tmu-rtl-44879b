// tb_tmu_cal_unit -- windows of random beats with random lane selections for
// each operation (max, min, sum, average); the result is compared with a
// reduction computed in the testbench, with int8 saturation.
module tb_tmu_cal_unit;
  import tmu_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear = 1'b0, in_valid = 1'b0, seen;
  beat_t in_beat;
  strb_t sel;
  cal_op_e op;
  logic [2:0] avg_shift;
  logic signed [7:0] result;
  int checks = 0, failures = 0;

  tmu_cal_unit dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    in_beat = '0; sel = '0; op = CAL_MAX; avg_shift = '0;
    repeat (2) @(posedge clk); rst_n = 1'b1;
    @(negedge clk);
    for (int w = 0; w < 200; w++) begin
      int acc, nb, any, r;
      op = cal_op_e'(w % 4);
      avg_shift = 3'($urandom % 4);
      clear = 1'b1; @(negedge clk); clear = 1'b0;
      nb = 1 + $urandom % 4; any = 0; acc = 0;
      for (int k = 0; k < nb; k++) begin
        for (int j = 0; j < 4; j++) in_beat[32*j +: 32] = $urandom;
        sel = 16'($urandom) & 16'($urandom);
        in_valid = 1'b1;
        for (int i = 0; i < 16; i++) if (sel[i]) begin
          int v;
          v = int'(signed'(in_beat[8*i +: 8]));
          if (!any) acc = v;
          else if (op == CAL_MAX) acc = (v > acc) ? v : acc;
          else if (op == CAL_MIN) acc = (v < acc) ? v : acc;
          else acc += v;
          any = 1;
        end
        @(negedge clk);
        in_valid = 1'b0;
        if ($urandom % 2) @(negedge clk);
      end
      r = (op == CAL_AVG) ? (acc >>> avg_shift) : acc;
      r = (r > 127) ? 127 : (r < -128) ? -128 : r;
      checks++;
      if (seen != (any != 0) || (any != 0 && result !== 8'(r))) begin
        failures++; if (failures < 10) $display("FAIL: op %0d got %0d exp %0d", op, result, r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
