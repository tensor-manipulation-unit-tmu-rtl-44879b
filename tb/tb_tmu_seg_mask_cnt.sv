// tb_tmu_seg_mask_cnt -- steps the segment read masking counters through beat
// streams with several (period, keep) settings, with idle cycles in between,
// and checks that beat n is acquired exactly when n mod period < keep.
module tb_tmu_seg_mask_cnt;
  import tmu_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear = 1'b0, step = 1'b0, acquire;
  logic [SEG_W-1:0] period = '0, keep = '0;
  int checks = 0, failures = 0;

  tmu_seg_mask_cnt dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int P [5] = '{0, 2, 3, 5, 4};
    int K [5] = '{0, 1, 2, 1, 4};
    repeat (2) @(posedge clk); rst_n = 1'b1;
    for (int s = 0; s < 5; s++) begin
      period <= SEG_W'(P[s]); keep <= SEG_W'(K[s]);
      clear <= 1'b1; @(posedge clk); clear <= 1'b0;
      for (int n = 0; n < 40; n++) begin
        bit exp;
        if ($urandom % 3 == 0) begin step <= 1'b0; @(posedge clk); end
        step <= 1'b1; #1;
        exp = (P[s] == 0) || ((n % P[s]) < K[s]);
        checks++;
        if (acquire !== exp) begin failures++; $display("FAIL: P=%0d K=%0d n=%0d", P[s], K[s], n); end
        @(posedge clk);
      end
      step <= 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
