// tb_tmu_tensor_buf -- fills the tensor buffer with random beats and reads both
// ports at independent addresses, comparing with a testbench copy.
module tb_tmu_tensor_buf;
  import tmu_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 1'b0, re0 = 1'b0, re1 = 1'b0;
  logic [5:0] waddr = '0, raddr0 = '0, raddr1 = '0;
  beat_t wdata, rdata0, rdata1;
  beat_t ref_mem [64];
  int checks = 0, failures = 0;

  tmu_tensor_buf #(.DEPTH(64)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wdata = '0;
    @(posedge clk);
    for (int i = 0; i < 64; i++) begin
      beat_t b;
      for (int j = 0; j < 4; j++) b[32*j +: 32] = $urandom;
      ref_mem[i] = b;
      we <= 1'b1; waddr <= 6'(i); wdata <= b; @(posedge clk);
    end
    we <= 1'b0;
    for (int i = 0; i < 64; i++) begin
      re0 <= 1'b1; re1 <= 1'b1; raddr0 <= 6'(i); raddr1 <= 6'(63 - i);
      @(posedge clk); #1;
      checks += 2;
      if (rdata0 !== ref_mem[i])      begin failures++; $display("FAIL: port0 %0d", i); end
      if (rdata1 !== ref_mem[63 - i]) begin failures++; $display("FAIL: port1 %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
