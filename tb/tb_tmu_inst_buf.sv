// tb_tmu_inst_buf -- writes random instructions into the INST BUF and reads them back
// in another order, checking each against a copy kept by the testbench and
// the one-cycle read latency.
module tb_tmu_inst_buf;
  import tmu_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic wr_en = 1'b0, rd_en = 1'b0;
  logic [3:0] wr_addr = '0, rd_addr = '0;
  inst_t wr_data, rd_data;
  inst_t ref_mem [16];
  int checks = 0, failures = 0;

  tmu_inst_buf #(.DEPTH(16)) dut (.*);

  function automatic inst_t rnd_inst();
    logic [$bits(inst_t)-1:0] v;
    for (int i = 0; i < $bits(inst_t); i += 32) v[i +: 32] = $urandom;
    return inst_t'(v);
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wr_data = '0;
    @(posedge clk);
    for (int i = 0; i < 16; i++) begin
      ref_mem[i] = rnd_inst();
      wr_en <= 1'b1; wr_addr <= 4'(i); wr_data <= ref_mem[i];
      @(posedge clk);
    end
    wr_en <= 1'b0;
    for (int i = 0; i < 16; i++) begin
      int a;
      a = (i * 7 + 3) % 16;
      rd_en <= 1'b1; rd_addr <= 4'(a);
      @(posedge clk);
      rd_en <= 1'b0;
      #1;
      checks++;
      if (rd_data !== ref_mem[a]) begin failures++; $display("FAIL: read %0d", a); end
      @(posedge clk); #1;
      checks++;
      if (rd_data !== ref_mem[a]) begin failures++; $display("FAIL: hold %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
