// tb_tmu_fetch_decode -- runs the fetch & decode unit against an instruction
// buffer model: checks the program counter sequence, the one-cycle decode
// latency, the decoded instruction and the class of every opcode, and the
// restart on start.
module tb_tmu_fetch_decode;
  import tmu_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, fetch_req = 1'b0, ib_rd_en, dec_valid;
  logic [3:0] ib_rd_addr, pc;
  inst_t ib_rd_data, dec_inst;
  class_e dec_class;
  inst_t prog [16];
  int checks = 0, failures = 0;

  tmu_fetch_decode #(.DEPTH(16)) dut (.*);

  always_ff @(posedge clk) if (ib_rd_en) ib_rd_data <= prog[ib_rd_addr];

  function automatic class_e ref_class(int op);
    if (op == 0) return CLS_HALT;
    if (op == 1) return CLS_ASSEMBLE;
    if (op == 2 || op == 3) return CLS_EVALUATE;
    if (op == 4) return CLS_ELEM;
    return CLS_COARSE;
  endfunction

  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) begin
      prog[i] = '0;
      prog[i].op = opcode_e'(i % 12);
      prog[i].dst_base = addr_t'(i * 1000 + 7);
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    start <= 1'b1; @(posedge clk); start <= 1'b0;
    for (int r = 0; r < 2; r++) begin
      for (int i = 0; i < 12; i++) begin
        fetch_req <= 1'b1; @(posedge clk); fetch_req <= 1'b0; #1;
        chk(dec_valid, "dec_valid one cycle after fetch");
        chk(dec_inst.dst_base == addr_t'(i * 1000 + 7), $sformatf("instruction %0d", i));
        chk(dec_class == ref_class(i % 12), $sformatf("class of op %0d", i % 12));
        chk(pc == 4'(i + 1), "pc advanced");
        @(posedge clk); #1;
        chk(!dec_valid, "dec_valid is a pulse");
      end
      start <= 1'b1; @(posedge clk); start <= 1'b0; #1;
      chk(pc == 0, "start resets pc");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
