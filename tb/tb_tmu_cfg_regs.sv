// tb_tmu_cfg_regs -- loads instructions into the configuration registers and
// checks the held fields, the total beat count wi*hi*cb and the effective
// segment length (0 or too large -> buffer limit, half of it for element-wise).
module tb_tmu_cfg_regs;
  import tmu_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic load = 1'b0;
  inst_t inst_in, cfg;
  class_e cls_in, cls;
  logic [31:0] total_beats;
  logic [7:0] seg_beats;
  int checks = 0, failures = 0;

  tmu_cfg_regs #(.BUF_DEPTH(64)) dut (.*);

  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    inst_in = '0; cls_in = CLS_HALT;
    repeat (2) @(posedge clk); rst_n = 1'b1;
    for (int k = 0; k < 40; k++) begin
      int w, h, c, s, lim, es;
      class_e cl;
      w = 1 + $urandom % 500; h = 1 + $urandom % 500; c = 1 + $urandom % 16; s = $urandom % 100;
      cl = (k % 3 == 0) ? CLS_ELEM : CLS_COARSE;
      inst_in = '0;
      inst_in.op = (cl == CLS_ELEM) ? OP_ADD : OP_TRANSPOSE;
      inst_in.wi = IDX_W'(w); inst_in.hi = IDX_W'(h); inst_in.cb = IDX_W'(c);
      inst_in.seg_len = SEG_W'(s); inst_in.threshold = 8'(k);
      cls_in = cl;
      load <= 1'b1; @(posedge clk); load <= 1'b0;
      #1 inst_in.threshold = 8'hEE;    // must not leak through without load
      @(posedge clk); #1;
      lim = (cl == CLS_ELEM) ? 32 : 64;
      es = (s == 0 || s > lim) ? lim : s;
      chk(total_beats == 32'(w * h * c), "total beats");
      chk(seg_beats == 8'(es), $sformatf("segment length %0d -> %0d got %0d", s, es, seg_beats));
      chk(cfg.threshold == 8'(k) && cls == cl, "held fields");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
