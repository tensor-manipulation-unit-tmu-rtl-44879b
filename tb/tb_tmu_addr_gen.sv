// tb_tmu_addr_gen -- drives the address generator with a new random index every
// cycle under random matrices A, B, row shifts and strides, and checks each
// address against addr_base + (x_o + y_o) * c_stride + 16 c_o computed in the
// testbench, together with the tag and the 3-cycle latency. Also checks the
// Transpose matrix of the paper's table on a 4x3 image.
module tb_tmu_addr_gen;
  import tmu_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, out_valid;
  logic [IDX_W-1:0] xi, yi, ci, c_stride;
  logic [143:0] in_tag, out_tag;
  coef_t [2:0][2:0] a;
  logic [2:0][3:0] a_shr;
  ofs_t [2:0] b;
  addr_t addr_base, out_addr;
  logic [1:0] inflight;
  int checks = 0, failures = 0;

  tmu_addr_gen dut (.*);

  typedef struct { addr_t addr; logic [143:0] tag; int cyc; } exp_t;
  exp_t q [$];
  int cyc = 0;
  always @(posedge clk) cyc++;

  function automatic addr_t ref_addr();
    longint v [3];
    longint idx [3];
    idx[0] = xi; idx[1] = yi; idx[2] = ci;
    for (int r = 0; r < 3; r++) begin
      longint s;
      s = 0;
      for (int c = 0; c < 3; c++) s += longint'(a[r][c]) * idx[c];
      v[r] = (s >>> a_shr[r]) + longint'(b[r]);
    end
    return addr_t'(longint'(addr_base) + (v[0] + v[1]) * longint'(c_stride) + v[2] * 16);
  endfunction

  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("FAIL: unexpected output"); end
      else begin
        e = q.pop_front();
        if (out_addr !== e.addr || out_tag !== e.tag || cyc - e.cyc != 3) begin
          failures++;
          if (failures < 10) $display("FAIL: addr %h exp %h lat %0d", out_addr, e.addr, cyc - e.cyc);
        end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic issue(int x, int y, int c);
    exp_t e;
    xi = IDX_W'(x); yi = IDX_W'(y); ci = IDX_W'(c);
    in_tag = {$urandom, $urandom, $urandom, $urandom, 16'($urandom)};
    in_valid = 1'b1;
    e.addr = ref_addr(); e.tag = in_tag; e.cyc = cyc;
    q.push_back(e);
  endtask

  initial begin
    a = '0; a_shr = '0; b = '0; c_stride = '0; addr_base = '0; xi = '0; yi = '0; ci = '0; in_tag = '0;
    repeat (2) @(posedge clk); rst_n = 1'b1;
    @(negedge clk);
    // random configurations, back-to-back beats
    for (int cfgn = 0; cfgn < 20; cfgn++) begin
      for (int r = 0; r < 3; r++) begin
        for (int c = 0; c < 3; c++) a[r][c] = coef_t'($signed(($urandom % 41) - 20));
        a_shr[r] = 4'($urandom % 3);
        b[r] = ofs_t'($signed(($urandom % 201) - 100));
      end
      c_stride = IDX_W'(16 * (1 + $urandom % 8));
      addr_base = addr_t'(32'h1000_0000 + ($urandom % 1000) * 16);
      for (int k = 0; k < 30; k++) begin
        issue($urandom % 900, $urandom % 900, $urandom % 64);
        @(negedge clk);
        if (k % 7 == 6) begin in_valid = 1'b0; @(negedge clk); end
      end
      in_valid = 1'b0;
      repeat (4) @(negedge clk);
    end
    // Transpose of a 4 (w) x 3 (h) image with 2 channel blocks
    a = '0; a_shr = '0; b = '0;
    a[0][1] = 16'sd1; a[1][0] = 16'sd3; a[2][2] = 16'sd1;
    c_stride = IDX_W'(32); addr_base = '0;
    for (int y = 0; y < 3; y++) for (int x = 0; x < 4; x++) for (int c = 0; c < 2; c++) begin
      exp_t e;
      issue(x, y, c);
      q[$].addr = addr_t'(((x * 3 + y) * 2 + c) * 16);   // independent of A
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (6) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL: missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
