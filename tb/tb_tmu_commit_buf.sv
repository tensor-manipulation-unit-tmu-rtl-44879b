// tb_tmu_commit_buf -- random push/pop traffic against a queue model: order,
// contents, count, empty and full.
module tb_tmu_commit_buf;
  import tmu_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic push = 1'b0, pop = 1'b0, empty, full;
  addr_t push_addr, pop_addr;
  beat_t push_data, pop_data;
  strb_t push_strb, pop_strb;
  logic [4:0] count;
  int checks = 0, failures = 0;
  typedef struct { addr_t a; beat_t d; strb_t s; } ent_t;
  ent_t q [$];

  tmu_commit_buf #(.DEPTH(16)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    push_addr = '0; push_data = '0; push_strb = '0;
    repeat (2) @(posedge clk); rst_n = 1'b1;
    @(negedge clk);
    for (int t = 0; t < 2000; t++) begin
      bit dp, dq;
      int bias;
      bias = (t / 200) % 2 ? 70 : 30;     // alternate filling and draining phases
      dp = ($urandom % 100 < bias) && !full;
      dq = ($urandom % 100 < 100 - bias) && !empty;
      checks++;
      if (count != 5'(q.size()) || empty != (q.size() == 0) || full != (q.size() == 16)) begin
        failures++; $display("FAIL: count %0d model %0d", count, q.size());
      end
      if (dq) begin
        checks++;
        if (pop_addr !== q[0].a || pop_data !== q[0].d || pop_strb !== q[0].s) begin
          failures++; $display("FAIL: pop data");
        end
        void'(q.pop_front());
      end
      push = dp; pop = dq;
      if (dp) begin
        ent_t e;
        e.a = $urandom; e.d = {$urandom, $urandom, $urandom, $urandom}; e.s = 16'($urandom);
        push_addr = e.a; push_data = e.d; push_strb = e.s;
        q.push_back(e);
      end
      @(negedge clk);
      push = 1'b0; pop = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
