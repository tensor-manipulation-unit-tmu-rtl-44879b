// tb_tmu_fsm -- the execution-model state machine against a reference model.
//
// The condition inputs (ld_done, stream_done, ...) are driven at random and a
// model written here from the stage diagram (Fetch, Decode, Tensor Load, one
// processing state per class, Addr_Gen, Tensor Store, Branch, plus the early
// Tensor Store when the commit buffer fills) predicts the next state and the
// one-cycle outputs. The test counts that every state, every class path, the
// early store with its return, and halt/done were exercised.
module tb_tmu_fsm;
  import tmu_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, dec_valid = 1'b0, ld_done = 1'b0, stream_done = 1'b0, drain_done = 1'b0;
  logic commit_hi = 1'b0, store_done = 1'b0, more_segments = 1'b0;
  class_e dec_class = CLS_HALT, cls = CLS_HALT;
  fsm_state_e state;
  logic fetch_req, cfg_load, seg_next, early_store, done;
  int checks = 0, failures = 0;

  tmu_fsm dut (.*);

  // reference model
  fsm_state_e m_state, m_ret;
  logic m_fin, m_done;
  int visits [10];
  int n_early = 0, n_return = 0, n_halt = 0;

  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, s); end
  endtask

  function automatic fsm_state_e proc_state(class_e c);
    if (c == CLS_ASSEMBLE) return S_ASSEMBLE;
    if (c == CLS_EVALUATE) return S_EVALUATE;
    if (c == CLS_ELEM)     return S_ELEM;
    return S_ADDR_GEN;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    m_state = S_IDLE; m_ret = S_IDLE; m_fin = 1'b0; m_done = 1'b0;
    repeat (2) @(posedge clk); rst_n = 1'b1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      fsm_state_e n;
      bit es;
      @(negedge clk);
      // compare this cycle's state and outputs
      chk(state == m_state, $sformatf("state %s exp %s", state.name(), m_state.name()));
      chk(done == m_done, "done");
      chk(fetch_req == (m_state == S_FETCH) && seg_next == (m_state == S_UPDATE_INDEX), "fetch/seg");
      visits[int'(m_state)]++;
      // new random inputs
      start         = (m_state == S_IDLE) && ($urandom % 4 == 0);
      dec_valid     = ($urandom % 2 == 0);
      dec_class     = class_e'($urandom % 5);
      if (m_state == S_DECODE && $urandom % 8 != 0 && dec_class == CLS_HALT) dec_class = CLS_COARSE;
      ld_done       = ($urandom % 3 == 0);
      stream_done   = ($urandom % 4 == 0);
      drain_done    = ($urandom % 2 == 0);
      commit_hi     = ($urandom % 12 == 0);
      store_done    = ($urandom % 2 == 0);
      more_segments = ($urandom % 3 != 0);
      #1;
      // model
      n = m_state; es = 1'b0;
      case (m_state)
        S_IDLE:   if (start) n = S_FETCH;
        S_FETCH:  n = S_DECODE;
        S_DECODE: if (dec_valid) begin
          if (dec_class == CLS_HALT) n = S_IDLE; else n = S_LD_MEM;
        end
        S_LD_MEM: if (ld_done) n = proc_state(cls);
        S_ASSEMBLE, S_EVALUATE, S_ELEM:
          if (commit_hi) begin n = S_ST_MEM; es = 1'b1; end
          else if (stream_done) n = S_ADDR_GEN;
        S_ADDR_GEN:
          if (commit_hi) begin n = S_ST_MEM; es = 1'b1; end
          else if (stream_done && drain_done) n = S_ST_MEM;
        S_ST_MEM: if (store_done) n = m_fin ? S_UPDATE_INDEX : m_ret;
        S_UPDATE_INDEX: n = more_segments ? S_LD_MEM : S_FETCH;
        default: n = S_IDLE;
      endcase
      chk(early_store == es, "early_store");
      chk(cfg_load == (m_state == S_DECODE && dec_valid && dec_class != CLS_HALT), "cfg_load");
      if (es) n_early++;
      if (m_state == S_ST_MEM && store_done && !m_fin) n_return++;
      if (m_state == S_DECODE && dec_valid && dec_class == CLS_HALT) n_halt++;
      @(posedge clk);
      if (m_state == S_DECODE && dec_valid && dec_class != CLS_HALT) cls = dec_class;
      if (es) m_ret = m_state;
      if (m_state == S_ADDR_GEN && n == S_ST_MEM && !es) m_fin = 1'b1;
      else if (m_state == S_UPDATE_INDEX) m_fin = 1'b0;
      if (start) m_done = 1'b0;
      else if (m_state == S_DECODE && dec_valid && dec_class == CLS_HALT) m_done = 1'b1;
      m_state = n;
    end
    for (int s = 0; s < 10; s++) chk(visits[s] > 0, $sformatf("state %0d never visited", s));
    chk(n_early > 0 && n_return > 0 && n_halt > 0, "early store / return / halt exercised");
    $display("early stores %0d, returns %0d, halts %0d", n_early, n_return, n_halt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
