// tb_tmu_mem_arb -- round-robin sharing of the memory port, here with three
// requesters. Requesters hold their request until granted; the port stalls at
// random. Checked every cycle: the port carries the granted requester's
// address/data and its index as id, at most one grant per channel and only to
// a valid requester, ready only when the port is ready, and the grant order
// against a reference pointer: the first requester at or after the one served
// last (sticky round-robin), so a burst keeps the port and then passes it on. Responses with a
// random id must reach exactly that requester. Also checks the conflict flag.
module tb_tmu_mem_arb;
  import tmu_pkg::*;
  localparam int N = 3, IW = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [N-1:0] rq_valid = '0, rq_ready, rsp_valid, wq_valid = '0, wq_ready;
  addr_t rq_addr [N], wq_addr [N];
  beat_t wq_data [N];
  strb_t wq_strb [N];
  logic m_rd_req_valid, m_rd_req_ready = 1'b0, m_rd_rsp_valid = 1'b0, m_wr_valid, m_wr_ready = 1'b0, conflict;
  addr_t m_rd_req_addr, m_wr_addr;
  logic [IW-1:0] m_rd_req_id, m_rd_rsp_id = '0;
  beat_t m_wr_data;
  strb_t m_wr_strb;
  int checks = 0, failures = 0;
  int rptr_m = 0, wptr_m = 0;          // reference round-robin pointers
  int n_keep = 0, n_pass = 0;
  function automatic int first_at(logic [N-1:0] v, int ptr);
    for (int k = 0; k < N; k++) if (v[(ptr + k) % N]) return (ptr + k) % N;
    return -1;
  endfunction
  int n_conf = 0;
  logic [N-1:0] rg, wg;

  tmu_mem_arb #(.N(N)) dut (.*);

  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, s); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      rq_addr[i] = '0; wq_addr[i] = '0; wq_data[i] = '0; wq_strb[i] = '0;
    end
    repeat (2) @(posedge clk); rst_n = 1'b1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      // new requests where none is pending
      for (int i = 0; i < N; i++) begin
        if (!rq_valid[i] && $urandom % 2 == 0) begin rq_valid[i] = 1'b1; rq_addr[i] = $urandom; end
        if (!wq_valid[i] && $urandom % 2 == 0) begin
          wq_valid[i] = 1'b1; wq_addr[i] = $urandom; wq_data[i] = {4{$urandom}}; wq_strb[i] = 16'($urandom);
        end
      end
      m_rd_req_ready = ($urandom % 3 != 0);
      m_wr_ready     = ($urandom % 3 != 0);
      m_rd_rsp_valid = ($urandom % 2 == 0);
      m_rd_rsp_id    = IW'($urandom % N);
      #1;
      chk(m_rd_req_valid == (rq_valid != 0) && m_wr_valid == (wq_valid != 0), "port valid");
      chk($countones(rq_ready) <= 1 && $countones(wq_ready) <= 1, "one grant per channel");
      chk((rq_ready & ~rq_valid) == 0 && (wq_ready & ~wq_valid) == 0, "grant only to a requester");
      chk(m_rd_req_ready || rq_ready == 0, "read grant without port ready");
      chk(m_wr_ready || wq_ready == 0, "write grant without port ready");
      chk(rsp_valid == (m_rd_rsp_valid ? (N'(1) << m_rd_rsp_id) : '0), "response routing");
      chk(conflict == ($countones(rq_valid) > 1 || $countones(wq_valid) > 1), "conflict flag");
      if (conflict) n_conf++;
      if (m_rd_req_valid) chk(rq_valid[m_rd_req_id] && m_rd_req_addr == rq_addr[m_rd_req_id], "read mux");
      if (m_wr_valid) begin
        int g;
        g = -1;
        for (int i = 0; i < N; i++) if (wq_ready[i]) g = i;
        if (g >= 0) chk(m_wr_addr == wq_addr[g] && m_wr_data == wq_data[g] && m_wr_strb == wq_strb[g], "write mux");
      end
      // grant order: first requester at or after the last one served
      if (rq_valid != 0) chk(m_rd_req_id == IW'(first_at(rq_valid, rptr_m)), "read grant order");
      if (wq_valid != 0) chk(wq_ready == 0 || wq_ready[first_at(wq_valid, wptr_m)], "write grant order");
      if (rq_ready != 0) begin
        if (m_rd_req_id == IW'(rptr_m)) n_keep++; else n_pass++;
        rptr_m = int'(m_rd_req_id);
      end
      for (int i = 0; i < N; i++) if (wq_ready[i]) wptr_m = i;
      rg = rq_ready; wg = wq_ready;
      @(posedge clk); #1;
      for (int i = 0; i < N; i++) begin
        if (rg[i]) rq_valid[i] = 1'b0;
        if (wg[i]) wq_valid[i] = 1'b0;
      end
    end
    chk(n_conf > 0, "conflicts occurred");
    chk(n_keep > 0 && n_pass > 0, "grant both kept (burst) and passed on");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
